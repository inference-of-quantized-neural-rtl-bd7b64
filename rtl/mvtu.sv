// mvtu: matrix-vector-threshold unit, the compute core of the generalized
// convolutional layer.
//
// It multiplies the binary weight matrix (ofm_ch rows, K*K*ifm_ch columns)
// with one im2col column at a time and maps each of the ofm_ch sums to a
// 3-bit activation by multi-thresholding. PE processing elements each own
// one output channel per neuron fold and consume SIMD columns per cycle, so a
// column of sf_n = K*K*ifm_ch/SIMD beats yields PE results after sf_n cycles;
// the ofm_ch/PE neuron folds are computed one after the other. The column is
// taken from the input stream during the first fold and written to a replay
// buffer, from which the remaining folds read it again.
//
// Arithmetic: weight bit 1 means +1, 0 means -1; activations are unsigned.
// Each PE adds SIMD signed products into a 16-bit accumulator (the largest
// layer, 4608 columns of values up to 7, stays within +-32256). The
// thresholds of channel ch = nf*PE + pe live at address nf of TMEM[pe];
// weight word (nf*sf_n + sf) of WMEM[pe] holds the SIMD weights of that
// channel for column beat sf.
//
// Timing: issue stage (memory reads), accumulate stage, output register. One
// column beat is consumed per cycle while out_ready allows; the output beat
// (PE channels of one pixel) appears one cycle after the last beat of a fold
// has been accumulated. The whole pipeline stalls while an output beat waits.
//
// From the paper: binary weights, 3-bit activations, the PE/SIMD folding,
// WMEM/TMEM and the 16-bit accumulator width (Fig. 2). This design's choice:
// memory layout, replay buffer, pipeline and threshold comparison (>=).
module mvtu
  import qnn_pkg::*;
#(
  parameter int unsigned PE         = 32,
  parameter int unsigned SIMD       = 16,
  parameter int unsigned WMEM_DEPTH = 4608,  // 512*512*9/(PE*SIMD): layers 13 and 14
  parameter int unsigned TMEM_DEPTH = 16,    // 512/PE
  parameter int unsigned IBUF_DEPTH = 288,   // 9*512/SIMD column beats
  localparam int unsigned WAW = $clog2(WMEM_DEPTH),
  localparam int unsigned TAW = (TMEM_DEPTH > 1) ? $clog2(TMEM_DEPTH) : 1,
  localparam int unsigned IAW = $clog2(IBUF_DEPTH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,      // sample sf_n/nf_n, restart folds
  input  logic [IAW:0]             sf_n,       // column beats per fold (K*K*ifm_ch/SIMD)
  input  logic [TAW:0]             nf_n,       // neuron folds (ofm_ch/PE)
  // parameter loading
  input  logic                     w_we,
  input  logic [WAW-1:0]           w_addr,
  input  logic [PE-1:0][SIMD-1:0]  w_data,
  input  logic                     t_we,
  input  logic [TAW-1:0]           t_addr,
  input  logic [$clog2(PE)-1:0]    t_pe,
  input  thres_t                   t_data,
  // im2col column stream
  input  logic                     in_valid,
  output logic                     in_ready,
  input  act_t [SIMD-1:0]          in_data,
  // output activations, PE channels per beat
  output logic                     out_valid,
  input  logic                     out_ready,
  output act_t [PE-1:0]            out_data
);

  logic [IAW:0]   sf_cnt, sf_max;
  logic [TAW:0]   nf_cnt, nf_max;
  logic [WAW-1:0] waddr;
  logic           en, a_fire, a_first_fold, a_last_beat;

  assign en           = !out_valid || out_ready;
  assign a_first_fold = (nf_cnt == 0);
  assign a_last_beat  = (sf_cnt == sf_max);
  assign a_fire       = en && (!a_first_fold || in_valid);
  assign in_ready     = en && a_first_fold;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sf_cnt <= '0;
      nf_cnt <= '0;
      waddr  <= '0;
      sf_max <= '0;
      nf_max <= '0;
    end else if (start) begin
      sf_cnt <= '0;
      nf_cnt <= '0;
      waddr  <= '0;
      sf_max <= sf_n - 1'b1;
      nf_max <= nf_n - 1'b1;
    end else if (a_fire) begin
      if (!a_last_beat) begin
        sf_cnt <= sf_cnt + 1'b1;
        waddr  <= waddr + 1'b1;
      end else begin
        sf_cnt <= '0;
        if (nf_cnt == nf_max) begin
          nf_cnt <= '0;
          waddr  <= '0;
        end else begin
          nf_cnt <= nf_cnt + 1'b1;
          waddr  <= waddr + 1'b1;
        end
      end
    end
  end

  // ---- replay buffer for the column --------------------------------------
  logic [SIMD*ACT_BITS-1:0] ibuf_rdata;
  qnn_ram #(.WIDTH(SIMD*ACT_BITS), .DEPTH(IBUF_DEPTH)) u_ibuf (
    .clk   (clk),
    .we    (a_fire && a_first_fold),
    .waddr (sf_cnt[IAW-1:0]),
    .wdata (in_data),
    .re    (a_fire && !a_first_fold),
    .raddr (sf_cnt[IAW-1:0]),
    .rdata (ibuf_rdata)
  );

  // ---- weight and threshold memories --------------------------------------
  logic [PE-1:0][SIMD-1:0] w_rdata;
  thres_t [PE-1:0]         t_rdata;

  for (genvar p = 0; p < PE; p++) begin : g_pe_mem
    qnn_ram #(.WIDTH(SIMD), .DEPTH(WMEM_DEPTH)) u_wmem (
      .clk   (clk),
      .we    (w_we),
      .waddr (w_addr),
      .wdata (w_data[p]),
      .re    (a_fire),
      .raddr (waddr),
      .rdata (w_rdata[p])
    );
    qnn_ram #(.WIDTH($bits(thres_t)), .DEPTH(TMEM_DEPTH)) u_tmem (
      .clk   (clk),
      .we    (t_we && (t_pe == p)),
      .waddr (t_addr),
      .wdata (t_data),
      .re    (a_fire && a_last_beat),
      .raddr (nf_cnt[TAW-1:0]),
      .rdata (t_rdata[p])
    );
  end

  // ---- accumulate stage ----------------------------------------------------
  logic            b_valid, b_first, b_last, b_from_in;
  act_t [SIMD-1:0] b_x_in, x;
  acc_t [PE-1:0]   acc, acc_nxt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_valid   <= 1'b0;
      b_first   <= 1'b0;
      b_last    <= 1'b0;
      b_from_in <= 1'b0;
      b_x_in    <= '0;
    end else if (start) begin
      b_valid   <= 1'b0;
    end else if (en) begin
      b_valid   <= a_fire;
      b_first   <= (sf_cnt == 0);
      b_last    <= a_last_beat;
      b_from_in <= a_first_fold;
      if (a_fire && a_first_fold) b_x_in <= in_data;
    end
  end

  assign x = b_from_in ? b_x_in : ibuf_rdata;

  always_comb begin
    for (int p = 0; p < PE; p++) begin
      acc_t sum;
      sum = b_first ? acc_t'(0) : acc[p];
      for (int s = 0; s < SIMD; s++)
        sum = w_rdata[p][s] ? sum + acc_t'(x[s]) : sum - acc_t'(x[s]);
      acc_nxt[p] = sum;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (start) begin
      out_valid <= 1'b0;
    end else if (en) begin
      out_valid <= b_valid && b_last;
      if (b_valid) begin
        acc <= acc_nxt;
        if (b_last)
          for (int p = 0; p < PE; p++) out_data[p] <= threshold(acc_nxt[p], t_rdata[p]);
      end
    end
  end

  property p_hold;
    @(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid && $stable(out_data);
  endproperty
  assert property (p_hold);

endmodule
