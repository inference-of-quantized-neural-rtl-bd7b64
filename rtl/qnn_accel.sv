// qnn_accel: generalized quantized convolutional layer with its subsequent
// max pooling, the programmable-logic accelerator of a W1A3 object-detection
// network.
//
// The fabric holds one convolution engine, and the network's hidden layers
// are run through it one after the other: for each layer the host
// describes the geometry (cfg), the engine loads the layer's binary weights
// and thresholds, and then one input feature map is streamed in and the
// output feature map (pooled or not) streamed out. Inside, a sliding-window
// unit turns the input map into im2col columns, the matrix-vector-threshold
// unit (PE x SIMD binary multiply-accumulates with 3-bit thresholded output)
// computes all output channels of a pixel, and the pooling unit reduces
// 2x2 windows when cfg.pool_en is set, with stride 2 or, when cfg.pool_s1
// is set, stride 1 (the map keeps its size).
//
// Sequence after a start pulse (cfg sampled there):
//   LOAD_W  nf_n*sf_n weight beats on w_*: beat i is WMEM address i, lane
//           [p][s] the weight of channel (i/sf_n)*PE+p for column beat
//           i%sf_n, lane s (nf_n = ofm_ch/PE, sf_n = k*k*ifm_ch/SIMD).
//   LOAD_T  ofm_ch threshold beats on t_*, channel 0 first.
//   RUN     ifm_dim*ifm_dim*ifm_ch/SIMD input beats on ifm_* in raster
//           order, channels lowest first; the output map leaves on ofm_* in
//           the same format with PE channels per beat.
// done pulses for one cycle after the last output beat has been taken.
// All streams use valid/ready: a beat moves when both are high.
//
// The paper fixes the single generalized layer plus pooling, W1A3, the
// 16-bit accumulator and the PE/SIMD/WMEM/TMEM organisation. The PE and SIMD
// counts, the load protocol and the stream formats are this design's own.
module qnn_accel
  import qnn_pkg::*;
#(
  parameter int unsigned PE         = 32,
  parameter int unsigned SIMD       = 16,
  parameter int unsigned WMEM_DEPTH = 4608,  // 512*512*9/(PE*SIMD)
  parameter int unsigned TMEM_DEPTH = 16,    // 512/PE
  parameter int unsigned IBUF_DEPTH = 288,   // 9*512/SIMD
  parameter int unsigned ROW_WORDS  = 416,   // largest ifm_dim*ifm_ch/SIMD (layers 5, 13, 14)
  parameter int unsigned POOL_WORDS = 208,   // largest (ofm_dim/2)*ofm_ch/PE
  localparam int unsigned WAW = $clog2(WMEM_DEPTH),
  localparam int unsigned TAW = (TMEM_DEPTH > 1) ? $clog2(TMEM_DEPTH) : 1,
  localparam int unsigned IAW = $clog2(IBUF_DEPTH)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  layer_cfg_t              cfg,
  output logic                    busy,
  output logic                    done,
  // weights
  input  logic                    w_valid,
  output logic                    w_ready,
  input  logic [PE-1:0][SIMD-1:0] w_data,
  // thresholds
  input  logic                    t_valid,
  output logic                    t_ready,
  input  thres_t                  t_data,
  // input feature map
  input  logic                    ifm_valid,
  output logic                    ifm_ready,
  input  act_t [SIMD-1:0]         ifm_data,
  // output feature map
  output logic                    ofm_valid,
  input  logic                    ofm_ready,
  output act_t [PE-1:0]           ofm_data
);

  typedef enum logic [1:0] {S_IDLE, S_LOAD_W, S_LOAD_T, S_RUN} state_t;
  state_t state;

  layer_cfg_t     c;
  logic [IAW:0]   sf_n;
  logic [TAW:0]   nf_n;
  logic [WAW:0]   w_cnt;
  logic [9:0]     t_cnt;
  logic [22:0]    o_cnt, o_total;
  logic [8:0]     o_dim;
  logic           run_start;

  assign sf_n    = (IAW+1)'(32'(c.k) * c.k * (32'(c.ifm_ch) / SIMD));
  assign nf_n    = (TAW+1)'(c.ofm_ch / PE);
  assign o_dim   = (c.pool_en && !c.pool_s1) ? (c.ifm_dim >> 1) : c.ifm_dim;
  assign o_total = 23'(32'(o_dim) * o_dim * nf_n);

  assign w_ready = (state == S_LOAD_W);
  assign t_ready = (state == S_LOAD_T);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      c         <= '0;
      w_cnt     <= '0;
      t_cnt     <= '0;
      o_cnt     <= '0;
      run_start <= 1'b0;
      done      <= 1'b0;
    end else begin
      run_start <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          c     <= cfg;
          w_cnt <= '0;
          t_cnt <= '0;
          o_cnt <= '0;
          state <= S_LOAD_W;
        end
        S_LOAD_W: if (w_valid) begin
          w_cnt <= w_cnt + 1'b1;
          if (w_cnt == (WAW+1)'(32'(sf_n) * nf_n) - 1'b1) state <= S_LOAD_T;
        end
        S_LOAD_T: if (t_valid) begin
          t_cnt <= t_cnt + 1'b1;
          if (t_cnt == c.ofm_ch - 1'b1) begin
            state     <= S_RUN;
            run_start <= 1'b1;
          end
        end
        S_RUN: if (ofm_valid && ofm_ready) begin
          o_cnt <= o_cnt + 1'b1;
          if (o_cnt == o_total - 1'b1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---- datapath -----------------------------------------------------------
  logic            col_valid, col_ready, acc_valid, acc_ready, swu_busy;
  act_t [SIMD-1:0] col_data;
  act_t [PE-1:0]   acc_data;

  assign busy = (state != S_IDLE) || swu_busy;

  sliding_window #(.SIMD(SIMD), .ROW_WORDS(ROW_WORDS)) u_swu (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (run_start),
    .cfg       (c),
    .busy      (swu_busy),
    .in_valid  (ifm_valid && state == S_RUN),
    .in_ready  (ifm_ready),
    .in_data   (ifm_data),
    .out_valid (col_valid),
    .out_ready (col_ready),
    .out_data  (col_data)
  );

  mvtu #(
    .PE(PE), .SIMD(SIMD), .WMEM_DEPTH(WMEM_DEPTH),
    .TMEM_DEPTH(TMEM_DEPTH), .IBUF_DEPTH(IBUF_DEPTH)
  ) u_mvtu (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (run_start),
    .sf_n      (sf_n),
    .nf_n      (nf_n),
    .w_we      (w_valid && w_ready),
    .w_addr    (w_cnt[WAW-1:0]),
    .w_data    (w_data),
    .t_we      (t_valid && t_ready),
    .t_addr    (TAW'(t_cnt / PE)),
    .t_pe      ($clog2(PE)'(t_cnt % PE)),
    .t_data    (t_data),
    .in_valid  (col_valid),
    .in_ready  (col_ready),
    .in_data   (col_data),
    .out_valid (acc_valid),
    .out_ready (acc_ready),
    .out_data  (acc_data)
  );

  maxpool #(.PE(PE), .BUF_WORDS(POOL_WORDS)) u_pool (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (run_start),
    .dim       (c.ifm_dim),
    .nf_n      (5'(nf_n)),
    .pool_en   (c.pool_en),
    .pool_s1   (c.pool_s1),
    .in_valid  (acc_valid),
    .in_ready  (acc_ready),
    .in_data   (acc_data),
    .out_valid (ofm_valid),
    .out_ready (ofm_ready),
    .out_data  (ofm_data)
  );

  property p_ofm_hold;
    @(posedge clk) disable iff (!rst_n) ofm_valid && !ofm_ready |=> ofm_valid && $stable(ofm_data);
  endproperty
  assert property (p_ofm_hold);

endmodule
