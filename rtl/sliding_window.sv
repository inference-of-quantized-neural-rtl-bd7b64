// sliding_window: streaming im2col generator for a stride-1 convolution with
// "same" zero padding.
//
// The input feature map arrives in raster order, one pixel after the other,
// each pixel as ifm_ch/SIMD beats of SIMD 3-bit channels (channel c is lane
// c%SIMD of beat c/SIMD). Rows are written into a ring of MAX_K+1 row slots
// (row r lives in slot r % (MAX_K+1)). For every output pixel (oy,ox) the
// unit emits the kernel footprint in the order ky, kx, channel-fold, i.e.
// K*K*ifm_ch/SIMD beats; footprint positions outside the map are emitted as
// zero. This order defines the column order of the weight matrix.
//
// Output row oy is emitted (EMIT) once rows up to oy+pad are held; until
// then the unit waits in FILL. Input is accepted in both phases as long as
// it runs at most one row ahead of what row oy needs: the spare slot holds
// that row, so writing never overwrites a row still being read and the
// next row is normally complete when an output row ends. The read port is
// registered: out_data follows the address counters by one cycle and the
// pair stalls together when out_ready is low.
//
// The paper describes the im2col transformation and the layer geometry
// (kernel K, channels, feature-map size); the line-buffer organisation, beat
// order, padding value and the schedule are this design's choices.
module sliding_window
  import qnn_pkg::*;
#(
  parameter int unsigned SIMD      = 16,   // channels per beat
  parameter int unsigned MAX_K     = 3,    // largest kernel
  parameter int unsigned ROW_WORDS = 416   // largest ifm_dim*ifm_ch/SIMD: 104*64/16 (layer 5) = 13*512/16 (layers 13, 14)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,     // begin a layer; cfg is sampled here
  input  layer_cfg_t            cfg,
  output logic                  busy,
  // input feature map
  input  logic                  in_valid,
  output logic                  in_ready,
  input  act_t [SIMD-1:0]       in_data,
  // kernel footprints
  output logic                  out_valid,
  input  logic                  out_ready,
  output act_t [SIMD-1:0]       out_data
);

  localparam int unsigned SLOTS = MAX_K + 1;
  localparam int unsigned DEPTH = SLOTS * ROW_WORDS;
  localparam int unsigned AW    = $clog2(DEPTH);

  typedef enum logic [1:0] {S_IDLE, S_FILL, S_EMIT} state_t;
  state_t state;

  layer_cfg_t c;
  logic [5:0] cf_n;                 // channel folds per pixel
  logic [9:0] row_words;            // beats per input row
  logic [1:0] pad;

  assign cf_n      = 6'(c.ifm_ch / SIMD);
  assign row_words = 10'(c.ifm_dim * cf_n);
  assign pad       = c.k >> 1;

  // ---- write side -------------------------------------------------------
  logic [8:0] wr_row;               // rows completely written so far
  logic [9:0] wr_word;              // word within the current row
  logic [8:0] rows_needed;          // rows output row oy depends on

  // ---- read side --------------------------------------------------------
  logic [8:0] oy, ox;
  logic [1:0] ky, kx;
  logic [5:0] cf;

  always_comb begin
    logic [9:0] n;
    n = 10'(oy) + 10'(pad) + 10'd1;
    rows_needed = (n > 10'(c.ifm_dim)) ? c.ifm_dim : n[8:0];
  end

  logic                  buf_we;
  logic [AW-1:0]         buf_waddr, buf_raddr;
  logic [SIMD*ACT_BITS-1:0] buf_rdata;
  logic                  gen_valid, adv, in_bounds, pad_q;
  logic signed [10:0]    iy, ix;

  assign in_ready  = (state != S_IDLE) && (wr_row <= rows_needed) && (wr_row < c.ifm_dim);
  assign buf_we    = in_valid && in_ready;
  assign buf_waddr = AW'(32'(wr_row) % SLOTS * ROW_WORDS + wr_word);

  assign iy        = $signed({2'b0, oy}) + $signed({9'b0, ky}) - $signed({9'b0, pad});
  assign ix        = $signed({2'b0, ox}) + $signed({9'b0, kx}) - $signed({9'b0, pad});
  assign in_bounds = (iy >= 0) && (iy < $signed({2'b0, c.ifm_dim})) &&
                     (ix >= 0) && (ix < $signed({2'b0, c.ifm_dim}));
  assign buf_raddr = AW'((32'(iy[8:0]) % SLOTS) * ROW_WORDS + 32'(ix[8:0]) * cf_n + cf);

  assign gen_valid = (state == S_EMIT);
  assign adv       = !out_valid || out_ready;

  qnn_ram #(.WIDTH(SIMD*ACT_BITS), .DEPTH(DEPTH)) u_buf (
    .clk   (clk),
    .we    (buf_we),
    .waddr (buf_waddr),
    .wdata (in_data),
    .re    (gen_valid && adv && in_bounds),
    .raddr (buf_raddr),
    .rdata (buf_rdata)
  );

  assign out_data = pad_q ? '0 : buf_rdata;
  assign busy     = (state != S_IDLE) || out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      c         <= '0;
      wr_row    <= '0;
      wr_word   <= '0;
      oy        <= '0;
      ox        <= '0;
      ky        <= '0;
      kx        <= '0;
      cf        <= '0;
      out_valid <= 1'b0;
      pad_q     <= 1'b0;
    end else begin
      if (adv) begin
        out_valid <= gen_valid;
        pad_q     <= !in_bounds;
      end
      if (buf_we) begin
        if (wr_word == row_words - 1) begin
          wr_word <= '0;
          wr_row  <= wr_row + 1'b1;
        end else begin
          wr_word <= wr_word + 1'b1;
        end
      end
      unique case (state)
        S_IDLE: if (start) begin
          c       <= cfg;
          wr_row  <= '0;
          wr_word <= '0;
          {oy, ox, ky, kx, cf} <= '0;
          state   <= S_FILL;
        end
        S_FILL: if (wr_row >= rows_needed) state <= S_EMIT;
        S_EMIT: if (adv) begin
          if (cf != cf_n - 1) cf <= cf + 1'b1;
          else begin
            cf <= '0;
            if (kx != c.k - 1) kx <= kx + 1'b1;
            else begin
              kx <= '0;
              if (ky != c.k - 1) ky <= ky + 1'b1;
              else begin
                ky <= '0;
                if (ox != c.ifm_dim - 1) ox <= ox + 1'b1;
                else begin
                  ox <= '0;
                  if (oy == c.ifm_dim - 1) state <= S_IDLE;
                  else begin
                    oy    <= oy + 1'b1;
                    state <= S_FILL;
                  end
                end
              end
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A beat offered downstream must stay until it is taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid && $stable(out_data);
  endproperty
  assert property (p_hold);

endmodule
