// maxpool: streaming 2x2 max pooling of the convolution output, with stride
// 2 (map halves) or stride 1 (map size kept), or a plain pass-through.
//
// Input beats carry PE channels of one pixel; a pixel is nf_n beats (neuron
// folds) and pixels arrive in raster order over a dim x dim map. Output
// beats have the same format. Activations are unsigned, so the maximum is an
// unsigned compare per channel.
//
// Stride 2 (dim even): a row buffer holds, per pooled column and fold, the
// running maximum of the window. The top-left pixel of a window initialises
// the entry, the next two update it and the bottom-right one completes it,
// so a pooled beat leaves right after the beat that completes its window.
//
// Stride 1: out(y,x) = max of in(y..y+1, x..x+1), positions outside the map
// ignored, so the map keeps its size. The unit keeps the previous pixel of
// the current row (one entry per fold) and, in the row buffer, the
// horizontal pair maxima h(y-1,x) = max(in(y-1,x), in(y-1,x+1)) of the row
// above. Input (y,x) with x >= 1 forms h(y,x-1) and, for y >= 1, completes
// out(y-1,x-1) = max(h(y-1,x-1), h(y,x-1)). After each row the last column
// is settled in nf_n extra cycles (ROW_END), and after the last row the row
// buffer, which then holds the bottom output row, is emitted (FINAL).
// Input is stalled during those phases.
//
// Timing: the output is registered; one input beat is taken per cycle while
// the output register is free or being emptied.
//
// The paper gives the 2x2 pooling layers (Table 1, size 2 stride 2 in its
// layer description, and a 13x13 -> 13x13 pool at layer 12 with 4 operations
// per pixel). The stride-1 border rule (ignore positions outside the map)
// and all buffer organisation are this design's choices.
module maxpool
  import qnn_pkg::*;
#(
  parameter int unsigned PE        = 32,
  parameter int unsigned BUF_WORDS = 208,  // largest row-buffer need: 104*2 (layer 3), 13*16 (layer 12)
  parameter int unsigned MAX_NF    = 16    // largest nf_n: 512/PE
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,     // sample dim/nf_n/pool mode, restart at pixel (0,0)
  input  logic [8:0]          dim,       // input map height = width
  input  logic [4:0]          nf_n,      // beats per pixel
  input  logic                pool_en,
  input  logic                pool_s1,   // stride 1 instead of 2
  input  logic                in_valid,
  output logic                in_ready,
  input  act_t [PE-1:0]       in_data,
  output logic                out_valid,
  input  logic                out_ready,
  output act_t [PE-1:0]       out_data
);

  localparam int unsigned AW = $clog2(BUF_WORDS);
  localparam int unsigned FW = $clog2(MAX_NF);

  typedef enum logic [1:0] {S_STREAM, S_ROW_END, S_FINAL} state_t;
  state_t state;

  logic [8:0]  d, x, y;
  logic [4:0]  nfm, nf;
  logic        pen, s1;
  logic [12:0] fl;                    // flush counter

  act_t [PE-1:0] rowbuf [BUF_WORDS];
  act_t [PE-1:0] prev   [MAX_NF];
  act_t [PE-1:0] old, upd, h, prv, vmax;
  logic [AW-1:0] idx;
  logic          ofree, fire, top_left, bottom_right, last_beat_of_row;

  function automatic act_t [PE-1:0] vec_max(act_t [PE-1:0] a, act_t [PE-1:0] b);
    for (int p = 0; p < PE; p++) vec_max[p] = (a[p] > b[p]) ? a[p] : b[p];
  endfunction

  assign ofree            = !out_valid || out_ready;
  assign in_ready         = ofree && (state == S_STREAM);
  assign fire             = in_valid && in_ready;
  assign top_left         = !x[0] && !y[0];
  assign bottom_right     = x[0] && y[0];
  assign last_beat_of_row = (x == d - 1) && (nf == nfm - 1);

  // row-buffer address of the current operation
  always_comb begin
    unique case (state)
      S_STREAM:  idx = !s1 ? AW'(32'(x >> 1) * nfm + nf) : AW'(32'(x - 1'b1) * nfm + nf);
      S_ROW_END: idx = AW'(32'(d - 1'b1) * nfm + fl);
      default:   idx = AW'(fl);
    endcase
  end

  assign old  = rowbuf[idx];
  assign prv  = (state == S_ROW_END) ? prev[FW'(fl)] : prev[FW'(nf)];
  assign h    = vec_max(prv, in_data);          // h(y, x-1) while streaming
  assign vmax = vec_max(old, h);
  always_comb begin
    for (int p = 0; p < PE; p++)
      upd[p] = (top_left || in_data[p] > old[p]) ? in_data[p] : old[p];
  end

  always_ff @(posedge clk) begin
    if (pen && !s1 && fire)                                  rowbuf[idx] <= upd;
    if (pen &&  s1 && fire && x != 0)                        rowbuf[idx] <= h;
    if (pen &&  s1 && state == S_ROW_END && ofree)           rowbuf[idx] <= prv;
    if (fire)                                                prev[FW'(nf)] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_STREAM;
      d <= '0; nfm <= '0; pen <= 1'b0; s1 <= 1'b0;
      x <= '0; y <= '0; nf <= '0; fl <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (start) begin
      state <= S_STREAM;
      d <= dim; nfm <= nf_n; pen <= pool_en; s1 <= pool_s1;
      x <= '0; y <= '0; nf <= '0; fl <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      unique case (state)
        S_STREAM: if (fire) begin
          if (!pen) begin
            out_valid <= 1'b1;
            out_data  <= in_data;
          end else if (!s1 && bottom_right) begin
            out_valid <= 1'b1;
            out_data  <= upd;
          end else if (s1 && x != 0 && y != 0) begin
            out_valid <= 1'b1;
            out_data  <= vmax;
          end
          if (pen && s1 && last_beat_of_row) begin
            state <= S_ROW_END;               // x, y, nf stay on the last beat
            fl    <= '0;
          end else if (nf != nfm - 1) nf <= nf + 1'b1;
          else begin
            nf <= '0;
            if (x != d - 1) x <= x + 1'b1;
            else begin
              x <= '0;
              y <= (y == d - 1) ? '0 : y + 1'b1;
            end
          end
        end
        S_ROW_END: if (ofree) begin
          // out(y-1, d-1) = max(h(y-1, d-1), in(y, d-1)); then h(y, d-1) = in(y, d-1)
          if (y != 0) begin
            out_valid <= 1'b1;
            out_data  <= vec_max(old, prv);
          end
          if (fl != 13'(nfm - 1)) fl <= fl + 1'b1;
          else begin
            fl <= '0;
            nf <= '0;
            x  <= '0;
            if (y == d - 1) begin
              y     <= '0;
              state <= S_FINAL;
            end else begin
              y     <= y + 1'b1;
              state <= S_STREAM;
            end
          end
        end
        S_FINAL: if (ofree) begin
          // the row buffer now holds h(d-1, x) = out(d-1, x)
          out_valid <= 1'b1;
          out_data  <= old;
          if (fl != 13'(32'(d) * nfm - 1)) fl <= fl + 1'b1;
          else begin
            fl    <= '0;
            state <= S_STREAM;
          end
        end
        default: state <= S_STREAM;
      endcase
    end
  end

  property p_hold;
    @(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid && $stable(out_data);
  endproperty
  assert property (p_hold);

endmodule
