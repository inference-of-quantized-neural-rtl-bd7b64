// sliding_window_tb: self-checking test of the im2col generator.
// Runs several layer geometries (3x3 and 1x1 kernels, several map sizes and
// channel counts) with random input maps and random stalls on both streams,
// and compares every emitted beat with the footprint computed directly from
// the input map (zero outside the map, order ky, kx, channel fold).
module sliding_window_tb;
  import qnn_pkg::*;
  localparam int SIMD = 4, ROW_WORDS = 64;

  logic clk = 0, rst_n = 0, start = 0, busy;
  layer_cfg_t cfg;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  act_t [SIMD-1:0] in_data, out_data;
  int checks = 0, failures = 0, stalls = 0;

  sliding_window #(.SIMD(SIMD), .ROW_WORDS(ROW_WORDS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  act_t fmap [16][16][32];

  task automatic run_layer(int k, int dim, int ch);
    int cfn = ch / SIMD, n_out, got = 0;
    act_t [SIMD-1:0] exp_q [$];
    n_out = dim * dim * k * k * cfn;
    for (int y = 0; y < dim; y++)
      for (int x = 0; x < dim; x++)
        for (int c = 0; c < ch; c++) fmap[y][x][c] = act_t'($urandom);
    // expected beats
    for (int oy = 0; oy < dim; oy++)
      for (int ox = 0; ox < dim; ox++)
        for (int ky = 0; ky < k; ky++)
          for (int kx = 0; kx < k; kx++)
            for (int f = 0; f < cfn; f++) begin
              act_t [SIMD-1:0] b;
              int iy = oy + ky - k/2, ix = ox + kx - k/2;
              for (int s = 0; s < SIMD; s++)
                b[s] = (iy < 0 || ix < 0 || iy >= dim || ix >= dim) ? act_t'(0) : fmap[iy][ix][f*SIMD+s];
              exp_q.push_back(b);
            end
    cfg = '0; cfg.k = 2'(k); cfg.ifm_dim = 9'(dim); cfg.ifm_ch = 10'(ch); cfg.ofm_ch = 10'(32);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    fork
      begin // input driver
        for (int y = 0; y < dim; y++)
          for (int x = 0; x < dim; x++)
            for (int f = 0; f < cfn; f++) begin
              for (int s = 0; s < SIMD; s++) in_data[s] = fmap[y][x][f*SIMD+s];
              in_valid = ($urandom % 4) != 0;
              while (!in_valid) begin @(negedge clk); in_valid = ($urandom % 4) != 0; end
              @(posedge clk);
              while (!in_ready) @(posedge clk);
              @(negedge clk); in_valid = 0;
            end
      end
      begin // output checker
        while (got < n_out) begin
          @(negedge clk);
          out_ready = ($urandom % 3) != 0;
          @(posedge clk);
          if (out_valid && !out_ready) stalls++;
          if (out_valid && out_ready) begin
            act_t [SIMD-1:0] e = exp_q.pop_front();
            checks++;
            if (out_data !== e) begin
              failures++;
              if (failures < 6) $display("k=%0d dim=%0d beat %0d: got %h exp %h", k, dim, got, out_data, e);
            end
            got++;
          end
        end
        @(negedge clk); out_ready = 0;
      end
    join
    repeat (3) @(posedge clk);
    checks++;
    if (busy) begin failures++; $display("still busy after k=%0d dim=%0d", k, dim); end
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_layer(3, 4, 8);
    run_layer(3, 5, 4);
    run_layer(1, 6, 8);
    run_layer(3, 8, 32);
    run_layer(3, 1, 16);
    checks++;
    if (stalls == 0) begin failures++; $display("no output stall exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
