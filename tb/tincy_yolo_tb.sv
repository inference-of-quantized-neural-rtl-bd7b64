// tincy_yolo_tb: one frame of the Tincy YOLO hidden layers (3 to 14) run
// through the accelerator at its default size, layer after layer, the way
// the host drives it.
//
// A random 208x208x16 3-bit map stands for the quantised output of the
// input layer. For each of the seven convolutional layers the testbench
// loads random binary weights and thresholds (placed around the spread of
// the sums so that all eight output levels occur), streams the current map
// in, and compares the output map with a reference convolution +
// thresholding + pooling computed here. The reference output then becomes
// the next layer's input. Pools: 2x2/2 after layers 3, 5, 7, 9 and 2x2/1
// after layer 11. The final 13x13x512 map is what the output layer would
// receive. Each layer's cycle count is checked against the PE x SIMD
// compute bound plus parameter loading; the frame total is printed.
module tincy_yolo_tb;
  import qnn_pkg::*;
  localparam int PE = 32, SIMD = 16;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  layer_cfg_t cfg;
  logic w_valid = 0, w_ready, t_valid = 0, t_ready;
  logic [PE-1:0][SIMD-1:0] w_data;
  thres_t t_data;
  logic ifm_valid = 0, ifm_ready, ofm_valid, ofm_ready = 0;
  act_t [SIMD-1:0] ifm_data;
  act_t [PE-1:0] ofm_data;

  int checks = 0, failures = 0, n_done = 0;
  longint total_cycles = 0;

  qnn_accel dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (done) n_done++;

  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit   wts [512][4608];
  acc_t thr [512][N_THRES];
  act_t fm  [];              // current input map, [y][x][c] flattened
  act_t conv[];              // convolution output, [y][x][c] flattened
  act_t nxt [];              // pooled output = next input

  task automatic run_layer(int layer, int dim, int ich, int och, int pool);  // pool: 0 none, 2 stride 2, 1 stride 1
    int ncol = 9*ich, sfn = 9*ich/SIMD, nfn = och/PE;
    int od = (pool == 2) ? dim/2 : dim, got = 0, bad = 0, t0, cyc, bound;
    real sd;
    int hist [8];
    sd = $sqrt(real'(ncol) * 17.5);
    for (int ch = 0; ch < och; ch++) begin
      for (int c = 0; c < ncol; c++) wts[ch][c] = 1'($urandom);
      for (int t = 0; t < N_THRES; t++)
        thr[ch][t] = acc_t'(int'(sd * 0.45 * real'(t - 3)) + int'($urandom % 5) - 2);
    end
    conv = new[dim*dim*och];
    for (int y = 0; y < dim; y++)
      for (int x = 0; x < dim; x++)
        for (int ch = 0; ch < och; ch++) begin
          int sum = 0, r = 0, col = 0;
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++) begin
              int iy = y + ky - 1, ix = x + kx - 1;
              if (iy >= 0 && ix >= 0 && iy < dim && ix < dim) begin
                int base = (iy*dim + ix)*ich;
                for (int c = 0; c < ich; c++)
                  sum += wts[ch][col+c] ? int'(fm[base+c]) : -int'(fm[base+c]);
              end
              col += ich;
            end
          for (int t = 0; t < N_THRES; t++) if (sum >= int'(thr[ch][t])) r++;
          conv[(y*dim + x)*och + ch] = act_t'(r);
        end
    nxt = new[od*od*och];
    foreach (hist[i]) hist[i] = 0;
    for (int y = 0; y < od; y++)
      for (int x = 0; x < od; x++)
        for (int ch = 0; ch < och; ch++) begin
          act_t m = 0;
          if (pool == 0) m = conv[(y*dim + x)*och + ch];
          else
            for (int dy = 0; dy < 2; dy++)
              for (int dx = 0; dx < 2; dx++) begin
                int sy = (pool == 2) ? 2*y + dy : y + dy, sx = (pool == 2) ? 2*x + dx : x + dx;
                if (sy < dim && sx < dim && conv[(sy*dim + sx)*och + ch] > m) m = conv[(sy*dim + sx)*och + ch];
              end
          nxt[(y*od + x)*och + ch] = m;
          hist[m]++;
        end

    cfg = '0; cfg.k = 2'd3; cfg.ifm_dim = 9'(dim); cfg.ifm_ch = 10'(ich); cfg.ofm_ch = 10'(och);
    cfg.pool_en = (pool != 0); cfg.pool_s1 = (pool == 1);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = $time;
    for (int a = 0; a < nfn*sfn; a++) begin
      for (int p = 0; p < PE; p++)
        for (int s = 0; s < SIMD; s++) w_data[p][s] = wts[(a/sfn)*PE+p][(a%sfn)*SIMD+s];
      w_valid = 1;
      @(posedge clk); while (!w_ready) @(posedge clk);
      @(negedge clk); w_valid = 0;
    end
    for (int ch = 0; ch < och; ch++) begin
      for (int t = 0; t < N_THRES; t++) t_data[t] = thr[ch][t];
      t_valid = 1;
      @(posedge clk); while (!t_ready) @(posedge clk);
      @(negedge clk); t_valid = 0;
    end
    fork
      for (int i = 0; i < dim*dim*ich/SIMD; i++) begin
        for (int s = 0; s < SIMD; s++) ifm_data[s] = fm[i*SIMD + s];
        ifm_valid = 1;
        @(posedge clk); while (!ifm_ready) @(posedge clk);
        @(negedge clk); ifm_valid = 0;
      end
      begin
        ofm_ready = 1;
        while (got < od*od*nfn) begin
          @(posedge clk);
          if (ofm_valid) begin
            for (int p = 0; p < PE; p++)
              if (ofm_data[p] !== nxt[got*PE + p]) bad++;
            got++;
          end
        end
        @(negedge clk); ofm_ready = 0;
      end
    join
    @(posedge clk);
    cyc = (int'($time) - t0) / 10;
    total_cycles += cyc;
    bound = dim*dim*nfn*sfn + nfn*sfn + och;
    checks += 2;
    if (bad != 0) begin
      failures++;
      $display("layer %0d: %0d wrong output values", layer, bad);
    end
    if (cyc > bound + bound/100) begin
      failures++;
      $display("layer %0d: %0d cycles, bound %0d", layer, cyc, bound);
    end
    $display("layer %2d: %3dx%3dx%3d -> %3dx%3dx%3d  %7d cycles (bound %7d)  levels %0d %0d %0d %0d %0d %0d %0d %0d",
             layer, dim, dim, ich, od, od, och, cyc, bound,
             hist[0], hist[1], hist[2], hist[3], hist[4], hist[5], hist[6], hist[7]);
    fm = nxt;
  endtask

  initial begin
    cfg = '0;
    fm = new[208*208*16];
    foreach (fm[i]) fm[i] = act_t'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_layer(3,  208,  16,  64, 2);
    run_layer(5,  104,  64,  64, 2);
    run_layer(7,   52,  64, 128, 2);
    run_layer(9,   26, 128, 256, 2);
    run_layer(11,  13, 256, 512, 1);
    run_layer(13,  13, 512, 512, 0);
    run_layer(14,  13, 512, 512, 0);
    repeat (2) @(posedge clk);
    checks++;
    if (n_done != 7) begin failures++; $display("done pulsed %0d times, expected 7", n_done); end
    $display("frame: %0d cycles in the accelerator (%.1f ms at 200 MHz)", total_cycles, real'(total_cycles) / 200.0e3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
