// qnn_accel_tb: end-to-end test of the accelerator at its default size
// (PE = 32, SIMD = 16, memories sized for 512 x 512 x 3 x 3 layers).
//
// Each layer run loads random binary weights and ascending thresholds over
// the parameter streams, streams a random 3-bit input map and compares the
// output map with a reference convolution (stride 1, zero padding (k-1)/2,
// +1/-1 weights), multi-thresholding and optional 2x2 max pooling computed
// here. Small layers (among them a 1x1 fully connected layer and a 3x3 map
// whose every footprint is padded) run with random stalls on every stream.
// Three layers with Tincy YOLO geometries run without stalls, and their
// cycle counts are checked against the PE x SIMD compute bound plus loading
// (within 1 %): layer 9 with its pool (26x26x128 -> 256), layer 11 with the
// stride-1 pool of layer 12 (13x13x256 -> 512), and layer 13
// (13x13x512 -> 512). The testbench counts how often each mechanism
// occurred (input stall, output back-pressure, stride-2 pooling, stride-1
// pooling, pass-through, padded footprints, 1x1 kernels, neuron-fold
// replay) and fails if one never did.
module qnn_accel_tb;
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

  int checks = 0, failures = 0;
  int n_in_stall = 0, n_backpressure = 0, n_pool = 0, n_nopool = 0;
  int n_pad = 0, n_k1 = 0, n_replay = 0, n_pool_s1 = 0;

  qnn_accel dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (busy && ifm_valid && !ifm_ready) n_in_stall++;
    if (ofm_valid && !ofm_ready) n_backpressure++;
  end

  bit   wts [512][4608];
  acc_t thr [512][N_THRES];
  act_t fm  [26][26][512];
  act_t conv[26][26][512];

  task automatic run_layer(int k, int dim, int ich, int och, bit pool, bit ps1, bit stall, output int cycles);
    int ncol = k*k*ich, sfn = k*k*ich/SIMD, nfn = och/PE;
    int od = (pool && !ps1) ? dim/2 : dim, got = 0, t0, spread;
    act_t [PE-1:0] exp_q [$];
    spread = int'($sqrt(real'(ncol))) + 1;
    for (int ch = 0; ch < och; ch++) begin
      int base = int'($urandom % (6*spread)) - 7*spread;
      for (int c = 0; c < ncol; c++) wts[ch][c] = 1'($urandom);
      for (int t = 0; t < N_THRES; t++) begin base += int'($urandom % (2*spread)); thr[ch][t] = acc_t'(base); end
    end
    for (int y = 0; y < dim; y++)
      for (int x = 0; x < dim; x++)
        for (int c = 0; c < ich; c++) fm[y][x][c] = act_t'($urandom);
    // reference convolution + thresholds
    for (int y = 0; y < dim; y++)
      for (int x = 0; x < dim; x++)
        for (int ch = 0; ch < och; ch++) begin
          int sum = 0, r = 0, col = 0;
          for (int ky = 0; ky < k; ky++)
            for (int kx = 0; kx < k; kx++) begin
              int iy = y + ky - k/2, ix = x + kx - k/2;
              bit in_map = iy >= 0 && ix >= 0 && iy < dim && ix < dim;
              for (int c = 0; c < ich; c++) begin
                if (in_map) sum += wts[ch][col] ? int'(fm[iy][ix][c]) : -int'(fm[iy][ix][c]);
                col++;
              end
            end
          for (int t = 0; t < N_THRES; t++) if (sum >= int'(thr[ch][t])) r++;
          conv[y][x][ch] = act_t'(r);
        end
    for (int y = 0; y < od; y++)
      for (int x = 0; x < od; x++)
        for (int f = 0; f < nfn; f++) begin
          act_t [PE-1:0] e;
          for (int p = 0; p < PE; p++) begin
            int ch = f*PE + p;
            if (!pool) e[p] = conv[y][x][ch];
            else begin
              e[p] = 0;
              for (int dy = 0; dy < 2; dy++)
                for (int dx = 0; dx < 2; dx++)
                  if (!ps1) begin
                    if (conv[2*y+dy][2*x+dx][ch] > e[p]) e[p] = conv[2*y+dy][2*x+dx][ch];
                  end else if (y+dy < dim && x+dx < dim) begin
                    if (conv[y+dy][x+dx][ch] > e[p]) e[p] = conv[y+dy][x+dx][ch];
                  end
            end
          end
          exp_q.push_back(e);
        end
    if (pool && !ps1) n_pool++; else if (pool) n_pool_s1++; else n_nopool++;
    if (k == 3) n_pad += 4*dim - 4;
    if (k == 1) n_k1++;
    if (nfn > 1) n_replay += dim*dim*(nfn-1);

    cfg = '0; cfg.k = 2'(k); cfg.ifm_dim = 9'(dim); cfg.ifm_ch = 10'(ich);
    cfg.ofm_ch = 10'(och); cfg.pool_en = pool; cfg.pool_s1 = ps1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = $time;
    // parameters
    for (int a = 0; a < nfn*sfn; a++) begin
      for (int p = 0; p < PE; p++)
        for (int s = 0; s < SIMD; s++) w_data[p][s] = wts[(a/sfn)*PE+p][(a%sfn)*SIMD+s];
      w_valid = !stall || ($urandom % 4 != 0);
      while (!w_valid) begin @(negedge clk); w_valid = ($urandom % 4) != 0; end
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
      for (int y = 0; y < dim; y++)
        for (int x = 0; x < dim; x++)
          for (int f = 0; f < ich/SIMD; f++) begin
            for (int s = 0; s < SIMD; s++) ifm_data[s] = fm[y][x][f*SIMD+s];
            ifm_valid = !stall || ($urandom % 4 != 0);
            while (!ifm_valid) begin @(negedge clk); ifm_valid = ($urandom % 4) != 0; end
            @(posedge clk); while (!ifm_ready) @(posedge clk);
            @(negedge clk); ifm_valid = 0;
          end
      while (got < od*od*nfn) begin
        ofm_ready = !stall || ($urandom % 3 != 0);
        @(posedge clk);
        if (ofm_valid && ofm_ready) begin
          act_t [PE-1:0] e = exp_q.pop_front();
          checks++;
          if (ofm_data !== e) begin
            failures++;
            if (failures < 6) $display("k=%0d dim=%0d ich=%0d och=%0d beat %0d: got %h exp %h",
                                       k, dim, ich, och, got, ofm_data, e);
          end
          got++;
        end
        @(negedge clk);
      end
    join
    ofm_ready = 0;
    @(posedge clk);
    cycles = (int'($time) - t0) / 10;
    checks++;
    if (busy) begin failures++; $display("busy after layer k=%0d dim=%0d", k, dim); end
  endtask

  initial begin
    int cyc, bound;
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_layer(3, 6, 16, 64, 1, 0, 1, cyc);
    run_layer(1, 5, 32, 32, 0, 0, 1, cyc);
    run_layer(3, 4, 64, 96, 0, 0, 1, cyc);
    run_layer(3, 5, 32, 64, 1, 1, 1, cyc);
    run_layer(1, 1, 64, 64, 0, 0, 1, cyc);    // fully connected: 64 -> 64
    run_layer(3, 3, 16, 32, 0, 0, 1, cyc);    // 3x3 on a 3x3 map: every column padded
    // Tincy YOLO layer 9 (+ pool 10): 26x26x128 -> 256, 3x3
    run_layer(3, 26, 128, 256, 1, 0, 0, cyc);
    bound = 26*26*8*72 + 8*72 + 256;        // compute + weight load + thresholds
    $display("layer 9: %0d cycles, compute+load bound %0d", cyc, bound);
    checks++;
    if (cyc > bound + bound/100) begin failures++; $display("layer 9 too slow"); end
    // Tincy YOLO layer 11 (+ stride-1 pool 12): 13x13x256 -> 512, 3x3
    run_layer(3, 13, 256, 512, 1, 1, 0, cyc);
    bound = 13*13*16*144 + 16*144 + 512;
    $display("layer 11: %0d cycles, compute+load bound %0d", cyc, bound);
    checks++;
    if (cyc > bound + bound/100) begin failures++; $display("layer 11 too slow"); end
    // Tincy YOLO layer 13: 13x13x512 -> 512, 3x3, no pooling
    run_layer(3, 13, 512, 512, 0, 0, 0, cyc);
    bound = 13*13*16*288 + 16*288 + 512;
    $display("layer 13: %0d cycles, compute+load bound %0d", cyc, bound);
    checks++;
    if (cyc > bound + bound/100) begin failures++; $display("layer 13 too slow"); end
    $display("mechanisms: in_stall=%0d backpressure=%0d pool=%0d pool_s1=%0d nopool=%0d pad=%0d k1=%0d replay=%0d",
             n_in_stall, n_backpressure, n_pool, n_pool_s1, n_nopool, n_pad, n_k1, n_replay);
    checks += 8;
    if (n_pool_s1 == 0)      begin failures++; $display("stride-1 pooling never used"); end
    if (n_in_stall == 0)     begin failures++; $display("input stall never happened"); end
    if (n_backpressure == 0) begin failures++; $display("output back-pressure never happened"); end
    if (n_pool == 0)         begin failures++; $display("pooling never used"); end
    if (n_nopool == 0)       begin failures++; $display("pass-through never used"); end
    if (n_pad == 0)          begin failures++; $display("padding never used"); end
    if (n_k1 == 0)           begin failures++; $display("1x1 kernel never used"); end
    if (n_replay == 0)       begin failures++; $display("fold replay never used"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
