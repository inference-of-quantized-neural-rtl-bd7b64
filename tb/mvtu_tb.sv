// mvtu_tb: self-checking test of the matrix-vector-threshold unit.
// Loads random binary weights and random ascending thresholds, streams
// random 3-bit columns and compares every output beat with a dot product
// and threshold count computed in the testbench. A first pass with random
// stalls on both streams checks the values; a second pass with no stalls
// checks the rate: one column beat per cycle in the first neuron fold and
// nf_n*sf_n cycles per column overall.
module mvtu_tb;
  import qnn_pkg::*;
  localparam int PE = 4, SIMD = 4, WD = 64, TD = 4, ID = 16;
  localparam int WAW = $clog2(WD), TAW = $clog2(TD), IAW = $clog2(ID);

  logic clk = 0, rst_n = 0, start = 0;
  logic [IAW:0] sf_n;
  logic [TAW:0] nf_n;
  logic w_we = 0, t_we = 0;
  logic [WAW-1:0] w_addr;
  logic [PE-1:0][SIMD-1:0] w_data;
  logic [TAW-1:0] t_addr;
  logic [$clog2(PE)-1:0] t_pe;
  thres_t t_data;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  act_t [SIMD-1:0] in_data;
  act_t [PE-1:0] out_data;
  int checks = 0, failures = 0;

  mvtu #(.PE(PE), .SIMD(SIMD), .WMEM_DEPTH(WD), .TMEM_DEPTH(TD), .IBUF_DEPTH(ID)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit   wts [16][64];          // [channel][column]
  acc_t thr [16][N_THRES];
  act_t col [32][64];          // [pixel][column]

  task automatic run(int sfn, int nfn, int npix, bit stall, output int cycles);
    int ncol = sfn * SIMD, got = 0, t0;
    act_t [PE-1:0] exp_q [$];
    // parameters
    for (int ch = 0; ch < nfn*PE; ch++) begin
      int base = int'($urandom % 41) - 20;
      for (int c = 0; c < ncol; c++) wts[ch][c] = 1'($urandom);
      for (int t = 0; t < N_THRES; t++) begin base += int'($urandom % 6); thr[ch][t] = acc_t'(base); end
    end
    for (int a = 0; a < nfn*sfn; a++) begin
      @(negedge clk); w_we = 1; w_addr = WAW'(a);
      for (int p = 0; p < PE; p++)
        for (int s = 0; s < SIMD; s++) w_data[p][s] = wts[(a/sfn)*PE+p][(a%sfn)*SIMD+s];
    end
    @(negedge clk); w_we = 0;
    for (int ch = 0; ch < nfn*PE; ch++) begin
      @(negedge clk); t_we = 1; t_addr = TAW'(ch / PE); t_pe = $clog2(PE)'(ch % PE);
      for (int t = 0; t < N_THRES; t++) t_data[t] = thr[ch][t];
    end
    @(negedge clk); t_we = 0;
    // expected outputs
    for (int px = 0; px < npix; px++) begin
      for (int c = 0; c < ncol; c++) col[px][c] = act_t'($urandom);
      for (int nf = 0; nf < nfn; nf++) begin
        act_t [PE-1:0] e;
        for (int p = 0; p < PE; p++) begin
          int sum = 0, r = 0, ch = nf*PE + p;
          for (int c = 0; c < ncol; c++) sum += wts[ch][c] ? int'(col[px][c]) : -int'(col[px][c]);
          for (int t = 0; t < N_THRES; t++) if (sum >= int'(thr[ch][t])) r++;
          e[p] = act_t'(r);
        end
        exp_q.push_back(e);
      end
    end
    sf_n = (IAW+1)'(sfn); nf_n = (TAW+1)'(nfn);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = $time;
    fork
      for (int px = 0; px < npix; px++)
        for (int b = 0; b < sfn; b++) begin
          for (int s = 0; s < SIMD; s++) in_data[s] = col[px][b*SIMD+s];
          in_valid = !stall || ($urandom % 4 != 0);
          while (!in_valid) begin @(negedge clk); in_valid = ($urandom % 4) != 0; end
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          @(negedge clk); in_valid = 0;
        end
      while (got < npix*nfn) begin
        out_ready = !stall || ($urandom % 3 != 0);
        @(posedge clk);
        if (out_valid && out_ready) begin
          act_t [PE-1:0] e = exp_q.pop_front();
          checks++;
          if (out_data !== e) begin
            failures++;
            if (failures < 6) $display("sfn=%0d nfn=%0d out %0d: got %h exp %h", sfn, nfn, got, out_data, e);
          end
          got++;
        end
        @(negedge clk);
      end
    join
    cycles = (int'($time) - t0) / 10;
    out_ready = 0;
  endtask

  initial begin
    int cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(3, 2, 6, 1, cyc);
    run(16, 4, 5, 1, cyc);
    run(1, 1, 8, 1, cyc);
    run(9, 4, 10, 0, cyc);
    // 10 columns x 4 folds x 9 beats, plus 2 cycles of pipeline latency
    checks++;
    if (cyc > 10*4*9 + 3) begin
      failures++;
      $display("rate: %0d cycles for 360 beats", cyc);
    end
    $display("full-rate run: %0d cycles for %0d fold beats", cyc, 10*4*9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
