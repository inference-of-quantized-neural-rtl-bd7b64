// maxpool_tb: self-checking test of the 2x2 max-pooling unit.
// Streams random maps (several sizes and fold counts, random stalls on both
// sides) with stride-2 pooling, stride-1 pooling and pooling off, and
// compares every output beat with the maximum of the 2x2 window (positions
// outside the map ignored for stride 1), or the input beat itself.
// A stall-free run checks that one input beat is taken per cycle.
module maxpool_tb;
  import qnn_pkg::*;
  localparam int PE = 4, BW = 32;

  logic clk = 0, rst_n = 0, start = 0, pool_en, pool_s1;
  logic [8:0] dim;
  logic [4:0] nf_n;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  act_t [PE-1:0] in_data, out_data;
  int checks = 0, failures = 0;

  maxpool #(.PE(PE), .BUF_WORDS(BW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  act_t [PE-1:0] fm [16][16][4];

  task automatic run(int d, int nf, bit pen, bit ps1, bit stall, output int cycles);
    act_t [PE-1:0] exp_q [$];
    int od = (pen && !ps1) ? d/2 : d, got = 0, t0;
    for (int y = 0; y < d; y++)
      for (int x = 0; x < d; x++)
        for (int f = 0; f < nf; f++)
          for (int p = 0; p < PE; p++) fm[y][x][f][p] = act_t'($urandom);
    for (int y = 0; y < od; y++)
      for (int x = 0; x < od; x++)
        for (int f = 0; f < nf; f++) begin
          act_t [PE-1:0] e;
          if (!pen) e = fm[y][x][f];
          else
            for (int p = 0; p < PE; p++) begin
              e[p] = 0;
              for (int dy = 0; dy < 2; dy++)
                for (int dx = 0; dx < 2; dx++)
                  if (!ps1) begin
                    if (fm[2*y+dy][2*x+dx][f][p] > e[p]) e[p] = fm[2*y+dy][2*x+dx][f][p];
                  end else if (y+dy < d && x+dx < d) begin
                    if (fm[y+dy][x+dx][f][p] > e[p]) e[p] = fm[y+dy][x+dx][f][p];
                  end
            end
          exp_q.push_back(e);
        end
    dim = 9'(d); nf_n = 5'(nf); pool_en = pen; pool_s1 = ps1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = $time;
    fork
      for (int y = 0; y < d; y++)
        for (int x = 0; x < d; x++)
          for (int f = 0; f < nf; f++) begin
            in_data = fm[y][x][f];
            in_valid = !stall || ($urandom % 4 != 0);
            while (!in_valid) begin @(negedge clk); in_valid = ($urandom % 4) != 0; end
            @(posedge clk);
            while (!in_ready) @(posedge clk);
            @(negedge clk); in_valid = 0;
          end
      while (got < od*od*nf) begin
        out_ready = !stall || ($urandom % 3 != 0);
        @(posedge clk);
        if (out_valid && out_ready) begin
          act_t [PE-1:0] e = exp_q.pop_front();
          checks++;
          if (out_data !== e) begin
            failures++;
            if (failures < 6) $display("d=%0d nf=%0d pen=%0d out %0d: got %h exp %h", d, nf, pen, got, out_data, e);
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
    run(4, 1, 1, 0, 1, cyc);
    run(8, 4, 1, 0, 1, cyc);
    run(6, 2, 0, 0, 1, cyc);
    run(16, 4, 1, 0, 1, cyc);
    run(8, 2, 1, 0, 0, cyc);
    checks++;
    if (cyc > 8*8*2 + 2) begin failures++; $display("rate: %0d cycles for 128 beats", cyc); end
    // stride 1: odd and even sizes, one and several folds
    run(5, 1, 1, 1, 1, cyc);
    run(6, 4, 1, 1, 1, cyc);
    run(7, 3, 1, 1, 1, cyc);
    run(2, 2, 1, 1, 1, cyc);
    run(8, 4, 1, 0, 1, cyc);      // stride 2 again after stride 1
    run(7, 2, 1, 1, 0, cyc);
    // 7x7x2 beats in, plus 2 cycles per row end and 14 final beats
    checks++;
    if (cyc > 7*7*2 + 7*2 + 7*2 + 3) begin failures++; $display("stride-1 rate: %0d cycles", cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
