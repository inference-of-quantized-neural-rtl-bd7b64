// qnn_ram_tb: self-checking test of the dual-port RAM.
// Writes random words to random addresses while reading others, keeps a
// reference copy, and checks read data one cycle after each read, including
// the read-old-data case for a same-cycle write to the read address.
module qnn_ram_tb;
  localparam int W = 16, D = 64;
  logic clk = 0;
  logic we, re;
  logic [5:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] ref_mem [D];
  int checks = 0, failures = 0;

  qnn_ram #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] expect_q;
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    // initialise
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = 1; waddr = 6'(a); wdata = W'($urandom); ref_mem[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      we = 1'($urandom); waddr = 6'($urandom); wdata = W'($urandom);
      re = 1; raddr = (i % 7 == 0) ? waddr : 6'($urandom);
      expect_q = ref_mem[raddr];
      @(posedge clk);
      if (we) ref_mem[waddr] = wdata;
      #1;
      checks++;
      if (rdata !== expect_q) begin
        failures++;
        if (failures < 5) $display("mismatch addr %0d: got %h expected %h", raddr, rdata, expect_q);
      end
    end
    // read holds without re
    @(negedge clk); re = 0; we = 0; expect_q = rdata;
    repeat (3) @(posedge clk);
    #1 checks++;
    if (rdata !== expect_q) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
