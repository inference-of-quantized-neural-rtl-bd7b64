// qnn_ram: simple dual-port RAM with one synchronous write port and one
// synchronous read port, used for the per-PE weight memory (WMEM), the
// per-PE threshold memory (TMEM) and the input-vector replay buffer of the
// matrix-vector-threshold unit.
//
// Timing: a write happens at the clock edge where we is high. A read issued
// with re high at one edge presents mem[raddr] on rdata after that edge and
// holds it until the next read; a read of the address written in the same
// cycle returns the old word. There is no reset: the contents are loaded
// before use. WMEM and TMEM are named by the paper; their organisation as one
// word per PE per address is this design's choice.
module qnn_ram #(
  parameter int unsigned WIDTH = 16,    // WMEM word: SIMD weight bits
  parameter int unsigned DEPTH = 4608,  // WMEM depth: 512*512*9/(PE*SIMD)
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
