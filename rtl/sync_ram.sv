// sync_ram: single-clock memory with one write port and one registered read
// port, as an FPGA block RAM provides.
//
// It holds the three tables of a tree processor: the x memory (the input
// vector), the split coordinate memory and the split value memory. The read
// address is sampled on every rising clock edge and the word appears on rdata
// in the following cycle, so one memory access costs one clock cycle, which
// is what the three-cycles-per-level schedule of the tree processor counts
// on. A write and a read of the same address in one cycle return the old word
// (read-before-write); the source does not describe the write side at all, it
// is this design's way of filling the tables.
//
// Interface: we/waddr/wdata write one word per cycle; raddr -> rdata with one
// cycle of latency. Contents are not reset.
module sync_ram #(
  parameter int unsigned DEPTH = 32768,
  parameter int unsigned WIDTH = 8,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
