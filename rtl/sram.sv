// sram: synchronous memory array with one write port and one read port.
//
// Stands in for the SRAM macros of the chip (instruction memory, load and
// store address memories, local scratchpad, global scratchpad banks). The
// macros themselves are process specific; this is the same function written
// as an array. A write takes effect at the clock edge; a read registers the
// addressed word at the clock edge, so rdata is valid the cycle after re.
// Reading and writing the same address in one cycle returns the old word.
// Contents are not reset.
module sram #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 32,
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
    if (re) rdata <= mem[raddr];
  end

endmodule
