// register_file: 32-entry 32b register file of the PE with three write ports
// and two read ports.
//
// Write ports 0 and 1 take words arriving from the load FIFO, write port 2 the
// result of the arithmetic unit; all three write at the clock edge. Read
// ports are combinational, so a word written in cycle t is readable in cycle
// t+1 (no bypass). The compiler is expected to never write one register from
// two ports in the same cycle (the paper places that duty on the compiler);
// an assertion flags it. Sizes are the paper's; reset to zero is this
// design's choice.
module register_file
  import dpu_pkg::*;
#(
  parameter int unsigned NR    = NREGS,
  parameter int unsigned WIDTH = WORD_W,
  localparam int unsigned AW   = $clog2(NR)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [2:0]          we,
  input  logic [2:0][AW-1:0]  waddr,
  input  logic [2:0][WIDTH-1:0] wdata,
  input  logic [AW-1:0]       raddr0,
  input  logic [AW-1:0]       raddr1,
  output logic [WIDTH-1:0]    rdata0,
  output logic [WIDTH-1:0]    rdata1
);

  logic [WIDTH-1:0] regs [NR];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < int'(NR); r++) regs[r] <= '0;
    end else begin
      for (int p = 0; p < 3; p++) begin
        if (we[p]) regs[waddr[p]] <= wdata[p];
      end
    end
  end

  assign rdata0 = regs[raddr0];
  assign rdata1 = regs[raddr1];

  assert property (@(posedge clk) disable iff (!rst_n)
                   !((we[0] && we[1] && waddr[0] == waddr[1]) ||
                     (we[0] && we[2] && waddr[0] == waddr[2]) ||
                     (we[1] && we[2] && waddr[1] == waddr[2])))
    else $error("register_file: two write ports hit the same register");

endmodule
