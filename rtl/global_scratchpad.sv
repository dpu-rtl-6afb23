// global_scratchpad: the 256KB global scratchpad, 64 banks of 4KB (1024 x
// 32b words), giving 64 words (2Kb) of bandwidth per cycle.
//
// Each bank is a single-ported memory: per cycle it does either one write
// (we) or one read (re), chosen by the crossbar; the read word appears on
// rdata one cycle later. Reading and writing one bank in the same cycle is a
// protocol error and is flagged. Banks are arrays standing in for SRAM macros.
module global_scratchpad
  import dpu_pkg::*;
#(
  parameter int unsigned NBANKS     = NUM_CU,
  parameter int unsigned BANK_WORDS = GBANK_WORDS,
  localparam int unsigned AW = $clog2(BANK_WORDS)
) (
  input  logic                         clk,
  input  logic [NBANKS-1:0]            we,
  input  logic [NBANKS-1:0]            re,
  input  logic [NBANKS-1:0][AW-1:0]    addr,
  input  logic [NBANKS-1:0][WORD_W-1:0] wdata,
  output logic [NBANKS-1:0][WORD_W-1:0] rdata
);

  for (genvar b = 0; b < int'(NBANKS); b++) begin : g_bank
    sram #(.DEPTH(BANK_WORDS), .WIDTH(WORD_W)) u_bank (
      .clk(clk), .we(we[b]), .waddr(addr[b]), .wdata(wdata[b]),
      .re(re[b]), .raddr(addr[b]), .rdata(rdata[b]));
  end

  assert property (@(posedge clk) (we & re) == '0)
    else $error("global_scratchpad: read and write of one bank in the same cycle");

endmodule
