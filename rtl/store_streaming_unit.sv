// store_streaming_unit: writes the PE's results back to the scratchpads.
//
// It waits for a word on the store FIFO, takes the next entry of the store
// address memory (local or global, word address) and writes the word, one per
// cycle. Global stores go to the CU's own bank of the global scratchpad (the
// asymmetric crossbar lets a CU store only there) and have the highest
// priority at that bank, so they complete in the cycle they are issued, like
// local stores. st_idle is high when the store FIFO is empty and nothing is
// in flight: the PE waits for it at local and global barriers.
// Timing: the address memory has a one-cycle read, prefetched so that stores
// run back to back. start rewinds the address pointer. The entry layout is
// this design's choice.
module store_streaming_unit
  import dpu_pkg::*;
#(
  parameter int unsigned STMEM_D = STMEM_DEPTH,
  localparam int unsigned PAW = $clog2(STMEM_D)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  // store address memory read port
  output logic                am_re,
  output logic [PAW-1:0]      am_raddr,
  input  st_entry_t           am_rdata,
  // store FIFO pop side
  input  logic                fifo_empty,
  input  logic [WORD_W-1:0]   fifo_rdata,
  output logic                fifo_pop,
  // local scratchpad write port
  output logic                lsp_we,
  output logic [LOCAL_AW-1:0] lsp_waddr,
  output logic [WORD_W-1:0]   lsp_wdata,
  // own global bank store port
  output logic                gst_req,
  output logic [GBANK_AW-1:0] gst_addr,
  output logic [WORD_W-1:0]   gst_wdata,
  output logic                st_idle
);

  logic [PAW-1:0] ptr;
  logic           rd_pending;
  st_entry_t      hold, ent;
  logic           hold_v, ent_v, issue;

  assign ent   = rd_pending ? am_rdata : hold;
  assign ent_v = rd_pending | hold_v;
  assign issue = ent_v && !fifo_empty;

  assign fifo_pop  = issue;
  assign lsp_we    = issue && !ent.global_sel;
  assign lsp_waddr = ent.addr[LOCAL_AW-1:0];
  assign lsp_wdata = fifo_rdata;
  assign gst_req   = issue && ent.global_sel;
  assign gst_addr  = ent.addr;
  assign gst_wdata = fifo_rdata;
  assign st_idle   = fifo_empty;

  assign am_re    = !start && (!ent_v || issue);
  assign am_raddr = ptr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr        <= '0;
      rd_pending <= 1'b0;
      hold_v     <= 1'b0;
      hold       <= '0;
    end else if (start) begin
      ptr        <= '0;
      rd_pending <= 1'b0;
      hold_v     <= 1'b0;
    end else begin
      rd_pending <= am_re;
      if (am_re) ptr <= ptr + 1'b1;
      if (issue)           hold_v <= 1'b0;
      else if (rd_pending) begin
        hold   <= am_rdata;
        hold_v <= 1'b1;
      end
    end
  end

endmodule
