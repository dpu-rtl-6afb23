// load_streaming_unit: prefetches the operands of the PE.
//
// The load address memory holds, in program order, one entry per load: local
// or global scratchpad, global bank, word address and destination register.
// The unit walks through it and issues one load per cycle, to the local
// scratchpad (always served) or to a global bank through the crossbar (issued
// in the cycle the crossbar grants the request). The word returns one cycle
// after issue and is pushed, with its destination register, onto the load
// FIFO towards the PE. Loads are issued only while the FIFO has room for them
// (counting the one in flight) and while the load stream length register is
// non-zero: the PE programs it after every barrier, so prefetching never
// crosses a barrier. ld_rem_zero tells the PE that the stream is exhausted.
//
// Timing: the address memory has a one-cycle read; the unit reads the next
// entry whenever its entry slot will be free, so back-to-back loads run at one
// per cycle. start rewinds the address pointer.
// From the paper: the address memory, the FIFO, the stream length register
// and the stop at barriers. This design's choices: entry layout, one load per
// cycle and the in-order single-issue pipeline.
module load_streaming_unit
  import dpu_pkg::*;
#(
  parameter int unsigned LDMEM_D    = LDMEM_DEPTH,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned PAW = $clog2(LDMEM_D),
  localparam int unsigned CW  = $clog2(FIFO_DEPTH + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  // load address memory read port
  output logic                am_re,
  output logic [PAW-1:0]      am_raddr,
  input  ld_entry_t           am_rdata,
  // stream length register, written by the PE
  input  logic                ldsl_we,
  input  logic [14:0]         ldsl_val,
  output logic                ld_rem_zero,
  // local scratchpad read port (data one cycle after re)
  output logic                lsp_re,
  output logic [LOCAL_AW-1:0] lsp_raddr,
  input  logic [WORD_W-1:0]   lsp_rdata,
  // global scratchpad load port through the crossbar
  output logic                gld_req,
  output logic [5:0]          gld_bank,
  output logic [GBANK_AW-1:0] gld_addr,
  input  logic                gld_gnt,
  input  logic [WORD_W-1:0]   gld_rdata,
  // load FIFO push side
  input  logic [CW-1:0]       fifo_count,
  output logic                fifo_push,
  output ld_data_t            fifo_wdata
);

  logic [PAW-1:0]  ptr;
  logic            rd_pending;
  ld_entry_t       hold;
  logic            hold_v;
  ld_entry_t       ent;
  logic            ent_v;
  logic [14:0]     rem;
  logic            space, go, issue;
  logic            s2_v, s2_global;
  logic [REG_AW-1:0] s2_dst;

  assign ent   = rd_pending ? am_rdata : hold;
  assign ent_v = rd_pending | hold_v;
  assign space = (32'(fifo_count) + 32'(s2_v)) < FIFO_DEPTH;
  assign go    = ent_v && (rem != 0) && space;
  assign issue = go && (!ent.global_sel || gld_gnt);

  assign gld_req  = go && ent.global_sel;
  assign gld_bank = ent.bank;
  assign gld_addr = ent.addr;
  assign lsp_re    = go && !ent.global_sel;
  assign lsp_raddr = ent.addr[LOCAL_AW-1:0];

  assign am_re    = !start && (!ent_v || issue);
  assign am_raddr = ptr;

  assign ld_rem_zero = (rem == 0);

  assign fifo_push  = s2_v;
  assign fifo_wdata = '{dst: s2_dst, data: s2_global ? gld_rdata : lsp_rdata};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr        <= '0;
      rd_pending <= 1'b0;
      hold_v     <= 1'b0;
      hold       <= '0;
      rem        <= '0;
      s2_v       <= 1'b0;
      s2_global  <= 1'b0;
      s2_dst     <= '0;
    end else if (start) begin
      ptr        <= '0;
      rd_pending <= 1'b0;
      hold_v     <= 1'b0;
      rem        <= '0;
      s2_v       <= 1'b0;
    end else begin
      rd_pending <= am_re;
      if (am_re) ptr <= ptr + 1'b1;
      if (issue)           hold_v <= 1'b0;
      else if (rd_pending) begin
        hold   <= am_rdata;
        hold_v <= 1'b1;
      end
      if (ldsl_we)    rem <= ldsl_val;
      else if (issue) rem <= rem - 1'b1;
      s2_v      <= issue;
      s2_global <= ent.global_sel;
      s2_dst    <= ent.dst;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) ldsl_we |-> rem == 0)
    else $error("load_streaming_unit: stream length set while a stream is running");

endmodule
