// dpu_top: the DAG processing unit.
//
// NCU compute units (64 on the chip) each run their own subgraph of a
// superlayer from decoupled load, processing and store streams. They share a
// global scratchpad of NCU banks of 4KB through an asymmetric crossbar (loads
// from any bank, round-robin arbitrated per bank; stores only to the CU's own
// bank, with priority), and synchronise at global barriers through the global
// sync unit, which releases all CUs in the cycle the last one arrives.
//
// Host interface (this design's own; the chip is programmed over a slow I/O
// link whose protocol is not part of the RTL): while the DPU is idle the host
// writes a CU's instruction, load-address or store-address memory, local
// scratchpad or program length (host_sel, host_cu, host_addr, host_wdata with
// host_we), or writes/reads a word of the global scratchpad (HSEL_GLOBAL,
// host_cu = bank; host_rdata one cycle after host_re). A start pulse restarts
// every CU from instruction 0; done is high when every CU has run its
// program length of instructions and drained its stores. CUs with program
// length 0 are inactive: they count as arrived at every barrier.
module dpu_top
  import dpu_pkg::*;
#(
  parameter int unsigned NCU        = NUM_CU,
  parameter int unsigned IMEM_D     = IMEM_DEPTH,
  parameter int unsigned LDMEM_D    = LDMEM_DEPTH,
  parameter int unsigned STMEM_D    = STMEM_DEPTH,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned BW = (NCU > 1) ? $clog2(NCU) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              done,
  input  logic              host_we,
  input  logic              host_re,
  input  host_sel_e         host_sel,
  input  logic [BW-1:0]     host_cu,
  input  logic [15:0]       host_addr,
  input  logic [31:0]       host_wdata,
  output logic [31:0]       host_rdata
);

  logic [NCU-1:0]                gld_req, gld_gnt, gst_req, arrive, cu_done;
  logic [NCU-1:0][5:0]           gld_bank;
  logic [NCU-1:0][GBANK_AW-1:0]  gld_addr, gst_addr;
  logic [NCU-1:0][WORD_W-1:0]    gld_rdata, gst_wdata;
  logic                          go;

  for (genvar c = 0; c < int'(NCU); c++) begin : g_cu
    compute_unit #(.IMEM_D(IMEM_D), .LDMEM_D(LDMEM_D), .STMEM_D(STMEM_D), .FIFO_DEPTH(FIFO_DEPTH)) u_cu (
      .clk(clk), .rst_n(rst_n), .start(start),
      .host_we(host_we && host_cu == BW'(c) && host_sel != HSEL_GLOBAL),
      .host_sel(host_sel), .host_addr(host_addr), .host_wdata(host_wdata),
      .gld_req(gld_req[c]), .gld_bank(gld_bank[c]), .gld_addr(gld_addr[c]),
      .gld_gnt(gld_gnt[c]), .gld_rdata(gld_rdata[c]),
      .gst_req(gst_req[c]), .gst_addr(gst_addr[c]), .gst_wdata(gst_wdata[c]),
      .arrive(arrive[c]), .go(go), .done(cu_done[c]));
  end

  global_sync_unit #(.NCU(NCU)) u_sync (.arrive(arrive), .go(go));

  logic [NCU-1:0]               bk_we, bk_re;
  logic [NCU-1:0][GBANK_AW-1:0] bk_addr;
  logic [NCU-1:0][WORD_W-1:0]   bk_wdata, bk_rdata;

  asymmetric_crossbar #(.NCU(NCU)) u_xbar (
    .clk(clk), .rst_n(rst_n),
    .ld_req(gld_req), .ld_bank(gld_bank), .ld_addr(gld_addr), .ld_gnt(gld_gnt), .ld_rdata(gld_rdata),
    .st_req(gst_req), .st_addr(gst_addr), .st_wdata(gst_wdata),
    .host_we(host_we && host_sel == HSEL_GLOBAL), .host_re(host_re && host_sel == HSEL_GLOBAL),
    .host_bank(host_cu), .host_addr(host_addr[GBANK_AW-1:0]), .host_wdata(host_wdata),
    .host_rdata(host_rdata),
    .bk_we(bk_we), .bk_re(bk_re), .bk_addr(bk_addr), .bk_wdata(bk_wdata), .bk_rdata(bk_rdata));

  global_scratchpad #(.NBANKS(NCU), .BANK_WORDS(GBANK_WORDS)) u_gsp (
    .clk(clk), .we(bk_we), .re(bk_re), .addr(bk_addr), .wdata(bk_wdata), .rdata(bk_rdata));

  assign done = &cu_done;

endmodule
