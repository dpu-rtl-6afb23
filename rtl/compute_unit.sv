// compute_unit: one of the DPU's asynchronous compute units (CUs).
//
// A CU executes one subgraph per superlayer from three decoupled instruction
// streams: the load streaming unit walks the load address memory and fills
// the load FIFO, the PE runs the processing stream from the instruction
// memory, and the store streaming unit drains the store FIFO to the addresses
// in the store address memory. Loads and stores go to the CU's 2KB local
// scratchpad or, through the crossbar, to the global scratchpad (loads from
// any bank, stores only to the CU's own bank). A stalled CU does not stall
// the others; CUs meet only at global barriers via the global sync unit.
//
// Memories (all one-cycle synchronous reads): instruction memory IMEM_D x 21b,
// load address memory LDMEM_D x 22b, store address memory STMEM_D x 11b, local
// scratchpad 512 x 32b with one read port (load unit) and one write port
// (store unit). The host writes them through a simple write port while the
// CU is idle (host_sel picks the memory, or HSEL_PLEN the program length).
// Global ports: gld_* is a load request held until gld_gnt, data on gld_rdata
// one cycle after the grant; gst_* is a store, always accepted. arrive/go
// connect to the global sync unit; done is high when the program has ended
// and all stores are written.
// From the paper: the components, the 2KB local scratchpad and the
// connections. This design's choices: memory depths (1024 entries each, which
// adds up with the scratchpads to the chip's 864kB of SRAM), FIFO depth and
// the host port.
module compute_unit
  import dpu_pkg::*;
#(
  parameter int unsigned IMEM_D     = IMEM_DEPTH,
  parameter int unsigned LDMEM_D    = LDMEM_DEPTH,
  parameter int unsigned STMEM_D    = STMEM_DEPTH,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  // host programming port
  input  logic                host_we,
  input  host_sel_e           host_sel,
  input  logic [15:0]         host_addr,
  input  logic [31:0]         host_wdata,
  // global scratchpad ports
  output logic                gld_req,
  output logic [5:0]          gld_bank,
  output logic [GBANK_AW-1:0] gld_addr,
  input  logic                gld_gnt,
  input  logic [WORD_W-1:0]   gld_rdata,
  output logic                gst_req,
  output logic [GBANK_AW-1:0] gst_addr,
  output logic [WORD_W-1:0]   gst_wdata,
  // global sync
  output logic                arrive,
  input  logic                go,
  output logic                done
);

  localparam int unsigned IAW = $clog2(IMEM_D);
  localparam int unsigned LAW = $clog2(LDMEM_D);
  localparam int unsigned SAW = $clog2(STMEM_D);
  localparam int unsigned CW  = $clog2(FIFO_DEPTH + 1);

  // ---------------------------------------------------------------- program length
  logic [IAW:0] plen;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                plen <= '0;
    else if (host_we && host_sel == HSEL_PLEN) plen <= (IAW+1)'(host_wdata);
  end

  // ---------------------------------------------------------------- memories
  logic           im_re;
  logic [IAW-1:0] im_raddr;
  instr_t         im_rdata;
  sram #(.DEPTH(IMEM_D), .WIDTH(INSTR_W)) u_imem (
    .clk(clk), .we(host_we && host_sel == HSEL_IMEM), .waddr(host_addr[IAW-1:0]),
    .wdata(host_wdata[INSTR_W-1:0]), .re(im_re), .raddr(im_raddr), .rdata(im_rdata));

  logic           lam_re;
  logic [LAW-1:0] lam_raddr;
  ld_entry_t      lam_rdata;
  sram #(.DEPTH(LDMEM_D), .WIDTH($bits(ld_entry_t))) u_ldmem (
    .clk(clk), .we(host_we && host_sel == HSEL_LDMEM), .waddr(host_addr[LAW-1:0]),
    .wdata(host_wdata[$bits(ld_entry_t)-1:0]), .re(lam_re), .raddr(lam_raddr), .rdata(lam_rdata));

  logic           sam_re;
  logic [SAW-1:0] sam_raddr;
  st_entry_t      sam_rdata;
  sram #(.DEPTH(STMEM_D), .WIDTH($bits(st_entry_t))) u_stmem (
    .clk(clk), .we(host_we && host_sel == HSEL_STMEM), .waddr(host_addr[SAW-1:0]),
    .wdata(host_wdata[$bits(st_entry_t)-1:0]), .re(sam_re), .raddr(sam_raddr), .rdata(sam_rdata));

  logic                lsp_re, lsp_we, ssu_lsp_we;
  logic [LOCAL_AW-1:0] lsp_raddr, lsp_waddr, ssu_lsp_waddr;
  logic [WORD_W-1:0]   lsp_rdata, lsp_wdata, ssu_lsp_wdata;
  logic                host_lsp;
  assign host_lsp  = host_we && host_sel == HSEL_LOCAL;
  assign lsp_we    = host_lsp || ssu_lsp_we;
  assign lsp_waddr = host_lsp ? host_addr[LOCAL_AW-1:0] : ssu_lsp_waddr;
  assign lsp_wdata = host_lsp ? host_wdata : ssu_lsp_wdata;
  sram #(.DEPTH(LOCAL_WORDS), .WIDTH(WORD_W)) u_local (
    .clk(clk), .we(lsp_we), .waddr(lsp_waddr), .wdata(lsp_wdata),
    .re(lsp_re), .raddr(lsp_raddr), .rdata(lsp_rdata));

  // ---------------------------------------------------------------- FIFOs
  logic          ldf_push;
  ld_data_t      ldf_wdata, ldf_data0, ldf_data1;
  logic [1:0]    ldf_pop_cnt;
  logic [CW-1:0] ldf_count;
  logic          ldf_full, ldf_empty;
  stream_fifo #(.DEPTH(FIFO_DEPTH), .WIDTH($bits(ld_data_t))) u_ldfifo (
    .clk(clk), .rst_n(rst_n), .flush(start), .push(ldf_push), .wr_data(ldf_wdata),
    .pop_cnt(ldf_pop_cnt), .rd_data0(ldf_data0), .rd_data1(ldf_data1),
    .count(ldf_count), .full(ldf_full), .empty(ldf_empty));

  logic              stf_push, stf_pop, stf_full, stf_empty;
  logic [WORD_W-1:0] stf_wdata, stf_data0, stf_data1;
  logic [CW-1:0]     stf_count;
  stream_fifo #(.DEPTH(FIFO_DEPTH), .WIDTH(WORD_W)) u_stfifo (
    .clk(clk), .rst_n(rst_n), .flush(start), .push(stf_push), .wr_data(stf_wdata),
    .pop_cnt({1'b0, stf_pop}), .rd_data0(stf_data0), .rd_data1(stf_data1),
    .count(stf_count), .full(stf_full), .empty(stf_empty));

  // ---------------------------------------------------------------- streaming units and PE
  logic        ldsl_we, ld_rem_zero, st_idle, pe_done;
  logic [14:0] ldsl_val;

  load_streaming_unit #(.LDMEM_D(LDMEM_D), .FIFO_DEPTH(FIFO_DEPTH)) u_lsu (
    .clk(clk), .rst_n(rst_n), .start(start),
    .am_re(lam_re), .am_raddr(lam_raddr), .am_rdata(lam_rdata),
    .ldsl_we(ldsl_we), .ldsl_val(ldsl_val), .ld_rem_zero(ld_rem_zero),
    .lsp_re(lsp_re), .lsp_raddr(lsp_raddr), .lsp_rdata(lsp_rdata),
    .gld_req(gld_req), .gld_bank(gld_bank), .gld_addr(gld_addr), .gld_gnt(gld_gnt), .gld_rdata(gld_rdata),
    .fifo_count(ldf_count), .fifo_push(ldf_push), .fifo_wdata(ldf_wdata));

  store_streaming_unit #(.STMEM_D(STMEM_D)) u_ssu (
    .clk(clk), .rst_n(rst_n), .start(start),
    .am_re(sam_re), .am_raddr(sam_raddr), .am_rdata(sam_rdata),
    .fifo_empty(stf_empty), .fifo_rdata(stf_data0), .fifo_pop(stf_pop),
    .lsp_we(ssu_lsp_we), .lsp_waddr(ssu_lsp_waddr), .lsp_wdata(ssu_lsp_wdata),
    .gst_req(gst_req), .gst_addr(gst_addr), .gst_wdata(gst_wdata), .st_idle(st_idle));

  pe #(.IMEM_D(IMEM_D), .FIFO_DEPTH(FIFO_DEPTH)) u_pe (
    .clk(clk), .rst_n(rst_n), .start(start), .plen(plen),
    .im_re(im_re), .im_raddr(im_raddr), .im_rdata(im_rdata),
    .ldf_count(ldf_count), .ldf_data0(ldf_data0), .ldf_data1(ldf_data1), .ldf_pop_cnt(ldf_pop_cnt),
    .stf_full(stf_full), .stf_push(stf_push), .stf_wdata(stf_wdata),
    .st_idle(st_idle), .ld_rem_zero(ld_rem_zero), .ldsl_we(ldsl_we), .ldsl_val(ldsl_val),
    .arrive(arrive), .go(go), .done(pe_done));

  assign done = pe_done && st_idle;

  assert property (@(posedge clk) disable iff (!rst_n) !(host_lsp && ssu_lsp_we))
    else $error("compute_unit: host write to the local scratchpad while the CU stores");

endmodule
