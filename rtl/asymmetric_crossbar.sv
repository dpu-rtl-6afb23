// asymmetric_crossbar: connects the CUs to the banks of the global scratchpad.
//
// Asymmetric, as in the paper: every CU can load from any bank, but CU i can
// store only to bank i. For each bank, a round-robin arbiter picks one of the
// CUs requesting a load from it, while the store of the bank's own CU has the
// highest priority (it does not take part in the round robin, so stores are
// never delayed); a 2:1 mux then drives the single bank port with the store or
// the granted load. A load that loses waits (the CU keeps requesting).
// The host port reaches every bank directly and overrides the CUs; it is
// meant for use while the CUs are idle (programming and reading results).
//
// Timing: ld_gnt is combinational in the request cycle; the loaded word is on
// ld_rdata of that CU in the next cycle (and host_rdata one cycle after a host
// read). Bank numbers are the low $clog2(NCU) bits of ld_bank.
module asymmetric_crossbar
  import dpu_pkg::*;
#(
  parameter int unsigned NCU = NUM_CU,
  localparam int unsigned BW = (NCU > 1) ? $clog2(NCU) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // CU side
  input  logic [NCU-1:0]                ld_req,
  input  logic [NCU-1:0][5:0]           ld_bank,
  input  logic [NCU-1:0][GBANK_AW-1:0]  ld_addr,
  output logic [NCU-1:0]                ld_gnt,
  output logic [NCU-1:0][WORD_W-1:0]    ld_rdata,
  input  logic [NCU-1:0]                st_req,
  input  logic [NCU-1:0][GBANK_AW-1:0]  st_addr,
  input  logic [NCU-1:0][WORD_W-1:0]    st_wdata,
  // host side
  input  logic                          host_we,
  input  logic                          host_re,
  input  logic [BW-1:0]                 host_bank,
  input  logic [GBANK_AW-1:0]           host_addr,
  input  logic [WORD_W-1:0]             host_wdata,
  output logic [WORD_W-1:0]             host_rdata,
  // bank side
  output logic [NCU-1:0]                bk_we,
  output logic [NCU-1:0]                bk_re,
  output logic [NCU-1:0][GBANK_AW-1:0]  bk_addr,
  output logic [NCU-1:0][WORD_W-1:0]    bk_wdata,
  input  logic [NCU-1:0][WORD_W-1:0]    bk_rdata
);

  logic                         host_act;
  logic [NCU-1:0][NCU-1:0]      bank_req;   // [bank][cu]
  logic [NCU-1:0][NCU-1:0]      bank_gnt;   // [bank][cu]
  logic [NCU-1:0][BW-1:0]       bank_gidx;
  logic [NCU-1:0]               bank_gany;

  assign host_act = host_we | host_re;

  // one request matrix row per bank (a generate loop per bank keeps each
  // procedural loop at NCU iterations)
  for (genvar b = 0; b < int'(NCU); b++) begin : g_req
    always_comb begin
      for (int c = 0; c < int'(NCU); c++)
        bank_req[b][c] = ld_req[c] && (BW'(ld_bank[c]) == BW'(b));
    end
  end

  for (genvar b = 0; b < int'(NCU); b++) begin : g_bank
    logic host_here;
    assign host_here = host_act && (host_bank == BW'(b));

    rr_arbiter #(.N(NCU)) u_arb (
      .clk(clk), .rst_n(rst_n), .en(!st_req[b] && !host_act),
      .req(bank_req[b]), .gnt(bank_gnt[b]), .gnt_idx(bank_gidx[b]), .gnt_any(bank_gany[b]));

    // store-priority mux in front of the bank
    always_comb begin
      if (host_here) begin
        bk_we[b]    = host_we;
        bk_re[b]    = host_re;
        bk_addr[b]  = host_addr;
        bk_wdata[b] = host_wdata;
      end else if (st_req[b] && !host_act) begin
        bk_we[b]    = 1'b1;
        bk_re[b]    = 1'b0;
        bk_addr[b]  = st_addr[b];
        bk_wdata[b] = st_wdata[b];
      end else begin
        bk_we[b]    = 1'b0;
        bk_re[b]    = bank_gany[b];
        bk_addr[b]  = ld_addr[bank_gidx[b]];
        bk_wdata[b] = st_wdata[b];
      end
    end
  end

  // grants back to the CUs and the bank each CU reads from
  logic [NCU-1:0][BW-1:0] rsp_bank;
  logic [BW-1:0]          host_bank_q;

  for (genvar c = 0; c < int'(NCU); c++) begin : g_gnt
    always_comb begin
      ld_gnt[c] = 1'b0;
      for (int b = 0; b < int'(NCU); b++) ld_gnt[c] |= bank_gnt[b][c];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_bank    <= '0;
      host_bank_q <= '0;
    end else begin
      for (int c = 0; c < int'(NCU); c++)
        if (ld_gnt[c]) rsp_bank[c] <= BW'(ld_bank[c]);
      if (host_re) host_bank_q <= host_bank;
    end
  end

  always_comb begin
    for (int c = 0; c < int'(NCU); c++) ld_rdata[c] = bk_rdata[rsp_bank[c]];
  end
  assign host_rdata = bk_rdata[host_bank_q];

endmodule
