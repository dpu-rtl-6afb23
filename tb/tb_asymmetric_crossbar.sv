// tb_asymmetric_crossbar: 8 CUs issue random loads to random banks (held
// until granted) and random stores to their own bank. The banks are modelled
// in the testbench. Checks: one access per bank per cycle, a store always
// reaches its own bank at once with its address and data, no load is granted
// on a bank that stores, at most one grant per bank, the loaded word returned
// one cycle after the grant equals the bank content (including words stored
// earlier), no load waits more than 4*NCU cycles, and host writes and reads
// reach the addressed bank.
module tb_asymmetric_crossbar;
  import dpu_pkg::*;
  localparam int NCU = 8;
  logic clk = 0, rst_n = 0;
  logic [NCU-1:0] ld_req, ld_gnt, st_req, bk_we, bk_re;
  logic [NCU-1:0][5:0] ld_bank;
  logic [NCU-1:0][9:0] ld_addr, st_addr, bk_addr;
  logic [NCU-1:0][31:0] ld_rdata, st_wdata, bk_wdata, bk_rdata;
  logic host_we, host_re; logic [2:0] host_bank; logic [9:0] host_addr; logic [31:0] host_wdata, host_rdata;
  logic [31:0] mem [NCU][1024];
  int checks = 0, failures = 0, conflicts = 0, store_blocks = 0;
  asymmetric_crossbar #(.NCU(NCU)) dut (.*);
  always #5 clk = ~clk;

  // bank models
  always_ff @(posedge clk) begin
    for (int b = 0; b < NCU; b++) begin
      if (bk_we[b]) mem[b][bk_addr[b]] <= bk_wdata[b];
      if (bk_re[b]) bk_rdata[b] <= mem[b][bk_addr[b]];
    end
  end

  initial begin repeat (50000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int waitc [NCU];
    logic [31:0] exp_data [NCU];
    bit exp_v [NCU];
    for (int b = 0; b < NCU; b++) for (int a = 0; a < 1024; a++) mem[b][a] = {16'(b), 16'(a)};
    ld_req = 0; st_req = 0; ld_bank = 0; ld_addr = 0; st_addr = 0; st_wdata = 0;
    host_we = 0; host_re = 0; host_bank = 0; host_addr = 0; host_wdata = 0;
    for (int c = 0; c < NCU; c++) begin waitc[c] = 0; exp_v[c] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      // check data of last cycle's grants
      for (int c = 0; c < NCU; c++) if (exp_v[c]) begin
        checks++;
        if (ld_rdata[c] !== exp_data[c]) begin failures++; $display("FAIL cu %0d data %h exp %h", c, ld_rdata[c], exp_data[c]); end
      end
      for (int c = 0; c < NCU; c++) begin
        if (!ld_req[c] || ld_gnt[c]) begin
          ld_req[c] = $urandom_range(0, 3) != 0;
          ld_bank[c] = 6'($urandom_range(0, 2));     // hot banks 0..2 make conflicts
          ld_addr[c] = 10'($urandom_range(0, 15));
        end
        st_req[c] = $urandom_range(0, 5) == 0;
        st_addr[c] = 10'($urandom_range(0, 15));
        st_wdata[c] = $urandom;
      end
      #1;
      for (int b = 0; b < NCU; b++) begin
        int ng, nreq;
        ng = 0; nreq = 0;
        for (int c = 0; c < NCU; c++) begin
          if (ld_req[c] && ld_bank[c] == b) nreq++;
          if (ld_gnt[c] && ld_bank[c] == b) ng++;
        end
        if (nreq > 1) conflicts++;
        if (st_req[b] && nreq > 0) store_blocks++;
        checks++;
        if ((bk_we[b] && bk_re[b]) || ng > 1 || (st_req[b] && (ng != 0 || !bk_we[b] || bk_addr[b] != st_addr[b] || bk_wdata[b] != st_wdata[b])) ||
            (!st_req[b] && nreq > 0 && ng != 1)) begin
          failures++; $display("FAIL bank %0d: we=%b re=%b grants=%0d reqs=%0d st=%b", b, bk_we[b], bk_re[b], ng, nreq, st_req[b]);
        end
      end
      for (int c = 0; c < NCU; c++) begin
        exp_v[c] = ld_gnt[c];
        if (ld_gnt[c]) begin
          exp_data[c] = mem[ld_bank[c]][ld_addr[c]];
          waitc[c] = 0;
        end else if (ld_req[c]) begin
          waitc[c]++;
          checks++;
          if (waitc[c] > 4 * NCU) begin failures++; $display("FAIL cu %0d starved", c); end
        end
      end
      @(posedge clk);
    end
    // host access
    @(negedge clk);
    ld_req = 0; st_req = 0; exp_v = '{default: 0};
    host_we = 1; host_bank = 3'd5; host_addr = 10'd77; host_wdata = 32'hCAFE_F00D;
    @(negedge clk);
    host_we = 0; host_re = 1;
    @(negedge clk);
    host_re = 0;
    checks++;
    if (host_rdata !== 32'hCAFE_F00D || mem[5][77] !== 32'hCAFE_F00D) begin failures++; $display("FAIL host access"); end
    checks++;
    if (conflicts == 0 || store_blocks == 0) begin failures++; $display("FAIL no conflicts exercised"); end
    $display("bank conflicts %0d, loads blocked by stores %0d", conflicts, store_blocks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
