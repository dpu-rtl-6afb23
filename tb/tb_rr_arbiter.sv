// tb_rr_arbiter: random request patterns on an 8-input arbiter. Checks that
// exactly the first requester after the last grant (cyclically) is granted,
// that nothing is granted while en is low, and that a requester held high is
// served within N grants.
module tb_rr_arbiter;
  localparam int N = 8;
  logic clk = 0, rst_n = 0, en, gnt_any; logic [N-1:0] req, gnt; logic [2:0] gnt_idx;
  int last = N - 1;
  int checks = 0, failures = 0;
  rr_arbiter #(.N(N)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int wait0;
    en = 0; req = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    wait0 = 0;
    for (int t = 0; t < 4000; t++) begin
      int e;
      @(negedge clk);
      req = N'($urandom) | N'(1);     // requester 0 always requests
      en = ($urandom_range(0, 4) != 0);
      #1;
      e = -1;
      if (en) for (int i = 1; i <= N; i++) if (req[(last + i) % N]) begin e = (last + i) % N; break; end
      checks++;
      if (e < 0) begin
        if (gnt !== 0 || gnt_any) begin failures++; $display("FAIL grant while disabled"); end
      end else if (gnt !== N'(1) << e || int'(gnt_idx) != e || !gnt_any) begin
        failures++; $display("FAIL gnt=%b exp idx %0d", gnt, e);
      end
      if (e >= 0) last = e;
      if (en) begin
        if (gnt[0]) wait0 = 0; else wait0++;
        checks++;
        if (wait0 > N) begin failures++; $display("FAIL starvation"); end
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
