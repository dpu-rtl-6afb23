// tb_global_sync_unit: go must be high exactly when all 64 arrive inputs are
// high; tested with all ones, every single-zero pattern and random patterns.
module tb_global_sync_unit;
  logic [63:0] arrive; logic go;
  int checks = 0, failures = 0;
  global_sync_unit #(.NCU(64)) dut (.arrive(arrive), .go(go));
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    arrive = '1; #1; checks++; if (go !== 1'b1) begin failures++; $display("FAIL all ones"); end
    for (int i = 0; i < 64; i++) begin
      arrive = ~(64'h1 << i); #1; checks++;
      if (go !== 1'b0) begin failures++; $display("FAIL missing %0d", i); end
    end
    for (int t = 0; t < 500; t++) begin
      arrive = {$urandom, $urandom} | {$urandom, $urandom}; #1; checks++;
      if (go !== (&arrive)) begin failures++; $display("FAIL random"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
