// rr_arbiter: round-robin arbiter over N requesters.
//
// Grants (one-hot, combinational) the first requester found after the one
// granted last, searching upward and wrapping around, so every requester is
// served within N grants while it keeps requesting. The pointer moves at the
// clock edge when en is high and something was granted; with en low (for
// example while a store owns the bank) gnt is zero and the pointer stays.
// The arbitration scheme is the paper's; the pointer reset value is not.
module rr_arbiter #(
  parameter int unsigned N = 64,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic [N-1:0]  req,
  output logic [N-1:0]  gnt,
  output logic [IW-1:0] gnt_idx,
  output logic          gnt_any
);

  logic [IW-1:0] last;

  always_comb begin
    logic [IW-1:0] idx;
    gnt     = '0;
    gnt_idx = '0;
    gnt_any = 1'b0;
    idx     = '0;
    for (int i = 1; i <= int'(N); i++) begin
      idx = IW'((int'(last) + i) % N);
      if (en && !gnt_any && req[idx]) begin
        gnt_any  = 1'b1;
        gnt_idx  = idx;
        gnt[idx] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       last <= IW'(N - 1);
    else if (gnt_any) last <= gnt_idx;
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt))
    else $error("rr_arbiter: more than one grant");

endmodule
