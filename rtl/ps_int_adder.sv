// ps_int_adder: precision-scalable integer adder, 1x32b, 2x16b or 4x8b.
//
// Built as in the paper's sub-word-parallel arithmetic: four 8b adder slices
// chained by a carry mux. At a lane boundary the mux cuts the chain and feeds
// that lane's own carry-in instead, so one 32b adder serves as two independent
// 16b adders or four 8b adders. Lanes are numbered by their lowest byte:
// lane 0 always starts at byte 0, in 16b mode lane 2 starts at byte 2, in 8b
// mode every byte starts a lane. cin[i] is the carry into the lane starting at
// byte i, cout[i] the carry out of byte i (meaningful for the top byte of a
// lane). Purely combinational.
module ps_int_adder
  import dpu_pkg::*;
(
  input  prec_e       prec,
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic [3:0]  cin,
  output logic [31:0] sum,
  output logic [3:0]  cout
);

  logic [3:0] lane_start;
  logic [3:0] c_in;

  always_comb begin
    lane_start = 4'b0001;
    if (prec != PREC_32) lane_start[2] = 1'b1;
    if (prec == PREC_8)  lane_start    = 4'b1111;
  end

  for (genvar i = 0; i < 4; i++) begin : g_slice
    if (i == 0) begin : g_first
      assign c_in[0] = cin[0];
    end else begin : g_chain
      // carry-chain mux between the slices
      assign c_in[i] = lane_start[i] ? cin[i] : cout[i-1];
    end
    assign {cout[i], sum[8*i +: 8]} = {1'b0, a[8*i +: 8]} + {1'b0, b[8*i +: 8]} + 9'(c_in[i]);
  end

endmodule
