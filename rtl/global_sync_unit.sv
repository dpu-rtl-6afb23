// global_sync_unit: single-cycle barrier for all compute units.
//
// Every CU raises arrive[i] while it waits at a global barrier instruction
// with its stores drained (a CU that has finished its program or is inactive
// also holds arrive high). An AND tree, here eight groups of eight inputs
// merged by an eight-input AND, finds the cycle in which all have arrived and
// raises go for every CU in that same cycle; each CU then leaves its barrier at
// the clock edge. The path from the CUs through the tree and back is purely
// combinational, as in the paper. The grouping of the tree is this design's.
module global_sync_unit #(
  parameter int unsigned NCU = 64
) (
  input  logic [NCU-1:0] arrive,
  output logic           go
);

  localparam int unsigned GRP  = 8;
  localparam int unsigned NGRP = (NCU + GRP - 1) / GRP;

  logic [NGRP-1:0] grp_all;

  always_comb begin
    for (int g = 0; g < int'(NGRP); g++) begin
      grp_all[g] = 1'b1;
      for (int j = 0; j < int'(GRP); j++) begin
        if (g * int'(GRP) + j < int'(NCU)) grp_all[g] &= arrive[g * GRP + j];
      end
    end
  end

  assign go = &grp_all;

endmodule
