// ps_barrel_shifter: precision-scalable left barrel shifter, 1x32b, 2x16b or
// 4x8b.
//
// A logarithmic shifter whose stages shift by 1, 2, 4 and 8 bits inside two
// 16b halves; bits that would cross from the lower half into the upper half
// (and, inside a half, from one byte into the next) pass through a gate that
// forces zero when the two are different lanes. A last 2:1 32b mux shifts by 16
// and is used only in 32b mode (shift_val[4]). Every lane is shifted by its own
// amount: sh[i] belongs to the lane whose lowest byte is i (same indexing as
// ps_prio_enc). Zeroes are shifted in at the bottom of every lane.
// Combinational.
module ps_barrel_shifter
  import dpu_pkg::*;
(
  input  prec_e           prec,
  input  logic [31:0]     x,
  input  logic [3:0][4:0] sh,
  output logic [31:0]     y
);

  // lane base byte of every byte and shift amount seen by every byte
  function automatic int unsigned lane_base(input int unsigned byte_i, input prec_e p);
    unique case (p)
      PREC_32: return 0;
      PREC_16: return (byte_i >= 2) ? 2 : 0;
      default: return byte_i;
    endcase
  endfunction

  always_comb begin
    logic [31:0] s;
    s = x;
    for (int st = 0; st < 5; st++) begin
      logic [31:0] n;
      for (int j = 0; j < 32; j++) begin
        int unsigned lb;
        int src;
        lb  = 8 * lane_base(j / 8, prec);
        src = j - (1 << st);
        if (sh[lb/8][st]) n[j] = (src >= int'(lb)) ? s[src] : 1'b0;
        else              n[j] = s[j];
      end
      s = n;
    end
    y = s;
  end

endmodule
