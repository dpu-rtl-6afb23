// posit_decoder: decodes one 32b word holding 1x32b, 2x16b or 4x8b custom
// posits into sign, regime, exponent and fraction per lane.
//
// Format of an L-bit custom posit (sign-magnitude): sign bit, a regime of
// r >= 2 bits (a run of equal bits ended by the opposite bit or by the end of
// the word), then min(es, L-1-r) exponent bits and the fraction in the rest.
// value = (-1)^sign * 1.frac * 2^exp * 2^(regime * 2^es), with regime = m-1
// for a run of m ones and -m for a run of m zeros. es is 6, 4 and 2 for 32b,
// 16b and 8b. A lane whose bits below the sign are all zero is zero.
//
// Hardware, as in the paper: the body of each lane (the bits below the sign)
// is inverted if it starts with a one, a priority encoder finds the run length
// m, and a barrel shifter moves the exponent and fraction to the top of the
// lane. Both are the precision-scalable blocks, so one decoder serves all
// three precisions. The zero appended below the body acts as the run
// terminator when a run of ones fills the whole word.
//
// Outputs are indexed by the lane's lowest byte (0 for 32b, 0/2 for 16b,
// 0..3 for 8b): sign, zero, regime k (signed), and ef, which holds in every
// lane the exponent bits (top es bits of the lane) followed by the fraction,
// left-aligned, missing bits zero. Combinational.
module posit_decoder
  import dpu_pkg::*;
(
  input  prec_e                  prec,
  input  logic [31:0]            x,
  output logic [3:0]             sign,
  output logic [3:0]             zero,
  output logic [3:0][5:0]        k,      // two's complement regime value
  output logic [31:0]            ef
);

  // lane boundary bits: bit j is the lowest bit of a lane
  logic [31:0] lane_lsb;
  always_comb begin
    lane_lsb = 32'h0000_0001;
    if (prec != PREC_32) lane_lsb[16] = 1'b1;
    if (prec == PREC_8) begin
      lane_lsb[8]  = 1'b1;
      lane_lsb[24] = 1'b1;
    end
  end

  // body: lane shifted left by one inside the lane (sign dropped)
  logic [31:0] body, inv;
  always_comb begin
    for (int j = 0; j < 32; j++) body[j] = lane_lsb[j] ? 1'b0 : x[j-1 < 0 ? 0 : j-1];
  end

  // first regime bit and sign per lane (msb of body / msb of lane)
  logic [3:0] r0;
  always_comb begin
    sign = '0;
    r0   = '0;
    unique case (prec)
      PREC_32: begin
        sign[0] = x[31];    r0[0] = x[30];
      end
      PREC_16: begin
        sign[0] = x[15];    r0[0] = x[14];
        sign[2] = x[31];    r0[2] = x[30];
      end
      default: begin
        for (int i = 0; i < 4; i++) begin
          sign[i] = x[8*i+7];
          r0[i]   = x[8*i+6];
        end
      end
    endcase
  end

  // invert the lanes whose run is of ones
  always_comb begin
    for (int j = 0; j < 32; j++) begin
      int unsigned lb;
      unique case (prec)
        PREC_32: lb = 0;
        PREC_16: lb = (j >= 16) ? 2 : 0;
        default: lb = j / 8;
      endcase
      inv[j] = body[j] ^ r0[lb];
    end
  end

  logic [3:0][4:0] run;
  logic [3:0]      allz;
  ps_prio_enc u_penc (.prec(prec), .x(inv), .cnt(run), .zero(allz));

  logic [31:0] aligned;
  ps_barrel_shifter u_shift (.prec(prec), .x(body), .sh(run), .y(aligned));

  // drop the regime terminator: one more shift by one inside each lane
  always_comb begin
    for (int j = 0; j < 32; j++) ef[j] = lane_lsb[j] ? 1'b0 : aligned[j-1 < 0 ? 0 : j-1];
  end

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      zero[i] = allz[i] & ~r0[i];
      k[i]    = r0[i] ? 6'(run[i]) - 6'd1 : -6'(run[i]);
    end
  end

endmodule
