// ps_prio_enc: precision-scalable priority encoder (leading-zero counter),
// 1x32b, 2x16b or 4x8b.
//
// As in the paper, a 32b encoder is two 16b encoders: if the upper half is
// all zeroes, the result takes the lower encoder's count and sets its msb,
// otherwise the upper encoder's count with msb 0. Each 16b encoder is built the
// same way from two 8b encoders. In 16b and 8b mode the halves simply report
// their own counts. Results are indexed by the lowest byte of each lane:
// cnt[0] is the count of the lane at byte 0, cnt[2] of the lane at byte 2 in
// 16b mode, cnt[1..3] of bytes 1..3 in 8b mode; other entries are don't-care.
// cnt is the number of zero bits above the leading one; for an all-zero lane
// zero[i] is set and cnt is the lane width minus one. Combinational.
module ps_prio_enc
  import dpu_pkg::*;
(
  input  prec_e            prec,
  input  logic [31:0]      x,
  output logic [3:0][4:0]  cnt,
  output logic [3:0]       zero
);

  // 8b encoders
  logic [3:0][2:0] c8;
  logic [3:0]      z8;
  always_comb begin
    for (int i = 0; i < 4; i++) begin
      c8[i] = 3'd7;
      z8[i] = 1'b1;
      for (int j = 0; j < 8; j++) begin
        if (x[8*i + j]) begin
          c8[i] = 3'(7 - j);
          z8[i] = 1'b0;
        end
      end
    end
  end

  // 16b encoders from two 8b encoders
  logic [1:0][3:0] c16;
  logic [1:0]      z16;
  always_comb begin
    for (int h = 0; h < 2; h++) begin
      z16[h] = z8[2*h+1] & z8[2*h];
      c16[h] = z8[2*h+1] ? {1'b1, c8[2*h]} : {1'b0, c8[2*h+1]};
    end
  end

  // 32b encoder from two 16b encoders
  logic [4:0] c32;
  logic       z32;
  assign z32 = z16[1] & z16[0];
  assign c32 = z16[1] ? {1'b1, c16[0]} : {1'b0, c16[1]};

  always_comb begin
    unique case (prec)
      PREC_32: begin
        cnt  = '{default: 5'd0};
        zero = '0;
        cnt[0]  = c32;
        zero[0] = z32;
      end
      PREC_16: begin
        cnt  = '{default: 5'd0};
        zero = '0;
        cnt[0]  = {1'b0, c16[0]};
        zero[0] = z16[0];
        cnt[2]  = {1'b0, c16[1]};
        zero[2] = z16[1];
      end
      default: begin
        for (int i = 0; i < 4; i++) begin
          cnt[i]  = {2'b00, c8[i]};
          zero[i] = z8[i];
        end
      end
    endcase
  end

endmodule
