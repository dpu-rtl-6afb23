// posit_unit: precision-scalable custom-posit arithmetic unit of the PE.
//
// Computes add, mul, max or min on one 32b word pair holding 1x32b, 2x16b or
// 4x8b custom posits (es = 6, 4, 2; see posit_decoder for the format), in a
// single cycle (purely combinational, no pipeline stages, as in the paper).
//
// Structure, following the paper's block diagram: two posit decoders (a
// precision-scalable priority encoder and barrel shifter each) feed a float
// multiplier and a float adder; the multiplier's integer mantissa multiplier
// and the adder that sums the exponents (scales) are the precision-scalable
// 32b blocks, shared by all precisions. The operands of the multiplier are
// forced to zero unless the operation is a multiply (zero gating). The float
// adder, the normalize/round step and the posit encoder are written per lane
// width (posit_lane), one instance for each of the 4+2+1 possible lanes, and
// the lanes of the active precision are selected at the output; in the chip
// these too are assembled from shared 8b sub-blocks, which this RTL does not
// reproduce.
//
// Interface: op (OP_ADD/OP_MUL/OP_MAX/OP_MIN), prec, a, b -> y. Lane i of y
// is the result for lane i of a and b.
module posit_unit
  import dpu_pkg::*;
(
  input  opcode_e     op,
  input  prec_e       prec,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);

  // ---------------------------------------------------------------- decode
  logic [3:0]      sa, sb, za, zb;
  logic [3:0][5:0] ka, kb;
  logic [31:0]     efa, efb;

  posit_decoder u_dec_a (.prec(prec), .x(a), .sign(sa), .zero(za), .k(ka), .ef(efa));
  posit_decoder u_dec_b (.prec(prec), .x(b), .sign(sb), .zero(zb), .k(kb), .ef(efb));

  // ---------------------------------------------------------------- lane fields
  // 32b lane (es 6, up to 23 fraction bits)
  logic signed [13:0] sc32_a, sc32_b;
  logic [23:0]        m32_a, m32_b;
  assign sc32_a = 14'($signed(ka[0])) * 14'sd64 + 14'(efa[31:26]);
  assign sc32_b = 14'($signed(kb[0])) * 14'sd64 + 14'(efb[31:26]);
  assign m32_a  = {1'b1, efa[25:3]};
  assign m32_b  = {1'b1, efb[25:3]};

  // 16b lanes (es 4, up to 9 fraction bits), lane h at bits 16h+15:16h
  logic signed [1:0][13:0] sc16_a, sc16_b;
  logic [1:0][9:0]         m16_a, m16_b;
  for (genvar h = 0; h < 2; h++) begin : g_f16
    assign sc16_a[h] = 14'($signed(ka[2*h])) * 14'sd16 + 14'(efa[16*h+15 -: 4]);
    assign sc16_b[h] = 14'($signed(kb[2*h])) * 14'sd16 + 14'(efb[16*h+15 -: 4]);
    assign m16_a[h]  = {1'b1, efa[16*h+11 -: 9]};
    assign m16_b[h]  = {1'b1, efb[16*h+11 -: 9]};
  end

  // 8b lanes (es 2, up to 3 fraction bits), lane i at bits 8i+7:8i
  logic signed [3:0][13:0] sc8_a, sc8_b;
  logic [3:0][3:0]         m8_a, m8_b;
  for (genvar i = 0; i < 4; i++) begin : g_f8
    assign sc8_a[i] = 14'($signed(ka[i])) * 14'sd4 + 14'(efa[8*i+7 -: 2]);
    assign sc8_b[i] = 14'($signed(kb[i])) * 14'sd4 + 14'(efb[8*i+7 -: 2]);
    assign m8_a[i]  = {1'b1, efa[8*i+5 -: 3]};
    assign m8_b[i]  = {1'b1, efb[8*i+5 -: 3]};
  end

  // ---------------------------------------------------------------- shared mantissa multiplier and scale adder
  logic [31:0] mul_a, mul_b, add_a, add_b, scale_sum;
  logic [63:0] prod;
  logic [3:0]  unused_cout;

  always_comb begin
    mul_a = '0;
    mul_b = '0;
    add_a = '0;
    add_b = '0;
    unique case (prec)
      PREC_32: begin
        mul_a = 32'(m32_a);
        mul_b = 32'(m32_b);
        add_a = 32'(sc32_a);
        add_b = 32'(sc32_b);
      end
      PREC_16: begin
        for (int h = 0; h < 2; h++) begin
          mul_a[16*h +: 16] = 16'(m16_a[h]);
          mul_b[16*h +: 16] = 16'(m16_b[h]);
          add_a[16*h +: 16] = 16'(sc16_a[h]);
          add_b[16*h +: 16] = 16'(sc16_b[h]);
        end
      end
      default: begin
        for (int i = 0; i < 4; i++) begin
          mul_a[8*i +: 8] = 8'(m8_a[i]);
          mul_b[8*i +: 8] = 8'(m8_b[i]);
          add_a[8*i +: 8] = 8'(sc8_a[i]);
          add_b[8*i +: 8] = 8'(sc8_b[i]);
        end
      end
    endcase
    if (op != OP_MUL) begin   // zero gating of the multiplier
      mul_a = '0;
      mul_b = '0;
    end
  end

  ps_int_mult  u_mult (.prec(prec), .a(mul_a), .b(mul_b), .p(prod));
  ps_int_adder u_sadd (.prec(prec), .a(add_a), .b(add_b), .cin(4'b0000), .sum(scale_sum), .cout(unused_cout));

  // ---------------------------------------------------------------- lanes
  logic [31:0]     y32;
  logic [1:0][15:0] y16;
  logic [3:0][7:0]  y8;

  posit_lane #(.N(32), .ES(6)) u_l32 (
    .op(op), .raw_a(a), .raw_b(b), .sign_a(sa[0]), .sign_b(sb[0]), .zero_a(za[0]), .zero_b(zb[0]),
    .scale_a(sc32_a), .scale_b(sc32_b), .mant_a(m32_a), .mant_b(m32_b),
    .prod(prod[47:0]), .scale_sum(14'(scale_sum)), .y(y32));

  for (genvar h = 0; h < 2; h++) begin : g_l16
    posit_lane #(.N(16), .ES(4)) u_l16 (
      .op(op), .raw_a(a[16*h +: 16]), .raw_b(b[16*h +: 16]),
      .sign_a(sa[2*h]), .sign_b(sb[2*h]), .zero_a(za[2*h]), .zero_b(zb[2*h]),
      .scale_a(sc16_a[h]), .scale_b(sc16_b[h]), .mant_a(m16_a[h]), .mant_b(m16_b[h]),
      .prod(prod[32*h +: 20]), .scale_sum(14'($signed(scale_sum[16*h +: 16]))), .y(y16[h]));
  end

  for (genvar i = 0; i < 4; i++) begin : g_l8
    posit_lane #(.N(8), .ES(2)) u_l8 (
      .op(op), .raw_a(a[8*i +: 8]), .raw_b(b[8*i +: 8]),
      .sign_a(sa[i]), .sign_b(sb[i]), .zero_a(za[i]), .zero_b(zb[i]),
      .scale_a(sc8_a[i]), .scale_b(sc8_b[i]), .mant_a(m8_a[i]), .mant_b(m8_b[i]),
      .prod(prod[16*i +: 8]), .scale_sum(14'($signed(scale_sum[8*i +: 8]))), .y(y8[i]));
  end

  always_comb begin
    unique case (prec)
      PREC_32: y = y32;
      PREC_16: y = y16;
      default: y = y8;
    endcase
  end

endmodule
