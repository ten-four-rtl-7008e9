// tfr_exp_add: product exponent adder with format bias conversion and the
// Microscaling scale-factor compensator, one instance per multiplier lane.
// For each product slot s it forms
//     EXP = EXP_A + EXP_B + CONV,   CONV = BIAS_FP32 - 2*BIAS_IN + 1,
// which the Ten-Four paper gives. For the MX formats the two E8M0 block
// scales are added to every lane's exponent with the FP32 bias removed,
// X_A + X_B - 254, so the scaling happens per lane before accumulation and
// the addend C can still join the alignment. MXINT8 elements carry no
// exponent: their lane exponent is the constant that places the 2^-12 of
// the two implicit 2^-6 element scales (131, this design's derivation) plus
// the same scale term. Combinational.
module tfr_exp_add
  import tfr_pkg::*;
(
  input  fmt_e                               fmt,
  input  logic [7:0]                         sf_a,
  input  logic [7:0]                         sf_b,
  input  fpel_t [SUB_N-1:0]                  a_el,
  input  fpel_t [SUB_N-1:0]                  b_el,
  output logic signed [SUB_N-1:0][EXP_W-1:0] exp_p
);
  logic signed [EXP_W-1:0] conv, scale;

  always_comb begin
    case (fmt)
      FMT_FP16:                       conv = EXP_W'(127 - 2*15 + 1);
      FMT_BF16, FMT_TF32:             conv = EXP_W'(127 - 2*127 + 1);
      FMT_FP8, FMT_MXFP8:             conv = EXP_W'(127 - 2*7 + 1);
      FMT_BF8, FMT_MXBF8:             conv = EXP_W'(127 - 2*15 + 1);
      default:                        conv = '0;
    endcase
    scale = fmt_is_mx(fmt) ? EXP_W'($signed({2'b0, sf_a}) + $signed({2'b0, sf_b}) - EXP_W'(254)) : '0;
    for (int s = 0; s < SUB_N; s++) begin
      if (fmt == FMT_MXINT8)
        exp_p[s] = EXP_W'(131) + scale;
      else
        exp_p[s] = $signed({2'b0, a_el[s].exp}) + $signed({2'b0, b_el[s].exp}) + conv + scale;
    end
  end
endmodule
