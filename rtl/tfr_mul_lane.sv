// tfr_mul_lane: the class-wise shared multipliers of one Ten-Four lane.
// Formats with similar mantissa widths share one multiplier group:
//   FP16/BF16/TF32  one 11x11 Wallace multiplier (BF16 mantissas
//                   zero-extended into it);
//   FP8/BF8 (+MX)   two 4x4 multipliers, the smaller-exponent product
//                   aligned to the larger one and the pair summed with a
//                   Kogge-Stone adder, so one lane emits one term;
//   INT8/UINT8/MXINT8 two 8x8 multipliers summed by a Kogge-Stone adder;
//   INT4/UINT4      four 4x4 multipliers summed by a 4-operand CSA and KSA.
// Multipliers work on magnitudes; signs are applied afterwards. Every FP
// result leaves in the common form sign / exp / 25-bit sig (see tfr_pkg);
// integer results leave as a two's complement value in sig. MXINT8 pairs
// are converted to the FP form. A class can be left out at elaboration
// (EN_* = 0): its multipliers are not built and the lane yields zero.
// Widths of the pair adders (26, 18 and 11 bits) hold the signed sums; the
// paper prints 24, 17 and 10 bits for the unsigned magnitudes.
// Combinational.
module tfr_mul_lane
  import tfr_pkg::*;
#(
  parameter bit EN_FP16 = 1'b1,
  parameter bit EN_FP8  = 1'b1,
  parameter bit EN_INT8 = 1'b1,
  parameter bit EN_INT4 = 1'b1
) (
  input  fmt_e                               fmt,
  input  fpel_t [SUB_N-1:0]                  a_el,
  input  fpel_t [SUB_N-1:0]                  b_el,
  input  logic  [SUB_N-1:0]                  slot_en,
  input  logic signed [SUB_N-1:0][EXP_W-1:0] exp_p,
  output lane_t                              lane
);
  lane_t r_fp16, r_fp8, r_int8, r_int4;

  // ---------------- FP16 / BF16 / TF32 -----------------------------------
  generate
    if (EN_FP16) begin : g_fp16
      logic [21:0] p;
      tfr_wtmul #(.AW(11), .BW(11)) u_mul (.a(a_el[0].man), .b(b_el[0].man), .p(p));
      always_comb begin
        r_fp16.sign   = a_el[0].sign ^ b_el[0].sign;
        r_fp16.exp    = exp_p[0];
        r_fp16.sig    = (fmt == FMT_BF16) ? SIG_W'({p, 9'b0}) : SIG_W'({p, 3'b0});
        r_fp16.sticky = 1'b0;
      end
    end else begin : g_no_fp16
      assign r_fp16 = '0;
    end
  endgenerate

  // ---------------- FP8 / BF8 pair ---------------------------------------
  generate
    if (EN_FP8) begin : g_fp8
      logic [1:0][7:0]  p;
      logic [1:0][23:0] x;          // products as 2.22 fixed point
      logic [23:0]      bg, sml, sml_sh;
      logic             bg_s, sml_s, lost;
      logic signed [EXP_W-1:0] e_bg;
      logic [EXP_W:0]   d;
      logic [25:0]      ta, tb, sum;
      logic             unused_co;
      for (genvar s = 0; s < 2; s++) begin : g_m
        tfr_wtmul #(.AW(4), .BW(4)) u_mul (.a(a_el[s].man[3:0]), .b(b_el[s].man[3:0]), .p(p[s]));
      end
      always_comb begin
        for (int s = 0; s < 2; s++) begin
          if (!slot_en[s])                                x[s] = '0;
          else if (fmt == FMT_BF8 || fmt == FMT_MXBF8)   x[s] = {p[s][5:0], 18'b0};
          else                                            x[s] = {p[s], 16'b0};
        end
        // the slot with the larger exponent (an empty slot never wins)
        if (!slot_en[1] || (slot_en[0] && $signed(exp_p[0]) >= $signed(exp_p[1]))) begin
          bg = x[0]; bg_s = a_el[0].sign ^ b_el[0].sign; e_bg = exp_p[0];
          sml = x[1]; sml_s = a_el[1].sign ^ b_el[1].sign;
          d = (EXP_W+1)'($signed(exp_p[0])) - (EXP_W+1)'($signed(exp_p[1]));
        end else begin
          bg = x[1]; bg_s = a_el[1].sign ^ b_el[1].sign; e_bg = exp_p[1];
          sml = x[0]; sml_s = a_el[0].sign ^ b_el[0].sign;
          d = (EXP_W+1)'($signed(exp_p[1])) - (EXP_W+1)'($signed(exp_p[0]));
        end
        if (d >= 24) begin
          sml_sh = '0;
          lost     = |sml;
        end else begin
          sml_sh = sml >> d;
          lost     = |(sml & ~(24'hFF_FFFF << d));
        end
        ta = bg_s   ? -{2'b0, bg}      : {2'b0, bg};
        tb = sml_s ? -{2'b0, sml_sh} : {2'b0, sml_sh};
      end
      tfr_ksa #(.W(26)) u_add (.a(ta), .b(tb), .cin(1'b0), .sum(sum), .cout(unused_co));
      always_comb begin
        r_fp8.sign   = sum[25];
        r_fp8.sig    = sum[25] ? SIG_W'(-sum) : SIG_W'(sum);
        r_fp8.exp    = e_bg + EXP_W'(1);       // 3.22 read as 2.23
        r_fp8.sticky = lost;
      end
    end else begin : g_no_fp8
      assign r_fp8 = '0;
    end
  endgenerate

  // ---------------- INT8 / UINT8 / MXINT8 pair ---------------------------
  generate
    if (EN_INT8) begin : g_int8
      logic [1:0][15:0] p;
      logic [17:0]      ta, tb, sum;
      logic [16:0]      mag;
      logic             unused_co;
      for (genvar s = 0; s < 2; s++) begin : g_m
        tfr_wtmul #(.AW(8), .BW(8)) u_mul (.a(a_el[s].man[7:0]), .b(b_el[s].man[7:0]), .p(p[s]));
      end
      always_comb begin
        ta = (a_el[0].sign ^ b_el[0].sign) ? -{2'b0, p[0]} : {2'b0, p[0]};
        tb = (a_el[1].sign ^ b_el[1].sign) ? -{2'b0, p[1]} : {2'b0, p[1]};
      end
      tfr_ksa #(.W(18)) u_add (.a(ta), .b(tb), .cin(1'b0), .sum(sum), .cout(unused_co));
      always_comb begin
        mag = sum[17] ? 17'(-sum) : 17'(sum);
        r_int8.sticky = 1'b0;
        if (fmt == FMT_MXINT8) begin
          r_int8.sign = sum[17];
          r_int8.exp  = exp_p[0];
          r_int8.sig  = SIG_W'({mag, 8'b0});
        end else begin
          r_int8.sign = 1'b0;
          r_int8.exp  = '0;
          r_int8.sig  = SIG_W'($signed(sum));
        end
      end
    end else begin : g_no_int8
      assign r_int8 = '0;
    end
  endgenerate

  // ---------------- INT4 / UINT4 quad ------------------------------------
  generate
    if (EN_INT4) begin : g_int4
      logic [3:0][7:0]  p;
      logic [3:0][10:0] t;
      logic [10:0]      cs, cc, sum;
      logic             unused_co;
      for (genvar s = 0; s < 4; s++) begin : g_m
        tfr_wtmul #(.AW(4), .BW(4)) u_mul (.a(a_el[s].man[3:0]), .b(b_el[s].man[3:0]), .p(p[s]));
        assign t[s] = (a_el[s].sign ^ b_el[s].sign) ? -{3'b0, p[s]} : {3'b0, p[s]};
      end
      tfr_csa_tree #(.N(4), .W(11)) u_csa (.ops(t), .sum(cs), .carry(cc));
      tfr_ksa #(.W(11)) u_add (.a(cs), .b(cc), .cin(1'b0), .sum(sum), .cout(unused_co));
      always_comb begin
        r_int4.sign   = 1'b0;
        r_int4.exp    = '0;
        r_int4.sig    = SIG_W'($signed(sum));
        r_int4.sticky = 1'b0;
      end
    end else begin : g_no_int4
      assign r_int4 = '0;
    end
  endgenerate

  always_comb begin
    case (fmt_class(fmt))
      CLS_FP16: lane = r_fp16;
      CLS_FP8:  lane = r_fp8;
      CLS_INT8: lane = r_int8;
      default:  lane = r_int4;
    endcase
  end
endmodule
