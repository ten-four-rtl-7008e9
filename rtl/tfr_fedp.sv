// tfr_fedp: Ten-Four mixed-precision fused dot product unit (FEDP).
//
// Computes, for one A-row / B-column pair of packed 32-bit registers,
//     D = sum over all products (A_i * B_i) + C
// with a single rounding at the end (FP32 result, round to nearest even), or
// the exact INT32 sum for integer formats. K = 8 multiplier lanes take
// K/2 = 4 registers of each operand: 8 FP16/BF16 products, 4 TF32 products
// (even lanes), 16 FP8/BF8/MXINT8/INT8 products or 32 INT4 products per
// operation. MX formats apply two E8M0 block scales sf_a, sf_b.
//
// Pipeline (five register ranks; a result is registered four clock edges
// after its inputs are captured):
//   rank 1  input registers; the zero-operand valid mask is computed before
//           them and clock-enables each lane's operand halves.
//   stage 1 classify, exponent add / scale compensation, shared multipliers,
//           difference matrix and max-exponent one-hot, exception flags,
//           addend split (C[24:0] to the accumulator, C_HI = C[31:25]+C[24]).
//   stage 2 max exponent, shift amounts from the difference matrix,
//           significand alignment with sticky bits (integers pass through).
//   stage 3 lane-mask AND gating, sign handling by inversion plus popcount
//           correction, MOD-4 / standard CSA tree and Kogge-Stone adder.
//   stage 4 leading-zero count, normalisation, RNE rounding, exception
//           override, INT32 reconstruction, IS_INT output select.
// Lanes whose operands are zero (sparse lane mask) keep their stage
// registers unchanged (clock enable, which synthesis maps to clock gating)
// and are ANDed out before the accumulator.
//
// Interface: en advances the whole pipeline (en = 0 stalls it, holding every
// register); valid_in marks an operation and comes out as valid_out with
// d_val. Only the valid bits are reset (rst_n, active low, synchronous).
// fmt_s selects the format at run time; EN_* remove format classes at
// elaboration. The formats, stage contents and widths follow the Ten-Four
// paper; the register-half gating, the operand packing, the format encoding
// and the 32-bit accumulator (the paper prints 30) are this design's choices.
module tfr_fedp
  import tfr_pkg::*;
#(
  parameter int K       = 8,
  parameter bit EN_FP16 = 1'b1,
  parameter bit EN_FP8  = 1'b1,
  parameter bit EN_INT8 = 1'b1,
  parameter bit EN_INT4 = 1'b1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,
  input  logic                   valid_in,
  input  fmt_e                   fmt_s,
  input  logic [7:0]             sf_a,
  input  logic [7:0]             sf_b,
  input  logic [K-1:0]           vld_mask,
  input  logic [K/2-1:0][31:0]   a_row,
  input  logic [K/2-1:0][31:0]   b_col,
  input  logic [31:0]            c_val,
  output logic                   valid_out,
  output logic [31:0]            d_val
);
  localparam int N     = K + 1;                     // lanes plus addend
  localparam int NT    = N * (N - 1) / 2;
  localparam int ACC_W = ALN_W + 1 + $clog2(N + 1);

  // ------------------------------------------------------------------
  // Zero-operand valid mask (ahead of rank 1)
  // ------------------------------------------------------------------
  logic [K-1:0][SUB_N-1:0] slot_en_d;
  logic [K-1:0]            lane_en_d, fmt_ok_d;

  tfr_zero_mask #(.K(K)) u_zmask (
    .fmt(fmt_s), .vld_mask(vld_mask), .a_row(a_row), .b_col(b_col),
    .slot_en(slot_en_d), .fmt_ok(fmt_ok_d), .lane_en(lane_en_d)
  );

  // ------------------------------------------------------------------
  // Rank 1: input registers
  // ------------------------------------------------------------------
  logic                      vld1;
  fmt_e                      fmt1;
  logic [7:0]                sfa1, sfb1;
  logic [31:0]               c1;
  logic [K-1:0][SUB_N-1:0]   slot_en1;
  logic [K-1:0]              lane_en1;
  logic [K/2-1:0][1:0][15:0] a1, b1;

  always_ff @(posedge clk) begin
    if (!rst_n)  vld1 <= 1'b0;
    else if (en) vld1 <= valid_in;
  end

  always_ff @(posedge clk) begin
    if (en) begin
      fmt1     <= fmt_s;
      sfa1     <= sf_a;
      sfb1     <= sf_b;
      c1       <= c_val;
      slot_en1 <= slot_en_d;
      lane_en1 <= lane_en_d;
    end
  end

  // Operand halves: half h of register r belongs to lane 2r+h; a TF32
  // element in the even lane also needs the upper half.
  for (genvar r = 0; r < K/2; r++) begin : g_in
    for (genvar h = 0; h < 2; h++) begin : g_half
      logic ce;
      assign ce = en && (lane_en_d[2*r+h] || (h == 1 && fmt_s == FMT_TF32 && lane_en_d[2*r]));
      always_ff @(posedge clk) begin
        if (ce) begin
          a1[r][h] <= a_row[r][16*h +: 16];
          b1[r][h] <= b_col[r][16*h +: 16];
        end
      end
    end
  end

  // ------------------------------------------------------------------
  // Stage 1: multiply, exponent, difference matrix, exceptions
  // ------------------------------------------------------------------
  fpel_t [K-1:0][SUB_N-1:0]           a_el, b_el;
  logic                               c_sign, c_zero, c_inf, c_nan;
  logic [7:0]                         c_exp;
  logic [23:0]                        c_man;
  lane_t [K-1:0]                      lane_d;
  lane_t                              cterm_d;
  logic signed [N-1:0][EXP_W-1:0]     exps_d;
  logic [N-1:0]                       evalid_d;
  logic signed [NT-1:0][EXP_W:0]      diff_d;
  logic [N-1:0]                       max_oh_d;
  exc_t                               exc_d;
  logic [6:0]                         c_hi_d;
  logic                               is_int1;

  assign is_int1 = fmt_is_int(fmt1);

  tfr_classifier #(.K(K)) u_cls (
    .fmt(fmt1), .a_row(a1), .b_col(b1), .c_val(c1),
    .a_el(a_el), .b_el(b_el),
    .c_sign(c_sign), .c_exp(c_exp), .c_man(c_man),
    .c_zero(c_zero), .c_inf(c_inf), .c_nan(c_nan)
  );

  for (genvar l = 0; l < K; l++) begin : g_lane
    logic signed [SUB_N-1:0][EXP_W-1:0] exp_p;
    tfr_exp_add u_exp (
      .fmt(fmt1), .sf_a(sfa1), .sf_b(sfb1),
      .a_el(a_el[l]), .b_el(b_el[l]), .exp_p(exp_p)
    );
    tfr_mul_lane #(
      .EN_FP16(EN_FP16), .EN_FP8(EN_FP8), .EN_INT8(EN_INT8), .EN_INT4(EN_INT4)
    ) u_mul (
      .fmt(fmt1), .a_el(a_el[l]), .b_el(b_el[l]), .slot_en(slot_en1[l]),
      .exp_p(exp_p), .lane(lane_d[l])
    );
    assign exps_d[l]   = lane_d[l].exp;
    assign evalid_d[l] = lane_en1[l] && !is_int1;
  end

  // Addend: FP32 significand (value = sig * 2^(exp-151)), or the low 25
  // bits of an INT32 as a signed value with C_HI = C[31:25] + C[24].
  always_comb begin
    cterm_d.sticky = 1'b0;
    if (is_int1) begin
      cterm_d.sign = 1'b0;
      cterm_d.exp  = '0;
      cterm_d.sig  = c1[24:0];
    end else begin
      cterm_d.sign = c_sign;
      cterm_d.exp  = EXP_W'({2'b0, c_exp}) + EXP_W'(1);
      cterm_d.sig  = SIG_W'(c_man);
    end
    c_hi_d = c1[31:25] + 7'(c1[24]);
  end
  assign exps_d[K]   = cterm_d.exp;
  assign evalid_d[K] = !c_zero && !is_int1;

  tfr_exp_diff #(.N(N)) u_diff (
    .exps(exps_d), .valid(evalid_d), .diff(diff_d), .max_oh(max_oh_d)
  );

  tfr_exception #(.K(K)) u_exc (
    .fmt(fmt1), .slot_en(slot_en1), .a_el(a_el), .b_el(b_el),
    .c_sign(c_sign), .c_inf(c_inf), .c_nan(c_nan),
    .sf_a(sfa1), .sf_b(sfb1), .exc(exc_d)
  );

  // ------------------------------------------------------------------
  // Rank 2
  // ------------------------------------------------------------------
  logic                           vld2, is_int2;
  lane_t [K-1:0]                  lane2;
  lane_t                          cterm2;
  logic [N-1:0]                   mask2, max_oh2;
  logic signed [NT-1:0][EXP_W:0]  diff2;
  exc_t                           exc2;
  logic [6:0]                     c_hi2;

  always_ff @(posedge clk) begin
    if (!rst_n)  vld2 <= 1'b0;
    else if (en) vld2 <= vld1;
  end
  always_ff @(posedge clk) begin
    if (en) begin
      is_int2 <= is_int1;
      cterm2  <= cterm_d;
      mask2   <= {1'b1, lane_en1};
      max_oh2 <= max_oh_d;
      diff2   <= diff_d;
      exc2    <= exc_d;
      c_hi2   <= c_hi_d;
    end
  end
  for (genvar l = 0; l < K; l++) begin : g_r2
    always_ff @(posedge clk) if (en && lane_en1[l]) lane2[l] <= lane_d[l];
  end

  // ------------------------------------------------------------------
  // Stage 2: align
  // ------------------------------------------------------------------
  logic signed [N-1:0][EXP_W-1:0] exps2;
  logic [N-1:0][SIG_W-1:0]        sigs2;
  logic [N-1:0]                   stk_in2, stk2, sgn2;
  logic [N-1:0][ALN_W-1:0]        aln2;
  logic signed [EXP_W-1:0]        emax2;

  always_comb begin
    for (int l = 0; l < K; l++) begin
      exps2[l]   = lane2[l].exp;
      sigs2[l]   = lane2[l].sig;
      stk_in2[l] = lane2[l].sticky;
      sgn2[l]    = lane2[l].sign;
    end
    exps2[K]   = cterm2.exp;
    sigs2[K]   = cterm2.sig;
    stk_in2[K] = cterm2.sticky;
    sgn2[K]    = cterm2.sign;
  end

  tfr_align #(.N(N)) u_align (
    .is_int(is_int2), .max_oh(max_oh2), .diff(diff2), .exps(exps2),
    .sigs(sigs2), .sticky_in(stk_in2), .emax(emax2), .aligned(aln2), .sticky(stk2)
  );

  // ------------------------------------------------------------------
  // Rank 3
  // ------------------------------------------------------------------
  logic                      vld3, is_int3;
  logic [N-1:0][ALN_W-1:0]   aln3;
  logic [N-1:0]              stk3, sgn3, mask3;
  logic signed [EXP_W-1:0]   emax3;
  exc_t                      exc3;
  logic [6:0]                c_hi3;

  always_ff @(posedge clk) begin
    if (!rst_n)  vld3 <= 1'b0;
    else if (en) vld3 <= vld2;
  end
  always_ff @(posedge clk) begin
    if (en) begin
      is_int3 <= is_int2;
      mask3   <= mask2;
      emax3   <= emax2;
      exc3    <= exc2;
      c_hi3   <= c_hi2;
      aln3[K] <= aln2[K];
      stk3[K] <= stk2[K];
      sgn3[K] <= sgn2[K];
    end
  end
  for (genvar l = 0; l < K; l++) begin : g_r3
    always_ff @(posedge clk) begin
      if (en && mask2[l]) begin
        aln3[l] <= aln2[l];
        stk3[l] <= stk2[l];
        sgn3[l] <= sgn2[l];
      end
    end
  end

  // ------------------------------------------------------------------
  // Stage 3: accumulate (rank-3 outputs ANDed with the lane mask inside)
  // ------------------------------------------------------------------
  logic [ACC_W-1:0] acc_d;
  logic             stk_acc_d;

  tfr_accum #(.N(N), .ACC_W(ACC_W)) u_acc (
    .is_int(is_int3), .mask(mask3), .terms(aln3), .signs(sgn3),
    .sticky_in(stk3), .acc(acc_d), .sticky(stk_acc_d)
  );

  // ------------------------------------------------------------------
  // Rank 4
  // ------------------------------------------------------------------
  logic                     vld4, is_int4, stk4;
  logic [ACC_W-1:0]         acc4;
  logic signed [EXP_W-1:0]  emax4;
  exc_t                     exc4;
  logic [6:0]               c_hi4;

  always_ff @(posedge clk) begin
    if (!rst_n)  vld4 <= 1'b0;
    else if (en) vld4 <= vld3;
  end
  always_ff @(posedge clk) begin
    if (en) begin
      is_int4 <= is_int3;
      acc4    <= acc_d;
      stk4    <= stk_acc_d;
      emax4   <= emax3;
      exc4    <= exc3;
      c_hi4   <= c_hi3;
    end
  end

  // ------------------------------------------------------------------
  // Stage 4: normalise and round; rank 5 is the output register
  // ------------------------------------------------------------------
  logic [31:0] res_d;

  tfr_norm_round #(.ACC_W(ACC_W)) u_norm (
    .is_int(is_int4), .acc(acc4), .sticky_in(stk4), .emax(emax4),
    .c_hi(c_hi4), .exc(exc4), .result(res_d)
  );

  always_ff @(posedge clk) begin
    if (!rst_n)  valid_out <= 1'b0;
    else if (en) valid_out <= vld4;
  end
  always_ff @(posedge clk) begin
    if (en) d_val <= res_d;
  end

  // The max-exponent mask is one-hot (or empty when nothing is valid).
  a_max_onehot: assert property (@(posedge clk) disable iff (!rst_n)
                                 vld2 |-> $onehot0(max_oh2));
  // Integer operations never raise FP exceptions.
  a_int_no_exc: assert property (@(posedge clk) disable iff (!rst_n)
                                 (vld4 && is_int4) |-> (exc4 == '0));
endmodule
