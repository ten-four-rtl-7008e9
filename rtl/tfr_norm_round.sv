// tfr_norm_round: stage 4 of the FEDP, normalisation, rounding, result select.
// FP path: the magnitude of the signed accumulator is taken, a leading-zero
// counter gives the normalisation shift, and the exponent becomes
//     E = e_max + (ACC_W - 2 - lz) - (SIG_W + XTRA_W - 1) + 127 - 127
// i.e. e_max + 4 - lz for the default widths (the accumulator LSB weighs
// 2^(e_max - 153)). The significand is shifted left by lz; for results
// below the normal range the shift is cut short (or turned into a right
// shift that feeds sticky) so a subnormal comes out. Round to nearest even
// uses LSB, guard, round and sticky (round and lower bits ORed with the
// stage-3 sticky); a carry out of the mantissa bumps the exponent, and
// exponents of 255 or more give infinity. An exception flag overrides the
// result with the canonical NaN or a signed infinity.
// INT path: the upper seven bits are C_HI plus the accumulator bits above
// bit 24 (its sign-extended overflow); the low 25 bits are the
// accumulator's. The IS_INT multiplexer selects the output. An exact zero
// sum gives +0. Combinational.
module tfr_norm_round
  import tfr_pkg::*;
#(
  parameter int ACC_W = 32
) (
  input  logic                     is_int,
  input  logic [ACC_W-1:0]         acc,
  input  logic                     sticky_in,
  input  logic signed [EXP_W-1:0]  emax,
  input  logic [6:0]               c_hi,
  input  exc_t                     exc,
  output logic [31:0]              result
);
  localparam int MW = ACC_W - 1;             // magnitude width
  localparam int LW = $clog2(MW + 1);
  localparam int EW = EXP_W + 3;             // room for the exponent sums

  logic              sign;
  logic [MW-1:0]     mag, norm;
  logic [LW-1:0]     lz;
  logic signed [EW-1:0] e_norm, shl;
  logic [7:0]        e_field;
  logic [22:0]       mant;
  logic              guard, rest, rnd_up;
  logic [30:0]       rounded;
  logic [31:0]       fp_res;
  logic [6:0]        int_hi;

  tfr_lzc #(.W(MW)) u_lzc (.d(mag), .cnt(lz));

  always_comb begin
    sign = acc[ACC_W-1];
    mag  = sign ? MW'(-acc) : acc[MW-1:0];
    e_norm = EW'(emax) + EW'(MW - 1 - (SIG_W + XTRA_W - 1)) - EW'(lz);
    rest = sticky_in;
    norm = '0;
    if (e_norm >= 1) begin
      shl     = EW'(lz);
      e_field = 8'(e_norm);
    end else begin
      shl     = EW'(lz) + e_norm - EW'(1);
      e_field = 8'd0;
    end
    if (shl >= 0) begin
      norm = mag << shl;
    end else if (-shl >= EW'(MW)) begin
      rest = rest || (|mag);
    end else begin
      norm = mag >> (-shl);
      rest = rest || (|(mag & ~({MW{1'b1}} << (-shl))));
    end
    mant  = norm[MW-2 -: 23];
    guard = norm[MW-25];
    rest  = rest || (|norm[MW-26:0]);
    rnd_up  = guard && (rest || mant[0]);
    rounded = {e_field, mant} + 31'(rnd_up);
    if (mag == '0)
      fp_res = 32'h0000_0000;
    else if (e_norm >= 255 || rounded[30:23] == 8'hFF)
      fp_res = {sign, 8'hFF, 23'b0};
    else
      fp_res = {sign, rounded};
    if (exc.nan)      fp_res = CANON_NAN;
    else if (exc.inf) fp_res = {exc.sign, 8'hFF, 23'b0};

    int_hi = c_hi + 7'($signed(acc[ACC_W-1:25]));
    result = is_int ? {int_hi, acc[24:0]} : fp_res;
  end
endmodule
