// tfr_pkg: types and constants shared by the Ten-Four fused dot product (FEDP)
// datapath.
//
// Number convention used throughout the datapath. Every floating-point term
// (a lane product, a pair of FP8 products, or the FP32 addend C) travels as
// sign / exponent / significand, with
//     value = (-1)^sign * sig * 2^(exp - 151)
// where sig is an unsigned SIG_W = 25 bit integer (two integer bits above 23
// fraction bits) and exp is a signed EXP_W = 10 bit exponent that carries the
// FP32 bias. The product exponent is EXP_A + EXP_B + CONV with
// CONV = BIAS_FP32 - 2*BIAS_IN + 1, the conversion the Ten-Four paper gives;
// the "+1" accounts for the two integer bits of a product significand.
// Integer lanes reuse the same 25-bit field as a two's complement value.
//
// The format list and its encoding on fmt_s are this design's choice; the
// paper names the formats but not their encoding.
package tfr_pkg;

  typedef enum logic [3:0] {
    FMT_FP16   = 4'd0,
    FMT_BF16   = 4'd1,
    FMT_TF32   = 4'd2,
    FMT_FP8    = 4'd3,   // E4M3 (OCP)
    FMT_BF8    = 4'd4,   // E5M2
    FMT_MXFP8  = 4'd5,   // E4M3 elements, E8M0 block scales
    FMT_MXBF8  = 4'd6,   // E5M2 elements, E8M0 block scales
    FMT_MXINT8 = 4'd7,   // int8 elements (implicit 2^-6), E8M0 block scales
    FMT_INT8   = 4'd8,
    FMT_UINT8  = 4'd9,
    FMT_INT4   = 4'd10,
    FMT_UINT4  = 4'd11
  } fmt_e;

  localparam int SIG_W   = 25;          // raw product significand (E8M25 form)
  localparam int EXP_W   = 10;          // signed biased exponent
  localparam int XTRA_W  = 2;           // extra alignment bits below the significand
  localparam int ALN_W   = SIG_W + XTRA_W; // aligned significand width
  localparam int SHF_W   = 6;           // saturated alignment shift amount
  localparam int SUB_N   = 4;           // most products folded into one lane (INT4)
  localparam logic [31:0] CANON_NAN = 32'h7FC0_0000;

  // Multiplier class that serves a format.
  typedef enum logic [1:0] {CLS_FP16 = 2'd0, CLS_FP8 = 2'd1, CLS_INT8 = 2'd2, CLS_INT4 = 2'd3} mcls_e;

  // One decoded floating-point element.
  typedef struct packed {
    logic        sign;
    logic [7:0]  exp;    // exponent field, subnormals already mapped to 1
    logic [10:0] man;    // significand with hidden bit, right aligned
    logic        zero;
    logic        inf;
    logic        nan;
  } fpel_t;

  // Output of one multiplier lane (stage 1 result, per lane).
  typedef struct packed {
    logic                    sign;    // FP terms: sign of the magnitude in sig
    logic signed [EXP_W-1:0] exp;     // FP terms: lane exponent
    logic [SIG_W-1:0]        sig;     // FP: magnitude; INT: two's complement
    logic                    sticky;  // bits lost when folding FP8 pairs
  } lane_t;

  // Exception summary of a whole dot product.
  typedef struct packed {
    logic nan;
    logic inf;
    logic sign;
  } exc_t;

  function automatic logic fmt_is_int(fmt_e f);
    return f inside {FMT_INT8, FMT_UINT8, FMT_INT4, FMT_UINT4};
  endfunction

  function automatic logic fmt_is_mx(fmt_e f);
    return f inside {FMT_MXFP8, FMT_MXBF8, FMT_MXINT8};
  endfunction

  function automatic mcls_e fmt_class(fmt_e f);
    case (f)
      FMT_FP16, FMT_BF16, FMT_TF32:            return CLS_FP16;
      FMT_FP8, FMT_BF8, FMT_MXFP8, FMT_MXBF8:  return CLS_FP8;
      FMT_MXINT8, FMT_INT8, FMT_UINT8:         return CLS_INT8;
      default:                                 return CLS_INT4;
    endcase
  endfunction

  // Number of products one multiplier lane folds together for a format.
  function automatic int fmt_sub(fmt_e f);
    case (fmt_class(f))
      CLS_FP16: return 1;
      CLS_INT4: return 4;
      default:  return 2;
    endcase
  endfunction

  // Element width in bits.
  function automatic int fmt_ebits(fmt_e f);
    case (fmt_class(f))
      CLS_FP16: return (f == FMT_TF32) ? 32 : 16;
      CLS_INT4: return 4;
      default:  return 8;
    endcase
  endfunction

endpackage
