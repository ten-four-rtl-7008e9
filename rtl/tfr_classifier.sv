// tfr_classifier: input classifier of the Ten-Four FEDP (stage 1).
// Unpacks the packed A-row and B-column registers into per-lane elements
// and classifies each as zero, infinity or NaN, and unpacks the FP32 (or
// INT32) addend C. Lane l reads the 16-bit half (l % 2) of register l / 2:
// one FP16/BF16 element, two 8-bit elements or four 4-bit elements. A TF32
// element fills a whole register (FP32 layout, the 13 low mantissa bits
// ignored) and is read by the even lane only; the odd lane is then invalid.
// Elements come out as fpel_t: hidden bit prepended and subnormal exponent
// mapped to 1; integers as sign plus magnitude in man. Combinational.
module tfr_classifier
  import tfr_pkg::*;
#(
  parameter int K = 8                      // multiplier lanes
) (
  input  fmt_e                          fmt,
  input  logic [K/2-1:0][1:0][15:0]     a_row,   // [register][half]
  input  logic [K/2-1:0][1:0][15:0]     b_col,
  input  logic [31:0]                   c_val,
  output fpel_t [K-1:0][SUB_N-1:0]      a_el,
  output fpel_t [K-1:0][SUB_N-1:0]      b_el,
  output logic                          c_sign,
  output logic [7:0]                    c_exp,   // subnormal mapped to 1
  output logic [23:0]                   c_man,   // with hidden bit
  output logic                          c_zero,
  output logic                          c_inf,
  output logic                          c_nan
);

  function automatic fpel_t decode(fmt_e f, logic [31:0] r, int sub);
    fpel_t o;
    logic [7:0] v8;
    logic [3:0] v4;
    o = '0;
    v8 = r[8*sub +: 8];
    v4 = r[4*sub +: 4];
    case (f)
      FMT_FP16: begin
        o.sign = r[15];
        o.exp  = (r[14:10] == 0) ? 8'd1 : {3'b0, r[14:10]};
        o.man  = {r[14:10] != 0, r[9:0]};
        o.zero = r[14:0] == 0;
        o.inf  = r[14:10] == 5'h1F && r[9:0] == 0;
        o.nan  = r[14:10] == 5'h1F && r[9:0] != 0;
      end
      FMT_BF16: begin
        o.sign = r[15];
        o.exp  = (r[14:7] == 0) ? 8'd1 : r[14:7];
        o.man  = {3'b0, r[14:7] != 0, r[6:0]};
        o.zero = r[14:0] == 0;
        o.inf  = r[14:7] == 8'hFF && r[6:0] == 0;
        o.nan  = r[14:7] == 8'hFF && r[6:0] != 0;
      end
      FMT_TF32: begin
        o.sign = r[31];
        o.exp  = (r[30:23] == 0) ? 8'd1 : r[30:23];
        o.man  = {r[30:23] != 0, r[22:13]};
        o.zero = r[30:13] == 0;
        o.inf  = r[30:23] == 8'hFF && r[22:13] == 0;
        o.nan  = r[30:23] == 8'hFF && r[22:13] != 0;
      end
      FMT_FP8, FMT_MXFP8: begin            // E4M3: no infinity, S.1111.111 is NaN
        o.sign = v8[7];
        o.exp  = (v8[6:3] == 0) ? 8'd1 : {4'b0, v8[6:3]};
        o.man  = {7'b0, v8[6:3] != 0, v8[2:0]};
        o.zero = v8[6:0] == 0;
        o.nan  = v8[6:0] == 7'h7F;
      end
      FMT_BF8, FMT_MXBF8: begin            // E5M2, IEEE-style specials
        o.sign = v8[7];
        o.exp  = (v8[6:2] == 0) ? 8'd1 : {3'b0, v8[6:2]};
        o.man  = {8'b0, v8[6:2] != 0, v8[1:0]};
        o.zero = v8[6:0] == 0;
        o.inf  = v8[6:2] == 5'h1F && v8[1:0] == 0;
        o.nan  = v8[6:2] == 5'h1F && v8[1:0] != 0;
      end
      FMT_INT8, FMT_MXINT8: begin
        o.sign = v8[7];
        o.man  = {3'b0, v8[7] ? 8'(-v8) : v8};
        o.zero = v8 == 0;
      end
      FMT_UINT8: begin
        o.man  = {3'b0, v8};
        o.zero = v8 == 0;
      end
      FMT_INT4: begin
        o.sign = v4[3];
        o.man  = {7'b0, v4[3] ? 4'(-v4) : v4};
        o.zero = v4 == 0;
      end
      FMT_UINT4: begin
        o.man  = {7'b0, v4};
        o.zero = v4 == 0;
      end
      default: o = '0;
    endcase
    return o;
  endfunction

  always_comb begin
    for (int l = 0; l < K; l++) begin
      for (int s = 0; s < SUB_N; s++) begin
        if (fmt == FMT_TF32) begin
          a_el[l][s] = decode(fmt, {a_row[l/2][1], a_row[l/2][0]}, s);
          b_el[l][s] = decode(fmt, {b_col[l/2][1], b_col[l/2][0]}, s);
        end else begin
          a_el[l][s] = decode(fmt, {16'b0, a_row[l/2][l%2]}, s);
          b_el[l][s] = decode(fmt, {16'b0, b_col[l/2][l%2]}, s);
        end
      end
    end
    c_sign = c_val[31];
    c_exp  = (c_val[30:23] == 0) ? 8'd1 : c_val[30:23];
    c_man  = {c_val[30:23] != 0, c_val[22:0]};
    c_zero = c_val[30:0] == 0;
    c_inf  = c_val[30:23] == 8'hFF && c_val[22:0] == 0;
    c_nan  = c_val[30:23] == 8'hFF && c_val[22:0] != 0;
  end
endmodule
