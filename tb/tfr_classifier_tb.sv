// tfr_classifier_tb: self-checking test of the input classifier. Random
// A/B registers of every format (with zeros, subnormals, infinities and NaNs
// mixed in) and random FP32 addends are applied; each lane's decoded elements
// are compared with an independent decode from the reference package: sign,
// zero/Inf/NaN class, integer significand, and exponent field minus the
// format's bias against the reference's unbiased exponent. Integer elements
// must carry their value as sign and magnitude. The addend's fields are
// checked against a direct FP32 decode. Combinational; a watchdog ends the run.
module tfr_classifier_tb;
  import tfr_pkg::*;
  import tfr_ref_pkg::*;
  localparam int K = 8;
  int checks = 0, failures = 0;
  fmt_e fmt;
  logic [K/2-1:0][31:0] a_row, b_col;
  logic [31:0] c_val;
  fpel_t [K-1:0][SUB_N-1:0] a_el, b_el;
  logic c_sign, c_zero, c_inf, c_nan;
  logic [7:0] c_exp;
  logic [23:0] c_man;

  tfr_classifier #(.K(K)) dut (.fmt(fmt), .a_row(a_row), .b_col(b_col), .c_val(c_val),
    .a_el(a_el), .b_el(b_el), .c_sign(c_sign), .c_exp(c_exp), .c_man(c_man),
    .c_zero(c_zero), .c_inf(c_inf), .c_nan(c_nan));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int bias(fmt_e f);
    case (f)
      FMT_FP16, FMT_BF8, FMT_MXBF8: return 15;
      FMT_FP8, FMT_MXFP8:           return 7;
      default:                      return 127;
    endcase
  endfunction

  task automatic chk_el(fpel_t g, el_t e, string w);
    bit ok;
    if (fmt_is_int(fmt) || fmt == FMT_MXINT8)
      ok = ((g.sign ? -longint'(g.man) : longint'(g.man)) == e.man);
    else
      ok = (g.sign == e.sign) && (g.zero == e.zero) && (g.inf == e.inf) && (g.nan == e.nan) &&
           (e.nan || e.inf || (longint'(g.man) == e.man && int'(g.exp) - bias(fmt) == e.lead));
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 8) $display("%s fmt=%s got s%0d e%0d m%0d z%0d i%0d n%0d exp man %0d lead %0d",
        w, fmt.name(), g.sign, g.exp, g.man, g.zero, g.inf, g.nan, e.man, e.lead);
    end
  endtask

  initial begin
    bit [31:0] ar[], br[];
    ar = new[K/2]; br = new[K/2];
    for (int t = 0; t < 3000; t++) begin
      fmt = fmt_e'($urandom_range(0, 11));
      foreach (ar[i]) begin ar[i] = $urandom; br[i] = $urandom; end
      if (t % 4 == 0) foreach (ar[i]) begin ar[i] &= 32'h8387_8387; end   // small exponents, subnormals, zeros
      for (int i = 0; i < K/2; i++) begin a_row[i] = ar[i]; b_col[i] = br[i]; end
      c_val = $urandom;
      case (t % 5)
        1: c_val[30:23] = 8'hFF;
        2: c_val[30:23] = 8'h00;
        3: c_val[30:0] = '0;
        default: ;
      endcase
      #1;
      for (int l = 0; l < K; l++) begin
        if (fmt == FMT_TF32 && l % 2 == 1) continue;
        for (int s = 0; s < fmt_sub(fmt); s++) begin
          chk_el(a_el[l][s], dec(fmt, elem(fmt, ar, l, s)), "A");
          chk_el(b_el[l][s], dec(fmt, elem(fmt, br, l, s)), "B");
        end
      end
      checks++;
      if (c_sign !== c_val[31] || c_exp !== ((c_val[30:23] == 0) ? 8'd1 : c_val[30:23]) ||
          c_man !== {c_val[30:23] != 0, c_val[22:0]} || c_zero !== (c_val[30:0] == 0) ||
          c_inf !== (c_val[30:0] == 31'h7F80_0000) || c_nan !== (c_val[30:23] == 8'hFF && c_val[22:0] != 0)) begin
        failures++;
        if (failures < 8) $display("C decode wrong for %h", c_val);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
