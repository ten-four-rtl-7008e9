// tfr_exp_add_tb: self-checking test of the product exponent adder with MX
// scale compensation. A classifier (checked by its own testbench) decodes
// random A/B elements of every floating-point and MX format and random E8M0
// scales. Expected product exponents are derived from unbiased exponents:
// a product of 1.x numbers with unbiased exponents ea and eb has the
// internal exponent ea + eb + 128 (value = sig * 2^(exp - 151) with the
// significand's two integer bits); MX formats add X_A + X_B - 254.
// MXINT8 lanes get the constant 131 + X_A + X_B - 254. Combinational;
// a watchdog ends the run.
module tfr_exp_add_tb;
  import tfr_pkg::*;
  import tfr_ref_pkg::*;
  int checks = 0, failures = 0;
  fmt_e fmt;
  logic [7:0] sf_a, sf_b;
  logic [0:0][1:0][15:0] a_row, b_col;
  fpel_t [1:0][SUB_N-1:0] a_el, b_el;
  logic signed [SUB_N-1:0][EXP_W-1:0] exp_p;
  logic cs, cz, ci, cn; logic [7:0] ce; logic [23:0] cm;

  tfr_classifier #(.K(2)) cls (.fmt(fmt), .a_row(a_row), .b_col(b_col), .c_val(32'h0),
    .a_el(a_el), .b_el(b_el), .c_sign(cs), .c_exp(ce), .c_man(cm), .c_zero(cz), .c_inf(ci), .c_nan(cn));
  tfr_exp_add dut (.fmt(fmt), .sf_a(sf_a), .sf_b(sf_b), .a_el(a_el[0]), .b_el(b_el[0]), .exp_p(exp_p));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit [31:0] ar[], br[];
    ar = new[1]; br = new[1];
    for (int t = 0; t < 5000; t++) begin
      int xs;
      fmt = fmt_e'($urandom_range(0, 7));
      ar[0] = $urandom; br[0] = $urandom;
      sf_a = 8'($urandom_range(0, 254)); sf_b = 8'($urandom_range(0, 254));
      if (t % 3 == 0) begin sf_a = 127; sf_b = 127; end
      a_row = ar[0]; b_col = br[0];
      #1;
      xs = fmt_is_mx(fmt) ? int'(sf_a) + int'(sf_b) - 254 : 0;
      for (int s = 0; s < fmt_sub(fmt); s++) begin
        el_t ea, eb;
        int e;
        ea = dec(fmt, elem(fmt, ar, 0, s));
        eb = dec(fmt, elem(fmt, br, 0, s));
        e = (fmt == FMT_MXINT8) ? 131 + xs : ea.lead + eb.lead + 128 + xs;
        checks++;
        if (int'($signed(exp_p[s])) != e) begin
          failures++;
          if (failures < 8) $display("fmt %s slot %0d got %0d exp %0d", fmt.name(), s, $signed(exp_p[s]), e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
