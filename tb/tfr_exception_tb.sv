// tfr_exception_tb: self-checking test of IEEE-754 exception detection over
// a whole 8-lane dot product. A classifier and zero mask (checked by their
// own testbenches) turn random registers, with infinities, NaNs and zeros
// planted in random slots, into the unit's inputs; the addend and the MX
// scales are also sometimes special. Expected flags come from the reference
// decode: NaN if any active product has a NaN input or is Inf x 0, if the
// addend is NaN, if an MX scale is 0xFF, or if infinities of both signs
// occur; otherwise Inf (with its sign) if any term is infinite. Integer
// formats raise nothing. Every outcome (NaN, +Inf, -Inf, none) must be seen.
// Combinational; a watchdog ends the run.
module tfr_exception_tb;
  import tfr_pkg::*;
  import tfr_ref_pkg::*;
  localparam int K = 8;
  int checks = 0, failures = 0, n_nan = 0, n_pinf = 0, n_ninf = 0, n_none = 0;
  fmt_e fmt;
  logic [7:0] sf_a, sf_b;
  logic [K/2-1:0][31:0] a_row, b_col;
  logic [31:0] c_val;
  fpel_t [K-1:0][SUB_N-1:0] a_el, b_el;
  logic [K-1:0][SUB_N-1:0] slot_en;
  logic [K-1:0] fmt_ok, lane_en;
  logic cs, cz, ci, cn; logic [7:0] ce; logic [23:0] cm;
  exc_t exc;

  tfr_classifier #(.K(K)) cls (.fmt(fmt), .a_row(a_row), .b_col(b_col), .c_val(c_val),
    .a_el(a_el), .b_el(b_el), .c_sign(cs), .c_exp(ce), .c_man(cm), .c_zero(cz), .c_inf(ci), .c_nan(cn));
  tfr_zero_mask #(.K(K)) zm (.fmt(fmt), .vld_mask(K'($urandom | 32'hF0)), .a_row(a_row), .b_col(b_col),
    .slot_en(slot_en), .fmt_ok(fmt_ok), .lane_en(lane_en));
  tfr_exception #(.K(K)) dut (.fmt(fmt), .slot_en(slot_en), .a_el(a_el), .b_el(b_el), .c_sign(cs),
    .c_inf(ci), .c_nan(cn), .sf_a(sf_a), .sf_b(sf_b), .exc(exc));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit [31:0] special(fmt_e f, int kind, bit s);   // 0 zero, 1 inf, 2 nan
    case (f)
      FMT_FP16, FMT_BF8, FMT_MXBF8: return (kind == 0) ? 0 : (f == FMT_FP16) ?
        {16'b0, s, 5'h1F, (kind == 2) ? 10'h200 : 10'h0} : {24'b0, s, 5'h1F, (kind == 2) ? 2'b10 : 2'b00};
      FMT_BF16: return (kind == 0) ? 0 : {16'b0, s, 8'hFF, (kind == 2) ? 7'h40 : 7'h0};
      FMT_TF32: return (kind == 0) ? 0 : {s, 8'hFF, (kind == 2) ? 23'h400000 : 23'h0};
      FMT_FP8, FMT_MXFP8: return (kind == 2) ? {24'b0, s, 7'h7F} : 0;   // E4M3 has no infinity
      default: return 0;
    endcase
  endfunction

  initial begin
    bit [31:0] ar[], br[];
    ar = new[K/2]; br = new[K/2];
    for (int t = 0; t < 8000; t++) begin
      bit any_nan, pinf, ninf;
      fmt = fmt_e'($urandom_range(0, 11));
      for (int l = 0; l < K; l++)
        for (int s = 0; s < fmt_sub(fmt); s++) begin
          put(fmt, ar, l, s, rnd_elem(fmt, 1, (fmt_class(fmt) == CLS_FP8) ? 14 : 29, 10));
          put(fmt, br, l, s, rnd_elem(fmt, 1, (fmt_class(fmt) == CLS_FP8) ? 14 : 29, 10));
        end
      for (int n = 0; n < $urandom_range(0, 2); n++) begin
        int l, s;
        l = $urandom_range(0, K-1); s = $urandom_range(0, fmt_sub(fmt) - 1);
        if (fmt == FMT_TF32) l &= ~1;
        if ($urandom_range(0, 1)) put(fmt, ar, l, s, special(fmt, $urandom_range(0, 2), 1'($urandom)));
        else                      put(fmt, br, l, s, special(fmt, $urandom_range(0, 2), 1'($urandom)));
      end
      for (int i = 0; i < K/2; i++) begin a_row[i] = ar[i]; b_col[i] = br[i]; end
      c_val = $urandom;
      if (t % 5 == 0) c_val[30:0] = 31'h7F80_0000;
      if (t % 17 == 0) c_val[30:0] = 31'h7FC0_0001;
      sf_a = (t % 13 == 0) ? 8'hFF : 8'd127; sf_b = 8'd127;
      #1;
      any_nan = 0; pinf = 0; ninf = 0;
      for (int l = 0; l < K; l++)
        for (int s = 0; s < SUB_N; s++) begin
          el_t a, b;
          if (!slot_en[l][s]) continue;   // active-slot rule is checked in the zero-mask testbench
          a = dec(fmt, elem(fmt, ar, l, s)); b = dec(fmt, elem(fmt, br, l, s));
          if (a.nan || b.nan || (a.inf && b.zero) || (b.inf && a.zero)) any_nan = 1;
          else if (a.inf || b.inf) begin if (a.sign ^ b.sign) ninf = 1; else pinf = 1; end
        end
      if (c_val[30:23] == 8'hFF) begin
        if (c_val[22:0] != 0) any_nan = 1; else if (c_val[31]) ninf = 1; else pinf = 1;
      end
      if (fmt_is_mx(fmt) && sf_a == 8'hFF) any_nan = 1;
      if (fmt_is_int(fmt)) begin any_nan = 0; pinf = 0; ninf = 0; end
      any_nan |= pinf && ninf;
      checks++;
      if (exc.nan !== any_nan || (!any_nan && (exc.inf !== (pinf | ninf) || (exc.inf && exc.sign !== ninf)))) begin
        failures++;
        if (failures < 8) $display("fmt %s got %b exp nan%0d p%0d n%0d", fmt.name(), exc, any_nan, pinf, ninf);
      end
      if (any_nan) n_nan++; else if (pinf) n_pinf++; else if (ninf) n_ninf++; else n_none++;
    end
    checks += 4;
    if (n_nan == 0) failures++;
    if (n_pinf == 0) failures++;
    if (n_ninf == 0) failures++;
    if (n_none == 0) failures++;
    $display("nan %0d +inf %0d -inf %0d none %0d", n_nan, n_pinf, n_ninf, n_none);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
