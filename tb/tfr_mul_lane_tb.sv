// tfr_mul_lane_tb: self-checking test of one shared multiplier lane. The
// lane's inputs come from the classifier, exponent adder and zero mask
// (each checked by its own testbench) for a single lane (K = 2, lane 0).
// Expected values are exact products worked out from the reference decode:
//   * FP16/BF16/TF32: the lane term sig * 2^(exp-151) must equal the exact
//     product, sign included;
//   * FP8/BF8 (and MX variants): the two products are put on the grid of
//     the larger one (2^(L-22), L its lead exponent), the smaller truncated,
//     and summed; the term must equal that sum and the lane sticky must be
//     set exactly when bits were truncated;
//   * MXINT8, INT8/UINT8, INT4/UINT4: the 25-bit field must hold the exact
//     signed sum of the products (MXINT8 as a magnitude with sign).
// Zero products are disabled through the slot enables, as in the FEDP.
// Combinational; a watchdog ends the run.
module tfr_mul_lane_tb;
  import tfr_pkg::*;
  import tfr_ref_pkg::*;
  int checks = 0, failures = 0;
  fmt_e fmt;
  logic [7:0] sf_a, sf_b;
  logic [0:0][1:0][15:0] a_row, b_col;
  fpel_t [1:0][SUB_N-1:0] a_el, b_el;
  logic [1:0][SUB_N-1:0] slot_en;
  logic [1:0] fmt_ok, lane_en;
  logic signed [SUB_N-1:0][EXP_W-1:0] exp_p;
  lane_t lane;
  logic cs, cz, ci, cn; logic [7:0] ce; logic [23:0] cm;

  tfr_classifier #(.K(2)) cls (.fmt(fmt), .a_row(a_row), .b_col(b_col), .c_val(32'h0),
    .a_el(a_el), .b_el(b_el), .c_sign(cs), .c_exp(ce), .c_man(cm), .c_zero(cz), .c_inf(ci), .c_nan(cn));
  tfr_zero_mask #(.K(2)) zm (.fmt(fmt), .vld_mask(2'b11), .a_row(a_row), .b_col(b_col),
    .slot_en(slot_en), .fmt_ok(fmt_ok), .lane_en(lane_en));
  tfr_exp_add ea (.fmt(fmt), .sf_a(sf_a), .sf_b(sf_b), .a_el(a_el[0]), .b_el(b_el[0]), .exp_p(exp_p));
  tfr_mul_lane dut (.fmt(fmt), .a_el(a_el[0]), .b_el(b_el[0]), .slot_en(slot_en[0]),
    .exp_p(exp_p), .lane(lane));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // compare (-1)^sg * m * 2^q with (-1)^lane.sign * lane.sig * 2^(lane.exp-151)
  function automatic bit same(bit sg, longint m, int q);
    longint g;
    int qg, d;
    g = longint'(lane.sig);
    qg = int'(lane.exp) - 151;
    if (m == 0 || g == 0) return (m == 0 && g == 0);
    if (sg != lane.sign) return 0;
    d = qg - q;
    if (d > 40 || d < -40) return 0;
    return (d >= 0) ? ((g <<< d) == m) : (g == (m <<< -d));
  endfunction

  initial begin
    bit [31:0] ar[], br[];
    ar = new[1]; br = new[1];
    for (int t = 0; t < 20000; t++) begin
      int xs;
      bit ok;
      fmt = fmt_e'($urandom_range(0, 11));
      sf_a = 8'($urandom_range(100, 154)); sf_b = 8'($urandom_range(100, 154));
      for (int s = 0; s < fmt_sub(fmt); s++) begin
        int hi;
        hi = (fmt_class(fmt) == CLS_FP8) ? 14 : ((fmt == FMT_FP16) ? 30 : 254);
        if (fmt == FMT_BF8 || fmt == FMT_MXBF8) hi = 30;
        put(fmt, ar, 0, s, rnd_elem(fmt, 0, hi, 15));
        put(fmt, br, 0, s, rnd_elem(fmt, 0, hi, 15));
      end
      if (fmt == FMT_BF16) begin   // keep BF16 products in a sane range
        ar[0][14:7] = 8'($urandom_range(60, 190)); br[0][14:7] = 8'($urandom_range(60, 190));
      end
      if (fmt == FMT_TF32) begin
        ar[0][30:23] = 8'($urandom_range(60, 190)); br[0][30:23] = 8'($urandom_range(60, 190));
      end
      a_row = ar[0]; b_col = br[0];
      #1;
      xs = fmt_is_mx(fmt) ? int'(sf_a) + int'(sf_b) - 254 : 0;
      if (fmt_is_int(fmt) || fmt == FMT_MXINT8) begin
        longint sum;
        sum = 0;
        for (int s = 0; s < fmt_sub(fmt); s++)
          sum += dec(fmt, elem(fmt, ar, 0, s)).man * dec(fmt, elem(fmt, br, 0, s)).man;
        if (fmt == FMT_MXINT8) ok = same(sum < 0, (sum < 0) ? -sum : sum, xs - 12);
        else                   ok = (longint'($signed(lane.sig)) == sum);
      end else if (fmt_class(fmt) == CLS_FP16) begin
        el_t a, b;
        a = dec(fmt, elem(fmt, ar, 0, 0)); b = dec(fmt, elem(fmt, br, 0, 0));
        ok = same(a.sign ^ b.sign, (a.zero || b.zero) ? 0 : a.man * b.man,
                  a.lead + b.lead - a.fbits - b.fbits);
      end else begin
        el_t a[2], b[2];
        int L[2], big;
        longint v[2], sum;
        bit lost, lst;
        for (int s = 0; s < 2; s++) begin
          a[s] = dec(fmt, elem(fmt, ar, 0, s)); b[s] = dec(fmt, elem(fmt, br, 0, s));
          L[s] = a[s].lead + b[s].lead;
        end
        if (a[0].zero || b[0].zero) big = 1;
        else if (a[1].zero || b[1].zero) big = 0;
        else big = (L[1] > L[0]) ? 1 : 0;
        sum = 0; lost = 0;
        for (int s = 0; s < 2; s++) begin
          if (a[s].zero || b[s].zero) continue;
          v[s] = shf(a[s].man * b[s].man, L[s] - a[s].fbits - b[s].fbits - (L[big] - 22), lst);
          lost |= lst;
          sum += (a[s].sign ^ b[s].sign) ? -v[s] : v[s];
        end
        ok = same(sum < 0, (sum < 0) ? -sum : sum, L[big] - 22 + xs) && (lane.sticky == lost);
      end
      checks++;
      if (!ok) begin
        failures++;
        if (failures < 8) $display("fmt %s a=%h b=%h got s%0d e%0d sig %h st %0d", fmt.name(), ar[0], br[0],
                                   lane.sign, lane.exp, lane.sig, lane.sticky);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
