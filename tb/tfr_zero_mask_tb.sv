// tfr_zero_mask_tb: self-checking test of the input zero-operand valid mask.
// Random formats, random external lane masks and register contents that are
// zero in many places (and sometimes Inf/NaN) are applied. Expected values
// come from the reference decode: a product slot is active when its lane is
// valid, the lane and slot exist in the format, and both elements are
// non-zero or either is an infinity/NaN; a lane is enabled when any of its
// slots is. The number of gated (disabled but valid) lanes is reported and
// must be non-zero. Combinational; a watchdog ends the run.
module tfr_zero_mask_tb;
  import tfr_pkg::*;
  import tfr_ref_pkg::*;
  localparam int K = 8;
  int checks = 0, failures = 0, gated = 0;
  fmt_e fmt;
  logic [K-1:0] vld_mask, fmt_ok, lane_en;
  logic [K/2-1:0][31:0] a_row, b_col;
  logic [K-1:0][SUB_N-1:0] slot_en;

  tfr_zero_mask #(.K(K)) dut (.fmt(fmt), .vld_mask(vld_mask), .a_row(a_row), .b_col(b_col),
    .slot_en(slot_en), .fmt_ok(fmt_ok), .lane_en(lane_en));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit [31:0] ar[], br[];
    ar = new[K/2]; br = new[K/2];
    for (int t = 0; t < 4000; t++) begin
      fmt = fmt_e'($urandom_range(0, 11));
      vld_mask = (t % 3 == 0) ? '1 : K'($urandom);
      for (int l = 0; l < K; l++)
        for (int s = 0; s < fmt_sub(fmt); s++) begin
          bit [31:0] v;
          v = rnd_elem(fmt, 0, (fmt_class(fmt) == CLS_FP8) ? 15 : 31, 35);
          if ($urandom_range(0, 19) == 0 && !fmt_is_int(fmt)) v = 32'hFFFF_FFFF;   // NaN
          put(fmt, ar, l, s, v);
          v = rnd_elem(fmt, 0, (fmt_class(fmt) == CLS_FP8) ? 15 : 31, 35);
          put(fmt, br, l, s, v);
        end
      for (int i = 0; i < K/2; i++) begin a_row[i] = ar[i]; b_col[i] = br[i]; end
      #1;
      for (int l = 0; l < K; l++) begin
        logic [SUB_N-1:0] exp_s;
        bit ok_l;
        ok_l = vld_mask[l] && !(fmt == FMT_TF32 && l % 2 == 1);
        for (int s = 0; s < SUB_N; s++) begin
          el_t ea, eb;
          ea = dec(fmt, elem(fmt, ar, l, s));
          eb = dec(fmt, elem(fmt, br, l, s));
          exp_s[s] = ok_l && s < fmt_sub(fmt) &&
                     ((!ea.zero && !eb.zero) || ea.inf || ea.nan || eb.inf || eb.nan);
        end
        checks += 3;
        if (slot_en[l] !== exp_s) begin failures++; if (failures < 8) $display("lane %0d fmt %s slots %b exp %b", l, fmt.name(), slot_en[l], exp_s); end
        if (lane_en[l] !== (|exp_s)) failures++;
        if (fmt_ok[l] !== ok_l) failures++;
        if (ok_l && !(|exp_s)) gated++;
      end
    end
    checks++;
    if (gated == 0) failures++;
    $display("gated lanes seen: %0d", gated);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
