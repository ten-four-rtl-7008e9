// tfr_norm_round_tb: self-checking test of stage 4. Random signed
// accumulator values (weight of the LSB 2^(e_max - 153)), sticky bits and
// maximum exponents covering normal, subnormal and overflowing results are
// rounded and compared with an independent round-to-nearest-even conversion
// from the reference package. Exception flags must override the result with
// the canonical NaN or a signed infinity. For integer formats the result
// must be {C_HI + acc[31:25], acc[24:0]}. Combinational; a watchdog ends
// the run; counts of subnormal and overflow cases must be non-zero.
module tfr_norm_round_tb;
  import tfr_pkg::*;
  import tfr_ref_pkg::*;
  int checks = 0, failures = 0, n_sub = 0, n_ovf = 0;
  logic is_int, sti;
  logic [31:0] acc, result;
  logic signed [EXP_W-1:0] emax;
  logic [6:0] c_hi;
  exc_t exc;

  tfr_norm_round dut (.is_int(is_int), .acc(acc), .sticky_in(sti), .emax(emax), .c_hi(c_hi),
    .exc(exc), .result(result));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20000; t++) begin
      bit [31:0] e;
      longint a;
      is_int = (t % 6 == 0);
      acc = $urandom;
      if (t % 3 == 1) acc = acc >> $urandom_range(0, 31);
      if (t % 7 == 2) acc = -(acc >> $urandom_range(0, 31));
      sti  = 1'($urandom);
      emax = EXP_W'($urandom_range(0, 420));
      c_hi = 7'($urandom);
      exc  = '0;
      if (t % 23 == 0) exc.nan = 1;
      else if (t % 19 == 0) begin exc.inf = 1; exc.sign = 1'($urandom); end
      #1;
      a = longint'($signed(acc));
      if (is_int)       e = {c_hi + acc[31:25], acc[24:0]};
      else if (exc.nan) e = CANON_NAN;
      else if (exc.inf) e = {exc.sign, 8'hFF, 23'd0};
      else              e = to_fp32(a < 0, (a < 0) ? -a : a, int'(emax) - 153, sti);
      if (!is_int && !exc.nan && !exc.inf) begin
        if (e[30:23] == 0 && e[22:0] != 0) n_sub++;
        if (e[30:23] == 8'hFF) n_ovf++;
      end
      checks++;
      if (result !== e) begin
        failures++;
        if (failures < 8) $display("int%0d acc=%h emax=%0d st=%0d got %h exp %h", is_int, acc, emax, sti, result, e);
      end
    end
    checks += 2;
    if (n_sub == 0) failures++;
    if (n_ovf == 0) failures++;
    $display("subnormal results %0d, overflows %0d", n_sub, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
