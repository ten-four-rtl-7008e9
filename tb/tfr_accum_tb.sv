// tfr_accum_tb: self-checking test of the stage-3 accumulator at the two
// FEDP sizes: nine operands (8 lanes + addend, MOD-4 grouping tree) and five
// operands (4 lanes + addend, standard tree). Random sign-magnitude FP terms
// with random signs, lane masks and sticky bits, and random two's complement
// integer terms, are applied. Expected: the signed sum of the unmasked
// terms (FP: +/- magnitude; INT: sign-extended 27-bit values) modulo 2^ACC_W,
// and the OR of the unmasked FP sticky bits. Combinational; a watchdog
// ends the run.
module tfr_accum_tb;
  import tfr_pkg::*;
  int checks = 0, failures = 0;
  logic is_int;
  logic [8:0] mask, signs, sti;
  logic [8:0][ALN_W-1:0] terms;
  logic [31:0] acc9;
  logic [30:0] acc5;
  logic st9, st5;

  tfr_accum #(.N(9)) u9 (.is_int(is_int), .mask(mask), .terms(terms), .signs(signs),
    .sticky_in(sti), .acc(acc9), .sticky(st9));
  tfr_accum #(.N(5)) u5 (.is_int(is_int), .mask(mask[4:0]), .terms(terms[4:0]), .signs(signs[4:0]),
    .sticky_in(sti[4:0]), .acc(acc5), .sticky(st5));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 6000; t++) begin
      longint s9, s5;
      bit e9, e5;
      is_int = (t % 4 == 0);
      mask  = (t % 3 == 0) ? '1 : 9'($urandom);
      signs = 9'($urandom);
      sti   = (t % 2) ? 9'($urandom) : '0;
      for (int i = 0; i < 9; i++) terms[i] = (t < 10) ? '1 : ALN_W'($urandom);
      #1;
      s9 = 0; s5 = 0; e9 = 0; e5 = 0;
      for (int i = 0; i < 9; i++) begin
        longint v;
        if (!mask[i]) continue;
        v = is_int ? longint'($signed(terms[i])) : (signs[i] ? -longint'(terms[i]) : longint'(terms[i]));
        s9 += v;
        e9 |= sti[i] && !is_int;
        if (i < 5) begin s5 += v; e5 |= sti[i] && !is_int; end
      end
      checks += 4;
      if (acc9 !== 32'(s9)) begin failures++; if (failures < 8) $display("N9 got %h exp %h", acc9, 32'(s9)); end
      if (acc5 !== 31'(s5)) begin failures++; if (failures < 8) $display("N5 got %h exp %h", acc5, 31'(s5)); end
      if (st9 !== e9) failures++;
      if (st5 !== e5) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
