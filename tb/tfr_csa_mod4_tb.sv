// tfr_csa_mod4_tb: self-checking test of the MOD-4 operand-grouping
// carry-save tree. Two instances: the ten operands of the 8-element FEDP
// (two groups of four plus two) and seven operands (the smallest count for
// which the grouping tree is chosen). Random and all-ones operand sets; the
// check is that sum + carry equals the integer sum modulo 2^W.
// Combinational; one check per vector; a watchdog ends the run.
module tfr_csa_mod4_tb;
  localparam int W = 30;
  int checks = 0, failures = 0;
  logic [9:0][W-1:0] ops6;
  logic [6:0][W-1:0] ops5;
  logic [W-1:0] s6, c6, s5, c5;

  tfr_csa_mod4 #(.N(10), .W(W)) u6 (.ops(ops6), .sum(s6), .carry(c6));
  tfr_csa_mod4 #(.N(7), .W(W)) u5 (.ops(ops5), .sum(s5), .carry(c5));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] e6, e5;
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < 10; i++) ops6[i] = (t < 20) ? {W{1'b1}} >> (t % 3) : W'($urandom);
      for (int i = 0; i < 7; i++) ops5[i] = (t % 7 == 0) ? {W{1'b1}} : W'($urandom);
      #1;
      e6 = '0; e5 = '0;
      for (int i = 0; i < 10; i++) e6 += ops6[i];
      for (int i = 0; i < 7; i++) e5 += ops5[i];
      checks += 2;
      if (W'(s6 + c6) !== e6) begin failures++; if (failures < 5) $display("N=10 mismatch %h %h", W'(s6 + c6), e6); end
      if (W'(s5 + c5) !== e5) begin failures++; if (failures < 5) $display("N=7 mismatch %h %h", W'(s5 + c5), e5); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
