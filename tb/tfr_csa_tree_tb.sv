// tfr_csa_tree_tb: self-checking test of the standard carry-save reduction
// tree. Random operand sets (and corner sets of all ones) are applied to two
// instances, one with the six operands of the 4-element FEDP and one with an
// odd count (5) that exercises the trailing 3:2 row. The check is that
// sum + carry equals the arithmetic sum of the operands modulo 2^W, computed
// here with plain integer addition. Purely combinational: one check per
// applied vector after a 1-time-unit settle. A watchdog ends the run.
module tfr_csa_tree_tb;
  localparam int W = 30;
  int checks = 0, failures = 0;
  logic [5:0][W-1:0] ops6;
  logic [4:0][W-1:0] ops5;
  logic [W-1:0] s6, c6, s5, c5;

  tfr_csa_tree #(.N(6), .W(W)) u6 (.ops(ops6), .sum(s6), .carry(c6));
  tfr_csa_tree #(.N(5), .W(W)) u5 (.ops(ops5), .sum(s5), .carry(c5));

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
      for (int i = 0; i < 6; i++) ops6[i] = (t < 20) ? {W{1'b1}} >> (t % 3) : W'($urandom);
      for (int i = 0; i < 5; i++) ops5[i] = (t % 7 == 0) ? {W{1'b1}} : W'($urandom);
      #1;
      e6 = '0; e5 = '0;
      for (int i = 0; i < 6; i++) e6 += ops6[i];
      for (int i = 0; i < 5; i++) e5 += ops5[i];
      checks += 2;
      if (W'(s6 + c6) !== e6) begin failures++; if (failures < 5) $display("N=6 mismatch %h %h", W'(s6 + c6), e6); end
      if (W'(s5 + c5) !== e5) begin failures++; if (failures < 5) $display("N=5 mismatch %h %h", W'(s5 + c5), e5); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
