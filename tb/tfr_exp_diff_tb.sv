// tfr_exp_diff_tb: self-checking test of the exponent difference matrix and
// max-index logic for the nine operands of the 8-lane FEDP. Random signed
// exponents (often with ties, and random valid masks) are applied. Every
// upper-triangle entry (i,j), i<j, must be e_i - e_j; the one-hot max mask
// must mark the lowest-indexed valid operand holding the largest exponent,
// and be zero when no operand is valid. Combinational; a watchdog ends
// the run.
module tfr_exp_diff_tb;
  import tfr_pkg::*;
  localparam int N = 9;
  int checks = 0, failures = 0;
  logic signed [N-1:0][EXP_W-1:0] exps;
  logic [N-1:0] valid, max_oh;
  logic signed [N*(N-1)/2-1:0][EXP_W:0] diff;

  tfr_exp_diff #(.N(N)) dut (.exps(exps), .valid(valid), .diff(diff), .max_oh(max_oh));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 5000; t++) begin
      int best, k;
      logic [N-1:0] e_oh;
      for (int i = 0; i < N; i++)
        exps[i] = (t % 2) ? EXP_W'($urandom_range(0, 7) + 120) : EXP_W'($urandom);
      valid = (t % 4 == 0) ? '1 : N'($urandom);
      if (t == 7) valid = '0;
      #1;
      k = 0;
      for (int i = 0; i < N; i++)
        for (int j = i + 1; j < N; j++) begin
          checks++;
          if (int'($signed(diff[k])) != int'($signed(exps[i])) - int'($signed(exps[j]))) begin
            failures++;
            if (failures < 8) $display("diff(%0d,%0d) got %0d", i, j, $signed(diff[k]));
          end
          k++;
        end
      best = -1;
      for (int i = 0; i < N; i++)
        if (valid[i] && (best < 0 || $signed(exps[i]) > $signed(exps[best]))) best = i;
      e_oh = (best < 0) ? '0 : N'(1) << best;
      checks++;
      if (max_oh !== e_oh) begin failures++; if (failures < 8) $display("max_oh %b exp %b", max_oh, e_oh); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
