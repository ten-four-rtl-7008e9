// tfr_align_tb: self-checking test of stage-2 alignment. A difference
// matrix (checked by its own testbench) feeds the aligner with random
// exponents, significands and incoming sticky bits. Expected: e_max is the
// largest exponent; each FP operand's aligned value is
// floor(sig * 4 / 2^(e_max - e_i)) and its sticky is the OR of the bits
// shifted out and its incoming sticky; integer operands pass through
// sign-extended with no sticky. Combinational; a watchdog ends the run.
module tfr_align_tb;
  import tfr_pkg::*;
  localparam int N = 9;
  int checks = 0, failures = 0;
  logic is_int;
  logic signed [N-1:0][EXP_W-1:0] exps;
  logic [N-1:0] max_oh, sticky_in, sticky;
  logic signed [N*(N-1)/2-1:0][EXP_W:0] diff;
  logic [N-1:0][SIG_W-1:0] sigs;
  logic [N-1:0][ALN_W-1:0] aligned;
  logic signed [EXP_W-1:0] emax;

  tfr_exp_diff #(.N(N)) ed (.exps(exps), .valid('1), .diff(diff), .max_oh(max_oh));
  tfr_align #(.N(N)) dut (.is_int(is_int), .max_oh(max_oh), .diff(diff), .exps(exps), .sigs(sigs),
    .sticky_in(sticky_in), .emax(emax), .aligned(aligned), .sticky(sticky));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 5000; t++) begin
      int m;
      is_int = (t % 5 == 0);
      for (int i = 0; i < N; i++) begin
        exps[i] = EXP_W'(100 + $urandom_range(0, (t % 3 == 0) ? 60 : 12));
        sigs[i] = SIG_W'($urandom);
      end
      sticky_in = (t % 2) ? N'($urandom) : '0;
      #1;
      m = -1000;
      for (int i = 0; i < N; i++) if (int'($signed(exps[i])) > m) m = int'($signed(exps[i]));
      checks++;
      if (!is_int && int'(emax) != m) begin failures++; if (failures < 8) $display("emax %0d exp %0d", emax, m); end
      for (int i = 0; i < N; i++) begin
        longint v, ev;
        bit es;
        int sh;
        v = longint'(sigs[i]) <<< 2;
        sh = m - int'($signed(exps[i]));
        if (is_int) begin
          ev = longint'($signed(sigs[i])); es = 0;
          checks += 2;
          if (longint'($signed(aligned[i])) != ev) failures++;
          if (sticky[i] != 0) failures++;
        end else begin
          ev = (sh >= 62) ? 0 : v >>> sh;
          es = ((sh >= 62) ? (v != 0) : ((v & ((64'sd1 <<< sh) - 1)) != 0)) || sticky_in[i];
          checks += 2;
          if (longint'(aligned[i]) != ev) begin failures++; if (failures < 8) $display("op %0d sh %0d got %h exp %h", i, sh, aligned[i], ev); end
          if (sticky[i] != es) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
