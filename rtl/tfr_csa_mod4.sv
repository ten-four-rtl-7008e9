// tfr_csa_mod4: MOD-4 operand grouping carry-save reduction tree.
// Used when seven or more operands are summed. Operands are taken in groups
// of four; each group is compressed by its own 4:2 row, all groups in
// parallel. The group sum/carry pairs and the N mod 4 remaining operands
// then go through a standard 4:2 chain (tfr_csa_tree), group results first.
// For the Ten-Four ten-operand case this is exactly: OP[0..3] and OP[4..7]
// in parallel, a 4:2 joining them, and a last 4:2 taking OP[8] and OP[9].
// Output: sum and carry words, total equal to the operand sum modulo 2^W.
// Combinational.
module tfr_csa_mod4 #(
  parameter int N = 10,
  parameter int W = 30
) (
  input  logic [N-1:0][W-1:0] ops,
  output logic [W-1:0]        sum,
  output logic [W-1:0]        carry
);
  localparam int G   = N / 4;
  localparam int REM = N % 4;
  localparam int N2  = 2 * G + REM;

  logic [N2-1:0][W-1:0] lvl2;

  generate
    for (genvar g = 0; g < G; g++) begin : g_grp
      tfr_csa42 #(.W(W)) u_c (.a(ops[4*g]), .b(ops[4*g+1]), .c(ops[4*g+2]), .d(ops[4*g+3]),
                             .sum(lvl2[2*g]), .carry(lvl2[2*g+1]));
    end
    for (genvar r = 0; r < REM; r++) begin : g_rem
      assign lvl2[2*G+r] = ops[4*G+r];
    end
  endgenerate

  tfr_csa_tree #(.N(N2), .W(W)) u_tail (.ops(lvl2), .sum(sum), .carry(carry));
endmodule
