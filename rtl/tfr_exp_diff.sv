// tfr_exp_diff: difference matrix and maximum-exponent index (stage 1).
// For N exponents (the K lane exponents and the addend's, last) every
// pairwise difference e_i - e_j with i < j is computed in parallel: only the
// upper triangle, N(N-1)/2 subtractors. The sign bit of each difference
// orders its pair; the lower triangle is the complement of those sign bits.
// Operand i is the maximum when it is at least every other valid exponent
// (ties go to the lowest index), found by a reduction AND per row, and
// invalid operands (masked lanes, zero addend) never win (the NOR term).
// max_oh is one-hot, or zero when no operand is valid. diff is passed on so
// that stage 2 derives shift amounts without new subtractors.
// Triangle entry (i,j), i<j, sits at index i*N - i*(i+1)/2 + (j-i-1).
// Combinational.
module tfr_exp_diff
  import tfr_pkg::*;
#(
  parameter int N = 9
) (
  input  logic signed [N-1:0][EXP_W-1:0]         exps,
  input  logic        [N-1:0]                    valid,
  output logic signed [N*(N-1)/2-1:0][EXP_W:0]   diff,
  output logic        [N-1:0]                    max_oh
);
  function automatic int tri_idx(int i, int j);
    return i*N - i*(i+1)/2 + (j-i-1);
  endfunction

  logic [N-1:0][N-1:0] wins;   // wins[i][j]: operand i is not beaten by j

  always_comb begin
    for (int i = 0; i < N; i++)
      for (int j = i + 1; j < N; j++)
        diff[tri_idx(i, j)] = (EXP_W+1)'($signed(exps[i])) - (EXP_W+1)'($signed(exps[j]));
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) begin
        if (j == i)     wins[i][j] = 1'b1;
        else if (i < j) wins[i][j] = !diff[tri_idx(i, j)][EXP_W] || !valid[j];  // e_i >= e_j
        else            wins[i][j] =  diff[tri_idx(j, i)][EXP_W] || !valid[j];  // e_i >  e_j
      end
      max_oh[i] = valid[i] && (&wins[i]);
    end
  end
endmodule
