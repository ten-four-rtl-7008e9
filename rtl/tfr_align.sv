// tfr_align: stage 2 of the FEDP, max exponent, shift amounts, alignment.
// The maximum exponent is the reduction OR of the exponents selected by the
// one-hot max mask. Each operand's shift amount is read from the stage-1
// difference matrix: entry (j,i) for the winning j, negated when the winner
// sits below the diagonal. No new subtractors are needed. Each significand
// gets XTRA_W = 2 extra bits below it and is shifted right; the bits
// shifted out are ORed into a per-operand sticky bit (shifts of ALN_W bits
// or more move everything into sticky). Integer operands pass through
// unshifted, sign-extended. Operand N-1 is the addend C. Combinational.
module tfr_align
  import tfr_pkg::*;
#(
  parameter int N = 9
) (
  input  logic                                  is_int,
  input  logic        [N-1:0]                   max_oh,
  input  logic signed [N*(N-1)/2-1:0][EXP_W:0]  diff,
  input  logic signed [N-1:0][EXP_W-1:0]        exps,
  input  logic        [N-1:0][SIG_W-1:0]        sigs,
  input  logic        [N-1:0]                   sticky_in,
  output logic signed [EXP_W-1:0]               emax,
  output logic        [N-1:0][ALN_W-1:0]        aligned,
  output logic        [N-1:0]                   sticky
);
  function automatic int tri_idx(int i, int j);
    return i*N - i*(i+1)/2 + (j-i-1);
  endfunction

  always_comb begin
    emax = '0;
    for (int i = 0; i < N; i++)
      emax |= max_oh[i] ? exps[i] : '0;

    for (int i = 0; i < N; i++) begin
      logic [EXP_W:0]        sh;     // e_max - e_i, never negative
      logic [2*ALN_W-1:0]    wide;
      sh = '0;
      wide = '0;
      for (int j = 0; j < N; j++) begin
        if (j < i)      sh |= max_oh[j] ?  diff[tri_idx(j, i)] : '0;
        else if (j > i) sh |= max_oh[j] ? -diff[tri_idx(i, j)] : '0;
      end
      if (is_int) begin
        aligned[i] = ALN_W'($signed(sigs[i]));
        sticky[i]  = 1'b0;
      end else if (sh >= (EXP_W+1)'(ALN_W)) begin
        aligned[i] = '0;
        sticky[i]  = (|sigs[i]) || sticky_in[i];
      end else begin
        wide       = {sigs[i], {XTRA_W{1'b0}}, {ALN_W{1'b0}}} >> sh[SHF_W-1:0];
        aligned[i] = wide[2*ALN_W-1 -: ALN_W];
        sticky[i]  = (|wide[ALN_W-1:0]) || sticky_in[i];
      end
    end
  end
endmodule
