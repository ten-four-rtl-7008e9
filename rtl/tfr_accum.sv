// tfr_accum: stage 3 of the FEDP, the shared multi-operand accumulator.
// Inputs are the N aligned terms (K lanes and the addend, last). Terms of
// masked-off lanes are first ANDed to zero, since clock-gated lane registers
// still hold stale values. FP terms are sign-magnitude: each is zero-extended
// to ACC_W bits and, when negative, only bit-inverted; the missing +1s are
// added as one extra operand, the popcount of the negative signs. Integer
// terms are already two's complement and are sign-extended. The N+1
// operands are reduced by the MOD-4 grouping CSA when there are seven or
// more of them, by the standard 4:2 chain otherwise (chosen at elaboration),
// and summed by a Kogge-Stone adder. The per-lane sticky bits are ORed.
// acc is the signed sum; ACC_W = ALN_W + 1 + clog2(N+1) (32 for K = 8).
// Combinational.
module tfr_accum
  import tfr_pkg::*;
#(
  parameter int N     = 9,
  parameter int ACC_W = ALN_W + 1 + $clog2(N + 1)
) (
  input  logic                      is_int,
  input  logic [N-1:0]              mask,
  input  logic [N-1:0][ALN_W-1:0]   terms,
  input  logic [N-1:0]              signs,
  input  logic [N-1:0]              sticky_in,
  output logic [ACC_W-1:0]          acc,
  output logic                      sticky
);
  localparam int NOPS = N + 1;
  localparam int CW   = $clog2(N + 1);

  logic [NOPS-1:0][ACC_W-1:0] ops;
  logic [CW-1:0]              n_neg;
  logic [ACC_W-1:0]           cs, cc;
  logic                       unused_co;

  always_comb begin
    n_neg  = '0;
    sticky = 1'b0;
    for (int i = 0; i < N; i++) begin
      logic [ALN_W-1:0] t;
      t = mask[i] ? terms[i] : '0;
      if (is_int) begin
        ops[i] = ACC_W'($signed(t));
      end else if (mask[i] && signs[i]) begin
        ops[i] = ~ACC_W'(t);
        n_neg  = n_neg + CW'(1);
      end else begin
        ops[i] = ACC_W'(t);
      end
      sticky = sticky || (mask[i] && sticky_in[i] && !is_int);
    end
    ops[N] = ACC_W'(n_neg);
  end

  generate
    if (NOPS >= 7) begin : g_mod4
      tfr_csa_mod4 #(.N(NOPS), .W(ACC_W)) u_csa (.ops(ops), .sum(cs), .carry(cc));
    end else begin : g_std
      tfr_csa_tree #(.N(NOPS), .W(ACC_W)) u_csa (.ops(ops), .sum(cs), .carry(cc));
    end
  endgenerate

  tfr_ksa #(.W(ACC_W)) u_add (.a(cs), .b(cc), .cin(1'b0), .sum(acc), .cout(unused_co));
endmodule
