// tfr_csa_tree: standard carry-save reduction tree.
// Reduces N operands of W bits to one sum and one carry word (total equal to
// the sum of the operands modulo 2^W). Following the Ten-Four description, it
// is a recursive chain of 4:2 compressors: the first takes OP[0..3], every
// further one takes the previous sum/carry pair and the next two operands,
// and a final 3:2 compressor absorbs an odd operand left over. Callers
// sign-extend operands to W bits beforehand. Combinational, no clock.
module tfr_csa_tree #(
  parameter int N = 6,
  parameter int W = 30
) (
  input  logic [N-1:0][W-1:0] ops,
  output logic [W-1:0]        sum,
  output logic [W-1:0]        carry
);
  localparam int S42 = (N >= 4) ? 1 + (N - 4) / 2 : 0;
  localparam int ODD = (N >= 4) ? (N - 4) % 2 : ((N == 3) ? 1 : 0);
  localparam int SN  = (S42 > 0) ? S42 : 1;

  logic [SN-1:0][W-1:0] s_q, c_q;
  logic [W-1:0]         s_last, c_last;

  generate
    if (N == 1) begin : g_one
      assign s_last = ops[0];
      assign c_last = '0;
    end else if (N == 2 || N == 3) begin : g_two
      assign s_last = ops[0];
      assign c_last = ops[1];
    end else begin : g_chain
      for (genvar k = 0; k < S42; k++) begin : g_st
        if (k == 0) begin : g_first
          tfr_csa42 #(.W(W)) u_c (.a(ops[0]), .b(ops[1]), .c(ops[2]), .d(ops[3]),
                                 .sum(s_q[0]), .carry(c_q[0]));
        end else begin : g_next
          tfr_csa42 #(.W(W)) u_c (.a(s_q[k-1]), .b(c_q[k-1]), .c(ops[2+2*k]), .d(ops[3+2*k]),
                                 .sum(s_q[k]), .carry(c_q[k]));
        end
      end
      assign s_last = s_q[S42-1];
      assign c_last = c_q[S42-1];
    end
    if (S42 == 0) begin : g_unused
      assign s_q = '0;
      assign c_q = '0;
    end
    if (ODD == 1) begin : g_odd
      tfr_csa32 #(.W(W)) u_c (.a(s_last), .b(c_last), .c(ops[N-1]), .sum(sum), .carry(carry));
    end else begin : g_even
      assign sum   = s_last;
      assign carry = c_last;
    end
  endgenerate
endmodule
