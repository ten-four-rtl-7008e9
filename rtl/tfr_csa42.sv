// tfr_csa42: one row of 4:2 compressors.
// Reduces four W-bit operands to a sum and a carry word whose total equals
// a + b + c + d modulo 2^W. Each 4:2 cell is built here as two stacked full
// adders, the second taking the first row's carry from the bit below, so the
// row has no carry propagation. Combinational.
module tfr_csa42 #(
  parameter int W = 8
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  input  logic [W-1:0] d,
  output logic [W-1:0] sum,
  output logic [W-1:0] carry
);
  logic [W-1:0] s1, c1;
  tfr_csa32 #(.W(W)) u_l1 (.a(a),  .b(b),  .c(c), .sum(s1),  .carry(c1));
  tfr_csa32 #(.W(W)) u_l2 (.a(s1), .b(c1), .c(d), .sum(sum), .carry(carry));
endmodule
