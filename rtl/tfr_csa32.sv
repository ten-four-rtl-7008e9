// tfr_csa32: one row of 3:2 carry-save compressors (full adders).
// Reduces three W-bit operands to a sum word and a carry word whose total
// equals a + b + c modulo 2^W. The carry word is already shifted left by one.
// Purely combinational. Used by the CSA trees for an odd operand left over.
module tfr_csa32 #(
  parameter int W = 8
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  output logic [W-1:0] sum,
  output logic [W-1:0] carry
);
  logic [W-1:0] maj;
  always_comb begin
    sum   = a ^ b ^ c;
    maj   = (a & b) | (a & c) | (b & c);
    carry = {maj[W-2:0], 1'b0};
  end
endmodule
