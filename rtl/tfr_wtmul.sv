// tfr_wtmul: unsigned Wallace tree multiplier, p = a * b.
// The AW partial products (b shifted by each bit of a) are reduced with a
// carry-save tree (the MOD-4 grouping tree from seven partial products up,
// the standard 4:2 chain below that) and summed by a Kogge-Stone adder.
// No Booth recoding, as in Ten-Four, whose multipliers are 4 to 11 bits
// wide. Combinational.
module tfr_wtmul #(
  parameter int AW = 11,
  parameter int BW = 11
) (
  input  logic [AW-1:0]    a,
  input  logic [BW-1:0]    b,
  output logic [AW+BW-1:0] p
);
  localparam int PW = AW + BW;
  logic [AW-1:0][PW-1:0] pp;
  logic [PW-1:0]         s, c;

  always_comb begin
    for (int i = 0; i < AW; i++)
      pp[i] = a[i] ? (PW'(b) << i) : '0;
  end

  generate
    if (AW >= 7) begin : g_mod4
      tfr_csa_mod4 #(.N(AW), .W(PW)) u_red (.ops(pp), .sum(s), .carry(c));
    end else begin : g_std
      tfr_csa_tree #(.N(AW), .W(PW)) u_red (.ops(pp), .sum(s), .carry(c));
    end
  endgenerate

  logic unused_cout;
  tfr_ksa #(.W(PW)) u_add (.a(s), .b(c), .cin(1'b0), .sum(p), .cout(unused_cout));
endmodule
