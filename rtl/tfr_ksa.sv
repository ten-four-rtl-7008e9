// tfr_ksa: Kogge-Stone parallel-prefix adder.
// sum = a + b + cin over W bits, cout is the carry out of the top bit.
// Bit generate/propagate pairs are combined in ceil(log2 W) prefix levels,
// each node combining with the node 2^level positions below, so every level
// has fanout two. Combinational. Used for the final carry-propagate addition
// after every carry-save tree in the datapath.
module tfr_ksa #(
  parameter int W = 24
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,
  output logic [W-1:0] sum,
  output logic         cout
);
  localparam int L = (W > 1) ? $clog2(W + 1) : 1;

  // level l, position i; position 0 carries cin, position i+1 is bit i
  logic [W:0] g [L+1];
  logic [W:0] p [L+1];

  assign g[0] = {a & b, cin};
  assign p[0] = {a ^ b, 1'b0};

  generate
    for (genvar l = 0; l < L; l++) begin : g_lvl
      for (genvar i = 0; i <= W; i++) begin : g_node
        if (i >= (1 << l)) begin : g_comb
          assign g[l+1][i] = g[l][i] | (p[l][i] & g[l][i-(1<<l)]);
          assign p[l+1][i] = p[l][i] & p[l][i-(1<<l)];
        end else begin : g_pass
          assign g[l+1][i] = g[l][i];
          assign p[l+1][i] = p[l][i];
        end
      end
    end
  endgenerate

  assign sum  = p[0][W:1] ^ g[L][W-1:0];
  assign cout = g[L][W];
endmodule
