// tfr_lzc: leading-zero counter used by the normalisation stage.
// cnt is the number of zeros above the most significant one of d (W when
// d is zero). Built as a binary tree: each node merges the counts of its two
// halves, taking the upper half's count unless that half is all zero.
// The width is padded internally to a power of two. Combinational.
module tfr_lzc #(
  parameter int W  = 31,
  parameter int CW = $clog2(W + 1)
) (
  input  logic [W-1:0]  d,
  output logic [CW-1:0] cnt
);
  localparam int L = (W > 1) ? $clog2(W) : 1;
  localparam int P = 1 << L;

  // level l holds P >> l nodes, each a zero flag and a count of l bits
  logic [P-1:0]      z   [L+1];
  logic [P-1:0][L:0] c   [L+1];
  logic [P-1:0]      pad;

  // pad the low end with ones so that they never count as leading zeros
  assign pad  = {d, {(P-W){1'b1}}};

  generate
    for (genvar i = 0; i < P; i++) begin : g_leaf
      assign z[0][i] = !pad[i];
      assign c[0][i] = (L+1)'(!pad[i]);
    end
    for (genvar l = 1; l <= L; l++) begin : g_lvl
      for (genvar i = 0; i < P; i++) begin : g_node
        if (i < (P >> l)) begin : g_real
          // node i merges hi = 2i+1 and lo = 2i of the level below
          assign z[l][i] = z[l-1][2*i+1] && z[l-1][2*i];
          assign c[l][i] = z[l-1][2*i+1] ? (L+1)'((1 << (l-1)) + c[l-1][2*i])
                                         : c[l-1][2*i+1];
        end else begin : g_none
          assign z[l][i] = 1'b0;
          assign c[l][i] = '0;
        end
      end
    end
  endgenerate

  assign cnt = (d == '0) ? CW'(W) : CW'(c[L][0]);
endmodule
