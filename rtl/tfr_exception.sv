// tfr_exception: IEEE-754 exception handling of one dot product (stage 1).
// Works from the classified inputs, in parallel with the datapath. Only
// active product slots are examined (the zero mask keeps every slot holding
// an infinity or NaN active, and the others' registers may be stale). Each
// active product slot raises NaN when an input is NaN or it is
// infinity times zero, and is an infinity of sign sA^sB when an input is
// infinite. Over the whole sum the result is NaN when any product or the
// addend is NaN, when infinities of both signs meet (products and addend),
// or, for MX formats, when a block scale is the E8M0 NaN (0xFF); otherwise
// it is an infinity when any term is. Integer formats raise nothing.
// Output exc carries the flags and the infinity's sign. Combinational.
module tfr_exception
  import tfr_pkg::*;
#(
  parameter int K = 8
) (
  input  fmt_e                       fmt,
  input  logic [K-1:0][SUB_N-1:0]    slot_en,   // active product slots
  input  fpel_t [K-1:0][SUB_N-1:0]   a_el,
  input  fpel_t [K-1:0][SUB_N-1:0]   b_el,
  input  logic                       c_sign,
  input  logic                       c_inf,
  input  logic                       c_nan,
  input  logic [7:0]                 sf_a,
  input  logic [7:0]                 sf_b,
  output exc_t                       exc
);
  always_comb begin
    logic any_nan, pos_inf, neg_inf;
    exc     = '0;
    any_nan = c_nan;
    pos_inf = c_inf && !c_sign;
    neg_inf = c_inf &&  c_sign;
    if (fmt_is_mx(fmt) && (sf_a == 8'hFF || sf_b == 8'hFF)) any_nan = 1'b1;
    for (int l = 0; l < K; l++) begin
      for (int s = 0; s < SUB_N; s++) begin
        fpel_t a, b;
        a = a_el[l][s];
        b = b_el[l][s];
        if (slot_en[l][s]) begin
          if (a.nan || b.nan || (a.inf && b.zero) || (b.inf && a.zero))
            any_nan = 1'b1;
          else if (a.inf || b.inf) begin
            if (a.sign ^ b.sign) neg_inf = 1'b1;
            else                 pos_inf = 1'b1;
          end
        end
      end
    end
    if (!fmt_is_int(fmt)) begin
      exc.nan  = any_nan || (pos_inf && neg_inf);
      exc.inf  = !exc.nan && (pos_inf || neg_inf);
      exc.sign = neg_inf;
    end
  end
endmodule
