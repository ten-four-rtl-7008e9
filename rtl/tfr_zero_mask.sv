// tfr_zero_mask: input zero-operand valid mask (sparse lane mask source).
// Runs ahead of the first pipeline register. A product slot of a lane is
// active when the lane is enabled by vld_mask, exists in the selected
// format (TF32 uses even lanes only; FP16-class formats one slot, 8-bit
// formats two, 4-bit formats four) and neither of its A/B elements is zero.
// A slot whose A or B element is an infinity or NaN stays active so that
// exception detection still sees it. lane_en is the OR of a lane's slots;
// it clock-enables that lane's pipeline registers and masks the lane out of
// the accumulation. fmt_ok says whether a lane exists at all (for the
// exception logic). Combinational.
module tfr_zero_mask
  import tfr_pkg::*;
#(
  parameter int K = 8
) (
  input  fmt_e                       fmt,
  input  logic [K-1:0]               vld_mask,
  input  logic [K/2-1:0][1:0][15:0]  a_row,
  input  logic [K/2-1:0][1:0][15:0]  b_col,
  output logic [K-1:0][SUB_N-1:0]    slot_en,
  output logic [K-1:0]               fmt_ok,
  output logic [K-1:0]               lane_en
);
  // Returns {nonzero, special} for slot s of a lane's 32-bit view.
  function automatic logic [1:0] probe(fmt_e f, logic [31:0] r, int s);
    logic [7:0] v8;
    logic [3:0] v4;
    v8 = r[8*s +: 8];
    v4 = r[4*s +: 4];
    case (f)
      FMT_FP16:            return {r[14:0] != 0,  r[14:10] == 5'h1F};
      FMT_BF16:            return {r[14:0] != 0,  r[14:7]  == 8'hFF};
      FMT_TF32:            return {r[30:13] != 0, r[30:23] == 8'hFF};
      FMT_FP8, FMT_MXFP8:  return {v8[6:0] != 0,  v8[6:0]  == 7'h7F};
      FMT_BF8, FMT_MXBF8:  return {v8[6:0] != 0,  v8[6:2]  == 5'h1F};
      FMT_INT4, FMT_UINT4: return {v4 != 0, 1'b0};
      default:             return {v8 != 0, 1'b0};
    endcase
  endfunction

  always_comb begin
    for (int l = 0; l < K; l++) begin
      logic [31:0] ra, rb;
      logic [1:0]  pa, pb;
      if (fmt == FMT_TF32) begin
        ra = {a_row[l/2][1], a_row[l/2][0]};
        rb = {b_col[l/2][1], b_col[l/2][0]};
      end else begin
        ra = {16'b0, a_row[l/2][l%2]};
        rb = {16'b0, b_col[l/2][l%2]};
      end
      fmt_ok[l] = vld_mask[l] && !(fmt == FMT_TF32 && (l % 2) == 1) && !(fmt > FMT_UINT4);
      for (int s = 0; s < SUB_N; s++) begin
        pa = probe(fmt, ra, s);
        pb = probe(fmt, rb, s);
        slot_en[l][s] = fmt_ok[l] && (s < fmt_sub(fmt)) &&
                        ((pa[1] && pb[1]) || pa[0] || pb[0]);
      end
      lane_en[l] = |slot_en[l];
    end
  end
endmodule
