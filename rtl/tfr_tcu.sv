// tfr_tcu: a tensor core built from Ten-Four FEDP units.
// A TCM x TCN = 8 x 4 grid of K = 8 lane FEDPs computes one MMA step
//     D[m][n] = sum_k A[m][k] * B[k][n] + C[m][n]
// for a whole tile per clock: every FEDP of row m shares A row m, every
// FEDP of column n shares B column n, and each has its own C and D word.
// With the 32-thread layout this is an 8x4x8 FP16 (8x4x16 FP8) step. All
// FEDPs share the format, lane mask, pipeline enable and valid, so the grid
// has the latency and throughput of one FEDP (result four enabled clock
// edges after capture, one tile per cycle).
// Microscaling scales come from the metadata SRAM: row m uses A scale m,
// column n uses B scale n, read one cycle before the operation is issued
// (meta_rd_en / meta_rd_addr). Scale words are written from the register
// file side with meta_req. The grid size and FEDP width follow the paper;
// the SRAM organisation and tile port layout are this design's choices.
module tfr_tcu
  import tfr_pkg::*;
#(
  parameter int TCM        = 8,
  parameter int TCN        = 4,
  parameter int K          = 8,
  parameter int META_DEPTH = 16,
  parameter int MAW        = $clog2(META_DEPTH)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           en,
  input  logic                           valid_in,
  input  fmt_e                           fmt_s,
  input  logic [K-1:0]                   vld_mask,
  input  logic [TCM-1:0][K/2-1:0][31:0]  a_tile,
  input  logic [TCN-1:0][K/2-1:0][31:0]  b_tile,
  input  logic [TCM-1:0][TCN-1:0][31:0]  c_tile,
  // metadata (scale factor) write from the register file, and read
  input  logic                           meta_req,
  input  logic                           meta_bank,
  input  logic [MAW-1:0]                 meta_addr,
  input  logic [1:0]                     meta_word,
  input  logic [31:0]                    meta_data,
  input  logic                           meta_rd_en,
  input  logic [MAW-1:0]                 meta_rd_addr,
  output logic                           valid_out,
  output logic [TCM-1:0][TCN-1:0][31:0]  d_tile
);
  logic [TCM-1:0][7:0]           sf_a;
  logic [TCN-1:0][7:0]           sf_b;
  logic [TCM-1:0][TCN-1:0]       v_out;

  tfr_meta_sram #(.TCM(TCM), .TCN(TCN), .DEPTH(META_DEPTH)) u_meta (
    .clk(clk), .meta_req(meta_req), .wr_bank(meta_bank), .wr_addr(meta_addr),
    .wr_word(meta_word), .wr_data(meta_data), .rd_en(meta_rd_en), .rd_addr(meta_rd_addr),
    .sf_a(sf_a), .sf_b(sf_b)
  );

  for (genvar m = 0; m < TCM; m++) begin : g_row
    for (genvar n = 0; n < TCN; n++) begin : g_col
      tfr_fedp #(.K(K)) u_fedp (
        .clk(clk), .rst_n(rst_n), .en(en), .valid_in(valid_in),
        .fmt_s(fmt_s), .sf_a(sf_a[m]), .sf_b(sf_b[n]), .vld_mask(vld_mask),
        .a_row(a_tile[m]), .b_col(b_tile[n]), .c_val(c_tile[m][n]),
        .valid_out(v_out[m][n]), .d_val(d_tile[m][n])
      );
    end
  end

  // every FEDP sees the same valid sequence
  assign valid_out = v_out[0][0];

  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) (&v_out) || !(|v_out));
endmodule
