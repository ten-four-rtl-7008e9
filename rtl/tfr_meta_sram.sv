// tfr_meta_sram: TCU metadata SRAM holding Microscaling block scale factors.
// Two banks, as drawn next to the Ten-Four tensor core: bank 0 holds the
// E8M0 scales of the A rows (TCM per entry), bank 1 those of the B columns
// (TCN per entry). Scales are written from the register file, one 32-bit
// word (four scales) per cycle, when meta_req is high: wr_bank selects the
// bank, wr_addr the entry and wr_word the group of four scales within it.
// A read (rd_en) of entry rd_addr returns all scales of that entry from both
// banks one clock later, registered, and holds them until the next read.
// The paper shows only the blocks and their connection to the multiply
// stage; depth, word layout and read timing are this design's choices.
module tfr_meta_sram #(
  parameter int TCM   = 8,
  parameter int TCN   = 4,
  parameter int DEPTH = 16,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 meta_req,
  input  logic                 wr_bank,
  input  logic [AW-1:0]        wr_addr,
  input  logic [1:0]           wr_word,
  input  logic [31:0]          wr_data,
  input  logic                 rd_en,
  input  logic [AW-1:0]        rd_addr,
  output logic [TCM-1:0][7:0]  sf_a,
  output logic [TCN-1:0][7:0]  sf_b
);
  logic [TCM-1:0][7:0] bank_a [DEPTH];
  logic [TCN-1:0][7:0] bank_b [DEPTH];

  always_ff @(posedge clk) begin
    if (meta_req) begin
      for (int i = 0; i < 4; i++) begin
        if (!wr_bank && 4*wr_word + i < TCM) bank_a[wr_addr][4*wr_word + i] <= wr_data[8*i +: 8];
        if ( wr_bank && 4*wr_word + i < TCN) bank_b[wr_addr][4*wr_word + i] <= wr_data[8*i +: 8];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      sf_a <= bank_a[rd_addr];
      sf_b <= bank_b[rd_addr];
    end
  end
endmodule
