// tfr_meta_sram_tb: self-checking test of the metadata (MX scale factor)
// SRAM. Every entry of both banks is first written word by word, then
// random writes and reads are interleaved. A shadow copy in the testbench
// predicts each read; the read data must appear on the first clock edge
// after the read is requested (one-cycle read latency) and hold while no
// read is issued. A watchdog ends the run.
module tfr_meta_sram_tb;
  localparam int TCM = 8, TCN = 4, DEPTH = 16;
  int checks = 0, failures = 0, cyc = 0;
  logic clk = 0;
  logic meta_req = 0, wr_bank = 0, rd_en = 0;
  logic [3:0] wr_addr = 0, rd_addr = 0;
  logic [1:0] wr_word = 0;
  logic [31:0] wr_data = 0;
  logic [TCM-1:0][7:0] sf_a, exp_a;
  logic [TCN-1:0][7:0] sf_b, exp_b;
  logic [TCM-1:0][7:0] sh_a [DEPTH];
  logic [TCN-1:0][7:0] sh_b [DEPTH];

  tfr_meta_sram #(.TCM(TCM), .TCN(TCN), .DEPTH(DEPTH)) dut (.clk(clk), .meta_req(meta_req),
    .wr_bank(wr_bank), .wr_addr(wr_addr), .wr_word(wr_word), .wr_data(wr_data), .rd_en(rd_en),
    .rd_addr(rd_addr), .sf_a(sf_a), .sf_b(sf_b));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin : watchdog
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(bit bank, int addr, int word, bit [31:0] d);
    @(negedge clk);
    meta_req = 1; wr_bank = bank; wr_addr = 4'(addr); wr_word = 2'(word); wr_data = d; rd_en = 0;
    for (int i = 0; i < 4; i++) begin
      if (!bank && 4*word + i < TCM) sh_a[addr][4*word + i] = d[8*i +: 8];
      if ( bank && 4*word + i < TCN) sh_b[addr][4*word + i] = d[8*i +: 8];
    end
    @(negedge clk);
    meta_req = 0;
  endtask

  task automatic rd(int addr);
    @(negedge clk);
    rd_en = 1; rd_addr = 4'(addr);
    exp_a = sh_a[addr]; exp_b = sh_b[addr];
    @(posedge clk); #1;
    rd_en = 0;
    checks++;
    if (sf_a !== exp_a || sf_b !== exp_b) begin
      failures++;
      if (failures < 8) $display("read %0d got %h/%h exp %h/%h", addr, sf_a, sf_b, exp_a, exp_b);
    end
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (sf_a !== exp_a || sf_b !== exp_b) failures++;   // held without rd_en
  endtask

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      wr(0, a, 0, $urandom); wr(0, a, 1, $urandom); wr(1, a, 0, $urandom);
    end
    for (int t = 0; t < 400; t++) begin
      if ($urandom_range(0, 1)) wr($urandom_range(0, 1), $urandom_range(0, DEPTH-1), $urandom_range(0, 1), $urandom);
      rd($urandom_range(0, DEPTH-1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
