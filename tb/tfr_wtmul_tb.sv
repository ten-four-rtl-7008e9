// tfr_wtmul_tb: self-checking test of the Wallace tree multiplier at the three
// sizes the datapath uses: 11x11 (FP16/BF16/TF32 significands, MOD-4 tree),
// 8x8 (INT8 class) and 4x4 (FP8 and INT4 classes, standard tree). 11x11 and
// 4x4 are checked exhaustively at the edges and with random operands, 4x4
// fully; each product is compared with the integer product. Combinational;
// a watchdog ends the run.
module tfr_wtmul_tb;
  int checks = 0, failures = 0;
  logic [10:0] a11, b11; logic [21:0] p11;
  logic [7:0]  a8, b8;   logic [15:0] p8;
  logic [3:0]  a4, b4;   logic [7:0]  p4;

  tfr_wtmul                 u11 (.a(a11), .b(b11), .p(p11));
  tfr_wtmul #(.AW(8), .BW(8)) u8 (.a(a8), .b(b8), .p(p8));
  tfr_wtmul #(.AW(4), .BW(4)) u4 (.a(a4), .b(b4), .p(p4));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 8) $display("%s got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++) begin
        a4 = 4'(i); b4 = 4'(j); #1;
        chk(int'(p4), i * j, "4x4");
      end
    for (int t = 0; t < 4000; t++) begin
      a11 = 11'($urandom); b11 = 11'($urandom); a8 = 8'($urandom); b8 = 8'($urandom);
      if (t == 0) begin a11 = '1; b11 = '1; a8 = '1; b8 = '1; end
      if (t == 1) begin a11 = 11'h400; b11 = 11'h7FF; a8 = 8'h80; b8 = 8'h80; end
      #1;
      chk(int'(p11), int'(a11) * int'(b11), "11x11");
      chk(int'(p8), int'(a8) * int'(b8), "8x8");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
