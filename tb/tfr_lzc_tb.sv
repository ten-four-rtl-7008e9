// tfr_lzc_tb: self-checking test of the leading-zero counter at its default
// 31-bit width and at 8 bits. For every possible leading-one position (and
// the all-zero word, which must report W) random lower bits are applied and
// the count is compared with a simple loop from the top bit down.
// Combinational; a watchdog ends the run.
module tfr_lzc_tb;
  int checks = 0, failures = 0;
  logic [30:0] d;  logic [4:0] c;
  logic [7:0]  d8; logic [3:0] c8;

  tfr_lzc            u31 (.d(d), .cnt(c));
  tfr_lzc #(.W(8))   u8  (.d(d8), .cnt(c8));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_lz(logic [30:0] x, int w);
    for (int i = w - 1; i >= 0; i--) if (x[i]) return w - 1 - i;
    return w;
  endfunction

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int pos;
      pos = $urandom_range(0, 31);            // 31 means all zero
      d = (pos == 31) ? '0 : ((31'(1) << pos) | (31'($urandom) & ((31'(1) << pos) - 1)));
      pos = $urandom_range(0, 8);
      d8 = (pos == 8) ? '0 : ((8'(1) << pos) | (8'($urandom) & ((8'(1) << pos) - 1)));
      #1;
      checks += 2;
      if (int'(c) != ref_lz(d, 31)) begin failures++; if (failures < 5) $display("W31 d=%h got %0d exp %0d", d, c, ref_lz(d, 31)); end
      if (int'(c8) != ref_lz(31'(d8), 8)) begin failures++; if (failures < 5) $display("W8 d=%h got %0d", d8, c8); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
