// tfr_tcu_tb: end-to-end, full-size testbench of the tensor core unit.
// The 8 x 4 grid of 8-lane FEDPs runs at its default parameters. A stream
// of tile operations D = A x B + C in all twelve source formats is issued
// with random pipeline stalls; every one of the 32 result words of each tile
// is compared with the reference model. Microscaling operations first write
// per-row and per-column E8M0 scales into the metadata SRAM and read them
// back one cycle before the operation, so the scales reach the FEDPs only
// through the SRAM. Mechanisms exercised and counted (each must occur):
//   every format (run-time format switch), pipeline stalls, clock-gated
//   sparse lanes, metadata writes and reads, NaN and infinity results,
//   subnormal results, integer carries from the 25-bit accumulator into the
//   C_HI upper bits, and a back-to-back burst.
// Latency: each tile must appear exactly four enabled clock edges after it
// was captured. Rate: a burst of 16 tiles issued on consecutive cycles must
// deliver its results on 16 consecutive enabled edges.
module tfr_tcu_tb;
  import tfr_pkg::*;
  import tfr_ref_pkg::*;

  localparam int TCM = 8, TCN = 4, K = 8;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, valid_in = 1'b0;
  fmt_e fmt_s = FMT_FP16;
  logic [K-1:0] vld_mask = '1;
  logic [TCM-1:0][K/2-1:0][31:0] a_tile = '0;
  logic [TCN-1:0][K/2-1:0][31:0] b_tile = '0;
  logic [TCM-1:0][TCN-1:0][31:0] c_tile = '0;
  logic meta_req = 1'b0, meta_bank = 1'b0, meta_rd_en = 1'b0;
  logic [3:0] meta_addr = '0, meta_rd_addr = '0;
  logic [1:0] meta_word = '0;
  logic [31:0] meta_data = '0;
  logic valid_out;
  logic [TCM-1:0][TCN-1:0][31:0] d_tile;

  tfr_tcu dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, en_count = 0, last_res = -10;
  int n_stall = 0, n_gated = 0, n_nan = 0, n_inf = 0, n_sub = 0, n_carry = 0;
  int n_meta_wr = 0, n_meta_rd = 0, n_b2b = 0, n_tiles = 0;
  int n_fmt[12];
  bit in_burst = 0;

  typedef struct { bit [31:0] d[TCM][TCN]; bit [31:0] c[TCM][TCN]; int cap; fmt_e f; } pend_t;
  pend_t q[$];

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired, %0d tiles pending", q.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- result monitor: runs after every enabled rising edge -------------
  always @(posedge clk) begin
    if (en && rst_n) begin
      en_count++;
      #1;
      if (valid_out) begin
        pend_t p;
        checks++;
        if (q.size() == 0) begin
          failures++; $display("unexpected result tile");
        end else begin
          p = q.pop_front();
          n_tiles++;
          if (en_count - p.cap != 4) begin
            failures++; $display("latency %0d enabled edges", en_count - p.cap);
          end
          if (en_count == last_res + 1) n_b2b++;
          last_res = en_count;
          for (int m = 0; m < TCM; m++)
            for (int n = 0; n < TCN; n++) begin
              bit [31:0] g;
              g = d_tile[m][n];
              checks++;
              if (g !== p.d[m][n]) begin
                failures++;
                if (failures < 20) $display("MISMATCH %s D[%0d][%0d] got %h exp %h", p.f.name(), m, n, g, p.d[m][n]);
              end
              if (fmt_is_int(p.f)) begin
                if (p.d[m][n][31:25] != p.c[m][n][31:25]) n_carry++;
              end else begin
                if (g[30:0] == 31'h7FC0_0000) n_nan++;
                if (g[30:0] == 31'h7F80_0000) n_inf++;
                if (g[30:23] == 0 && g[22:0] != 0) n_sub++;
              end
            end
        end
      end
    end
  end

  // clock-gated lanes of accepted operations (as seen by FEDP [0][0])
  always @(posedge clk)
    if (en && valid_in && (dut.g_row[0].g_col[0].u_fedp.lane_en_d != dut.g_row[0].g_col[0].u_fedp.fmt_ok_d))
      n_gated++;

  // one clock cycle of driving: random enable, no request
  task automatic tick();
    @(negedge clk);
    valid_in = 1'b0; meta_req = 1'b0; meta_rd_en = 1'b0;
    en = in_burst ? 1'b1 : ($urandom_range(0, 5) != 0);
    if (!en && q.size() != 0) n_stall++;
  endtask

  task automatic meta_write(bit bank, int addr, int word, bit [31:0] d);
    tick();
    meta_req = 1'b1; meta_bank = bank; meta_addr = 4'(addr); meta_word = 2'(word); meta_data = d;
    n_meta_wr++;
  endtask

  task automatic random_op(fmt_e f, int elo, int ehi, int zpct, bit sparse, int special, bit int_edge);
    bit [31:0] a[TCM][], b[TCN][];
    bit [7:0] sa[TCM], sb[TCN];
    bit [K-1:0] vm;
    pend_t p;
    int addr;
    for (int m = 0; m < TCM; m++) begin
      a[m] = new[K/2];
      foreach (a[m][i]) a[m][i] = 0;
      for (int l = 0; l < K; l++)
        for (int s = 0; s < fmt_sub(f); s++) put(f, a[m], l, s, rnd_elem(f, elo, ehi, zpct));
      sa[m] = 8'(120 + $urandom_range(0, 14));
    end
    for (int n = 0; n < TCN; n++) begin
      b[n] = new[K/2];
      foreach (b[n][i]) b[n][i] = 0;
      for (int l = 0; l < K; l++)
        for (int s = 0; s < fmt_sub(f); s++) put(f, b[n], l, s, rnd_elem(f, elo, ehi, zpct));
      sb[n] = 8'(120 + $urandom_range(0, 14));
    end
    if (special == 1) begin   // infinity (or NaN for E4M3, which has none) in one A element
      case (fmt_class(f))
        CLS_FP16: put(f, a[$urandom_range(0, TCM-1)], 0, 0,
                      (f == FMT_FP16) ? 32'h7C00 : (f == FMT_TF32) ? 32'hFF80_0000 : 32'hFF80);
        default:  put(f, a[$urandom_range(0, TCM-1)], 0, 0, (f == FMT_BF8 || f == FMT_MXBF8) ? 32'h7C : 32'h7F);
      endcase
    end
    if (special == 2 && fmt_is_mx(f)) sb[$urandom_range(0, TCN-1)] = 8'hFF;   // NaN scale
    vm = sparse ? K'($urandom) : '1;
    for (int m = 0; m < TCM; m++)
      for (int n = 0; n < TCN; n++) begin
        bit [31:0] c;
        c = $urandom;
        if (!fmt_is_int(f)) c = (elo > 40 && f == FMT_BF16) ? 32'h0 :
                                {c[31], 8'(127 + $urandom_range(0, 24) - 12), c[22:0]};
        if (int_edge) c[24:0] = (c[0]) ? 25'h1FF_FFF0 : 25'h000_0008;   // near the C_HI boundary
        if (special == 3 && m == 0 && n == 0 && !fmt_is_int(f)) c = 32'hFF80_0000;
        p.c[m][n] = c;
        p.d[m][n] = fedp(f, K, a[m], b[n], c, 32'(vm), sa[m], sb[n]);
      end
    // MX: scales go through the metadata SRAM
    if (fmt_is_mx(f)) begin
      addr = $urandom_range(0, 15);
      meta_write(0, addr, 0, {sa[3], sa[2], sa[1], sa[0]});
      meta_write(0, addr, 1, {sa[7], sa[6], sa[5], sa[4]});
      meta_write(1, addr, 0, {sb[3], sb[2], sb[1], sb[0]});
      tick();
      meta_rd_en = 1'b1; meta_rd_addr = 4'(addr);
      n_meta_rd++;
    end
    do tick(); while (!en);
    valid_in = 1'b1;
    fmt_s = f; vld_mask = vm;
    for (int m = 0; m < TCM; m++) for (int r = 0; r < K/2; r++) a_tile[m][r] = a[m][r];
    for (int n = 0; n < TCN; n++) for (int r = 0; r < K/2; r++) b_tile[n][r] = b[n][r];
    for (int m = 0; m < TCM; m++) for (int n = 0; n < TCN; n++) c_tile[m][n] = p.c[m][n];
    p.cap = en_count + 1;
    p.f = f;
    q.push_back(p);
    n_fmt[f]++;
  endtask

  function automatic int ehi_of(fmt_e f);
    case (f)
      FMT_FP16: return 22;
      FMT_FP8, FMT_MXFP8: return 12;
      FMT_BF8, FMT_MXBF8: return 20;
      default: return 140;
    endcase
  endfunction
  function automatic int elo_of(fmt_e f);
    case (f)
      FMT_FP16: return 8;
      FMT_FP8, FMT_MXFP8: return 2;
      FMT_BF8, FMT_MXBF8: return 10;
      default: return 114;
    endcase
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // every format, dense and sparse, with and without specials
    for (int r = 0; r < 4; r++)
      for (int f = 0; f < 12; f++)
        random_op(fmt_e'(f), elo_of(fmt_e'(f)), ehi_of(fmt_e'(f)), (r == 1) ? 50 : 10, r >= 2,
                  (r == 3) ? (1 + (f % 3)) : 0, fmt_is_int(fmt_e'(f)) && r >= 1);
    // subnormal results: tiny BF16 operands, zero addend
    for (int i = 0; i < 4; i++) random_op(FMT_BF16, 50, 72, 10, 0, 0, 0);
    // burst: 16 tiles on consecutive cycles, no stalls
    in_burst = 1;
    for (int i = 0; i < 16; i++) random_op(fmt_e'($urandom_range(0, 11)) == FMT_MXFP8 ? FMT_FP8 : FMT_FP16,
                                           8, 22, 10, 0, 0, 0);
    in_burst = 0;
    // random mix
    for (int i = 0; i < 40; i++) begin
      fmt_e f;
      f = fmt_e'($urandom_range(0, 11));
      random_op(f, elo_of(f), ehi_of(f), $urandom_range(0, 60), $urandom_range(0, 1),
                ($urandom_range(0, 4) == 0) ? $urandom_range(1, 3) : 0, fmt_is_int(f) && $urandom_range(0, 1));
    end
    while (q.size() != 0) tick();
    repeat (3) tick();

    $display("tiles %0d stalls %0d gated %0d meta wr/rd %0d/%0d nan %0d inf %0d subnormal %0d int carries %0d back-to-back %0d",
             n_tiles, n_stall, n_gated, n_meta_wr, n_meta_rd, n_nan, n_inf, n_sub, n_carry, n_b2b);
    for (int f = 0; f < 12; f++) begin
      checks++;
      if (n_fmt[f] == 0) begin failures++; $display("format %0d never issued", f); end
    end
    checks += 10;
    if (n_stall == 0)   begin failures++; $display("no stall"); end
    if (n_gated == 0)   begin failures++; $display("no gated lane"); end
    if (n_meta_wr == 0) begin failures++; $display("no metadata write"); end
    if (n_meta_rd == 0) begin failures++; $display("no metadata read"); end
    if (n_nan == 0)     begin failures++; $display("no NaN"); end
    if (n_inf == 0)     begin failures++; $display("no infinity"); end
    if (n_sub == 0)     begin failures++; $display("no subnormal"); end
    if (n_carry == 0)   begin failures++; $display("no C_HI carry"); end
    if (n_b2b < 15)     begin failures++; $display("burst not back to back (%0d)", n_b2b); end
    if (n_tiles != 48 + 4 + 16 + 40) begin failures++; $display("tiles %0d", n_tiles); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
