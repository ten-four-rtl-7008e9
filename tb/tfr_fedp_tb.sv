// tfr_fedp_tb: self-checking testbench of the Ten-Four FEDP pipeline.
// Streams random operations of every format through the unit, with random
// lane masks, zero operands (sparse lanes), specials and pipeline stalls,
// and compares each result with the reference model of tfr_ref_pkg. A
// second, model-free check compares FP16 sums whose terms all fit the
// alignment window with the FP32 rounding of the exact real-valued sum.
// Latency is checked in enabled clock cycles: a result must appear exactly
// four enabled edges after its inputs were captured.
module tfr_fedp_tb;
  import tfr_pkg::*;
  import tfr_ref_pkg::*;

  localparam int K = 8;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, valid_in = 1'b0;
  fmt_e fmt_s = FMT_FP16;
  logic [7:0] sf_a = 8'd127, sf_b = 8'd127;
  logic [K-1:0] vld_mask = '1;
  logic [K/2-1:0][31:0] a_row = '0, b_col = '0;
  logic [31:0] c_val = '0;
  logic valid_out;
  logic [31:0] d_val;

  tfr_fedp #(.K(K)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int en_count = 0;
  int n_stall = 0, n_gated = 0, n_nan = 0, n_inf = 0, n_sub = 0, n_real = 0;
  int n_fmt[12];

  typedef struct { bit [31:0] exp; int cap; fmt_e f; } pend_t;
  pend_t q[$];

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired, %0d pending, en_count %0d", q.size(), en_count);
    if (q.size() != 0) $display("pending fmt %s cap %0d", q[0].f.name(), q[0].cap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- one operation: drive it and queue its expected result -----------
  task automatic issue(fmt_e f, bit [31:0] a[], bit [31:0] b[], bit [31:0] c,
                       bit [K-1:0] vm, bit [7:0] sa, bit [7:0] sb, bit [31:0] expv);
    pend_t p;
    // wait until we are allowed to issue (random stalls)
    do begin
      @(negedge clk);
      step_monitor();
      en = ($urandom_range(9) != 0);
      valid_in = 1'b0;
      if (!en) n_stall++;
    end while (!en);
    valid_in = 1'b1;
    fmt_s = f; sf_a = sa; sf_b = sb; vld_mask = vm; c_val = c;
    for (int r = 0; r < K/2; r++) begin a_row[r] = a[r]; b_col[r] = b[r]; end
    p.exp = expv; p.cap = en_count + 1; p.f = f;
    q.push_back(p);
  endtask

  // called at each negedge: account for the previous rising edge
  task automatic step_monitor();
    if (en) begin
      en_count++;
      if (valid_out) begin
        pend_t p;
        checks++;
        if (q.size() == 0) begin
          failures++; $display("unexpected result %h", d_val);
        end else begin
          p = q.pop_front();
          if (d_val !== p.exp) begin
            failures++;
            if (failures < 20) $display("MISMATCH fmt=%s got %h exp %h", p.f.name(), d_val, p.exp);
          end
          checks++;
          if (en_count - p.cap != 4) begin
            failures++; $display("latency %0d", en_count - p.cap);
          end
          if (!fmt_is_int(p.f)) begin
            if (d_val[30:0] == 31'h7FC0_0000) n_nan++;
            if (d_val[30:0] == 31'h7F80_0000) n_inf++;
            if (d_val[30:23] == 0 && d_val[22:0] != 0) n_sub++;
          end
        end
      end
    end
  endtask

  // sample clock-gated lanes of each accepted operation
  always @(posedge clk) if (en && valid_in && (dut.lane_en_d != dut.fmt_ok_d)) n_gated++;

  function automatic bit [31:0] rnd_c(fmt_e f, int lead_lo, int lead_hi);
    bit [31:0] r;
    r = $urandom;
    if (fmt_is_int(f)) return r;
    if ($urandom_range(9) == 0) return {r[31], 31'b0};
    return {r[31], 8'(127 + lead_lo + int'($urandom_range(lead_hi - lead_lo))), r[22:0]};
  endfunction

  task automatic random_op(fmt_e f, int elo, int ehi, int zpct, bit sparse_vld, bit no_c = 0);
    bit [31:0] a[], b[], c;
    bit [K-1:0] vm;
    bit [7:0] sa, sb;
    a = new[K/2]; b = new[K/2];
    foreach (a[i]) begin a[i] = 0; b[i] = 0; end
    for (int l = 0; l < K; l++)
      for (int s = 0; s < fmt_sub(f); s++) begin
        put(f, a, l, s, rnd_elem(f, elo, ehi, zpct));
        put(f, b, l, s, rnd_elem(f, elo, ehi, zpct));
      end
    vm = sparse_vld ? K'($urandom) : '1;
    sa = 8'(120 + $urandom_range(14));
    sb = 8'(120 + $urandom_range(14));
    c  = no_c ? 32'h0 : rnd_c(f, -12, 12);
    issue(f, a, b, c, vm, sa, sb, fedp(f, K, a, b, c, 32'(vm), sa, sb));
    n_fmt[f]++;
  endtask

  function automatic real fp16_real(bit [15:0] h);
    int e;
    real m;
    e = h[14:10];
    m = (e == 0) ? real'(h[9:0]) : real'(1024 + h[9:0]);
    if (e == 0) e = 1;
    return (h[15] ? -m : m) * (2.0 ** (e - 25));
  endfunction

  // double to FP32, round to nearest even (normal range only)
  function automatic bit [31:0] dbl_to_fp32(real x);
    bit [63:0] d;
    bit [23:0] m;
    bit [7:0]  e;
    bit        g, rest;
    d = $realtobits(x);
    if (d[62:0] == 0) return 32'h0;
    e = 8'(int'(d[62:52]) - 1023 + 127);
    m = {1'b1, d[51:29]};
    g = d[28];
    rest = |d[27:0];
    if (g && (rest || m[0])) m++;
    if (m == 0) begin e++; end          // carried out of 24 bits
    return {d[63], e, m[22:0]};
  endfunction

  // products and addend all on the alignment grid: exact sum, one rounding
  task automatic real_check_op();
    bit [31:0] a[], b[], c;
    real sum;
    a = new[K/2]; b = new[K/2];
    sum = 0.0;
    for (int r = 0; r < K/2; r++) begin
      a[r] = {rnd_elem(FMT_FP16, 14, 16, 10)[15:0], rnd_elem(FMT_FP16, 14, 16, 10)[15:0]};
      b[r] = {rnd_elem(FMT_FP16, 14, 16, 10)[15:0], rnd_elem(FMT_FP16, 14, 16, 10)[15:0]};
      sum += fp16_real(a[r][15:0]) * fp16_real(b[r][15:0]);
      sum += fp16_real(a[r][31:16]) * fp16_real(b[r][31:16]);
    end
    c = {1'($urandom), 8'd129, 23'($urandom)};
    sum += (c[31] ? -1.0 : 1.0) * real'({1'b1, c[22:0]}) / 2097152.0;   // exponent 129: 2^(129-150)
    issue(FMT_FP16, a, b, c, '1, 8'd127, 8'd127, dbl_to_fp32(sum));
    n_real++;
  endtask

  // one lane's slot set to a special value
  task automatic special_op(fmt_e f, int kind);
    bit [31:0] a[], b[], c, sp, zero_or;
    a = new[K/2]; b = new[K/2];
    foreach (a[i]) begin a[i] = 0; b[i] = 0; end
    for (int l = 0; l < K; l++)
      for (int s = 0; s < fmt_sub(f); s++) begin
        put(f, a, l, s, rnd_elem(f, 6, 8, 0));
        put(f, b, l, s, rnd_elem(f, 6, 8, 0));
      end
    case (f)
      FMT_FP16: sp = (kind == 0) ? 32'h7E00 : 32'h7C00;
      FMT_BF16: sp = (kind == 0) ? 32'h7FC0 : 32'h7F80;
      FMT_TF32: sp = (kind == 0) ? 32'h7FC0_0000 : 32'h7F80_0000;
      FMT_FP8:  sp = 32'h7F;
      default:  sp = (kind == 0) ? 32'h7F : 32'h7C;   // BF8
    endcase
    put(f, a, 2, 0, sp);
    if (kind == 2) put(f, b, 2, 0, 0);                      // inf * 0
    c = (kind == 3) ? 32'hFF80_0000 : 32'h3F80_0000;        // -inf addend
    issue(f, a, b, c, '1, 127, 127, fedp(f, K, a, b, c, '1, 127, 127));
  endtask

  initial begin
    bit [31:0] a[], b[];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    en = 1'b1;
    // directed: 1.0 * 1.0 (K times) + 0.5 = K + 0.5
    a = new[K/2]; b = new[K/2];
    foreach (a[i]) begin a[i] = 32'h3C00_3C00; b[i] = 32'h3C00_3C00; end
    issue(FMT_FP16, a, b, 32'h3F00_0000, '1, 127, 127, (K == 8) ? 32'h4108_0000 : 32'h4090_0000);
    // directed INT8: 4 * (1*1 + 2*2 + 3*3 + 4*4) * 2 lanes... via model
    foreach (a[i]) begin a[i] = 32'h0403_0201; b[i] = 32'hFC03_0201; end
    issue(FMT_INT8, a, b, 32'd100, '1, 127, 127, fedp(FMT_INT8, K, a, b, 32'd100, '1, 127, 127));

    for (int f = 0; f < 12; f++) begin
      for (int i = 0; i < 150; i++) begin
        fmt_e ff;
        ff = fmt_e'(f);
        case (fmt_class(ff))
          CLS_FP16: if (ff == FMT_FP16) random_op(ff, 0, 30, 10, i % 5 == 0);
                    else                random_op(ff, 100, 150, 10, i % 5 == 0);
          CLS_FP8:  random_op(ff, 0, (ff == FMT_FP8 || ff == FMT_MXFP8) ? 15 : 30,
                              (i % 3 == 0) ? 60 : 10, i % 5 == 0);
          default:  random_op(ff, 0, 0, (i % 3 == 0) ? 60 : 10, i % 5 == 0);
        endcase
      end
      // narrow ranges: heavy cancellation and alignment overlap
      for (int i = 0; i < 50; i++) begin
        fmt_e ff;
        ff = fmt_e'(f);
        if (fmt_class(ff) == CLS_FP16) random_op(ff, (ff == FMT_FP16) ? 14 : 126, (ff == FMT_FP16) ? 16 : 128, 0, 0);
      end
    end
    // whole-range BF16 / TF32 (overflow to infinity, underflow)
    for (int i = 0; i < 100; i++) random_op(FMT_BF16, 0, 254, 0, 0);
    for (int i = 0; i < 100; i++) random_op(FMT_TF32, 0, 254, 0, 0);
    for (int i = 0; i < 200; i++) real_check_op();
    // results in the FP32 subnormal range
    for (int i = 0; i < 50; i++) random_op(FMT_BF16, 50, 72, 0, 0, 1);
    for (int k = 0; k < 4; k++) begin
      special_op(FMT_FP16, k); special_op(FMT_BF16, k); special_op(FMT_TF32, k);
      special_op(FMT_BF8, k);
    end
    special_op(FMT_FP8, 0);
    // MX scale NaN
    foreach (a[i]) begin a[i] = 32'h3838_3838; b[i] = 32'h3838_3838; end
    issue(FMT_MXFP8, a, b, 0, '1, 8'hFF, 127, CANON_NAN);

    // drain
    while (q.size() != 0) begin
      @(negedge clk);
      step_monitor();
      en = 1'b1; valid_in = 1'b0;
    end
    // back-to-back throughput: 16 operations in 16 cycles plus latency
    begin
      int t0;
      t0 = en_count;
      for (int i = 0; i < 16; i++) begin
        @(negedge clk); step_monitor();
        en = 1; valid_in = 1; fmt_s = FMT_INT4;
        for (int r = 0; r < K/2; r++) begin a_row[r] = $urandom; b_col[r] = $urandom; end
        vld_mask = '1; c_val = $urandom;
        begin
          bit [31:0] aa[], bb[]; pend_t p;
          aa = new[K/2]; bb = new[K/2];
          foreach (aa[r]) begin aa[r] = a_row[r]; bb[r] = b_col[r]; end
          p.exp = fedp(FMT_INT4, K, aa, bb, c_val, '1, 127, 127); p.cap = en_count + 1; p.f = FMT_INT4;
          q.push_back(p);
        end
      end
      while (q.size() != 0) begin
        @(negedge clk); step_monitor(); en = 1; valid_in = 0;
      end
      checks++;
      if (en_count - t0 != 1 + 16 + 4) begin   // idle edge, 16 issues, latency
        failures++; $display("throughput: %0d cycles for 16 ops", en_count - t0);
      end
    end
    $display("stalls=%0d gated_ops=%0d nan=%0d inf=%0d subnormal=%0d real_checks=%0d",
             n_stall, n_gated, n_nan, n_inf, n_sub, n_real);
    foreach (n_fmt[i]) if (n_fmt[i] == 0) begin failures++; $display("format %0d unused", i); end
    if (n_stall == 0 || n_gated == 0 || n_nan == 0 || n_inf == 0 || n_sub == 0) begin
      failures++; $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
