// tfr_ref_pkg: behavioural reference model of the Ten-Four dot product,
// for the testbenches. It describes the numerics in plain integer terms,
// independently of the RTL's structure:
//   * every element is decoded to sign, integer mantissa and exponent, and
//     every product is exact;
//   * each floating-point term t has a lead exponent L(t) (the weight of
//     the leading integer bit of a 1.x number: for a product, the sum of the
//     operands' unbiased exponents, plus the MX scales); an FP8 lane first
//     sums its two products on the 2^(L_big - 22) grid, truncating the
//     smaller one, and gets the lead exponent L_big + 1;
//   * all active terms are truncated onto the grid 2^(L_max - 25), summed
//     exactly, and the sum is rounded once to FP32 (nearest even), with the
//     truncated remainders acting as a sticky bit;
//   * integer formats are summed exactly and wrapped to 32 bits.
// Also: helpers to build random operands.
package tfr_ref_pkg;
  import tfr_pkg::*;

  typedef struct {
    bit      sign;
    longint  man;     // integer mantissa (with hidden bit)
    int      lead;    // lead exponent: value = man * 2^(lead - fbits)
    int      fbits;   // fraction bits of man
    bit      zero, inf, nan;
  } el_t;

  function automatic el_t dec(fmt_e f, bit [31:0] r);
    el_t e;
    int ef, m;
    e = '{default: 0};
    case (f)
      FMT_FP16: begin
        e.sign = r[15]; ef = r[14:10]; m = r[9:0]; e.fbits = 10;
        e.man = (ef != 0) ? (1024 + m) : m; e.lead = ((ef == 0) ? 1 : ef) - 15;
        e.zero = (ef == 0 && m == 0); e.inf = (ef == 31 && m == 0); e.nan = (ef == 31 && m != 0);
      end
      FMT_BF16: begin
        e.sign = r[15]; ef = r[14:7]; m = r[6:0]; e.fbits = 7;
        e.man = (ef != 0) ? (128 + m) : m; e.lead = ((ef == 0) ? 1 : ef) - 127;
        e.zero = (ef == 0 && m == 0); e.inf = (ef == 255 && m == 0); e.nan = (ef == 255 && m != 0);
      end
      FMT_TF32: begin
        e.sign = r[31]; ef = r[30:23]; m = r[22:13]; e.fbits = 10;
        e.man = (ef != 0) ? (1024 + m) : m; e.lead = ((ef == 0) ? 1 : ef) - 127;
        e.zero = (ef == 0 && m == 0); e.inf = (ef == 255 && m == 0); e.nan = (ef == 255 && m != 0);
      end
      FMT_FP8, FMT_MXFP8: begin
        e.sign = r[7]; ef = r[6:3]; m = r[2:0]; e.fbits = 3;
        e.man = (ef != 0) ? (8 + m) : m; e.lead = ((ef == 0) ? 1 : ef) - 7;
        e.zero = (r[6:0] == 0); e.nan = (r[6:0] == 7'h7F);
      end
      FMT_BF8, FMT_MXBF8: begin
        e.sign = r[7]; ef = r[6:2]; m = r[1:0]; e.fbits = 2;
        e.man = (ef != 0) ? (4 + m) : m; e.lead = ((ef == 0) ? 1 : ef) - 15;
        e.zero = (r[6:0] == 0); e.inf = (ef == 31 && m == 0); e.nan = (ef == 31 && m != 0);
      end
      FMT_INT8, FMT_MXINT8: begin e.man = $signed(r[7:0]); e.zero = (r[7:0] == 0); end
      FMT_UINT8:            begin e.man = r[7:0];          e.zero = (r[7:0] == 0); end
      FMT_INT4:             begin e.man = $signed(r[3:0]); e.zero = (r[3:0] == 0); end
      FMT_UINT4:            begin e.man = r[3:0];          e.zero = (r[3:0] == 0); end
      default: ;
    endcase
    return e;
  endfunction

  // element s of lane l (k lanes, registers given as a flat array)
  function automatic bit [31:0] elem(fmt_e f, bit [31:0] regs[], int l, int s);
    bit [31:0] r;
    r = regs[l/2];
    if (f == FMT_TF32) return r;
    r = (l % 2) ? {16'b0, r[31:16]} : {16'b0, r[15:0]};
    case (fmt_class(f))
      CLS_FP16: return r;
      CLS_INT4: return {28'b0, r[4*s +: 4]};
      default:  return {24'b0, r[8*s +: 8]};
    endcase
  endfunction

  // floor(m * 2^sh) for m >= 0, with a flag for a nonzero remainder
  function automatic longint shf(longint m, int sh, output bit lost);
    lost = 0;
    if (sh >= 0) return m <<< sh;
    if (-sh >= 62) begin lost = (m != 0); return 0; end
    lost = (m & ((64'sd1 <<< -sh) - 1)) != 0;
    return m >>> -sh;
  endfunction

  // round sign * (mag + sticky) * 2^q to FP32, nearest even
  function automatic bit [31:0] to_fp32(bit sign, longint mag, int q, bit sticky);
    int p, qe, sh;
    longint mant;
    bit guard, rest;
    if (mag == 0) return 32'h0;
    p = 0;
    while ((mag >>> (p + 1)) != 0) p++;
    qe = p + q - 23;                 // quantum of a 24-bit significand
    if (qe < -149) qe = -149;
    sh = q - qe;                     // mag * 2^sh is the significand
    if (sh >= 0) begin
      mant = mag <<< sh; guard = 0; rest = sticky;
    end else if (-sh > 62) begin
      mant = 0; guard = 0; rest = 1;
    end else begin
      mant  = mag >>> -sh;
      guard = ((mag >>> (-sh - 1)) & 1) != 0;
      rest  = sticky || ((mag & ((64'sd1 <<< (-sh - 1)) - 1)) != 0);
    end
    if (guard && (rest || mant[0])) mant++;
    if (mant >= (64'sd1 <<< 24)) begin mant >>>= 1; qe++; end
    if (mant < (64'sd1 <<< 23)) return {sign, 8'd0, mant[22:0]};  // subnormal
    if (qe + 23 + 127 >= 255) return {sign, 8'hFF, 23'd0};
    return {sign, 8'(qe + 23 + 127), mant[22:0]};
  endfunction

  function automatic bit [31:0] fedp(fmt_e f, int k, bit [31:0] a[], bit [31:0] b[],
                                     bit [31:0] c, bit [31:0] vld, bit [7:0] sfa, bit [7:0] sfb);
    int nsub, xs;
    bit is_mx, any_nan, pinf, ninf;
    // floating-point terms: sign, magnitude on grid 2^(lead-23), lead, sticky
    bit     t_s[$];  longint t_m[$];  int t_l[$];  bit t_k[$];
    longint isum;
    el_t ea, eb, ec;
    int lmax;
    longint acc;
    bit stk, lost;

    nsub  = fmt_sub(f);
    is_mx = fmt_is_mx(f);
    xs    = int'(sfa) + int'(sfb) - 254;
    any_nan = 0; pinf = 0; ninf = 0;
    isum = 0;
    if (is_mx && (sfa == 8'hFF || sfb == 8'hFF)) any_nan = 1;

    for (int l = 0; l < k; l++) begin
      bit     act[4];
      bit     ps[4];
      longint pm[4];
      int     pl[4], pf[4];
      longint lsum;
      if (!vld[l] || (f == FMT_TF32 && l % 2 == 1)) continue;
      lsum = 0;
      for (int s = 0; s < nsub; s++) begin
        ea = dec(f, elem(f, a, l, s));
        eb = dec(f, elem(f, b, l, s));
        act[s] = (!ea.zero && !eb.zero) || ea.inf || ea.nan || eb.inf || eb.nan;
        if (ea.nan || eb.nan || (ea.inf && eb.zero) || (eb.inf && ea.zero)) any_nan = 1;
        else if (ea.inf || eb.inf) begin
          if (ea.sign ^ eb.sign) ninf = 1; else pinf = 1;
        end
        ps[s] = ea.sign ^ eb.sign;
        pm[s] = ea.man * eb.man;
        pl[s] = ea.lead + eb.lead + (is_mx ? xs : 0);
        pf[s] = ea.fbits + eb.fbits;
        lsum += pm[s];              // integer formats: signed products
      end
      if (fmt_is_int(f)) begin
        isum += lsum;
      end else if (f == FMT_MXINT8) begin
        if (act[0] || act[1]) begin
          t_s.push_back(lsum < 0);
          t_m.push_back(((lsum < 0) ? -lsum : lsum) <<< 8);   // |S| * 2^-12 on 2^(lead-23)
          t_l.push_back(xs + 3);
          t_k.push_back(0);
        end
      end else if (nsub == 1) begin
        if (act[0]) begin
          t_s.push_back(ps[0]);
          t_m.push_back(pm[0] <<< (23 - pf[0]));
          t_l.push_back(pl[0]);
          t_k.push_back(0);
        end
      end else if (act[0] || act[1]) begin
        int bi, si;
        longint big, sml, sum;
        bi = (!act[1] || (act[0] && pl[0] >= pl[1])) ? 0 : 1;
        si = 1 - bi;
        big = pm[bi] <<< (22 - pf[bi]);                            // 2^(Lbig-22) grid
        sml = act[si] ? shf(pm[si] <<< (22 - pf[si]), pl[si] - pl[bi], lost) : 0;
        if (!act[si]) lost = 0;
        sum = (ps[bi] ? -big : big) + (ps[si] ? -sml : sml);
        t_s.push_back(sum < 0);
        t_m.push_back((sum < 0) ? -sum : sum);                     // = 2^((Lbig+1)-23) grid
        t_l.push_back(pl[bi] + 1);
        t_k.push_back(lost);
      end
    end

    if (fmt_is_int(f)) begin
      isum += longint'($signed(c));
      return isum[31:0];
    end

    ec = '{default: 0};
    ec.sign = c[31];
    ec.man  = (c[30:23] != 0) ? (longint'(1) <<< 23) + c[22:0] : c[22:0];
    ec.lead = ((c[30:23] == 0) ? 1 : int'(c[30:23])) - 127;
    ec.nan  = c[30:23] == 8'hFF && c[22:0] != 0;
    ec.inf  = c[30:23] == 8'hFF && c[22:0] == 0;
    if (ec.nan) any_nan = 1;
    if (ec.inf) begin if (ec.sign) ninf = 1; else pinf = 1; end
    if (any_nan || (pinf && ninf)) return CANON_NAN;
    if (pinf) return 32'h7F80_0000;
    if (ninf) return 32'hFF80_0000;
    if (c[30:0] != 0) begin
      t_s.push_back(ec.sign); t_m.push_back(ec.man); t_l.push_back(ec.lead); t_k.push_back(0);
    end
    if (t_s.size() == 0) return 32'h0;
    lmax = t_l[0];
    foreach (t_l[i]) if (t_l[i] > lmax) lmax = t_l[i];
    acc = 0; stk = 0;
    foreach (t_m[i]) begin
      longint al;
      al = shf(t_m[i], t_l[i] - lmax + 2, lost);      // onto 2^(lmax-25)
      stk = stk || lost || t_k[i];
      acc += t_s[i] ? -al : al;
    end
    if (acc == 0) return 32'h0;
    return to_fp32(acc < 0, (acc < 0) ? -acc : acc, lmax - 25, stk);
  endfunction

  // ---------------- random operand helpers -----------------------------
  // A random element of format f; with probability zpct% it is zero.
  // For FP formats the exponent field is drawn from [elo, ehi].
  function automatic bit [31:0] rnd_elem(fmt_e f, int elo, int ehi, int zpct);
    bit [31:0] r;
    int e;
    r = $urandom;
    if (int'($urandom_range(99)) < zpct) return 0;
    e = elo + int'($urandom_range(ehi - elo));
    case (f)
      FMT_FP16:            return {16'b0, r[15], 5'(e), r[9:0]};
      FMT_BF16:            return {16'b0, r[15], 8'(e), r[6:0]};
      FMT_TF32:            return {r[31], 8'(e), r[22:13], 13'b0};
      FMT_FP8, FMT_MXFP8:  return {24'b0, r[7], 4'(e), r[2:0]};
      FMT_BF8, FMT_MXBF8:  return {24'b0, r[7], 5'(e), r[1:0]};
      FMT_INT4, FMT_UINT4: return {28'b0, r[3:0]};
      default:             return {24'b0, r[7:0]};
    endcase
  endfunction

  // Pack elements into lane l's place of a register array.
  function automatic void put(fmt_e f, ref bit [31:0] regs[], input int l, input int s,
                              input bit [31:0] v);
    int base;
    if (f == FMT_TF32) begin regs[l/2] = v; return; end
    base = 16 * (l % 2);
    case (fmt_class(f))
      CLS_FP16: regs[l/2][base +: 16] = v[15:0];
      CLS_INT4: regs[l/2][base + 4*s +: 4] = v[3:0];
      default:  regs[l/2][base + 8*s +: 8] = v[7:0];
    endcase
  endfunction
endpackage
