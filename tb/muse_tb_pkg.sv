// muse_tb_pkg: reference model shared by the MUSE testbenches.
//
// It is written from the code definitions, not from the RTL. It holds its own
// copy of each code's n, r and m and of the bit-to-device maps. It builds the
// error table by enumerating error patterns per device. It encodes with wide
// integer arithmetic (codeword = d*2^r + m - (d*2^r mod m)). It classifies a
// received word with the full remainder cw % m. Only the code enum type is
// taken from muse_pkg.
package muse_tb_pkg;
  import muse_pkg::muse_code_e;
  import muse_pkg::MUSE_144_132;
  import muse_pkg::MUSE_80_69;
  import muse_pkg::MUSE_80_67;
  import muse_pkg::MUSE_80_70;

  typedef logic [143:0] w_t;
  typedef logic [144:0] w1_t;

  // outcome codes, same order as muse_pkg::rd_status_e
  localparam int R_CLEAN = 0, R_CORR = 1, R_NF = 2, R_OVF = 3;

  function automatic int t_n(muse_code_e c); return (c == MUSE_144_132) ? 144 : 80; endfunction
  function automatic int t_r(muse_code_e c);
    return (c == MUSE_144_132) ? 12 : (c == MUSE_80_69) ? 11 : (c == MUSE_80_67) ? 13 : 10;
  endfunction
  function automatic int t_m(muse_code_e c);
    return (c == MUSE_144_132) ? 4065 : (c == MUSE_80_69) ? 2005 : (c == MUSE_80_67) ? 5621 : 821;
  endfunction
  function automatic int t_sb(muse_code_e c); return (c == MUSE_80_67) ? 8 : 4; endfunction
  function automatic int t_ndev(muse_code_e c); return t_n(c) / t_sb(c); endfunction
  function automatic bit t_asym(muse_code_e c); return (c == MUSE_80_67) || (c == MUSE_80_70); endfunction

  // codeword bit stored on pin j of device d
  function automatic int t_bit(muse_code_e c, int d, int j);
    if (c == MUSE_80_67) return 10 * j + d;
    if (c == MUSE_80_70) return (d & 1) ? 40 + 10 * j + (d >> 1) : 10 * j + (d >> 1);
    return 4 * d + j;
  endfunction

  function automatic w_t t_mask(muse_code_e c, int d);
    w_t mk = '0;
    for (int j = 0; j < t_sb(c); j++) mk[t_bit(c, d, j)] = 1'b1;
    return mk;
  endfunction

  function automatic w_t t_wmask(muse_code_e c);
    return (w_t'(1) << t_n(c)) - 1;
  endfunction

  // ---------------------------------------------------------- error table
  w_t ref_val [int];
  bit ref_sub [int];
  int ref_dups;

  function automatic void add_err(muse_code_e c, w1_t mag, bit sub);
    int rm;
    rm = int'(mag % w1_t'(t_m(c)));
    if (!sub) rm = (t_m(c) - rm) % t_m(c);
    if (ref_val.exists(rm)) ref_dups++;
    ref_val[rm] = w_t'(mag);
    ref_sub[rm] = sub;
  endfunction

  function automatic void build_ref(muse_code_e c);
    w1_t v;
    ref_val.delete();
    ref_sub.delete();
    ref_dups = 0;
    for (int d = 0; d < t_ndev(c); d++) begin
      if (!t_asym(c)) begin
        // symbol value moves by +-1..15 within its nibble
        for (int k = 1; k < 16; k++) begin
          v = w1_t'(k) << (4 * d);
          add_err(c, v, 1'b1);
          add_err(c, v, 1'b0);
        end
      end else begin
        // 1->0 flips of any non-empty subset of the device's bits
        for (int sub = 1; sub < (1 << t_sb(c)); sub++) begin
          v = '0;
          for (int j = 0; j < t_sb(c); j++) if (sub[j]) v[t_bit(c, d, j)] = 1'b1;
          add_err(c, v, 1'b0);
        end
      end
    end
    if (c == MUSE_80_70)
      for (int b = 0; b < 80; b++) add_err(c, w1_t'(1) << b, 1'b1);
  endfunction

  // ---------------------------------------------------------- encode
  function automatic w_t ref_encode(muse_code_e c, w_t d);
    w1_t sh, x;
    sh = w1_t'(d) << t_r(c);
    x  = w1_t'(t_m(c)) - (sh % w1_t'(t_m(c)));
    return w_t'(sh + x);
  endfunction

  function automatic w_t rand_word();
    w_t v;
    for (int i = 0; i < 5; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  // ---------------------------------------------------------- classify
  function automatic int ref_classify(muse_code_e c, w_t cw, output w_t fixed);
    w1_t s;
    w_t allowed, val;
    int rm;
    fixed = cw;
    rm = int'(w1_t'(cw) % w1_t'(t_m(c)));
    if (rm == 0) return R_CLEAN;
    if (!ref_val.exists(rm)) return R_NF;
    val = ref_val[rm];
    s = ref_sub[rm] ? (w1_t'(cw) - w1_t'(val)) : (w1_t'(cw) + w1_t'(val));
    if (s[t_n(c)] || s[144]) return R_OVF;
    allowed = '0;
    for (int d = 0; d < t_ndev(c); d++)
      if ((val & t_mask(c, d)) != '0) allowed |= t_mask(c, d);
    if (((w_t'(s) ^ cw) & ~allowed & t_wmask(c)) != '0) return R_OVF;
    fixed = w_t'(s);
    return R_CORR;
  endfunction

  // ---------------------------------------------------------- device errors
  // Corrupt device d of a codeword (codeword bit order). Bidirectional codes:
  // XOR a random non-zero pattern. Asymmetric codes: clear a random non-empty
  // subset of the device's 1 bits (no change if the device holds no 1s).
  function automatic w_t dev_error(muse_code_e c, w_t cw, int d);
    w_t o = cw;
    int pat;
    if (!t_asym(c)) begin
      pat = 1 + ($urandom % ((1 << t_sb(c)) - 1));
      for (int j = 0; j < t_sb(c); j++) if (pat[j]) o[t_bit(c, d, j)] ^= 1'b1;
    end else begin
      pat = 1 + ($urandom % ((1 << t_sb(c)) - 1));
      for (int j = 0; j < t_sb(c); j++) if (pat[j]) o[t_bit(c, d, j)] = 1'b0;
    end
    return o;
  endfunction

endpackage
