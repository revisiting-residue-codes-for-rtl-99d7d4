// muse_pkg: code parameters and elaboration-time helpers shared by the MUSE
// residue-code ECC blocks.
//
// A MUSE code stores k data bits in an n-bit codeword whose value is a
// multiple of the code multiplier m. The low r = n - k bits hold the check
// value X that makes the codeword divisible by m, so the data stays in plain
// form in the upper bits ("systematic" encoding). A read whose codeword is not
// divisible by m is in error. The remainder then selects the error value to
// subtract or add back.
//
// Four codes are defined. Their multipliers, scaled inverses, shift amounts and
// bit-to-symbol shuffles are the published values:
//   MUSE_144_132  C4B  m=4065  4-bit symbols, no shuffle (DDR4, 144-bit channel)
//   MUSE_80_69    C4B  m=2005  4-bit symbols, no shuffle (DDR5, two channels)
//   MUSE_80_67    C8A  m=5621  8-bit symbols, shuffle S_i = {b_i, b_10+i, ...}
//   MUSE_80_70    C4A_U1B m=821 4-bit symbols, shuffle of Eq. 7, plus single-bit
//                 errors in either direction
// C = errors confined to a symbol, B = bits flip both ways, A = 1->0 only,
// U1B = any single bit flipped either way.
//
// The error lookup table (ELC) is not stored as a file. Entry e is computed
// here by the functions elc_errval/elc_sub/elc_rem, enumerating every error
// value of every symbol:
//   C4B: for symbol i, magnitude v in 1..15 and both signs: value +-v*2^(4i)
//   A  : for symbol i and each non-empty subset of its bits: value -(sum 2^p)
//   U1B: in addition +2^b for each codeword bit b (the -2^b values are already
//        single-bit subsets of the A entries)
// The remainder stored with an entry is (value mod m), taken into [0, m).
package muse_pkg;

  // Widest codeword and check field over all codes.
  localparam int MAXN = 144;
  localparam int MAXINVW = 160;

  typedef enum logic [1:0] {
    MUSE_144_132 = 2'd0,
    MUSE_80_69   = 2'd1,
    MUSE_80_67   = 2'd2,
    MUSE_80_70   = 2'd3
  } muse_code_e;

  // Error models of Table 1.
  typedef enum logic [1:0] {
    MODEL_C_BIDIR      = 2'd0,  // C4B
    MODEL_C_ASYM       = 2'd1,  // C8A
    MODEL_C_ASYM_U1B   = 2'd2   // C4A_U1B
  } err_model_e;

  // Outcome of one read, following the decision diagram of the read path.
  typedef enum logic [1:0] {
    ST_CLEAN         = 2'd0,  // remainder == 0
    ST_CORRECTED     = 2'd1,  // remainder found in ELC, no symbol over/underflow
    ST_UE_NOT_FOUND  = 2'd2,  // remainder not in ELC: uncorrectable
    ST_UE_OVERFLOW   = 2'd3   // correction rippled out of the symbol: uncorrectable
  } rd_status_e;

  // ---------------------------------------------------------------- codes
  function automatic int code_n(muse_code_e c);
    return (c == MUSE_144_132) ? 144 : 80;
  endfunction

  function automatic int code_r(muse_code_e c);
    case (c)
      MUSE_144_132: return 12;
      MUSE_80_69:   return 11;
      MUSE_80_67:   return 13;
      default:      return 10;
    endcase
  endfunction

  function automatic int code_k(muse_code_e c);
    return code_n(c) - code_r(c);
  endfunction

  function automatic int code_m(muse_code_e c);
    case (c)
      MUSE_144_132: return 4065;
      MUSE_80_69:   return 2005;
      MUSE_80_67:   return 5621;
      default:      return 821;
    endcase
  endfunction

  // Shift F: the inverse is ceil(2^F / m).
  function automatic int code_shift(muse_code_e c);
    case (c)
      MUSE_144_132: return 156;
      MUSE_80_69:   return 87;
      MUSE_80_67:   return 93;
      default:      return 89;
    endcase
  endfunction

  function automatic logic [MAXINVW-1:0] code_inv(muse_code_e c);
    case (c)
      MUSE_144_132: return MAXINVW'(160'd22470812382086453231913973442747278899998963);
      MUSE_80_69:   return MAXINVW'(160'd77178306688614730355307);
      MUSE_80_67:   return MAXINVW'(160'd1761878725188230243585305);
      default:      return MAXINVW'(160'd753922070210341214920295);
    endcase
  endfunction

  // Number of significant bits of a constant.
  function automatic int bit_len(logic [MAXINVW-1:0] v);
    int l = 0;
    for (int i = 0; i < MAXINVW; i++) if (v[i]) l = i + 1;
    return l;
  endfunction

  function automatic int code_invw(muse_code_e c);
    return bit_len(code_inv(c));
  endfunction

  function automatic int code_mw(muse_code_e c);
    return bit_len(MAXINVW'(code_m(c)));
  endfunction

  function automatic int code_sym_bits(muse_code_e c);
    return (c == MUSE_80_67) ? 8 : 4;
  endfunction

  function automatic int code_nsym(muse_code_e c);
    return code_n(c) / code_sym_bits(c);
  endfunction

  function automatic err_model_e code_model(muse_code_e c);
    case (c)
      MUSE_80_67: return MODEL_C_ASYM;
      MUSE_80_70: return MODEL_C_ASYM_U1B;
      default:    return MODEL_C_BIDIR;
    endcase
  endfunction

  // Codeword bit held by bit j of symbol (DRAM device) s.
  function automatic int sym_bit(muse_code_e c, int s, int j);
    case (c)
      MUSE_80_67: return s + 10 * j;                      // Eq. 6
      MUSE_80_70: return (s % 2 == 0) ? (s / 2) + 10 * j  // Eq. 7, S_2i
                                      : 40 + (s / 2) + 10 * j; // S_2i+1
      default:    return code_sym_bits(c) * s + j;        // sequential
    endcase
  endfunction

  // Symbol holding codeword bit b (inverse of sym_bit).
  function automatic int bit_sym(muse_code_e c, int b);
    for (int s = 0; s < code_nsym(c); s++)
      for (int j = 0; j < code_sym_bits(c); j++)
        if (sym_bit(c, s, j) == b) return s;
    return 0;
  endfunction

  // Mask of the codeword bits belonging to symbol s.
  function automatic logic [MAXN-1:0] sym_mask(muse_code_e c, int s);
    logic [MAXN-1:0] mk = '0;
    for (int j = 0; j < code_sym_bits(c); j++) mk[sym_bit(c, s, j)] = 1'b1;
    return mk;
  endfunction

  // ---------------------------------------------------------------- ELC
  function automatic int elc_per_sym(muse_code_e c);
    return (code_model(c) == MODEL_C_BIDIR) ? 2 * ((1 << code_sym_bits(c)) - 1)
                                            : (1 << code_sym_bits(c)) - 1;
  endfunction

  function automatic int elc_entries(muse_code_e c);
    return code_nsym(c) * elc_per_sym(c) +
           ((code_model(c) == MODEL_C_ASYM_U1B) ? code_n(c) : 0);
  endfunction

  // Magnitude of the error value of entry e.
  function automatic logic [MAXN-1:0] elc_errval(muse_code_e c, int e);
    logic [MAXN-1:0] v = '0;
    int ps = elc_per_sym(c);
    int s, t, mag;
    if (e >= code_nsym(c) * ps) begin
      v[e - code_nsym(c) * ps] = 1'b1;               // U1B: single bit 0->1
    end else begin
      s = e / ps;
      t = e % ps;
      if (code_model(c) == MODEL_C_BIDIR) begin
        mag = (t % ((1 << code_sym_bits(c)) - 1)) + 1;
        v = MAXN'(mag) << (code_sym_bits(c) * s);
      end else begin
        for (int j = 0; j < code_sym_bits(c); j++)
          if ((((t + 1) >> j) & 1) != 0) v[sym_bit(c, s, j)] = 1'b1;
      end
    end
    return v;
  endfunction

  // Sign bit of entry e: 1 when the error raised the codeword value
  // (0->1 flips dominate), so the corrector subtracts; 0 means it adds.
  function automatic logic elc_sub(muse_code_e c, int e);
    int ps = elc_per_sym(c);
    if (e >= code_nsym(c) * ps) return 1'b1;
    if (code_model(c) == MODEL_C_BIDIR)
      return ((e % ps) < ((1 << code_sym_bits(c)) - 1));
    return 1'b0;
  endfunction

  // Remainder a codeword shows after error e: (+-errval) mod m in [0, m).
  function automatic int elc_rem(muse_code_e c, int e);
    logic [MAXN-1:0] v = elc_errval(c, e);
    int m = code_m(c);
    int p2 = 1;   // 2^b mod m
    int acc = 0;
    for (int b = 0; b < MAXN; b++) begin
      if (v[b]) acc = (acc + p2) % m;
      p2 = (2 * p2) % m;
    end
    if (!elc_sub(c, e)) acc = (m - acc) % m;
    return acc;
  endfunction

endpackage
