// muse_const_mult: combinational multiplier of an XW-bit unsigned operand by
// a CW-bit unsigned constant C, producing the full XW+CW-bit product.
//
// Structure (three stages, as in a Booth/Wallace constant multiplier):
//  1. Radix-4 Booth recoding of the constant, done at elaboration. Digit j is
//     d_j = -2*C[2j+1] + C[2j] + C[2j-1], in {-2,-1,0,1,2}. That halves the
//     number of partial products.
//  2. Partial-product generation. Digits that are zero give no partial product
//     and are dropped from the tree, which is what makes the constant version
//     shallower than a general multiplier. A negative digit gives the inverted
//     whole shifted row. -v = ~v + 1, so the +1 of every negative digit is
//     gathered into a single constant row.
//  3. A Wallace tree of 3:2 carry-save adders, applied level by level to the
//     rows until two remain, then one final carry-propagate adder.
// All arithmetic is modulo 2^PW, PW = XW + CW. The true product of two
// unsigned numbers fits in PW bits, so the result is exact.
//
// The Booth/Wallace/final-adder split and the pruning of zero partial products
// follow the published design. Grouping the tree by whole rows of 3:2
// compressors, rather than by columns, is this implementation's choice.
// No clock: the caller adds pipeline registers.
// A linter may report the lv array as a combinational loop (UNOPTFLAT); it
// is not one: every level only reads the level below it.
module muse_const_mult #(
  parameter int              XW = 80,
  parameter int              CW = 77,
  parameter logic [CW-1:0]   C  = CW'(77'd77178306688614730355307)
) (
  input  logic [XW-1:0]      x,
  output logic [XW+CW-1:0]   p
);
  localparam int PW = XW + CW;
  localparam int ND = CW / 2 + 1;        // Booth digits of an unsigned CW-bit value

  // Booth digit j of the constant.
  function automatic int digit(int j);
    int b1, b0, bm;
    b1 = (2 * j + 1 < CW) ? int'(C[2*j+1]) : 0;
    b0 = (2 * j     < CW) ? int'(C[2*j])   : 0;
    bm = (j > 0 && 2 * j - 1 < CW) ? int'(C[2*j-1]) : 0;
    return -2 * b1 + b0 + bm;
  endfunction

  // Number of non-zero digits below index j (row index of digit j).
  function automatic int nz_before(int j);
    int n = 0;
    for (int i = 0; i < j; i++) if (digit(i) != 0) n++;
    return n;
  endfunction

  // Sum of the two's-complement +1 terms of all negative digits.
  function automatic logic [PW-1:0] neg_const();
    logic [PW-1:0] s = '0;
    for (int i = 0; i < ND; i++)
      if (digit(i) < 0) s = s + PW'(1);
    return s;
  endfunction

  localparam int            NNZ  = nz_before(ND);
  localparam logic [PW-1:0] NEGC = neg_const();
  localparam int            NPP  = NNZ + ((NEGC != '0) ? 1 : 0);
  localparam int            NROW = (NPP < 2) ? 2 : NPP;

  // Rows left after one level of 3:2 compression.
  function automatic int next_rows(int r);
    return 2 * (r / 3) + (r % 3);
  endfunction

  function automatic int rows_at(int l);
    int r = NPP;
    for (int i = 0; i < l; i++) r = next_rows(r);
    return r;
  endfunction

  function automatic int num_levels();
    int r = NPP;
    int l = 0;
    while (r > 2) begin
      r = next_rows(r);
      l++;
    end
    return l;
  endfunction

  localparam int NL = num_levels();

  logic [PW-1:0] lv [NL+1][NROW];

  // ---- partial-product generation (level 0)
  for (genvar j = 0; j < ND; j++) begin : g_pp
    localparam int D = digit(j);
    if (D != 0) begin : g_nz
      localparam int ROW = nz_before(j);
      logic [PW-1:0] mag;
      assign mag = ((D == 2 || D == -2) ? (PW'(x) << 1) : PW'(x)) << (2 * j);
      assign lv[0][ROW] = (D < 0) ? ~mag : mag;
    end
  end
  if (NEGC != '0) begin : g_negc
    assign lv[0][NNZ] = NEGC;
  end
  for (genvar q = NPP; q < NROW; q++) begin : g_pad0
    assign lv[0][q] = '0;
  end

  // ---- Wallace tree: each level compresses groups of three rows into two
  for (genvar l = 0; l < NL; l++) begin : g_lvl
    localparam int RIN  = rows_at(l);
    localparam int NG   = RIN / 3;
    localparam int ROUT = next_rows(RIN);
    for (genvar g = 0; g < NG; g++) begin : g_csa
      logic [PW-1:0] a, b, c;
      assign a = lv[l][3*g];
      assign b = lv[l][3*g+1];
      assign c = lv[l][3*g+2];
      assign lv[l+1][2*g]   = a ^ b ^ c;
      assign lv[l+1][2*g+1] = ((a & b) | (a & c) | (b & c)) << 1;
    end
    for (genvar q = 0; q < RIN % 3; q++) begin : g_pass
      assign lv[l+1][2*NG+q] = lv[l][3*NG+q];
    end
    for (genvar q = ROUT; q < NROW; q++) begin : g_pad
      assign lv[l+1][q] = '0;
    end
  end

  // ---- final carry-propagate adder
  assign p = lv[NL][0] + lv[NL][1];

endmodule
