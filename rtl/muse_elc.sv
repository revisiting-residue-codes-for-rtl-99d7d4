// muse_elc: Error Lookup Circuit of the MUSE read path.
//
// A content-addressed table with one entry per correctable error value. An
// entry holds the remainder the error leaves (R bits), the error magnitude
// (N bits) and a sign bit that tells the adder whether to subtract (the error
// raised the codeword) or add. For MUSE(144,132) that makes 1080 entries of
// 12 + 144 + 1 = 157 bits.
// Every entry compares its remainder with the incoming one in parallel. The
// code guarantees that remainders are unique and non-zero, so at most one entry
// matches. The matching entry's value and sign are OR-ed onto the outputs.
// found is low when no entry matches, which includes remainder 0.
//
// The entries are constants worked out at elaboration by muse_pkg (see
// elc_errval / elc_rem / elc_sub there), so the table is a bank of constant
// comparators, not a stored memory. Purely combinational.
// The entry format and the match-and-select behaviour follow the paper.
// Building the table as constant logic is this implementation's choice.
module muse_elc
  import muse_pkg::*;
#(
  parameter muse_code_e CODE = MUSE_80_69
) (
  input  logic [code_r(CODE)-1:0]  rem,
  output logic                     found,
  output logic [code_n(CODE)-1:0]  errval,
  output logic                     sub
);
  localparam int N  = code_n(CODE);
  localparam int R  = code_r(CODE);
  localparam int NE = elc_entries(CODE);

  logic [NE-1:0] hit;
  logic [N:0]    term [NE];

  for (genvar e = 0; e < NE; e++) begin : g_ent
    localparam logic [R-1:0] E_REM = R'(elc_rem(CODE, e));
    localparam logic [N-1:0] E_VAL = N'(elc_errval(CODE, e));
    localparam logic         E_SUB = elc_sub(CODE, e);
    assign hit[e]  = (rem == E_REM);
    assign term[e] = hit[e] ? {E_VAL, E_SUB} : '0;
  end

  always_comb begin
    logic [N:0] acc;
    acc = '0;
    for (int e = 0; e < NE; e++) acc |= term[e];
    found  = |hit;
    errval = acc[N:1];
    sub    = acc[0];
  end

endmodule
