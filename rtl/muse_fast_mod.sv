// muse_fast_mod: remainder (and quotient) of an N-bit unsigned value by the
// code multiplier m, using two multiplications by constants.
//
// Method (Lemire's direct remainder computation, as the published design
// uses it): let c = ceil(2^F / m) be the scaled inverse of m.
//   stage 1: P1 = x * c. Bits [F+:] of P1 are floor(x / m), the "whole" part.
//            Bits [F-1:0] are the "fractional" part, frac ~ (x mod m)/m * 2^F.
//   stage 2: P2 = frac * m. Bits [F+:] of P2, R bits wide, are x mod m.
// The result is exact for every N-bit x when (c*m - 2^F) * 2^N < 2^F. All four
// published (c, F) pairs meet that bound.
// Each multiplier is a muse_const_mult (Booth recoding + Wallace tree).
//
// Timing: a register after each multiplier, so rem/quot/out_valid appear
// 2 clock cycles after x/in_valid. The pipeline accepts a new value every
// cycle and has no back-pressure. Putting the two registers at the multiplier
// outputs is this implementation's choice. The published design gives only the
// total latency of the blocks built on it (3 cycles at 2.4 GHz).
// Reset (rst_n, active low, synchronous) clears the valid bits only.
module muse_fast_mod
  import muse_pkg::*;
#(
  parameter muse_code_e CODE = MUSE_80_69,
  parameter int         N    = code_n(CODE)   // input width
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic [N-1:0]              x,
  output logic                      out_valid,
  output logic [code_r(CODE)-1:0]   rem,
  output logic [N-1:0]              quot
);
  localparam int                 R    = code_r(CODE);
  localparam int                 F    = code_shift(CODE);
  localparam int                 M    = code_m(CODE);
  localparam int                 INVW = code_invw(CODE);
  localparam int                 MW   = code_mw(CODE);
  localparam logic [INVW-1:0]    INV  = INVW'(code_inv(CODE));

  // ---- stage 1: x * ceil(2^F/m)
  logic [N+INVW-1:0] p1;
  muse_const_mult #(.XW(N), .CW(INVW), .C(INV)) u_div (.x(x), .p(p1));

  logic          v1;
  logic [F-1:0]  frac_q;
  logic [N-1:0]  quot_q;
  always_ff @(posedge clk) begin
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= in_valid;
    frac_q <= p1[F-1:0];
    quot_q <= N'(p1[N+INVW-1:F]);
  end

  // ---- stage 2: frac * m
  logic [F+MW-1:0] p2;
  muse_const_mult #(.XW(F), .CW(MW), .C(MW'(M))) u_mul (.x(frac_q), .p(p2));

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v1;
    rem  <= R'(p2[F+MW-1:F]);
    quot <= quot_q;
  end

endmodule
