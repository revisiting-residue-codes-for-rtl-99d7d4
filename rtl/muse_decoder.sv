// muse_decoder: systematic MUSE decoder (read path).
//
// The codeword is separable: its upper K bits are the data and its lower R
// bits the check value. The data and check fields therefore leave at once
// (combinational, zero added latency), before any error checking is done.
// In parallel, a muse_fast_mod computes codeword mod m. That remainder is zero
// for an intact word and selects the correction otherwise.
//
// Timing: data/chk are combinational from codeword. rem/rem_valid follow
// 2 cycles after codeword/in_valid. Reset clears the valid bits. The
// zero-latency data path and the remainder through fast modulo follow the
// published decoder. The 2-cycle remainder pipeline is this design's choice.
module muse_decoder
  import muse_pkg::*;
#(
  parameter muse_code_e CODE = MUSE_80_69
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [code_n(CODE)-1:0]  codeword,
  output logic [code_k(CODE)-1:0]  data,
  output logic [code_r(CODE)-1:0]  chk,
  output logic                     rem_valid,
  output logic [code_r(CODE)-1:0]  rem
);
  localparam int N = code_n(CODE);
  localparam int R = code_r(CODE);

  assign data = codeword[N-1:R];
  assign chk  = codeword[R-1:0];

  logic [N-1:0] quot_unused;

  muse_fast_mod #(.CODE(CODE), .N(N)) u_mod (
    .clk, .rst_n,
    .in_valid (in_valid),
    .x        (codeword),
    .out_valid(rem_valid),
    .rem      (rem),
    .quot     (quot_unused)
  );

  logic unused_ok;
  assign unused_ok = ^quot_unused;

endmodule
