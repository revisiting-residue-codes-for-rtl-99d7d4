// muse_encoder: systematic MUSE residue encoder (write path).
//
// codeword = (data << R) + X,  X = m - ((data << R) mod m)
// With this X the codeword is an exact multiple of m. The data bits pass into
// the codeword unchanged and X fills the low R bits. X lies in [1, m] and
// m < 2^R, so it always fits. (X = m only when data << R is itself a
// multiple of m.)
// The remainder comes from muse_fast_mod, fed the K data bits shifted up by R.
// The check value is formed by one subtractor ("m - X" in the block diagram).
//
// Timing: 3 cycles from data/in_valid to codeword/out_valid (2 in the modulo
// unit, 1 for the subtraction and output register). That matches the published
// three-cycle encoder latency. Fully pipelined, no back-pressure. Reset clears
// the valid bits. The equation and the three-cycle latency follow the paper.
// Where the registers sit is this implementation's choice.
module muse_encoder
  import muse_pkg::*;
#(
  parameter muse_code_e CODE = MUSE_80_69
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [code_k(CODE)-1:0]  data,
  output logic                     out_valid,
  output logic [code_n(CODE)-1:0]  codeword
);
  localparam int N = code_n(CODE);
  localparam int R = code_r(CODE);
  localparam int K = code_k(CODE);
  localparam int M = code_m(CODE);

  logic          mod_valid;
  logic [R-1:0]  rem;
  logic [N-1:0]  quot_unused;

  muse_fast_mod #(.CODE(CODE), .N(N)) u_mod (
    .clk, .rst_n,
    .in_valid (in_valid),
    .x        ({data, R'(0)}),
    .out_valid(mod_valid),
    .rem      (rem),
    .quot     (quot_unused)
  );

  // data waits two cycles for its remainder
  logic [K-1:0] data_d1, data_d2;
  always_ff @(posedge clk) begin
    data_d1 <= data;
    data_d2 <= data_d1;
  end

  logic [R:0] chk;
  assign chk = (R+1)'(M) - {1'b0, rem};

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= mod_valid;
    codeword <= {data_d2, chk[R-1:0]};
  end

  // quotient of the modulo unit is not needed when encoding
  logic unused_ok;
  assign unused_ok = ^{quot_unused, chk[R]};

endmodule
