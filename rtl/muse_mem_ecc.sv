// muse_mem_ecc: MUSE residue-code ECC datapath of a memory controller (top).
//
// Write path: a K-bit word from the last-level cache is encoded into an
// N-bit codeword (muse_encoder, 3 cycles). It is then shuffled onto the DRAM
// bus pins (muse_shuffle) and leaves on mem_wr_bits.
// Read path: the N bits from the DRAM bus are unshuffled into a codeword. The
// systematic decoder hands the data bits straight back (rd_data, same cycle,
// no added latency), so the common error-free case is never delayed. The
// decoder also starts the remainder computation. Two cycles later the
// remainder and the codeword, delayed to match, enter the error correction
// unit. One cycle after that it delivers the checked or corrected word with
// its status (rd_corr_*, 3 cycles after mem_rd_valid). A consumer uses
// rd_data speculatively. If rd_err_detected is set it replaces that word with
// rd_corr_data, or drops it when rd_err_uncorrectable is also set.
//
// In the default code, MUSE(80,69), K = 69. 64 bits are the data word. The
// other 5 bits are free for metadata (memory tags, or 40 bits of hash per
// 8-word cache line), which the code protects like data. How those bits are
// used is outside this block.
//
// Interface: fixed-latency valid pulses, one word per cycle in each direction,
// no back-pressure. Reset (rst_n, active low, synchronous) clears the valid
// pipelines. The block structure, the three-cycle encode and correct
// latencies and the zero-latency systematic read follow the paper. The
// valid-pulse handshake and the split of the rd_* outputs are this design's
// choices.
module muse_mem_ecc
  import muse_pkg::*;
#(
  parameter muse_code_e CODE = MUSE_80_69
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // write path: LLC -> DRAM
  input  logic                     wr_valid,
  input  logic [code_k(CODE)-1:0]  wr_data,
  output logic                     mem_wr_valid,
  output logic [code_n(CODE)-1:0]  mem_wr_bits,
  // read path: DRAM -> LLC
  input  logic                     mem_rd_valid,
  input  logic [code_n(CODE)-1:0]  mem_rd_bits,
  output logic                     rd_data_valid,
  output logic [code_k(CODE)-1:0]  rd_data,
  output logic                     rd_corr_valid,
  output logic [code_k(CODE)-1:0]  rd_corr_data,
  output rd_status_e               rd_status,
  output logic                     rd_err_detected,
  output logic                     rd_err_uncorrectable
);
  localparam int N = code_n(CODE);
  localparam int R = code_r(CODE);

  // ---------------------------------------------------------- write path
  logic [N-1:0] enc_cw;
  muse_encoder #(.CODE(CODE)) u_enc (
    .clk, .rst_n,
    .in_valid (wr_valid),
    .data     (wr_data),
    .out_valid(mem_wr_valid),
    .codeword (enc_cw)
  );

  muse_shuffle #(.CODE(CODE), .UNSHUFFLE(1'b0)) u_shuf (.din(enc_cw), .dout(mem_wr_bits));

  // ---------------------------------------------------------- read path
  logic [N-1:0] rd_cw;
  muse_shuffle #(.CODE(CODE), .UNSHUFFLE(1'b1)) u_unshuf (.din(mem_rd_bits), .dout(rd_cw));

  logic          rem_valid;
  logic [R-1:0]  rem, chk_unused;
  muse_decoder #(.CODE(CODE)) u_dec (
    .clk, .rst_n,
    .in_valid (mem_rd_valid),
    .codeword (rd_cw),
    .data     (rd_data),
    .chk      (chk_unused),
    .rem_valid(rem_valid),
    .rem      (rem)
  );
  assign rd_data_valid = mem_rd_valid;

  // codeword waits for its remainder
  logic [N-1:0] cw_d1, cw_d2;
  always_ff @(posedge clk) begin
    cw_d1 <= rd_cw;
    cw_d2 <= cw_d1;
  end

  muse_error_corrector #(.CODE(CODE)) u_ecu (
    .clk, .rst_n,
    .in_valid         (rem_valid),
    .codeword         (cw_d2),
    .rem              (rem),
    .out_valid        (rd_corr_valid),
    .data             (rd_corr_data),
    .status           (rd_status),
    .err_detected     (rd_err_detected),
    .err_uncorrectable(rd_err_uncorrectable)
  );

  logic unused_ok;
  assign unused_ok = ^chk_unused;

endmodule
