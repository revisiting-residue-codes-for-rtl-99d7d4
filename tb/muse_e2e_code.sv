// muse_e2e_code: testbench helper that runs the end-to-end procedure of
// muse_e2e_body.svh on a muse_mem_ecc built for one code (parameter CODE).
// The test starts when start rises. done rises at the end, and checks and
// failures hold the counts.
`timescale 1ns/1ps
module muse_e2e_code
  import muse_pkg::*;
#(
  parameter muse_code_e CODE = MUSE_80_69,
  parameter int         NW   = 1000
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic done,
  output int   checks,
  output int   failures
);
  initial begin
    done = 1'b0;
    checks = 0;
    failures = 0;
  end

  `include "muse_e2e_body.svh"

  muse_mem_ecc #(.CODE(CODE)) dut (
    .clk, .rst_n,
    .wr_valid, .wr_data, .mem_wr_valid, .mem_wr_bits,
    .mem_rd_valid, .mem_rd_bits, .rd_data_valid, .rd_data,
    .rd_corr_valid, .rd_corr_data, .rd_status, .rd_err_detected, .rd_err_uncorrectable
  );
endmodule
