// tb_muse_mem_ecc: end-to-end test of the MUSE ECC datapath at its default
// configuration, MUSE(80,69) (no parameter override on the DUT).
// It writes NW words through the encoder, then reads them back with no error,
// one, two or three failed DRAM devices. It checks the encode latency (3),
// the speculative zero-latency read, the correction latency (3), the
// corrected data and the status against a reference model. It also checks
// that every detection mechanism occurred. The procedure is in
// muse_e2e_body.svh.
`timescale 1ns/1ps
module tb_muse_mem_ecc;
  import muse_pkg::*;
  localparam muse_code_e CODE = MUSE_80_69;   // the DUT's default code
  localparam int NW = 2000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #1 clk = ~clk;

  int   checks = 0, failures = 0;
  logic start = 1'b0;
  logic done = 1'b0;

  `include "muse_e2e_body.svh"

  muse_mem_ecc dut (
    .clk, .rst_n,
    .wr_valid, .wr_data, .mem_wr_valid, .mem_wr_bits,
    .mem_rd_valid, .mem_rd_bits, .rd_data_valid, .rd_data,
    .rd_corr_valid, .rd_corr_data, .rd_status, .rd_err_detected, .rd_err_uncorrectable
  );

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    start <= 1'b1;
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
