// tb_muse_code_80_67: end-to-end run of muse_mem_ecc built for the published
// MUSE(80,67) code. It uses the procedure of muse_e2e_body.svh:
// encode latency and codeword, shuffled pin mapping, speculative read,
// correction latency, corrected data and status against a reference model,
// and occurrence of every detection mechanism.
`timescale 1ns/1ps
module tb_muse_code_80_67;
  import muse_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #1 clk = ~clk;

  logic start = 1'b0;
  logic done;
  int   checks, failures;

  muse_e2e_code #(.CODE(MUSE_80_67), .NW(1000)) u_run (.clk, .rst_n, .start, .done, .checks, .failures);

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    start <= 1'b1;
    wait (done);
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
