// tb_muse_elc: sweeps every possible remainder value through the Error Lookup
// Circuit, for the default MUSE(80,69) (600 entries) and for the shuffled
// MUSE(80,67) (2550 entries). Expected entries come from the testbench
// reference table, which enumerates each device's error patterns separately
// from the RTL. A remainder in the table must give found=1 with its error
// value and sign. Any other must give found=0. The number of hits must equal
// the table size.
`timescale 1ns/1ps
module tb_muse_elc;
  import muse_pkg::*;
  int checks = 0, failures = 0;

  logic [10:0] rem0;  logic f0, s0;  logic [79:0] v0;
  logic [12:0] rem1;  logic f1, s1;  logic [79:0] v1;
  muse_elc u0 (.rem(rem0), .found(f0), .errval(v0), .sub(s0));
  muse_elc #(.CODE(MUSE_80_67)) u1 (.rem(rem1), .found(f1), .errval(v1), .sub(s1));

  initial begin
    int hits;
    rem0 = '0;
    rem1 = '0;
    // ---- MUSE(80,69)
    muse_tb_pkg::build_ref(MUSE_80_69);
    checks++;
    if (muse_tb_pkg::ref_val.size() != 600 || muse_tb_pkg::ref_dups != 0) begin
      failures++; $display("ERROR: reference table size %0d", muse_tb_pkg::ref_val.size()); end
    hits = 0;
    for (int r = 0; r < 2048; r++) begin
      rem0 = 11'(r);
      #1;
      checks++;
      if (muse_tb_pkg::ref_val.exists(r)) begin
        hits += f0;
        if (!f0 || 144'(v0) != muse_tb_pkg::ref_val[r] || s0 != muse_tb_pkg::ref_sub[r]) begin
          failures++; if (failures < 5) $display("ERROR: 80_69 rem %0d", r); end
      end else if (f0) begin
        failures++; if (failures < 5) $display("ERROR: 80_69 false hit rem %0d", r);
      end
    end
    checks++;
    if (hits != 600) begin failures++; $display("ERROR: 80_69 hits %0d", hits); end
    // ---- MUSE(80,67)
    muse_tb_pkg::build_ref(MUSE_80_67);
    hits = 0;
    for (int r = 0; r < 8192; r++) begin
      rem1 = 13'(r);
      #1;
      checks++;
      if (muse_tb_pkg::ref_val.exists(r)) begin
        hits += f1;
        if (!f1 || 144'(v1) != muse_tb_pkg::ref_val[r] || s1 != muse_tb_pkg::ref_sub[r]) begin
          failures++; if (failures < 5) $display("ERROR: 80_67 rem %0d", r); end
      end else if (f1) begin
        failures++; if (failures < 5) $display("ERROR: 80_67 false hit rem %0d", r);
      end
    end
    checks++;
    if (hits != 2550) begin failures++; $display("ERROR: 80_67 hits %0d", hits); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #100000;
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
