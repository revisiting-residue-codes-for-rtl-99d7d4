// tb_muse_fast_mod: streams one value per cycle into the two-multiplier
// modulo unit, for the default code MUSE(80,69) and for MUSE(80,67). Each
// result must come out exactly 2 cycles later with rem = x mod m and
// quot = x div m, from the simulator's wide division.
`timescale 1ns/1ps
module tb_muse_fast_mod;
  import muse_pkg::*;
  int checks = 0, failures = 0;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic        iv = 1'b0;
  logic [79:0] x = '0;
  logic        ov0, ov1;
  logic [10:0] rem0;  logic [79:0] q0;
  logic [12:0] rem1;  logic [79:0] q1;

  muse_fast_mod u0 (.clk, .rst_n, .in_valid(iv), .x(x), .out_valid(ov0), .rem(rem0), .quot(q0));
  muse_fast_mod #(.CODE(MUSE_80_67)) u1 (.clk, .rst_n, .in_valid(iv), .x(x), .out_valid(ov1), .rem(rem1), .quot(q1));

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  logic [79:0] xq [$];
  int          cq [$];
  int          nres = 0;

  always @(posedge clk) if (rst_n && ov0) begin
    logic [79:0] xe;
    int c0;
    checks++;
    if (xq.size() == 0) begin failures++; $display("ERROR: spurious valid"); end
    else begin
      xe = xq.pop_front();
      c0 = cq.pop_front();
      nres++;
      checks += 4;
      if (cyc - c0 != 2) begin failures++; $display("ERROR: latency %0d", cyc - c0); end
      if (ov1 !== 1'b1) failures++;
      if (81'(rem0) != 81'(xe) % 81'd2005 || 81'(q0) != 81'(xe) / 81'd2005) begin
        failures++; if (failures < 5) $display("ERROR: m=2005 x=%h rem=%0d", xe, rem0); end
      if (81'(rem1) != 81'(xe) % 81'd5621 || 81'(q1) != 81'(xe) / 81'd5621) begin
        failures++; if (failures < 5) $display("ERROR: m=5621 x=%h rem=%0d", xe, rem1); end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int i = 0; i < 3000; i++) begin
      logic [79:0] v;
      v = {16'($urandom), $urandom, $urandom};
      if (i == 0) v = '1;
      if (i == 1) v = 80'd2005 * 80'd12345;
      iv <= 1'b1;
      x  <= v;
      xq.push_back(v);
      cq.push_back(cyc + 1);
      @(posedge clk);
    end
    iv <= 1'b0;
    repeat (5) @(posedge clk);
    checks++;
    if (nres != 3000) begin failures++; $display("ERROR: %0d results", nres); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
