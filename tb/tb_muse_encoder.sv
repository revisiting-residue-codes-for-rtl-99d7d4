// tb_muse_encoder: streams 69-bit words into the default MUSE(80,69) encoder.
// Every codeword must appear exactly 3 cycles later. Its upper 69 bits must be
// the data, and the whole 80-bit value must be a multiple of 2005, with the
// check field in [1, 2005] (computed with wide integer arithmetic).
`timescale 1ns/1ps
module tb_muse_encoder;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic        iv = 1'b0;
  logic [68:0] d = '0;
  logic        ov;
  logic [79:0] cw;
  muse_encoder dut (.clk, .rst_n, .in_valid(iv), .data(d), .out_valid(ov), .codeword(cw));

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  logic [68:0] dq [$];
  int          cq [$];
  int          nres = 0;

  always @(posedge clk) if (rst_n && ov) begin
    logic [68:0] de;
    int c0;
    checks++;
    if (dq.size() == 0) begin failures++; $display("ERROR: spurious valid"); end
    else begin
      de = dq.pop_front();
      c0 = cq.pop_front();
      nres++;
      checks += 3;
      if (cyc - c0 != 3) begin failures++; $display("ERROR: latency %0d", cyc - c0); end
      if (cw[79:11] != de) begin failures++; $display("ERROR: data field"); end
      if (cw % 80'd2005 != 0 || cw[10:0] == 0 || cw[10:0] > 11'd2005) begin
        failures++; if (failures < 5) $display("ERROR: codeword %h not a valid multiple", cw); end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int i = 0; i < 3000; i++) begin
      logic [68:0] v;
      v = {5'($urandom), $urandom, $urandom};
      if (i == 0) v = '0;
      if (i == 1) v = '1;
      iv <= 1'b1;
      d  <= v;
      dq.push_back(v);
      cq.push_back(cyc + 1);
      @(posedge clk);
    end
    iv <= 1'b0;
    repeat (6) @(posedge clk);
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
