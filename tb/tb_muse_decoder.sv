// tb_muse_decoder: streams valid and corrupted 80-bit codewords into the
// default MUSE(80,69) decoder. data and chk must be the codeword's fields in
// the same cycle. rem must equal codeword mod 2005 exactly 2 cycles later:
// zero for valid codewords, non-zero for most corrupted ones.
`timescale 1ns/1ps
module tb_muse_decoder;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic        iv = 1'b0;
  logic [79:0] cw = '0;
  logic [68:0] data;
  logic [10:0] chk, rem;
  logic        rv;
  muse_decoder dut (.clk, .rst_n, .in_valid(iv), .codeword(cw), .data, .chk, .rem_valid(rv), .rem);

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  logic [79:0] q [$];
  int          cq [$];
  int          nres = 0, nzero = 0;

  always @(posedge clk) if (rst_n && rv) begin
    logic [79:0] ce;
    int c0;
    checks++;
    if (q.size() == 0) begin failures++; $display("ERROR: spurious valid"); end
    else begin
      ce = q.pop_front();
      c0 = cq.pop_front();
      nres++;
      checks += 2;
      if (cyc - c0 != 2) begin failures++; $display("ERROR: latency %0d", cyc - c0); end
      if (81'(rem) != 81'(ce) % 81'd2005) begin failures++; if (failures < 5) $display("ERROR: rem %0d", rem); end
      if (rem == 0) nzero++;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int i = 0; i < 2000; i++) begin
      logic [80:0] v;
      logic [68:0] dd;
      int bi;
      dd = {5'($urandom), $urandom, $urandom};
      v = ({12'd0, dd} << 11);
      v = v + (81'd2005 - v % 81'd2005);          // valid codeword
      bi = $urandom % 80;
      if (i % 2 == 1) v[bi] ^= 1'b1;              // single-bit error
      iv <= 1'b1;
      cw <= v[79:0];
      q.push_back(v[79:0]);
      cq.push_back(cyc + 1);
      @(negedge clk);
      checks++;
      if (data != v[79:11] || chk != v[10:0]) begin failures++; $display("ERROR: fields"); end
      @(posedge clk);
    end
    iv <= 1'b0;
    repeat (5) @(posedge clk);
    checks += 2;
    if (nres != 2000) begin failures++; $display("ERROR: %0d results", nres); end
    if (nzero != 1000) begin failures++; $display("ERROR: %0d zero remainders, expected 1000", nzero); end
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
