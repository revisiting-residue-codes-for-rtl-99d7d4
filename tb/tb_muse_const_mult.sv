// tb_muse_const_mult: checks the Booth/Wallace constant multiplier against the
// simulator's own wide multiplication. It uses three constants: the default
// 77-bit scaled inverse of m = 2005 by an 80-bit operand, the 11-bit multiplier
// 2005 by an 87-bit operand, and the 145-bit inverse of m = 4065 by a 144-bit
// operand. It drives random operands plus all-ones and zero.
`timescale 1ns/1ps
module tb_muse_const_mult;
  int checks = 0, failures = 0;

  localparam logic [76:0]  C0 = 77'd77178306688614730355307;
  localparam logic [10:0]  C1 = 11'd2005;
  localparam logic [144:0] C2 = 145'd22470812382086453231913973442747278899998963;

  logic [79:0]  x0;  logic [156:0] p0;
  logic [86:0]  x1;  logic [97:0]  p1;
  logic [143:0] x2;  logic [288:0] p2;

  muse_const_mult u0 (.x(x0), .p(p0));
  muse_const_mult #(.XW(87),  .CW(11),  .C(C1)) u1 (.x(x1), .p(p1));
  muse_const_mult #(.XW(144), .CW(145), .C(C2)) u2 (.x(x2), .p(p2));

  function automatic logic [159:0] rnd();
    logic [159:0] v;
    for (int i = 0; i < 5; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    for (int i = 0; i < 3000; i++) begin
      if (i == 0) begin x0 = '1; x1 = '1; x2 = '1; end
      else if (i == 1) begin x0 = '0; x1 = '0; x2 = '0; end
      else begin x0 = 80'(rnd()); x1 = 87'(rnd()); x2 = {16'(rnd()), 128'(rnd())}; end
      #1;
      checks += 3;
      if (p0 !== 157'(x0) * 157'(C0)) begin failures++; if (failures < 5) $display("ERROR: p0 x=%h p=%h exp=%h", x0, p0, 157'(x0) * 157'(C0)); end
      if (p1 !== 98'(x1) * 98'(C1))   begin failures++; if (failures < 5) $display("ERROR: p1 x=%h", x1); end
      if (p2 !== 289'(x2) * 289'(C2)) begin failures++; if (failures < 5) $display("ERROR: p2 x=%h", x2); end
    end
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
