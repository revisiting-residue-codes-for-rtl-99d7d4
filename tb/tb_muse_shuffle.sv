// tb_muse_shuffle: checks the write-side shuffle and the read-side unshuffle
// for the two shuffled codes. MUSE(80,67) uses 8-bit devices, device i
// holding bits i, 10+i, ..., 70+i. MUSE(80,70) uses 4-bit devices, device 2i
// holding bits i, 10+i, 20+i, 30+i and device 2i+1 holding 40+i, ..., 70+i.
// Every pin must carry the expected codeword bit (map written out here).
// Unshuffle(shuffle(x)) must equal x. A failure of one device (all its pins
// inverted) must appear, after unshuffling, exactly on that device's bits.
`timescale 1ns/1ps
module tb_muse_shuffle;
  import muse_pkg::*;
  int checks = 0, failures = 0;

  logic [79:0] x, p67, y67, p70, y70, f67, g67;
  muse_shuffle #(.CODE(MUSE_80_67), .UNSHUFFLE(1'b0)) s67 (.din(x), .dout(p67));
  muse_shuffle #(.CODE(MUSE_80_67), .UNSHUFFLE(1'b1)) u67 (.din(p67), .dout(y67));
  muse_shuffle #(.CODE(MUSE_80_70), .UNSHUFFLE(1'b0)) s70 (.din(x), .dout(p70));
  muse_shuffle #(.CODE(MUSE_80_70), .UNSHUFFLE(1'b1)) u70 (.din(p70), .dout(y70));
  muse_shuffle #(.CODE(MUSE_80_67), .UNSHUFFLE(1'b1)) u67f (.din(f67), .dout(g67));

  initial begin
    for (int t = 0; t < 200; t++) begin
      int dv;
      logic [79:0] exp_mask;
      x = {16'($urandom), $urandom, $urandom};
      dv = $urandom % 10;
      f67 = p67;
      #1;
      f67 = p67 ^ (80'hFF << (8 * dv));
      #1;
      for (int i = 0; i < 10; i++)
        for (int j = 0; j < 8; j++) begin
          checks++;
          if (p67[8*i + j] != x[10*j + i]) begin failures++; if (failures < 5) $display("ERROR: 80_67 pin %0d", 8*i+j); end
        end
      for (int i = 0; i < 10; i++)
        for (int j = 0; j < 4; j++) begin
          checks += 2;
          if (p70[4*(2*i) + j]   != x[10*j + i])      begin failures++; if (failures < 5) $display("ERROR: 80_70 even pin"); end
          if (p70[4*(2*i+1) + j] != x[40 + 10*j + i]) begin failures++; if (failures < 5) $display("ERROR: 80_70 odd pin"); end
        end
      checks += 3;
      if (y67 != x) begin failures++; $display("ERROR: 80_67 round trip"); end
      if (y70 != x) begin failures++; $display("ERROR: 80_70 round trip"); end
      exp_mask = '0;
      for (int j = 0; j < 8; j++) exp_mask[10*j + dv] = 1'b1;
      if ((g67 ^ x) != exp_mask) begin failures++; $display("ERROR: device %0d failure maps to %h", dv, g67 ^ x); end
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
