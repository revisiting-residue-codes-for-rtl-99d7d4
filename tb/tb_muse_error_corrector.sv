// tb_muse_error_corrector: feeds the default MUSE(80,69) error correction
// unit with codewords carrying no error, a single-device error, or errors in
// two or three devices, one per cycle. The remainder comes from the
// simulator's wide modulo. After exactly 1 cycle the status, the flags and
// the data must match the reference model's decision: clean, corrected,
// uncorrectable/not found, or uncorrectable/overflow. Every outcome must
// occur at least once.
`timescale 1ns/1ps
module tb_muse_error_corrector;
  import muse_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic        iv = 1'b0;
  logic [79:0] cw = '0;
  logic [10:0] rem = '0;
  logic        ov, det, ue;
  logic [68:0] data;
  rd_status_e  st;
  muse_error_corrector dut (.clk, .rst_n, .in_valid(iv), .codeword(cw), .rem(rem),
                            .out_valid(ov), .data(data), .status(st),
                            .err_detected(det), .err_uncorrectable(ue));

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int              eq_st [$];
  int              eq_c  [$];
  muse_tb_pkg::w_t eq_d  [$];
  int              seen [4] = '{0, 0, 0, 0};

  always @(posedge clk) if (rst_n && ov) begin
    int s, c0;
    muse_tb_pkg::w_t d;
    checks++;
    if (eq_st.size() == 0) begin failures++; $display("ERROR: spurious valid"); end
    else begin
      s = eq_st.pop_front();
      c0 = eq_c.pop_front();
      d = eq_d.pop_front();
      seen[s]++;
      checks += 2;
      if (cyc - c0 != 1) begin failures++; $display("ERROR: latency %0d", cyc - c0); end
      if (int'(st) != s || det != (s != 0) || ue != (s >= 2) || 144'(data) != (d >> 11)) begin
        failures++; if (failures < 5) $display("ERROR: status %0d expected %0d", st, s); end
    end
  end

  initial begin
    muse_tb_pkg::w_t c, b, fx;
    int s;
    muse_tb_pkg::build_ref(MUSE_80_69);
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int i = 0; i < 4000; i++) begin
      c = muse_tb_pkg::ref_encode(MUSE_80_69, muse_tb_pkg::rand_word() & ((144'd1 << 69) - 1));
      b = c;
      for (int k = 0; k < i % 4; k++) b = muse_tb_pkg::dev_error(MUSE_80_69, b, $urandom % 20);
      s = muse_tb_pkg::ref_classify(MUSE_80_69, b, fx);
      iv  <= 1'b1;
      cw  <= 80'(b);
      rem <= 11'(b % 144'd2005);
      eq_st.push_back(s);
      eq_c.push_back(cyc + 1);
      eq_d.push_back(fx);
      @(posedge clk);
    end
    iv <= 1'b0;
    repeat (4) @(posedge clk);
    $display("clean=%0d corrected=%0d not_found=%0d overflow=%0d", seen[0], seen[1], seen[2], seen[3]);
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (seen[k] == 0) begin failures++; $display("ERROR: outcome %0d never seen", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
