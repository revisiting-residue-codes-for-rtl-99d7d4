// muse_e2e_body.svh: end-to-end test of muse_mem_ecc, included into a module
// that declares:  localparam muse_code_e CODE, the DUT instance "dut" wired to
// the signals declared below, an input/variable "start" and outputs/variables
// "done", "checks", "failures".
//
// Procedure:
//  1. Write NW random words back to back (one per cycle). Every codeword on
//     mem_wr_bits must appear exactly 3 cycles after its word and must equal
//     the reference encoding, routed onto the pins of its DRAM device.
//  2. Read the stored words back to back. Each read applies an error
//     scenario on the DRAM pins: none, one failed device, two or three
//     failed devices. The same cycle, rd_data must equal the (possibly
//     corrupted) data bits: the speculative zero-latency read. Exactly 3
//     cycles later rd_corr_* must match the reference model's status and data.
//  3. Count how often each mechanism occurred: clean read, corrected device
//     failure, uncorrectable by "remainder not found", uncorrectable by symbol
//     over/underflow, and the speculative read. A mechanism never seen counts as a failure.

localparam int EN = muse_pkg::code_n(CODE);
localparam int EK = muse_pkg::code_k(CODE);
localparam int ER = muse_pkg::code_r(CODE);

logic              wr_valid = 1'b0;
logic [EK-1:0]     wr_data = '0;
logic              mem_wr_valid;
logic [EN-1:0]     mem_wr_bits;
logic              mem_rd_valid = 1'b0;
logic [EN-1:0]     mem_rd_bits = '0;
logic              rd_data_valid;
logic [EK-1:0]     rd_data;
logic              rd_corr_valid;
logic [EK-1:0]     rd_corr_data;
muse_pkg::rd_status_e rd_status;
logic              rd_err_detected, rd_err_uncorrectable;

int   cyc = 0;
always @(posedge clk) cyc <= cyc + 1;

// stored images and expectations
muse_tb_pkg::w_t stored [NW];
int              wr_cyc [$];
int              wr_idx = 0;
int              rd_exp_cyc [$];
int              rd_exp_st  [$];
muse_tb_pkg::w_t rd_exp_dat [$];
int n_clean = 0, n_corr = 0, n_nf = 0, n_ovf = 0, n_spec = 0;

// pins <-> codeword, from the reference device map
function automatic muse_tb_pkg::w_t to_pins(muse_tb_pkg::w_t cw);
  muse_tb_pkg::w_t p = '0;
  for (int d = 0; d < muse_tb_pkg::t_ndev(CODE); d++)
    for (int j = 0; j < muse_tb_pkg::t_sb(CODE); j++)
      p[d * muse_tb_pkg::t_sb(CODE) + j] = cw[muse_tb_pkg::t_bit(CODE, d, j)];
  return p;
endfunction

// write-side monitor
muse_tb_pkg::w_t wr_data_q [$];
always @(posedge clk) begin
  if (rst_n && mem_wr_valid) begin
    muse_tb_pkg::w_t exp_cw;
    int c0;
    checks++;
    if (wr_cyc.size() == 0) begin
      failures++;
      $display("ERROR: unexpected mem_wr_valid");
    end else begin
      c0 = wr_cyc.pop_front();
      exp_cw = muse_tb_pkg::ref_encode(CODE, wr_data_q.pop_front());
      stored[wr_idx] = exp_cw;
      wr_idx++;
      if (cyc - c0 != 3) begin
        failures++;
        $display("ERROR: encode latency %0d", cyc - c0);
      end
      checks++;
      if (muse_tb_pkg::w_t'(mem_wr_bits) != to_pins(exp_cw)) begin
        failures++;
        $display("ERROR: write codeword %h expected pins %h", mem_wr_bits, to_pins(exp_cw));
      end
    end
  end
end

// read-side monitor
always @(posedge clk) begin
  if (rst_n && rd_corr_valid) begin
    checks++;
    if (rd_exp_cyc.size() == 0) begin
      failures++;
      $display("ERROR: unexpected rd_corr_valid");
    end else begin
      int c0, st;
      muse_tb_pkg::w_t dx;
      c0 = rd_exp_cyc.pop_front();
      st = rd_exp_st.pop_front();
      dx = rd_exp_dat.pop_front();
      if (cyc - c0 != 3) begin
        failures++;
        $display("ERROR: correction latency %0d", cyc - c0);
      end
      checks++;
      if (int'(rd_status) != st || rd_err_detected != (st != 0) ||
          rd_err_uncorrectable != (st >= 2) ||
          muse_tb_pkg::w_t'(rd_corr_data) != (dx >> ER)) begin
        failures++;
        if (failures < 10)
          $display("ERROR: status %0d/%0d data %h expected %h", rd_status, st, rd_corr_data, dx >> ER);
      end
      case (st)
        0: n_clean++;
        1: n_corr++;
        2: n_nf++;
        default: n_ovf++;
      endcase
    end
  end
end

initial begin
  muse_tb_pkg::w_t d, cw, bad, fixed;
  int nd, st, d0;
  wait (start);
  muse_tb_pkg::build_ref(CODE);
  repeat (3) @(posedge clk);
  // ---- write stream
  for (int i = 0; i < NW; i++) begin
    d = muse_tb_pkg::rand_word() & ((muse_tb_pkg::w_t'(1) << EK) - 1);
    wr_valid <= 1'b1;
    wr_data  <= EK'(d);
    wr_data_q.push_back(d);
    wr_cyc.push_back(cyc + 1);
    @(posedge clk);
  end
  wr_valid <= 1'b0;
  repeat (6) @(posedge clk);
  checks++;
  if (wr_idx != NW) begin
    failures++;
    $display("ERROR: %0d of %0d codewords written", wr_idx, NW);
  end
  // ---- read stream with injected device failures
  for (int i = 0; i < NW; i++) begin
    cw = stored[i];
    bad = cw;
    case (i % 4)
      0: nd = 0;
      1: nd = 1;
      2: nd = 2;
      default: nd = 3;
    endcase
    d0 = $urandom % muse_tb_pkg::t_ndev(CODE);
    for (int k = 0; k < nd; k++)
      bad = muse_tb_pkg::dev_error(CODE, bad, (d0 + k * (1 + $urandom % 3)) % muse_tb_pkg::t_ndev(CODE));
    st = muse_tb_pkg::ref_classify(CODE, bad, fixed);
    // a single-device error must always be corrected (or be no error at all)
    if (nd == 1) begin
      checks++;
      if (!(st == 1 && fixed == cw) && !(st == 0 && bad == cw)) begin
        failures++;
        $display("ERROR: reference cannot correct a single device error");
      end
    end
    mem_rd_valid <= 1'b1;
    mem_rd_bits  <= EN'(to_pins(bad));
    rd_exp_cyc.push_back(cyc + 1);
    rd_exp_st.push_back(st);
    rd_exp_dat.push_back(fixed);
    @(negedge clk);
    checks++;
    if (!rd_data_valid || muse_tb_pkg::w_t'(rd_data) != (bad >> ER)) begin
      failures++;
      $display("ERROR: speculative rd_data %h expected %h", rd_data, bad >> ER);
    end else n_spec++;
    @(posedge clk);
  end
  mem_rd_valid <= 1'b0;
  repeat (6) @(posedge clk);
  checks++;
  if (rd_exp_cyc.size() != 0) begin
    failures++;
    $display("ERROR: %0d reads never completed", rd_exp_cyc.size());
  end
  $display("code %s: clean=%0d corrected=%0d uncorrectable_not_found=%0d uncorrectable_overflow=%0d speculative=%0d",
           CODE.name(), n_clean, n_corr, n_nf, n_ovf, n_spec);
  checks += 5;
  if (n_clean == 0) begin failures++; $display("ERROR: no clean read"); end
  if (n_corr  == 0) begin failures++; $display("ERROR: no corrected read"); end
  if (n_nf    == 0) begin failures++; $display("ERROR: no not-found detection"); end
  if (n_ovf   == 0) begin failures++; $display("ERROR: no overflow detection"); end
  if (n_spec  == 0) begin failures++; $display("ERROR: no speculative read"); end
  done = 1'b1;
end
