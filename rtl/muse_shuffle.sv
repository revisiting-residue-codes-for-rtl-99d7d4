// muse_shuffle: bit shuffling between the memory controller and the DRAM
// devices.
//
// The DRAM bus is split into symbols. Symbol s is the SB bits on pins
// [SB*s +: SB], which one DRAM device (or one symbol-sized share of a device)
// stores. Shuffling places codeword bit sym_bit(s, j) on pin SB*s + j. A failing
// device then corrupts a scattered set of codeword bits rather than a run of
// adjacent ones. The effect is to change the error values a failure produces,
// which is what lets the 80-bit C8A and C4A_U1B codes find a multiplier at all.
//   UNSHUFFLE = 0: codeword -> DRAM pins (write path)
//   UNSHUFFLE = 1: DRAM pins -> codeword (read path)
// The maps are those of muse_pkg::sym_bit: Eq. 6 for MUSE(80,67) and Eq. 7
// for MUSE(80,70). MUSE(144,132) and MUSE(80,69) use the sequential
// assignment, for which this block reduces to plain wires.
// Pure wiring, no logic and no clock, as in the published design.
module muse_shuffle
  import muse_pkg::*;
#(
  parameter muse_code_e CODE      = MUSE_80_69,
  parameter bit         UNSHUFFLE = 1'b0
) (
  input  logic [code_n(CODE)-1:0] din,
  output logic [code_n(CODE)-1:0] dout
);
  localparam int NSYM = code_nsym(CODE);
  localparam int SB   = code_sym_bits(CODE);

  for (genvar s = 0; s < NSYM; s++) begin : g_sym
    for (genvar j = 0; j < SB; j++) begin : g_bit
      localparam int CB = sym_bit(CODE, s, j);  // codeword bit
      localparam int PB = SB * s + j;           // DRAM pin
      if (UNSHUFFLE) begin : g_rd
        assign dout[CB] = din[PB];
      end else begin : g_wr
        assign dout[PB] = din[CB];
      end
    end
  end

endmodule
