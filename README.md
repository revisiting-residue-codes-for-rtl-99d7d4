# MUSE residue-code ECC datapath

Memory ECC usually relies on linear codes such as Reed-Solomon. This design protects each memory word with a **residue code**. The whole n-bit codeword is a multiple of a constant multiplier `m`. The data bits sit unchanged in the upper `k` bits. The low `r = n - k` bits hold a check value `X`, chosen so that `(data << r) + X` is divisible by `m`. Because the code is systematic, a read hands its data out with no added delay. The check runs alongside it.

## Error detection and correction
A failed DRAM device (a "symbol") adds or subtracts a value `e` from the codeword. Afterwards `codeword mod m` equals `±e mod m`, and that is nonzero. The multiplier is chosen so that every correctable error gives a different remainder. A constant table, the ELC, maps each remainder to its error value and sign. The corrector then adds or subtracts that value. A correction is rejected, as uncorrectable, when either of these happens:
- the remainder is not in the table;
- the arithmetic carries or borrows out of the symbols the error value touches, i.e. a symbol over- or underflows.

The ELC entries are worked out while the design elaborates, in `muse_pkg`, so no table file is needed.

## Fast modulo
`x mod m` is computed with a precomputed inverse `c = ceil(2^F / m)`:
- `frac` is the low `F` bits of `x*c`;
- the remainder is `(frac*m) >> F`;
- the quotient is `(x*c) >> F`.

This is exact for every n-bit input. Both products are constant multipliers (`muse_const_mult`), built as follows:
- radix-4 Booth recoding of the constant;
- zero partial products removed;
- a Wallace tree of 3:2 compressors;
- one final adder.

## Codes
`CODE` selects the code. The default is MUSE(80,69) with `m = 2005`: 64 data bits plus 5 spare metadata bits, on DDR5 x4 devices.

| Code | m | Symbols | Shuffle |
|---|---|---|---|
| MUSE(144,132) | 4065 | 4-bit, bidirectional | none |
| MUSE(80,67) | 5621 | 8-bit, 1→0 errors | bit `i+10j` in symbol `i` |
| MUSE(80,70) | 821 | 4-bit, 1→0 errors, plus any single-bit error | interleaved |

`muse_shuffle` routes codeword bits to the DRAM pins.

## Top level and timing (`muse_mem_ecc`)
- Write: the encoder takes 3 cycles, then the shuffle.
- Read: unshuffle, then the data is on `rd_data` in the same cycle (speculative).
- The remainder takes 2 cycles, and correction 1 more. `rd_corr_*` and `rd_status` follow 3 cycles after the read (clean / corrected / not found / overflow).
- One word per cycle in each direction. There is no back-pressure. Reset is synchronous and active low.

## Simulation
```
verilator --binary --timing -Irtl -Itb rtl/muse_pkg.sv tb/muse_tb_pkg.sv rtl/*.sv tb/tb_muse_mem_ecc.sv --top-module tb_muse_mem_ecc
./obj_dir/Vtb_muse_mem_ecc
```
Each block has its own testbench `tb/tb_<module>.sv`. They compare the DUT against a separate reference model in `tb/muse_tb_pkg.sv`.
- The top-level test runs at the default parameters. It counts clean reads, corrected reads, both kinds of uncorrectable error, and speculative reads.
- `tb_muse_code_*` run the same test for the other three codes.

## Departures and choices
- The check value is `m - ((data<<r) mod m)`, which lies in `1..m`. That follows the encoding equation.
- The register placement and the valid-pulse interface are this design's choices, picked to give the stated latencies.
- On an uncorrectable error, the raw data is passed on with the flag set.
- Not included:
  - the use of the metadata bits (tags, hashes);
  - the offline search for multipliers.
