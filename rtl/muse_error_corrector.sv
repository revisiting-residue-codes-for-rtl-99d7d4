// muse_error_corrector: the error correction and detection unit of the MUSE
// read path.
//
// Input: a received codeword together with its remainder mod m, both valid in
// the same cycle. The remainder goes to the Error Lookup Circuit (muse_elc).
// On a hit, an add/sub unit moves the codeword back by the error value: it
// subtracts when the entry's sign says the error raised the value and adds
// otherwise. Detection follows the read decision diagram:
//   remainder == 0                      -> ST_CLEAN, data passed unchanged
//   remainder not in the ELC            -> ST_UE_NOT_FOUND (uncorrectable)
//   the correction over/underflows the
//   symbol it belongs to                -> ST_UE_OVERFLOW (uncorrectable)
//   otherwise                           -> ST_CORRECTED
// "Over/underflow" means one of two things: the add/sub carries or borrows out
// of the N-bit word, or it changes a bit outside the symbols that the error
// value touches. A true single-symbol error never does either, because the
// corrected value has to fit back into the same symbol. A miscorrected
// multi-symbol error often ripples a run of 1s or 0s past the symbol boundary.
// The symbols an error value touches come from the value itself: every symbol
// in which it has a set bit. So the ELC entry needs no extra field.
//
// Outputs: the corrected K data bits, err_detected (remainder non-zero),
// err_uncorrectable (the two uncorrectable cases) and the status enum. On an
// uncorrectable error the data output carries the received data bits
// unchanged. That choice is this implementation's: the paper only raises the
// flag.
//
// Timing: one register stage. Outputs follow in_valid by 1 cycle. Together with
// the 2-cycle remainder of the decoder, that gives the published three-cycle
// read correction latency. Reset clears out_valid.
module muse_error_corrector
  import muse_pkg::*;
#(
  parameter muse_code_e CODE = MUSE_80_69
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [code_n(CODE)-1:0]  codeword,
  input  logic [code_r(CODE)-1:0]  rem,
  output logic                     out_valid,
  output logic [code_k(CODE)-1:0]  data,
  output rd_status_e               status,
  output logic                     err_detected,
  output logic                     err_uncorrectable
);
  localparam int N    = code_n(CODE);
  localparam int R    = code_r(CODE);
  localparam int NSYM = code_nsym(CODE);

  // ---- Error Lookup Circuit
  logic          found, sub;
  logic [N-1:0]  errval;
  muse_elc #(.CODE(CODE)) u_elc (.rem(rem), .found(found), .errval(errval), .sub(sub));

  // ---- add/sub with carry/borrow out
  logic [N:0] sum;
  assign sum = sub ? ({1'b0, codeword} - {1'b0, errval})
                   : ({1'b0, codeword} + {1'b0, errval});

  // ---- bits the correction may legally change: the symbols errval touches
  logic [N-1:0] sym_ok [NSYM];
  for (genvar s = 0; s < NSYM; s++) begin : g_sym
    localparam logic [N-1:0] SM = N'(sym_mask(CODE, s));
    assign sym_ok[s] = (|(errval & SM)) ? SM : '0;
  end

  logic [N-1:0] allowed;
  always_comb begin
    allowed = '0;
    for (int s = 0; s < NSYM; s++) allowed |= sym_ok[s];
  end

  logic overflow;
  assign overflow = sum[N] | (|((sum[N-1:0] ^ codeword) & ~allowed));

  // ---- decision (read error decision diagram)
  rd_status_e   st;
  logic [N-1:0] fixed;
  always_comb begin
    if (rem == '0) begin
      st    = ST_CLEAN;
      fixed = codeword;
    end else if (!found) begin
      st    = ST_UE_NOT_FOUND;
      fixed = codeword;
    end else if (overflow) begin
      st    = ST_UE_OVERFLOW;
      fixed = codeword;
    end else begin
      st    = ST_CORRECTED;
      fixed = sum[N-1:0];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
    data              <= fixed[N-1:R];
    status            <= st;
    err_detected      <= (st != ST_CLEAN);
    err_uncorrectable <= (st == ST_UE_NOT_FOUND) || (st == ST_UE_OVERFLOW);
  end

endmodule
