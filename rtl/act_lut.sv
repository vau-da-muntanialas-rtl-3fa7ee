// Activation look-up table: one 256-entry, 8-bit read-only table for the logistic sigmoid or
// for tanh, read combinationally.
//
// Each LSTM unit holds two of these, one per non-linearity, as in the paper, which maps both
// activations onto plain 8-bit LUTs addressed by the 8-bit quantised gate pre-activation. The
// address is the two's-complement input a (a value a / 2^FRAC); entry a holds
//   round(f(a / 2^FRAC) * 2^FRAC), clipped to [-128, 127],
// with f the sigmoid 1 / (1 + e^-x) or tanh(x) and FRAC = 5. The table contents (and therefore
// the exact curve resolution) are this design's own; the paper gives only the function and the
// 8-bit width. The tables come from sigm_lut.hex / tanh_lut.hex; they match FRAC = 5 only.
//
// Interface: addr (8-bit signed input), data (8-bit signed output), no clock: zero latency.
module act_lut #(
  parameter bit IS_TANH = 1'b0   // 0: sigmoid table, 1: tanh table
) (
  input  logic [7:0] addr,
  output logic [7:0] data
);
  logic [7:0] rom [256];

  initial begin
    if (IS_TANH) $readmemh("rtl/tanh_lut.hex", rom);
    else         $readmemh("rtl/sigm_lut.hex", rom);
  end

  assign data = rom[addr];
endmodule
