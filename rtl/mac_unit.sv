// Multiply-accumulate unit of one LSTM unit: an 8x8-bit signed multiplier, a multiplexer that
// chooses the product or an external 16-bit addend, a saturating 16-bit adder and the
// accumulator register fed back into the adder.
//
// This is the "MAC 8x8->16" block of the LSTM unit: all gate, cell and hidden-state arithmetic
// of one hidden element is performed sequentially on it, one operation per cycle. Saturation on
// overflow (rather than wrap-around) is this design's own choice; the paper says only that 16
// bits are used to minimise overflows.
//
// Interface: en performs one operation on the rising clock edge; load replaces the accumulator
// instead of adding to it; use_ext selects ext (e.g. a bias or a received partial sum) instead
// of a*b. acc is the registered result, valid the cycle after the operation.
module mac_unit
  import muntaniala_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  load,     // 1: acc = operand, 0: acc = acc + operand
  input  logic  use_ext,  // 1: operand = ext,  0: operand = a * b
  input  data_t a,
  input  data_t b,
  input  acc_t  ext,
  output acc_t  acc
);
  acc_t prod, operand, base;

  assign prod    = a * b;
  assign operand = use_ext ? ext : prod;
  assign base    = load ? '0 : acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= sat_add(base, operand);
  end
endmodule
