// LSTM unit: computes one element of the hidden state. A die holds NH = 96 of them working in
// lock step; the loop over hidden elements of the LSTM layer is unrolled across units, and all
// the arithmetic for one element runs sequentially on the unit's single MAC.
//
// Contents, as in the paper's datapath figure: a MAC (8x8 -> 16 bit), a sigmoid LUT and a tanh
// LUT, registers for the gates i, f, o and the cell state c, the hidden output h, and the
// multiplexers that steer operands into the MAC. Two registers are this design's own: g holds
// the cell candidate tanh(.) (and later tanh(c)) while the MAC combines it with the gates, and
// y holds the fully-connected-layer output. The figure also shows a register labelled Z_t beside
// the weight register; the paper does not describe it. Here the partial sum from the left die
// (red) fills that operand slot.
//
// Each cycle the unit executes the micro-operation op (see muntaniala_pkg::uop_e) broadcast by
// the tile controller, with w its own weight byte from the parameter SRAM and bcast the input
// element (x_t or h_{t-1}) broadcast to all units. UOP_ADDRED and UOP_LDC act only when sel is
// set. Results are registered: they are visible the cycle after the operation.
//
// Sequence for one time step (driven by the controller):
//   gate i,f,o:  CLR, MAC.., [ADDRED], PEEP, BIAS, ACT_x        (pre-activation then LUT)
//   candidate:   CLR, MAC.., [ADDRED], BIAS, ACT_C, CMUL, CMAC, STC  (c = f*c + i*g)
//   hidden:      TANHC, HMUL, STH                                     (h = o * tanh(c))
module lstm_unit
  import muntaniala_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  uop_e  op,
  input  logic  sel,
  input  data_t w,
  input  data_t bcast,
  input  acc_t  red,
  output acc_t  acc,
  output data_t c,
  output data_t h,
  output data_t y
);
  data_t gi, gf, go, g;
  data_t mul_a, mul_b, qacc, tanh_in;
  logic [7:0] sigm_out, tanh_out;
  logic  mac_en, mac_load, mac_ext;
  acc_t  ext;

  assign qacc = q8(acc);

  // Activation LUTs: the tanh input comes either from the accumulator or from the cell state.
  assign tanh_in = (op == UOP_TANHC) ? c : qacc;
  act_lut #(.IS_TANH(1'b0)) u_sigm (.addr(qacc),    .data(sigm_out));
  act_lut #(.IS_TANH(1'b1)) u_tanh (.addr(tanh_in), .data(tanh_out));

  // Operand multiplexers into the MAC.
  always_comb begin
    mac_en   = 1'b0;
    mac_load = 1'b0;
    mac_ext  = 1'b0;
    mul_a    = w;
    mul_b    = bcast;
    ext      = '0;
    unique case (op)
      UOP_CLR:    begin mac_en = 1'b1; mac_load = 1'b1; mac_ext = 1'b1; end
      UOP_MAC:    begin mac_en = 1'b1; end
      UOP_PEEP:   begin mac_en = 1'b1; mul_b = c; end
      UOP_BIAS:   begin mac_en = 1'b1; mac_ext = 1'b1; ext = acc_t'(w) <<< FRAC; end
      UOP_ADDRED: begin mac_en = sel;  mac_ext = 1'b1; ext = red; end
      UOP_CMUL:   begin mac_en = 1'b1; mac_load = 1'b1; mul_a = gf; mul_b = c; end
      UOP_CMAC:   begin mac_en = 1'b1; mul_a = gi; mul_b = g; end
      UOP_HMUL:   begin mac_en = 1'b1; mac_load = 1'b1; mul_a = go; mul_b = g; end
      default: ;
    endcase
  end

  mac_unit u_mac (
    .clk, .rst_n, .en(mac_en), .load(mac_load), .use_ext(mac_ext),
    .a(mul_a), .b(mul_b), .ext(ext), .acc(acc)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gi <= '0; gf <= '0; go <= '0; g <= '0; c <= '0; h <= '0; y <= '0;
    end else begin
      unique case (op)
        UOP_ACT_I: gi <= sigm_out;
        UOP_ACT_F: gf <= sigm_out;
        UOP_ACT_O: go <= sigm_out;
        UOP_ACT_C: g  <= tanh_out;
        UOP_ACT_Y: y  <= sigm_out;
        UOP_TANHC: g  <= tanh_out;
        UOP_STC:   c  <= qacc;
        UOP_STH:   h  <= qacc;
        UOP_LDC:   if (sel) c <= bcast;
        UOP_CLRST: begin c <= '0; h <= '0; end
        default: ;
      endcase
    end
  end
endmodule
