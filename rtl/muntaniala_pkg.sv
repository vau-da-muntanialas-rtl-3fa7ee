// Shared constants, types and fixed-point helpers of the Muntaniala LSTM accelerator tile.
//
// Number format: every state, gate, weight and bias is an 8-bit signed fixed-point value with
// FRAC fractional bits; the MAC works on 16 bits with 2*FRAC fractional bits. The 8/16-bit split
// follows the paper; the position of the binary point (FRAC = 5, range [-4, 4)) is this design's
// own choice, as is the saturating behaviour of the accumulator.
//
// The tile is driven by a 3-bit command code (the paper's three config/sync pins). The code
// assignment below is this design's own; the paper lists only example uses (store out internal
// states, load new states, load new parameters).
package muntaniala_pkg;

  localparam int unsigned DATA_W = 8;   // states, gates, weights, biases
  localparam int unsigned ACC_W  = 16;  // MAC accumulator
  localparam int unsigned NIB_W  = 4;   // data pins per stream interface
  localparam int unsigned FRAC   = 5;   // fractional bits of the 8-bit format

  // Default tile size of the fabricated prototype.
  localparam int unsigned NH_DEFAULT    = 96;   // LSTM units per die
  localparam int unsigned NBANK_DEFAULT = 12;   // SRAM banks
  localparam int unsigned DEPTH_DEFAULT = 896;  // words per bank: 84 kB / 96 units = 896 bytes
  localparam int unsigned XMAX_DEFAULT  = 128;  // input-feature buffer entries

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Command code on the config/sync pins.
  typedef enum logic [2:0] {
    CMD_NOP        = 3'd0,
    CMD_LOAD_CFG   = 3'd1,  // 7 configuration bytes over p
    CMD_LOAD_PARAM = 3'd2,  // parameter memory image over p
    CMD_RUN        = 3'd3,  // one time step (plus optional FCL output)
    CMD_STORE_ST   = 3'd4,  // write c and h out over o (external ready)
    CMD_LOAD_ST    = 3'd5,  // read c and h_{t-1} over p
    CMD_CLEAR_ST   = 3'd6   // c = 0, h_{t-1} = 0, h_t = 0
  } cmd_e;

  // Micro-operation broadcast to all LSTM units.
  typedef enum logic [4:0] {
    UOP_NOP,
    UOP_CLR,     // acc = 0
    UOP_MAC,     // acc += w * bcast          (x_t or h_{t-1} element)
    UOP_PEEP,    // acc += w * c              (peephole)
    UOP_BIAS,    // acc += w << FRAC          (bias)
    UOP_ADDRED,  // acc += red                (selected unit only: reduction input)
    UOP_ACT_I,   // i = sigm(q(acc))
    UOP_ACT_F,   // f = sigm(q(acc))
    UOP_ACT_O,   // o = sigm(q(acc))
    UOP_ACT_C,   // g = tanh(q(acc))          (cell candidate)
    UOP_ACT_Y,   // y = sigm(q(acc))          (FCL output)
    UOP_CMUL,    // acc = f * c
    UOP_CMAC,    // acc += i * g
    UOP_STC,     // c = q(acc)
    UOP_TANHC,   // g = tanh(c)
    UOP_HMUL,    // acc = o * g
    UOP_STH,     // h = q(acc)
    UOP_LDC,     // c = bcast                 (selected unit only: state loading)
    UOP_CLRST    // c = 0, h = 0
  } uop_e;

  // Tile configuration, loaded byte by byte with CMD_LOAD_CFG.
  typedef struct packed {
    logic [7:0] nx;         // input features held by this die
    logic [7:0] nh_in;      // hidden-state elements read by this die (its h_{t-1} tile)
    logic [7:0] nh_act;     // active LSTM units (hidden elements computed in this row)
    logic [7:0] no;         // FCL outputs of this row, 0 = no FCL
    logic       out_ext;    // master: write h_t to the external system after the step
    logic       self_h;     // master: copy own h_t into own h_{t-1} buffer
    logic       send_h;     // master: distribute h_t over o to other dies
    logic       recv_h;     // receive the h_{t-1} tile over the h interface
    logic       has_left;   // receives partial sums over r
    logic       master;     // rightmost die of its row
    logic [9:0] nwords;     // parameter words per unit to load
  } cfg_t;

  localparam int unsigned CFG_BYTES = 7;

  function automatic data_t sat8(input logic signed [ACC_W-1:0] v);
    if (v > 127)       return 8'sd127;
    else if (v < -128) return -8'sd128;
    else               return v[7:0];
  endfunction

  // 16-bit accumulator value (2*FRAC fractional bits) to 8-bit value (FRAC fractional bits).
  function automatic data_t q8(input acc_t a);
    return sat8(a >>> FRAC);
  endfunction

  function automatic acc_t sat_add(input acc_t a, input acc_t b);
    logic signed [ACC_W:0] s;
    s = {a[ACC_W-1], a} + {b[ACC_W-1], b};
    if (s > 32767)       return 16'sh7fff;
    else if (s < -32768) return 16'sh8000;
    else                 return s[ACC_W-1:0];
  endfunction

endpackage
