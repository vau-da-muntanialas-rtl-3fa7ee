// Muntaniala: one LSTM accelerator die (tile). NH = 96 LSTM units compute 96 hidden-state
// elements in parallel; all weights stay resident in 12 on-die SRAM banks (84 kB), so in
// operation the die only takes in new input features and exchanges partial results with its
// neighbours. Dies combine into an n x n systolic grid to run layers with n*96 hidden elements.
//
// Structure (following the paper's datapath figure): an input-feature buffer x_t and a
// hidden-state buffer h_{t-1}, each read through a multiplexer that broadcasts one element per
// cycle to all units; per unit a weight byte from the SRAM; the LSTM units; the controller; and
// four pin interfaces, each 4 data bits with valid/ready (paper Table I):
//   p  parameters, configuration and input features from the external controller
//   r  partial sums (reduction) from the left neighbour
//   h  hidden-state elements for the next step from the row's master die
//   o  output: partial sums to the right neighbour, hidden states to other dies, results to
//      the external system; it has two ready inputs (o_ready_die, o_ready_ext). o_ext marks
//      a word addressed to the external system (this design's addition: it lets the external
//      controller ignore die-to-die traffic on a master's shared output).
// cmd is the 3-bit config/sync input, shared by all dies of a grid (codes in muntaniala_pkg).
//
// Timing: the controller's unit operations and the SRAM read address are issued together; the
// operation, broadcast operand and selection are registered once so they meet the SRAM data in
// the next cycle. One weight per unit per cycle, one nibble per cycle on each interface. The
// two test pins of the prototype are not modelled.
module muntaniala
  import muntaniala_pkg::*;
#(
  parameter int unsigned NH    = NH_DEFAULT,
  parameter int unsigned NBANK = NBANK_DEFAULT,
  parameter int unsigned DEPTH = DEPTH_DEFAULT,
  parameter int unsigned XMAX  = XMAX_DEFAULT,
  localparam int unsigned LANES = NH / NBANK,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned UW    = $clog2(NH),
  localparam int unsigned XW    = $clog2(XMAX)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cmd_e             cmd,
  input  logic [NIB_W-1:0] p_data,
  input  logic             p_valid,
  output logic             p_ready,
  input  logic [NIB_W-1:0] r_data,
  input  logic             r_valid,
  output logic             r_ready,
  input  logic [NIB_W-1:0] h_data,
  input  logic             h_valid,
  output logic             h_ready,
  output logic [NIB_W-1:0] o_data,
  output logic             o_valid,
  output logic             o_ext,
  input  logic             o_ready_die,
  input  logic             o_ready_ext,
  output logic             busy
);
  // ---------------------------------------------------------------------------------------
  // Interfaces
  logic        p_en, r_en, h_en;
  logic [7:0]  p_word, h_word;
  logic [15:0] r_word;
  logic        p_wvalid, r_wvalid, h_wvalid, p_wready, r_wready, h_wready;

  nibble_rx #(.NNIB(2)) u_rx_p (.clk, .rst_n, .en(p_en), .nib(p_data), .nib_valid(p_valid),
    .nib_ready(p_ready), .word(p_word), .word_valid(p_wvalid), .word_ready(p_wready));
  nibble_rx #(.NNIB(4)) u_rx_r (.clk, .rst_n, .en(r_en), .nib(r_data), .nib_valid(r_valid),
    .nib_ready(r_ready), .word(r_word), .word_valid(r_wvalid), .word_ready(r_wready));
  nibble_rx #(.NNIB(2)) u_rx_h (.clk, .rst_n, .en(h_en), .nib(h_data), .nib_valid(h_valid),
    .nib_ready(h_ready), .word(h_word), .word_valid(h_wvalid), .word_ready(h_wready));

  logic        tx_load, tx_is16, tx_use_ext, tx_load_ready;
  logic [15:0] tx_word;
  nibble_tx u_tx (.clk, .rst_n, .word(tx_word), .is16(tx_is16), .use_ext(tx_use_ext),
    .load(tx_load), .load_ready(tx_load_ready), .nib(o_data), .nib_valid(o_valid), .nib_ext(o_ext),
    .ready_die(o_ready_die), .ready_ext(o_ready_ext));

  // ---------------------------------------------------------------------------------------
  // Controller
  logic [1:0]    rd_src, bsrc;
  logic [UW-1:0] rd_idx, sel_idx, mem_unit;
  uop_e          uop;
  logic [7:0]    bidx, buf_idx, buf_wdata;
  logic          mem_req, mem_we, xbuf_we, hbuf_we, hbuf_copy, hbuf_clr;
  logic [AW-1:0] mem_addr;

  muntaniala_ctrl #(.NH(NH), .DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n, .cmd, .busy,
    .p_en, .p_word, .p_wvalid, .p_wready,
    .r_en, .r_word, .r_wvalid, .r_wready,
    .h_en, .h_word, .h_wvalid, .h_wready,
    .tx_load, .tx_is16, .tx_use_ext, .tx_load_ready, .rd_src, .rd_idx,
    .uop, .bsrc, .bidx, .sel_idx,
    .mem_req, .mem_we, .mem_addr, .mem_unit,
    .xbuf_we, .hbuf_we, .buf_idx, .buf_wdata, .hbuf_copy, .hbuf_clr
  );

  // ---------------------------------------------------------------------------------------
  // Input-feature and hidden-state buffers with their broadcast multiplexers
  data_t x_buf [XMAX];
  data_t h_buf [NH];
  data_t unit_h [NH];
  data_t unit_c [NH];
  data_t unit_y [NH];
  acc_t  unit_acc [NH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < XMAX; i++) x_buf[i] <= '0;
    end else if (xbuf_we && int'(buf_idx) < XMAX) begin
      x_buf[buf_idx[XW-1:0]] <= buf_wdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NH; i++) h_buf[i] <= '0;
    end else if (hbuf_clr) begin
      for (int i = 0; i < NH; i++) h_buf[i] <= '0;
    end else if (hbuf_copy) begin
      for (int i = 0; i < NH; i++) h_buf[i] <= unit_h[i];
    end else if (hbuf_we && int'(buf_idx) < NH) begin
      h_buf[buf_idx[UW-1:0]] <= buf_wdata;
    end
  end

  data_t bcast;
  always_comb begin
    unique case (bsrc)
      2'd0:    bcast = (int'(bidx) < XMAX) ? x_buf[bidx[XW-1:0]] : '0;
      2'd1:    bcast = (int'(bidx) < NH)   ? h_buf[bidx[UW-1:0]] : '0;
      default: bcast = data_t'(p_word);  // state loading
    endcase
  end

  // Stage-1 registers: aligned with the synchronous SRAM read.
  uop_e          uop_q;
  data_t         bcast_q;
  logic [UW-1:0] sel_q;
  acc_t          red_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      uop_q <= UOP_NOP; bcast_q <= '0; sel_q <= '0; red_q <= '0;
    end else begin
      uop_q <= uop; bcast_q <= bcast; sel_q <= sel_idx; red_q <= r_word;
    end
  end

  // ---------------------------------------------------------------------------------------
  // Parameter memory: NBANK banks, LANES units per bank
  logic [LANES*8-1:0] rdata [NBANK];
  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    logic [LANES-1:0] be;
    always_comb begin
      be = '0;
      if (mem_we && (int'(mem_unit) / LANES) == b) be[int'(mem_unit) % LANES] = 1'b1;
    end
    param_sram #(.DEPTH(DEPTH), .LANES(LANES)) u_sram (
      .clk, .req(mem_req && (!mem_we || (int'(mem_unit) / LANES) == b)), .we(mem_we),
      .addr(mem_addr), .be(be), .wdata({LANES{p_word}}), .rdata(rdata[b])
    );
  end

  // ---------------------------------------------------------------------------------------
  // LSTM units
  for (genvar u = 0; u < NH; u++) begin : g_unit
    lstm_unit u_unit (
      .clk, .rst_n, .op(uop_q), .sel(sel_q == UW'(u)),
      .w(rdata[u / LANES][(u % LANES) * 8 +: 8]), .bcast(bcast_q), .red(red_q),
      .acc(unit_acc[u]), .c(unit_c[u]), .h(unit_h[u]), .y(unit_y[u])
    );
  end

  // Output word selection
  always_comb begin
    unique case (rd_src)
      2'd0:    tx_word = unit_acc[rd_idx];
      2'd1:    tx_word = {{8{unit_h[rd_idx][7]}}, unit_h[rd_idx]};
      2'd2:    tx_word = {{8{unit_y[rd_idx][7]}}, unit_y[rd_idx]};
      default: tx_word = {{8{unit_c[rd_idx][7]}}, unit_c[rd_idx]};
    endcase
  end
endmodule
