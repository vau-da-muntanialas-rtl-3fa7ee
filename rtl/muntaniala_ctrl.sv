// Tile controller of a Muntaniala die: holds the die's configuration and sequences one LSTM time
// step as the paper's timeline describes it -- load the input features, then for each of the
// gates i, f, the cell candidate c and gate o: multiply-accumulate over x_t and h_{t-1}, take in
// the partial sums of the die to the left (reduction), and, on a master (rightmost) die, add the
// peephole and bias terms and apply the LUT activation; slaves instead send their partial sums
// to the right. Masters then update c and h, and the hidden state is distributed for the next
// step. An optional fully connected output layer (FCL) reuses the same MAC/reduction path.
//
// The phase order, the master/slave split and the reduction/distribution pattern follow the
// paper. The command codes, the configuration byte layout and the exact micro-step sequence are
// this design's own; the paper gives the function, not the controller.
//
// Weights are consumed in a fixed order, so one pointer walks the parameter memory:
//   for each gate in (i, f, c, o): Wx[nx], Wh[nh_in], peephole (master, not for c), bias (master)
//   then, if no > 0: Wy[nh_in], bias_y (master)
// The same pointer value addresses all 12 banks; unit u reads its own byte lane.
//
// Interface: cmd is sampled in IDLE; after the command completes the controller waits in DONE
// until cmd returns to CMD_NOP. busy is low in IDLE and DONE. CMD_STORE_ST acts on masters
// only. Data words (p_word for SRAM writes and state loading, r_word for reductions) go from the
// receivers to their destinations directly; the controller only qualifies them. Stage-0 unit
// controls (uop, bsrc/bidx, sel_idx, mem_*) are registered once more in the tile so they line up with the synchronous SRAM read.
// Unit results read through rd_src/rd_idx must therefore trail the last issued operation by two
// cycles, which the DRAIN state provides.
module muntaniala_ctrl
  import muntaniala_pkg::*;
#(
  parameter int unsigned NH = NH_DEFAULT,
  parameter int unsigned DEPTH = DEPTH_DEFAULT,
  localparam int unsigned AW = $clog2(DEPTH),
  localparam int unsigned UW = $clog2(NH)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cmd_e        cmd,
  output logic        busy,
  // p interface, word side
  output logic        p_en,
  input  logic [7:0]  p_word,
  input  logic        p_wvalid,
  output logic        p_wready,
  // r interface, word side
  output logic        r_en,
  input  logic [15:0] r_word,
  input  logic        r_wvalid,
  output logic        r_wready,
  // h interface, word side
  output logic        h_en,
  input  logic [7:0]  h_word,
  input  logic        h_wvalid,
  output logic        h_wready,
  // o interface
  output logic        tx_load,
  output logic        tx_is16,
  output logic        tx_use_ext,
  input  logic        tx_load_ready,
  output logic [1:0]  rd_src,      // 0 acc, 1 h, 2 y, 3 c
  output logic [UW-1:0] rd_idx,
  // unit controls, stage 0
  output uop_e        uop,
  output logic [1:0]  bsrc,        // 0 x buffer, 1 h buffer, 2 p word (state loading)
  output logic [7:0]  bidx,
  output logic [UW-1:0] sel_idx,
  // parameter memory
  output logic        mem_req,
  output logic        mem_we,
  output logic [AW-1:0] mem_addr,
  output logic [UW-1:0] mem_unit,
  // input buffers
  output logic        xbuf_we,
  output logic        hbuf_we,
  output logic [7:0]  buf_idx,
  output logic [7:0]  buf_wdata,
  output logic        hbuf_copy,
  output logic        hbuf_clr
);
  cfg_t cfg;  // loaded by CMD_LOAD_CFG
  typedef enum logic [4:0] {
    S_IDLE, S_DONE, S_CFG, S_PARAM, S_XLOAD, S_GCLR, S_MACX, S_MACH, S_REDRX, S_PEEP, S_BIAS,
    S_ACT, S_CUPD, S_HUPD, S_DRAIN, S_REDTX, S_HSELF, S_HRX, S_HTX, S_OTX, S_YTX, S_STC, S_STH,
    S_LDC, S_LDH, S_CLRST, S_DIST
  } state_e;

  typedef enum logic [2:0] {G_I, G_F, G_C, G_O, G_Y} gate_e;

  state_e state, ret;
  gate_e  gate;
  logic [7:0]    k;
  logic [AW-1:0] ptr;
  logic [UW-1:0] unit;
  logic [1:0]    sub;

  logic [7:0] rows;  // partial sums per reduction round
  assign rows = (gate == G_Y) ? cfg.no : cfg.nh_act;
  assign busy = (state != S_IDLE) && (state != S_DONE);

  // ---------------------------------------------------------------------------------------
  // Output decode
  always_comb begin
    p_en = 1'b0; p_wready = 1'b0;
    r_en = 1'b0; r_wready = 1'b0;
    h_en = 1'b0; h_wready = 1'b0;
    tx_load = 1'b0; tx_is16 = 1'b0; tx_use_ext = 1'b0;
    rd_src = 2'd0; rd_idx = UW'(k);
    uop = UOP_NOP; bsrc = 2'd0; bidx = k; sel_idx = UW'(k);
    mem_req = 1'b0; mem_we = 1'b0; mem_addr = ptr; mem_unit = unit;
    xbuf_we = 1'b0; hbuf_we = 1'b0; buf_idx = k; buf_wdata = p_word;
    hbuf_copy = 1'b0; hbuf_clr = 1'b0;
    unique case (state)
      S_CFG:   begin p_en = 1'b1; p_wready = 1'b1; end
      S_PARAM: begin
        p_en = 1'b1; p_wready = 1'b1;
        mem_req = p_wvalid; mem_we = 1'b1;
      end
      S_XLOAD: begin p_en = 1'b1; p_wready = 1'b1; xbuf_we = p_wvalid; end
      S_GCLR:  uop = UOP_CLR;
      S_MACX:  begin uop = UOP_MAC; bsrc = 2'd0; mem_req = 1'b1; end
      S_MACH:  begin uop = UOP_MAC; bsrc = 2'd1; mem_req = 1'b1; end
      S_REDRX: begin
        r_en = 1'b1; r_wready = 1'b1;
        uop = r_wvalid ? UOP_ADDRED : UOP_NOP;
      end
      S_PEEP:  begin uop = UOP_PEEP; mem_req = 1'b1; end
      S_BIAS:  begin uop = UOP_BIAS; mem_req = 1'b1; end
      S_ACT: begin
        unique case (gate)
          G_I: uop = UOP_ACT_I;
          G_F: uop = UOP_ACT_F;
          G_C: uop = UOP_ACT_C;
          G_O: uop = UOP_ACT_O;
          default: uop = UOP_ACT_Y;
        endcase
      end
      S_CUPD: uop = (sub == 2'd0) ? UOP_CMUL : (sub == 2'd1) ? UOP_CMAC : UOP_STC;
      S_HUPD: uop = (sub == 2'd0) ? UOP_TANHC : (sub == 2'd1) ? UOP_HMUL : UOP_STH;
      S_REDTX: begin tx_load = 1'b1; tx_is16 = 1'b1; rd_src = 2'd0; end
      S_HSELF: hbuf_copy = 1'b1;
      S_HRX:   begin h_en = 1'b1; h_wready = 1'b1; hbuf_we = h_wvalid; buf_wdata = h_word; end
      S_HTX:   begin tx_load = 1'b1; rd_src = 2'd1; end
      S_OTX:   begin tx_load = 1'b1; tx_use_ext = 1'b1; rd_src = 2'd1; end
      S_YTX:   begin tx_load = 1'b1; tx_use_ext = 1'b1; rd_src = 2'd2; end
      S_STC:   begin tx_load = 1'b1; tx_use_ext = 1'b1; rd_src = 2'd3; end
      S_STH:   begin tx_load = 1'b1; tx_use_ext = 1'b1; rd_src = 2'd1; end
      S_LDC:   begin
        p_en = 1'b1; p_wready = 1'b1;
        uop = p_wvalid ? UOP_LDC : UOP_NOP; bsrc = 2'd2;
      end
      S_LDH:   begin p_en = 1'b1; p_wready = 1'b1; hbuf_we = p_wvalid; end
      S_CLRST: begin uop = UOP_CLRST; hbuf_clr = 1'b1; end
      default: ;
    endcase
  end

  // ---------------------------------------------------------------------------------------
  // Sequencing helpers (evaluated in the clocked block)
  function automatic state_e first_mac(input gate_e g);
    if (g != G_Y && cfg.nx != 0) return S_MACX;
    if (cfg.nh_in != 0)          return S_MACH;
    return S_DIST;  // never used with a sane configuration
  endfunction

  // State after the MAC phases of the current gate.
  function automatic state_e after_mac();
    if (cfg.has_left) return S_REDRX;
    if (cfg.master)   return (gate == G_C || gate == G_Y) ? S_BIAS : S_PEEP;
    return S_DRAIN;   // slave: drain, then send partial sums
  endfunction

  logic lastk_rows, tx_go;
  assign lastk_rows = (k == rows - 8'd1);
  assign tx_go      = tx_load && tx_load_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; ret <= S_IDLE; gate <= G_I;
      k <= '0; ptr <= '0; unit <= '0; sub <= '0;
      cfg <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          k <= '0; unit <= '0; ptr <= '0; sub <= '0; gate <= G_I;
          unique case (cmd)
            CMD_LOAD_CFG:   state <= S_CFG;
            CMD_LOAD_PARAM: state <= S_PARAM;
            CMD_RUN:        state <= (cfg.nx != 0) ? S_XLOAD : S_GCLR;
            CMD_STORE_ST:   state <= cfg.master ? S_STC : S_DONE;
            CMD_LOAD_ST:    state <= S_LDC;
            CMD_CLEAR_ST:   state <= S_CLRST;
            default: ;
          endcase
        end
        S_DONE: if (cmd == CMD_NOP) state <= S_IDLE;

        S_CFG: if (p_wvalid) begin
          unique case (k)
            8'd0: cfg.nx     <= p_word;
            8'd1: cfg.nh_in  <= p_word;
            8'd2: cfg.nh_act <= p_word;
            8'd3: cfg.no     <= p_word;
            8'd4: {cfg.out_ext, cfg.self_h, cfg.send_h, cfg.recv_h, cfg.has_left, cfg.master}
                    <= p_word[5:0];
            8'd5: cfg.nwords[7:0] <= p_word;
            default: cfg.nwords[9:8] <= p_word[1:0];
          endcase
          k <= k + 8'd1;
          if (k == 8'(CFG_BYTES - 1)) state <= S_DONE;
        end

        S_PARAM: if (p_wvalid) begin
          if (unit == UW'(NH - 1)) begin
            unit <= '0;
            ptr  <= ptr + 1'b1;
            if (ptr == AW'(cfg.nwords - 10'd1)) state <= S_DONE;
          end else begin
            unit <= unit + 1'b1;
          end
        end

        S_XLOAD: if (p_wvalid) begin
          k <= k + 8'd1;
          if (k == cfg.nx - 8'd1) begin k <= '0; state <= S_GCLR; end
        end

        S_GCLR: begin k <= '0; state <= first_mac(gate); end

        S_MACX: begin
          ptr <= ptr + 1'b1;
          k   <= k + 8'd1;
          if (k == cfg.nx - 8'd1) begin
            k <= '0;
            state <= (cfg.nh_in != 0) ? S_MACH : after_mac();
            if (cfg.nh_in == 0 && !cfg.has_left && !cfg.master) ret <= S_REDTX;
          end
        end

        S_MACH: begin
          ptr <= ptr + 1'b1;
          k   <= k + 8'd1;
          if (k == cfg.nh_in - 8'd1) begin
            k <= '0;
            state <= after_mac();
            ret   <= S_REDTX;
          end
        end

        S_REDRX: if (r_wvalid) begin
          k <= k + 8'd1;
          if (lastk_rows) begin
            k <= '0;
            if (cfg.master) state <= (gate == G_C || gate == G_Y) ? S_BIAS : S_PEEP;
            else begin state <= S_DRAIN; ret <= S_REDTX; end
          end
        end

        S_PEEP: begin ptr <= ptr + 1'b1; state <= S_BIAS; end
        S_BIAS: begin ptr <= ptr + 1'b1; state <= S_ACT; end

        S_ACT: begin
          sub <= '0;
          unique case (gate)
            G_I: begin gate <= G_F; state <= S_GCLR; end
            G_F: begin gate <= G_C; state <= S_GCLR; end
            G_C: state <= S_CUPD;
            G_O: state <= S_HUPD;
            default: begin state <= S_DRAIN; ret <= S_YTX; end
          endcase
        end

        S_CUPD: begin
          sub <= sub + 2'd1;
          if (sub == 2'd2) begin gate <= G_O; state <= S_GCLR; end
        end

        S_HUPD: begin
          sub <= sub + 2'd1;
          if (sub == 2'd2) begin sub <= '0; state <= S_DRAIN; ret <= S_DIST; end
        end

        S_DRAIN: begin
          sub <= sub + 2'd1;
          if (sub == 2'd1) begin sub <= '0; k <= '0; state <= ret; end
        end

        S_REDTX: if (tx_go) begin
          k <= k + 8'd1;
          if (lastk_rows) begin
            k <= '0;
            unique case (gate)
              G_I: begin gate <= G_F; state <= S_GCLR; end
              G_F: begin gate <= G_C; state <= S_GCLR; end
              G_C: begin gate <= G_O; state <= S_GCLR; end
              G_O: state <= S_DIST;
              default: state <= S_DONE;
            endcase
          end
        end

        // Hidden-state distribution, then the optional outputs.
        S_DIST: begin
          k <= '0;
          sub <= sub + 2'd1;
          unique case (sub)
            2'd0: if (cfg.master && cfg.self_h) state <= S_HSELF;
            2'd1: if (cfg.recv_h) state <= S_HRX;
            2'd2: if (cfg.master && cfg.send_h) state <= S_HTX;
            default: begin
              sub <= '0;
              if (cfg.master && cfg.out_ext) state <= S_OTX;
              else if (cfg.no != 0) begin gate <= G_Y; state <= S_GCLR; end
              else state <= S_DONE;
            end
          endcase
        end
        S_HSELF: state <= S_DIST;
        S_HRX: if (h_wvalid) begin
          k <= k + 8'd1;
          if (k == cfg.nh_in - 8'd1) state <= S_DIST;
        end
        S_HTX: if (tx_go) begin
          k <= k + 8'd1;
          if (k == cfg.nh_act - 8'd1) state <= S_DIST;
        end
        S_OTX: if (tx_go) begin
          k <= k + 8'd1;
          if (k == cfg.nh_act - 8'd1) begin
            k <= '0;
            if (cfg.no != 0) begin gate <= G_Y; state <= S_GCLR; end
            else state <= S_DONE;
          end
        end
        S_YTX: if (tx_go) begin
          k <= k + 8'd1;
          if (k == cfg.no - 8'd1) state <= S_DONE;
        end

        // State store / load / clear.
        S_STC: if (tx_go) begin
          k <= k + 8'd1;
          if (k == cfg.nh_act - 8'd1) begin k <= '0; state <= S_STH; end
        end
        S_STH: if (tx_go) begin
          k <= k + 8'd1;
          if (k == cfg.nh_act - 8'd1) state <= S_DONE;
        end
        S_LDC: if (p_wvalid) begin
          k <= k + 8'd1;
          if (k == cfg.nh_act - 8'd1) begin
            k <= '0;
            state <= (cfg.nh_in != 0) ? S_LDH : S_DONE;
          end
        end
        S_LDH: if (p_wvalid) begin
          k <= k + 8'd1;
          if (k == cfg.nh_in - 8'd1) state <= S_DONE;
        end
        S_CLRST: state <= S_DONE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
