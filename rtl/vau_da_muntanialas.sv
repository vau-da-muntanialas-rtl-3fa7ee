// Vau da Muntanialas: an N x N systolic grid of Muntaniala dies running one LSTM layer with
// N*96 hidden elements (N = 2 on the demonstrator board: 192 hidden elements on four dies).
//
// Die (i,j) holds the weight tile that maps input/hidden tile j onto output rows tile i. Its
// wiring follows the paper's grid and board figures:
//   p   each die has its own parameter/feature stream from the external controller;
//   r   die (i,j) receives partial sums from die (i,j-1) (its o output); the rightmost die of a
//       row, the master (i,N-1), finishes the sums and applies the activations;
//   h   die (a,b) receives the hidden-state tile b from master (b,N-1); master (N-1,N-1) keeps
//       its own tile and receives nothing;
//   o   master (i,N-1) also drives the external output out[i] (hidden states or FCL results);
//       out_valid[i] is the master's o_valid qualified by o_ext, so the external side sees
//       only the words addressed to it, not the hidden-state distribution to other dies;
//       likewise the die-side valids (r, h) are qualified by !o_ext so that a receiving die
//       never takes a nibble of a word that is going to the external system.
// The config/sync command is shared by all dies. Where one output feeds several dies, their
// ready signals are combined with an AND here: the paper shows only the shared wires, not how
// the readies of several receivers are merged, so this gate is this design's own. The board
// drives each die with its own clock line; here all dies share clk.
module vau_da_muntanialas
  import muntaniala_pkg::*;
#(
  parameter int unsigned N     = 2,
  parameter int unsigned NH    = NH_DEFAULT,
  parameter int unsigned NBANK = NBANK_DEFAULT,
  parameter int unsigned DEPTH = DEPTH_DEFAULT,
  parameter int unsigned XMAX  = XMAX_DEFAULT
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cmd_e             cmd,
  input  logic [NIB_W-1:0] p_data  [N][N],
  input  logic             p_valid [N][N],
  output logic             p_ready [N][N],
  output logic [NIB_W-1:0] out_data  [N],
  output logic             out_valid [N],
  input  logic             out_ready [N],
  output logic             busy [N][N]
);
  logic [NIB_W-1:0] o_data  [N][N];
  logic             o_valid [N][N];
  logic             o_ext   [N][N];
  logic             o_rdy_die [N][N];
  logic [NIB_W-1:0] r_data  [N][N];
  logic             r_valid [N][N];
  logic             r_ready [N][N];
  logic [NIB_W-1:0] h_data  [N][N];
  logic             h_valid [N][N];
  logic             h_ready [N][N];

  for (genvar i = 0; i < N; i++) begin : g_row
    for (genvar j = 0; j < N; j++) begin : g_col
      // Reduction chain along the row.
      if (j == 0) begin : g_first
        assign r_data[i][j]  = '0;
        assign r_valid[i][j] = 1'b0;
      end else begin : g_chain
        assign r_data[i][j]  = o_data[i][j-1];
        assign r_valid[i][j] = o_valid[i][j-1] & ~o_ext[i][j-1];
      end

      // Hidden-state tile j comes from master (j, N-1).
      if (i == j && j == N - 1) begin : g_self
        assign h_data[i][j]  = '0;
        assign h_valid[i][j] = 1'b0;
      end else begin : g_hsrc
        assign h_data[i][j]  = o_data[j][N-1];
        assign h_valid[i][j] = o_valid[j][N-1] & ~o_ext[j][N-1];
      end

      // Ready seen by the o output of die (i,j).
      if (j < N - 1) begin : g_slave_rdy
        assign o_rdy_die[i][j] = r_ready[i][j+1];
      end else begin : g_master_rdy
        // Receivers of master (i, N-1): every die (a, i) except the master itself.
        always_comb begin
          o_rdy_die[i][j] = 1'b1;
          for (int a = 0; a < N; a++)
            if (!(a == i && i == N - 1)) o_rdy_die[i][j] = o_rdy_die[i][j] & h_ready[a][i];
        end
      end

      muntaniala #(.NH(NH), .NBANK(NBANK), .DEPTH(DEPTH), .XMAX(XMAX)) u_die (
        .clk, .rst_n, .cmd,
        .p_data(p_data[i][j]), .p_valid(p_valid[i][j]), .p_ready(p_ready[i][j]),
        .r_data(r_data[i][j]), .r_valid(r_valid[i][j]), .r_ready(r_ready[i][j]),
        .h_data(h_data[i][j]), .h_valid(h_valid[i][j]), .h_ready(h_ready[i][j]),
        .o_data(o_data[i][j]), .o_valid(o_valid[i][j]), .o_ext(o_ext[i][j]),
        .o_ready_die(o_rdy_die[i][j]),
        .o_ready_ext((j == N - 1) ? out_ready[i] : 1'b0),
        .busy(busy[i][j])
      );
    end
    assign out_data[i]  = o_data[i][N-1];
    assign out_valid[i] = o_valid[i][N-1] & o_ext[i][N-1];
  end
endmodule
