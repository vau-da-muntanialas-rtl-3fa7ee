// Output interface o of a Muntaniala die: 4 data pins, valid, and two ready inputs, one from
// neighbouring dies and one from the external controller. The paper gives the output interface
// these two readies so that a die can hand its results either to other dies (reductions,
// hidden-state distribution) or to the external system; use_ext selects which ready completes
// the handshake for the word being sent. nib_ext tells the receivers which of the two the
// current nibble is addressed to (an added output of this design; the paper gives no such pin).
//
// A word is loaded with load (only while load_ready) and sent as 2 or 4 nibbles (is16), least
// significant first. A nibble is transferred on a rising edge with nib_valid and the selected
// ready high; data are held stable while valid is high and not accepted. load_ready is also high
// during the last nibble's accepted cycle, so words stream back to back at one nibble per cycle.
// Nibble order and word sizes are this design's own choice.
module nibble_tx
  import muntaniala_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic [15:0]      word,
  input  logic             is16,
  input  logic             use_ext,
  input  logic             load,
  output logic             load_ready,
  output logic [NIB_W-1:0] nib,
  output logic             nib_valid,
  output logic             nib_ext,
  input  logic             ready_die,
  input  logic             ready_ext
);
  logic [15:0] shreg;
  logic [2:0]  cnt;
  logic        ext_q, fire;

  assign nib        = shreg[NIB_W-1:0];
  assign nib_ext    = ext_q;
  assign fire       = nib_valid && (ext_q ? ready_ext : ready_die);
  assign load_ready = !nib_valid || (fire && cnt == 3'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg     <= '0;
      cnt       <= '0;
      nib_valid <= 1'b0;
      ext_q     <= 1'b0;
    end else if (load && load_ready) begin
      shreg     <= word;
      cnt       <= is16 ? 3'd4 : 3'd2;
      nib_valid <= 1'b1;
      ext_q     <= use_ext;
    end else if (fire) begin
      shreg <= {4'b0, shreg[15:NIB_W]};
      cnt   <= cnt - 1'b1;
      if (cnt == 3'd1) nib_valid <= 1'b0;
    end
  end

  // Stream rule: once valid, data stay put until the handshake completes. The check is off
  // while rst_n is low; lint tools may therefore report rst_n as used both asynchronously (by
  // the flops) and synchronously (by this assertion), which does not affect the circuit.
  a_hold : assert property (@(posedge clk) disable iff (!rst_n)
                            nib_valid && !fire |=> nib_valid && $stable(nib));
endmodule
