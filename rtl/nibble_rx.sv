// Receive side of a Muntaniala stream interface (parameters p, reductions r, hidden states h):
// 4 data pins with a valid/ready handshake. NNIB consecutive nibbles, least significant first,
// form one word (2 for an 8-bit value, 4 for a 16-bit partial sum).
//
// A nibble is taken on a rising edge where nib_valid and nib_ready are both high. The pin-level
// handshake follows the paper (4 data pins plus valid and ready per interface); the nibble order
// and the word sizes are this design's own. nib_ready is high only while en is set, so a die
// ignores traffic on a shared wire that is not meant for it, and while the output word is free
// (or being taken in the same cycle), so a steady stream runs at one nibble per cycle.
//
// Word side: word/word_valid stay stable until word_ready; the word is freed in that cycle.
module nibble_rx
  import muntaniala_pkg::*;
#(
  parameter int unsigned NNIB = 2,
  localparam int unsigned W = NNIB * NIB_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic [NIB_W-1:0] nib,
  input  logic             nib_valid,
  output logic             nib_ready,
  output logic [W-1:0]     word,
  output logic             word_valid,
  input  logic             word_ready
);
  localparam int unsigned SW = W - NIB_W;  // nibbles held before the last one arrives
  logic [SW-1:0] shreg;
  logic [$clog2(NNIB+1)-1:0] cnt;
  logic take, last;

  assign nib_ready = en && (!word_valid || word_ready);
  assign take      = nib_valid && nib_ready;
  assign last      = (int'(cnt) == NNIB - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg      <= '0;
      cnt        <= '0;
      word       <= '0;
      word_valid <= 1'b0;
    end else begin
      if (word_valid && word_ready) word_valid <= 1'b0;
      if (take) begin
        shreg <= SW'({nib, shreg} >> NIB_W);
        if (last) begin
          cnt        <= '0;
          word       <= {nib, shreg};
          word_valid <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end
endmodule
