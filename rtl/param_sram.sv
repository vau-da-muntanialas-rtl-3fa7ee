// One bank of the parameter memory: a single-port synchronous SRAM of DEPTH words, each word
// holding one byte for each of LANES LSTM units, with a write enable per byte.
//
// The die splits its 84 kB parameter memory into 12 such banks so that every LSTM unit gets a
// new weight each cycle: 12 banks x 8 lanes serve the 96 units, and one read returns the next
// weight of 8 units. 84 kB / 96 units gives 896 bytes per unit, hence DEPTH = 896. Bank and lane
// counts follow the paper; the word organisation (one byte per unit, byte write enables) is this
// design's own. On silicon this is a foundry SRAM macro; here it is written as an array.
//
// Timing: read data appear on rdata the cycle after req with we = 0 (registered output);
// a write stores wdata into the bytes whose be bit is set.
module param_sram #(
  parameter int unsigned DEPTH = 896,
  parameter int unsigned LANES = 8,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 req,
  input  logic                 we,
  input  logic [AW-1:0]        addr,
  input  logic [LANES-1:0]     be,
  input  logic [LANES*8-1:0]   wdata,
  output logic [LANES*8-1:0]   rdata
);
  logic [LANES*8-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (req) begin
      if (we) begin
        for (int l = 0; l < LANES; l++)
          if (be[l]) mem[addr][l*8 +: 8] <= wdata[l*8 +: 8];
      end else begin
        rdata <= mem[addr];
      end
    end
  end
endmodule
