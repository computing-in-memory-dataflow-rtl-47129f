// ob_buffer -- 16 KiB output buffer.
//
// One bank of WORDS words (WORD_W bits) per tile. The tile side writes the
// accumulators of all tiles in one clock at a common address (we, waddr,
// wdata[t] into bank t). The DRAM side reads one word per clock: rbank and
// raddr sampled with re give rdata one clock later. Word width and the read
// port are this implementation's choices; the size and the one-clock
// accumulator-to-OB transfer follow the published design.
module ob_buffer #(
  parameter int BYTES     = 16384,
  parameter int NUM_TILES = 64,
  parameter int WORD_W    = 32,
  localparam int WORDS    = BYTES / NUM_TILES / (WORD_W / 8),
  localparam int AW       = $clog2(WORDS)
) (
  input  logic                                clk,
  input  logic                                we,
  input  logic [AW-1:0]                       waddr,
  input  logic [NUM_TILES-1:0][WORD_W-1:0]    wdata,
  input  logic                                re,
  input  logic [$clog2(NUM_TILES)-1:0]        rbank,
  input  logic [AW-1:0]                       raddr,
  output logic [WORD_W-1:0]                   rdata
);
  logic [WORD_W-1:0] mem [NUM_TILES][WORDS];

  always_ff @(posedge clk) begin
    if (we)
      for (int t = 0; t < NUM_TILES; t++) mem[t][waddr] <= wdata[t];
    if (re) rdata <= mem[rbank][raddr];
  end
endmodule
