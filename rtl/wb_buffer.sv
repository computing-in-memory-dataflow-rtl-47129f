// wb_buffer -- 4 KiB weight buffer.
//
// One bank of BYTES/NUM_TILES bytes per tile. The DRAM side writes
// FILL_BYTES bytes per clock into one bank (little-endian within the
// word). The tile side reads one byte per bank per clock at a common
// address raddr (combinational read), giving every tile's TM R/W interface
// its own weight: one 8-bit word per clock, as published. Bank layout is
// this implementation's choice.
module wb_buffer #(
  parameter int BYTES      = 4096,
  parameter int NUM_TILES  = 64,
  parameter int FILL_BYTES = 8,
  localparam int BANK_BYTES = BYTES / NUM_TILES,
  localparam int WADDR_W    = $clog2(BANK_BYTES / FILL_BYTES)
) (
  input  logic                              clk,
  input  logic                              we,
  input  logic [$clog2(NUM_TILES)-1:0]      wbank,
  input  logic [WADDR_W-1:0]                waddr,
  input  logic [FILL_BYTES*8-1:0]           wdata,
  input  logic [$clog2(BANK_BYTES)-1:0]     raddr,
  output logic [NUM_TILES-1:0][7:0]         rdata
);
  logic [7:0] mem [NUM_TILES][BANK_BYTES];

  always_ff @(posedge clk) begin
    if (we)
      for (int b = 0; b < FILL_BYTES; b++)
        mem[wbank][int'(waddr) * FILL_BYTES + b] <= wdata[8*b +: 8];
  end

  always_comb begin
    for (int t = 0; t < NUM_TILES; t++) rdata[t] = mem[t][raddr];
  end
endmodule
