// ib_buffer -- 16 KiB input buffer.
//
// Organised as one bank per tile (NUM_TILES banks of BYTES/NUM_TILES
// bytes). The DRAM side writes FILL_BYTES bytes per clock into one bank
// (little-endian: byte b of wdata goes to address waddr*FILL_BYTES + b).
// The tile side is a set of dedicated wires: bytes 0..TRF_ROWS-1 of bank t
// are always presented on trf_data[t], so all TRFs can load their sub-ifmaps
// in the same clock. The bytes of a bank above TRF_ROWS are not wired to
// the TRF. The bank organisation and fill width are this implementation's
// choices; the size and the single-cycle TRF load follow the published design.
module ib_buffer #(
  parameter int BYTES      = 16384,
  parameter int NUM_TILES  = 64,
  parameter int TRF_ROWS   = 180,
  parameter int FILL_BYTES = 8,
  localparam int BANK_BYTES = BYTES / NUM_TILES,
  localparam int WADDR_W    = $clog2(BANK_BYTES / FILL_BYTES)
) (
  input  logic                                     clk,
  input  logic                                     we,
  input  logic [$clog2(NUM_TILES)-1:0]             wbank,
  input  logic [WADDR_W-1:0]                       waddr,
  input  logic [FILL_BYTES*8-1:0]                  wdata,
  output logic [NUM_TILES-1:0][TRF_ROWS-1:0][7:0]  trf_data
);
  logic [7:0] mem [NUM_TILES][BANK_BYTES];

  always_ff @(posedge clk) begin
    if (we)
      for (int b = 0; b < FILL_BYTES; b++)
        mem[wbank][int'(waddr) * FILL_BYTES + b] <= wdata[8*b +: 8];
  end

  always_comb begin
    for (int t = 0; t < NUM_TILES; t++)
      for (int p = 0; p < TRF_ROWS; p++)
        trf_data[t][p] = mem[t][p];
  end
endmodule
