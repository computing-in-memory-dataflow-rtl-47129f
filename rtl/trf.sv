// trf -- tile register file: ROWS x W-bit input activations of one tile.
//
// The whole register file is written in one clock from dedicated wires out
// of the input buffer (load = 1), as the published design specifies, and
// all entries are visible at once to the IA shift-and-mask unit.
// Interface: load/din are sampled on the rising clock; q is the registered
// content. Reset (active low, synchronous to clk) clears all entries; the
// reset behaviour is this implementation's choice.
module trf #(
  parameter int ROWS = 180,
  parameter int W    = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  load,
  input  logic [ROWS-1:0][W-1:0] din,
  output logic [ROWS-1:0][W-1:0] q
);
  always_ff @(posedge clk) begin
    if (!rst_n)     q <= '0;
    else if (load)  q <= din;
  end
endmodule
