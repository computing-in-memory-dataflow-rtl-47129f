// ia_sm -- IA shift-and-mask unit of one tile (combinational).
//
// Three stages, as in the published schematic:
//   selector  : takes bit bit_sel of every TRF entry (IAs are applied to the
//               TM bit-serially, LSB first);
//   shifter   : row p receives the selected bit of TRF entry p + shift_a,
//               an SHIFT_WAYS:1 multiplexer per row controlled by a; rows
//               whose source lies past the end receive 0;
//   activator : row p is passed to the TM read word line only where the
//               multiplication enable row_en[p] is set, i.e. only the rows of
//               the kernel block chosen by e.
// The published unit is drawn for kw = 3, s = 1 (3:1 multiplexers). Here
// SHIFT_WAYS defaults to 5 so that 5-wide kernels can be shifted too, and e
// arrives already decoded to one enable per row (row_en) by the controller.
module ia_sm #(
  parameter int ROWS       = 180,
  parameter int IA_W       = 8,
  parameter int SHIFT_WAYS = 5
) (
  input  logic [ROWS-1:0][IA_W-1:0]       ia,
  input  logic [$clog2(IA_W)-1:0]         bit_sel,
  input  logic [$clog2(SHIFT_WAYS)-1:0]   shift_a,
  input  logic [ROWS-1:0]                 row_en,
  output logic [ROWS-1:0]                 in_bits
);
  logic [ROWS-1:0] sel_bits;   // selector output
  logic [ROWS-1:0] shifted;    // shifter output

  always_comb begin
    for (int p = 0; p < ROWS; p++) sel_bits[p] = ia[p][bit_sel];
  end

  always_comb begin
    for (int p = 0; p < ROWS; p++) begin
      shifted[p] = 1'b0;
      for (int k = 0; k < SHIFT_WAYS; k++)
        if (int'(shift_a) == k && p + k < ROWS) shifted[p] = sel_bits[p + k];
    end
  end

  assign in_bits = shifted & row_en;   // activator
endmodule
