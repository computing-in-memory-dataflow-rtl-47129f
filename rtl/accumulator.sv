// accumulator -- bit-serial accumulator of one tile.
//
// Each valid input is the shift-and-add result for IA bit bit_idx; it is
// shifted left by bit_idx and added, except that bit IA_W-1 is subtracted
// because IAs are two's-complement INT8. With clear set on bit 0 the sum
// restarts; without it the new MAC adds to the previous one (used when a
// large kernel is applied in two row groups). acc_valid pulses for one
// clock when the MSB has been added, i.e. when acc holds a complete result.
// Timing: one clock from in_valid to the updated acc.
// The bit-serial LSB-first accumulation follows the published design; the
// signed MSB handling, the 24-bit width and the clear-on-bit-0 row-group
// chaining are this design's own choices.
module accumulator #(
  parameter int IN_W   = 12,
  parameter int ACC_W  = 24,
  parameter int IA_W   = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic signed [IN_W-1:0]       in_sum,
  input  logic [$clog2(IA_W)-1:0]      bit_idx,
  input  logic                         clear,
  output logic signed [ACC_W-1:0]      acc,
  output logic                         acc_valid
);
  logic signed [ACC_W-1:0] term;

  always_comb begin
    term = ACC_W'(in_sum) <<< bit_idx;
    if (int'(bit_idx) == IA_W - 1) term = -term;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc       <= '0;
      acc_valid <= 1'b0;
    end else begin
      acc_valid <= in_valid && int'(bit_idx) == IA_W - 1;
      if (in_valid) acc <= (clear && bit_idx == '0) ? term : acc + term;
    end
  end
endmodule
