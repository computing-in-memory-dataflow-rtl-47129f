// shift_add -- shift-and-add unit of one tile.
//
// Combines the COLS ADC codes of one IA bit-plane into one number: code j
// counts the active rows whose weight bit j is 1, so it is weighted by 2^j,
// and the MSB column is weighted by -2^(COLS-1) because weights are
// two's-complement INT8. One register stage: in_valid/codes sampled on the
// rising clock give out_valid/sum one clock later. Synchronous active-low
// reset clears out_valid.
// The unit itself follows the published tile; the signed weighting of the
// MSB column and the single register stage are this design's own choices.
module shift_add #(
  parameter int COLS   = 8,
  parameter int CODE_W = 4,
  parameter int OUT_W  = CODE_W + COLS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [COLS-1:0][CODE_W-1:0]   codes,
  output logic                          out_valid,
  output logic signed [OUT_W-1:0]       sum
);
  logic signed [OUT_W-1:0] sum_d;

  always_comb begin
    sum_d = '0;
    for (int j = 0; j < COLS; j++) begin
      if (j == COLS - 1) sum_d = sum_d - (OUT_W'(codes[j]) << j);
      else               sum_d = sum_d + (OUT_W'(codes[j]) << j);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      sum       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) sum <= sum_d;
    end
  end
endmodule
