// adc -- behavioural model of one BITS-bit bitline ADC (eight per tile).
//
// This is a behavioural model of an analog converter. The input is the
// bitline discharge in units of one open cell path (see tm_array); the
// model converts it with an ideal linear transfer, one LSB per path,
// saturating at 2^BITS - 1, and registers the code on the rising clock
// (one clock of conversion latency). The transfer function and latency are
// this implementation's choices; the published design gives only "4b-ADC".
module adc #(
  parameter int BITS = 4
) (
  input  logic            clk,
  input  logic [7:0]      bl_cnt,
  output logic [BITS-1:0] code
);
  localparam int FULL = (1 << BITS) - 1;
  always_ff @(posedge clk) begin
    code <= (int'(bl_cnt) > FULL) ? BITS'(FULL) : bl_cnt[BITS-1:0];
  end
endmodule
