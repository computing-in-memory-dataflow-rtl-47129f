// tb_adc -- 4-bit ADC model: one clock latency, linear, saturating at 15.
// The 4-bit resolution follows the published design; the ideal linear
// transfer with saturation is this model's choice.
module tb_adc;
  logic clk = 0;
  logic [7:0] bl_cnt;
  logic [3:0] code;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  adc #(.BITS(4)) dut (.*);

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v, exp;
    for (int it = 0; it < 300; it++) begin
      @(negedge clk);
      v = (it < 181) ? it : int'($urandom % 181);
      bl_cnt = 8'(v);
      exp = (v > 15) ? 15 : v;
      @(posedge clk); #1;
      checks++;
      if (int'(code) != exp) begin
        failures++;
        if (failures < 10) $display("FAIL in %0d code %0d expected %0d", v, code, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
