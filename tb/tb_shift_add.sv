// tb_shift_add -- shift-and-add: sum_j code_j*2^j with the MSB column
// negative, one clock after in_valid.
// The expected sum is computed as a signed dot product of bit-plane counts;
// the signed MSB weighting is this design's choice.
module tb_shift_add;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [7:0][3:0] codes;
  logic signed [11:0] sum;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  shift_add #(.COLS(8), .CODE_W(4), .OUT_W(12)) dut (.*);

  initial begin
    #50000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp;
    codes = '0;
    @(negedge clk); rst_n = 1;
    for (int it = 0; it < 500; it++) begin
      @(negedge clk);
      exp = 0;
      for (int j = 0; j < 8; j++) begin
        codes[j] = 4'($urandom);
        if (it == 1) codes[j] = 4'd15;
        exp += (j == 7 ? -1 : 1) * int'(codes[j]) * (1 << j);
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || int'(sum) != exp) begin
        failures++;
        if (failures < 10) $display("FAIL it %0d sum %0d expected %0d valid %0b", it, sum, exp, out_valid);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
