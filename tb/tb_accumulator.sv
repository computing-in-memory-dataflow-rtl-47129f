// tb_accumulator -- bit-serial accumulation of eight bit-plane sums, IA MSB
// negative, with and without clear (two row groups summed into one result).
// Expected values come from plain signed multiplication; the signed MSB
// handling tested here is this design's choice.
module tb_accumulator;
  logic clk = 0, rst_n = 0, in_valid = 0, clear = 0, acc_valid;
  logic signed [11:0] in_sum;
  logic [2:0] bit_idx;
  logic signed [23:0] acc;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  accumulator #(.IN_W(12), .ACC_W(24), .IA_W(8)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp, v;
    bit keep;
    in_sum = '0; bit_idx = '0;
    @(negedge clk); rst_n = 1;
    exp = 0;
    for (int it = 0; it < 100; it++) begin
      keep = (it % 3 == 2);          // every third MAC adds to the previous one
      if (!keep) exp = 0;
      for (int t = 0; t < 8; t++) begin
        @(negedge clk);
        v = int'($urandom % 3841) - 1920;
        in_sum = 12'(v); bit_idx = 3'(t); clear = !keep; in_valid = 1;
        exp += (t == 7) ? -(v * 128) : v * (1 << t);
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!acc_valid || int'(acc) != exp) begin
        failures++;
        if (failures < 10) $display("FAIL it %0d acc %0d expected %0d valid %0b", it, acc, exp, acc_valid);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
