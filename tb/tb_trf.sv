// tb_trf -- tile register file: one-clock parallel load, hold, reset.
// The 180 x 8-bit size and one-clock load follow the published design.
module tb_trf;
  localparam int ROWS = 180, W = 8;
  logic clk = 0, rst_n = 0, load = 0;
  logic [ROWS-1:0][W-1:0] din, q, ref_q;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  trf #(.ROWS(ROWS), .W(W)) dut (.*);

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cmp(string what);
    for (int p = 0; p < ROWS; p++) begin
      checks++;
      if (q[p] !== ref_q[p]) begin
        failures++;
        if (failures < 10) $display("FAIL %s row %0d: %h vs %h", what, p, q[p], ref_q[p]);
      end
    end
  endtask

  initial begin
    din = '0;
    @(negedge clk); @(negedge clk);
    ref_q = '0; cmp("reset");
    rst_n = 1;
    for (int it = 0; it < 6; it++) begin
      for (int p = 0; p < ROWS; p++) din[p] = W'($urandom);
      load = (it % 2 == 0);
      if (load) ref_q = din;
      @(negedge clk);
      cmp(load ? "load" : "hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
