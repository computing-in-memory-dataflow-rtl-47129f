// tb_tm_array -- TM model: multi-word-line writes (one byte to many rows in
// one clock) and per-bitline discharge counts against a reference array.
// Multi-word-line writes follow the published TM; the ideal path counting
// checked here is this model's simplification.
module tb_tm_array;
  localparam int ROWS = 180, COLS = 8;
  logic clk = 0, we = 0;
  logic [ROWS-1:0] wl, in_bits;
  logic [COLS-1:0] wdata;
  logic [COLS-1:0][7:0] bl_cnt;
  logic [COLS-1:0] ref_mem [ROWS];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  tm_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cnt;
    in_bits = '0;
    // fill every row once, one row per clock
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      wl = '0; wl[r] = 1'b1; wdata = COLS'($urandom); we = 1;
      ref_mem[r] = wdata;
    end
    // duplicate writes: one byte to a random set of rows per clock
    for (int it = 0; it < 20; it++) begin
      @(negedge clk);
      wdata = COLS'($urandom);
      for (int r = 0; r < ROWS; r++) begin
        wl[r] = ($urandom % 4) == 0;
        if (wl[r]) ref_mem[r] = wdata;
      end
      we = 1;
    end
    @(negedge clk);
    we = 0;
    for (int it = 0; it < 100; it++) begin
      for (int r = 0; r < ROWS; r++) in_bits[r] = ($urandom % 2) == 0;
      if (it % 10 == 0) in_bits = '0;
      #1;
      for (int j = 0; j < COLS; j++) begin
        cnt = 0;
        for (int r = 0; r < ROWS; r++) cnt += int'(in_bits[r] && ref_mem[r][j]);
        checks++;
        if (int'(bl_cnt[j]) != cnt) begin
          failures++;
          if (failures < 10) $display("FAIL it %0d BL[%0d] = %0d expected %0d", it, j, bl_cnt[j], cnt);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
