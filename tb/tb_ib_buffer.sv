// tb_ib_buffer -- IB: 8-byte fills into each bank, all banks' first 180
// bytes visible at once on the TRF wires, bytes above 180 kept apart.
// The 16 KiB size follows the published design; the per-tile banking and
// 8-byte fill port tested here are this design's choices.
module tb_ib_buffer;
  localparam int TILES = 64, BANK = 256, ROWS = 180;
  logic clk = 0, we = 0;
  logic [5:0] wbank;
  logic [4:0] waddr;
  logic [63:0] wdata;
  logic [TILES-1:0][ROWS-1:0][7:0] trf_data;
  logic [7:0] ref_mem [TILES][BANK];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  ib_buffer #(.BYTES(16384), .NUM_TILES(TILES), .TRF_ROWS(ROWS), .FILL_BYTES(8)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < TILES; t++)
      for (int w = 0; w < BANK / 8; w++) begin
        @(negedge clk);
        we = 1; wbank = 6'(t); waddr = 5'(w); wdata = {$urandom, $urandom};
        for (int b = 0; b < 8; b++) ref_mem[t][w * 8 + b] = wdata[8*b +: 8];
      end
    @(negedge clk); we = 0; #1;
    for (int t = 0; t < TILES; t++)
      for (int p = 0; p < ROWS; p++) begin
        checks++;
        if (trf_data[t][p] !== ref_mem[t][p]) begin
          failures++;
          if (failures < 10) $display("FAIL bank %0d byte %0d", t, p);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
