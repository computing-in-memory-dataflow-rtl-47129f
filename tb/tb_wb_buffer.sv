// tb_wb_buffer -- WB: 8-byte fills per bank, one byte per bank read at a
// common address.
// The 4 KiB size follows the published design; the per-tile banking
// tested here is this design's choice.
module tb_wb_buffer;
  localparam int TILES = 64, BANK = 64;
  logic clk = 0, we = 0;
  logic [5:0] wbank, raddr;
  logic [2:0] waddr;
  logic [63:0] wdata;
  logic [TILES-1:0][7:0] rdata;
  logic [7:0] ref_mem [TILES][BANK];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  wb_buffer #(.BYTES(4096), .NUM_TILES(TILES), .FILL_BYTES(8)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    raddr = '0;
    for (int t = 0; t < TILES; t++)
      for (int w = 0; w < BANK / 8; w++) begin
        @(negedge clk);
        we = 1; wbank = 6'(t); waddr = 3'(w); wdata = {$urandom, $urandom};
        for (int b = 0; b < 8; b++) ref_mem[t][w * 8 + b] = wdata[8*b +: 8];
      end
    @(negedge clk); we = 0;
    for (int a = 0; a < BANK; a++) begin
      raddr = 6'(a); #1;
      for (int t = 0; t < TILES; t++) begin
        checks++;
        if (rdata[t] !== ref_mem[t][a]) begin
          failures++;
          if (failures < 10) $display("FAIL bank %0d addr %0d", t, a);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
