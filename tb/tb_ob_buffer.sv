// tb_ob_buffer -- OB: all 64 banks written in one clock at a common
// address; single-word reads with one clock latency.
// The 16 KiB size follows the published design; the per-tile banking and
// 32-bit words tested here are this design's choices.
module tb_ob_buffer;
  localparam int TILES = 64, WORDS = 64;
  logic clk = 0, we = 0, re = 0;
  logic [5:0] waddr, raddr, rbank;
  logic [TILES-1:0][31:0] wdata;
  logic [31:0] rdata;
  logic [31:0] ref_mem [TILES][WORDS];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  ob_buffer #(.BYTES(16384), .NUM_TILES(TILES), .WORD_W(32)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < WORDS; a++) begin
      @(negedge clk);
      we = 1; waddr = 6'(a);
      for (int t = 0; t < TILES; t++) begin
        wdata[t] = $urandom;
        ref_mem[t][a] = wdata[t];
      end
    end
    @(negedge clk); we = 0;
    for (int it = 0; it < 2000; it++) begin
      rbank = 6'($urandom); raddr = 6'($urandom); re = 1;
      @(negedge clk);
      checks++;
      if (rdata !== ref_mem[rbank][raddr]) begin
        failures++;
        if (failures < 10) $display("FAIL bank %0d addr %0d", rbank, raddr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
