// tb_cim_tile -- one tile end to end: random INT8 weights written into the
// TM (including multi-row writes), random INT8 IAs loaded into the TRF, then
// MACs with random shift a and up to 15 enabled rows. Each result must equal
// sum over enabled rows p of W[p]*IA[p+a] (signed), computed here, and must
// appear exactly ten clocks after the start.
// The ten-clock MAC latency checked here is the published figure; the
// 15-row limit per conversion is this design's choice.
module tb_cim_tile;
  import convdk_pkg::*;
  localparam int ROWS = TM_ROWS;
  logic clk = 0, rst_n = 0;
  logic trf_load = 0, tm_we = 0, mac_start = 0, mac_clear = 0;
  logic [ROWS-1:0][7:0] trf_din;
  logic [ROWS-1:0] tm_wl, mac_row_en;
  logic [7:0] tm_wdata;
  logic [2:0] mac_a;
  logic signed [ACC_W-1:0] acc;
  logic acc_valid;
  logic signed [7:0] w_ref [ROWS];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  cim_tile #(.ROWS(ROWS)) dut (.*);

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp, lat, base, src, nen, prev;
    trf_din = '0; tm_wl = '0; tm_wdata = '0; mac_row_en = '0; mac_a = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      tm_wl = '0; tm_wl[r] = 1'b1; tm_wdata = 8'($urandom); tm_we = 1;
      w_ref[r] = tm_wdata;
      @(negedge clk);
    end
    // one weight to every fifth row in a single clock
    tm_wl = '0; tm_wdata = 8'h81;
    for (int r = 0; r < ROWS; r += 5) begin tm_wl[r] = 1'b1; w_ref[r] = 8'sh81; end
    @(negedge clk);
    tm_we = 0;
    for (int p = 0; p < ROWS; p++) trf_din[p] = 8'($urandom);
    trf_din[0] = 8'h80; trf_din[1] = 8'h7f;
    trf_load = 1; @(negedge clk); trf_load = 0;
    prev = 0;
    for (int it = 0; it < 60; it++) begin
      mac_a = 3'($urandom % SHIFT_WAYS);
      mac_row_en = '0;
      base = int'($urandom % 160);
      nen = 1 + int'($urandom % 15);
      for (int k = 0; k < nen; k++) mac_row_en[base + k] = 1'b1;
      mac_clear = (it % 4 != 3);   // every fourth MAC adds to the previous result
      exp = mac_clear ? 0 : prev;
      for (int p = 0; p < ROWS; p++) begin
        src = p + int'(mac_a);
        if (mac_row_en[p] && src < ROWS) exp += int'(w_ref[p]) * int'($signed(trf_din[src]));
      end
      mac_start = 1; @(negedge clk); mac_start = 0;
      lat = 0;   // clock edges after the one that samples start
      while (!acc_valid && lat < 40) begin @(negedge clk); lat++; end
      checks++;
      if (int'(acc) != exp) begin
        failures++;
        if (failures < 10) $display("FAIL it %0d acc %0d expected %0d", it, acc, exp);
      end
      checks++;
      if (lat != 10) begin
        failures++;
        $display("FAIL it %0d latency %0d clocks, expected 10", it, lat);
      end
      prev = exp;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
