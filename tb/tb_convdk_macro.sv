// tb_convdk_macro -- the whole macro at its default size (64 tiles, 180-row
// TMs, 16 KiB IB, 4 KiB WB, 16 KiB OB), depthwise layers end to end.
//
// For each layer the testbench works out its own plan (BIG if W > T_w,
// channels per tile, output columns, duplication number) and checks the
// macro's planner against it, then fills the WB with each tile's kernels and
// the IB with each tile's kh-row sub-ifmaps, starts the macro, and compares
// every output in the OB with a direct convolution computed here.
// Layers:
//   1. 128 x 24 x 24, 3x3, stride 1 (LITTLE, two channels per tile), two
//      output rows, the second without reloading the kernels;
//   2. 32 x 3 x 118, 3x3, stride 2 (BIG: tiles 32..63 hold a second copy of
//      the kernels and the next sub-map along the width);
//   3. 128 x 5 x 14, 5x5, stride 1 (LITTLE; 25-tap kernel in two row groups).
// Every mechanism (duplicate-row TM write, IA shift a > 0, skipped block,
// row-group MAC, BIG, LITTLE, kernel reuse, kernel copies over idle tiles)
// is counted and must occur. Kernel loading must take 2 clocks per weight,
// and a row must take ten clocks per MAC plus at most a few idle clocks.
// The first layer is the published 128 x 24 x 24 example; the other two
// layers were chosen here to reach BIG mode and 5x5 row groups.
// The IA and weight values are hashed from a random seed offset.
module tb_convdk_macro;
  import convdk_pkg::*;
  logic clk = 0, rst_n = 0;
  layer_t layer;
  logic start = 0, load_kernels = 0, busy, done;
  logic [5:0] ob_base = '0;
  sched_mode_e plan_mode;
  tile_cfg_t plan_cfg;
  logic [7:0] plan_replicas, plan_passes, plan_sub_stride;
  logic ib_we = 0, wb_we = 0, ob_re = 0;
  logic [5:0] ib_bank, wb_bank, ob_bank, ob_raddr;
  logic [4:0] ib_addr;
  logic [2:0] wb_addr;
  logic [63:0] ib_wdata, wb_wdata;
  logic [31:0] ob_rdata;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  convdk_macro dut (.*);

  initial begin
    #20ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int seed0;
  `include "convdk_macro_tasks.svh"

  initial begin
    layer = '0;
    ib_bank = '0; ib_addr = '0; ib_wdata = '0;
    wb_bank = '0; wb_addr = '0; wb_wdata = '0;
    ob_bank = '0; ob_raddr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    seed0 = int'($urandom % 1000) * 100;
    $display("data seed offset %0d", seed0);
    run_layer("LITTLE 128x24x24 k3 s1", 1 + seed0, 128, 24, 3, 1, 0, 2);
    run_layer("BIG 32x3x118 k3 s2", 2 + seed0, 32, 118, 3, 2, 0, 1);
    run_layer("LITTLE 128x5x14 k5 s1", 3 + seed0, 128, 14, 5, 1, 0, 1);
    chk(n_dupwrite > 0, "duplicate-row TM writes occurred");
    chk(n_shift > 0,    "IA shifts a > 0 occurred");
    chk(n_skip > 0,     "blocks past the last column were skipped");
    chk(n_group > 0,    "row-group MACs occurred");
    chk(n_big > 0,      "BIG schedule used");
    chk(n_little > 0,   "LITTLE schedule used");
    chk(n_reuse > 0,    "kernels reused without reload");
    chk(n_copies > 0,   "kernel copies over idle tiles used");
    $display("mechanisms: dupwrite=%0d shift=%0d skip=%0d group=%0d big=%0d little=%0d reuse=%0d copies=%0d",
             n_dupwrite, n_shift, n_skip, n_group, n_big, n_little, n_reuse, n_copies);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
