// tb_convdk_workloads -- one output row of representative depthwise layers
// of the five evaluated networks (MobileNetV1, V2, V3-Large, V3-Small,
// EfficientNet-B0), run on the macro at its default size.
// Layer shapes are the standard ones of those networks (channels, input
// width with the zero padding of a "same" convolution already added,
// kernel, stride); the padding columns are simply part of the ifmap here.
// Each layer covers the first macro pass: all 64 tiles loaded with their
// first channels (or, for BIG, their first sub-maps), every output checked
// against a direct convolution. Layers needing several passes repeat the
// same computation on other channels and are not repeated here.
// The networks are the ones the published evaluation uses; the layer shapes
// are the standard ones of those networks, not taken from the publication.
// The IA and weight values are hashed from a random seed offset.
module tb_convdk_workloads;
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
    #50ms;
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
    //        name                                   seed  C    W   k  s  h0 rows
    run_layer("MobileNetV1 dw1 32x112x112 k3 s1",      11 + seed0,  32, 114, 3, 1, 0, 1);
    run_layer("MobileNetV1 dw13 1024x7x7 k3 s1",       12 + seed0, 1024,  9, 3, 1, 0, 1);
    run_layer("MobileNetV2 dw 144x56x56 k3 s2",        13 + seed0, 144,  58, 3, 2, 0, 1);
    run_layer("MobileNetV2 dw 960x7x7 k3 s1",          14 + seed0, 960,   9, 3, 1, 0, 1);
    run_layer("MobileNetV3-L dw 72x56x56 k5 s2",       15 + seed0,  72,  60, 5, 2, 0, 1);
    run_layer("MobileNetV3-L dw 960x7x7 k5 s1",        16 + seed0, 960,  11, 5, 1, 0, 1);
    run_layer("MobileNetV3-S dw 96x28x28 k5 s2",       17 + seed0,  96,  32, 5, 2, 0, 1);
    run_layer("EfficientNet-B0 dw 240x28x28 k5 s1",    18 + seed0, 240,  32, 5, 1, 0, 1);
    run_layer("EfficientNet-B0 dw 1152x7x7 k5 s1",     19 + seed0, 1152, 11, 5, 1, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
