// convdk_macro -- depthwise-convolution CIM macro with ConvDK dataflow.
//
// Top level: input buffer (16 KiB), weight buffer (4 KiB), output buffer
// (16 KiB), NUM_TILES CIM tiles, the BIG/LITTLE planner and the ConvDK
// controller. DRAM is outside; its traffic uses the fill ports of IB and
// WB and the read port of OB.
// Use: describe the layer on `layer` (the planner's choice appears on
// plan_mode/plan_cfg/plan_replicas/plan_passes/plan_sub_stride), fill the WB
// with each tile's kernels and the IB with each tile's kh-row sub-ifmaps
// (layout in dwconv_ctrl), then pulse start (load_kernels = 1 the first
// time). busy falls and done pulses when every output of the sub-ifmaps is
// in the OB at ob_base + c*W_out + m of the tile's bank. The next rows can
// then be loaded into the IB and started with load_kernels = 0: the
// duplicated kernels stay in the TMs and only the TRFs are reloaded.
// All tiles receive the same control; each tile's accumulator goes to its
// own OB bank, sign-extended to OB_WORD_W bits.
// Buffer sizes, tile count and per-operation latencies follow the published
// design; the banking (one bank per tile), the 8-byte fill ports, the
// start/done handshake and the OB address map are this design's own choices.
module convdk_macro
  import convdk_pkg::*;
#(
  parameter int TILES = NUM_TILES,
  localparam int IB_WA = $clog2(IB_BYTES / TILES / FILL_BYTES),
  localparam int WB_WA = $clog2(WB_BYTES / TILES / FILL_BYTES),
  localparam int OB_AW = $clog2(OB_BYTES / TILES / (OB_WORD_W / 8)),
  localparam int TW    = $clog2(TILES)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // layer and command
  input  layer_t                  layer,
  input  logic                    start,
  input  logic                    load_kernels,
  input  logic [OB_AW-1:0]        ob_base,
  output logic                    busy,
  output logic                    done,
  output sched_mode_e             plan_mode,
  output tile_cfg_t               plan_cfg,
  output logic [7:0]              plan_replicas,
  output logic [7:0]              plan_passes,
  output logic [7:0]              plan_sub_stride,
  // DRAM -> IB
  input  logic                    ib_we,
  input  logic [TW-1:0]           ib_bank,
  input  logic [IB_WA-1:0]        ib_addr,
  input  logic [FILL_BYTES*8-1:0] ib_wdata,
  // DRAM -> WB
  input  logic                    wb_we,
  input  logic [TW-1:0]           wb_bank,
  input  logic [WB_WA-1:0]        wb_addr,
  input  logic [FILL_BYTES*8-1:0] wb_wdata,
  // OB -> DRAM
  input  logic                    ob_re,
  input  logic [TW-1:0]           ob_bank,
  input  logic [OB_AW-1:0]        ob_raddr,
  output logic [OB_WORD_W-1:0]    ob_rdata
);
  logic [TILES-1:0][TM_ROWS-1:0][7:0] trf_data;
  logic [TILES-1:0][7:0]              wb_rdata;
  logic [$clog2(WB_BYTES / TILES)-1:0] wb_raddr;
  logic                               tm_we, trf_load;
  logic [TM_ROWS-1:0]                 tm_wl;
  logic                               mac_start, mac_clear;
  logic [2:0]                         mac_a;
  logic [TM_ROWS-1:0]                 mac_row_en;
  logic                               ob_we;
  logic [OB_AW-1:0]                   ob_waddr;
  logic [TILES-1:0][OB_WORD_W-1:0]    ob_wdata;
  logic [TILES-1:0]                   acc_valid;

  big_little_sched #(.ROWS(TM_ROWS), .TILES(TILES)) u_sched (
    .layer, .mode(plan_mode), .cfg(plan_cfg), .replicas(plan_replicas),
    .passes(plan_passes), .sub_stride(plan_sub_stride));

  dwconv_ctrl #(.ROWS(TM_ROWS), .PAR(MAX_PAR)) u_ctrl (
    .clk, .rst_n, .start, .load_kernels, .cfg_in(plan_cfg), .ob_base,
    .busy, .done, .tm_we, .tm_wl, .wb_raddr, .trf_load,
    .mac_start, .mac_clear, .mac_a, .mac_row_en, .ob_we, .ob_waddr);

  ib_buffer #(.BYTES(IB_BYTES), .NUM_TILES(TILES), .TRF_ROWS(TM_ROWS), .FILL_BYTES(FILL_BYTES)) u_ib (
    .clk, .we(ib_we), .wbank(ib_bank), .waddr(ib_addr), .wdata(ib_wdata), .trf_data);

  wb_buffer #(.BYTES(WB_BYTES), .NUM_TILES(TILES), .FILL_BYTES(FILL_BYTES)) u_wb (
    .clk, .we(wb_we), .wbank(wb_bank), .waddr(wb_addr), .wdata(wb_wdata),
    .raddr(wb_raddr), .rdata(wb_rdata));

  for (genvar t = 0; t < TILES; t++) begin : g_tile
    logic signed [ACC_W-1:0] acc;
    cim_tile #(.ROWS(TM_ROWS)) u_tile (
      .clk, .rst_n, .trf_load, .trf_din(trf_data[t]),
      .tm_we, .tm_wl, .tm_wdata(wb_rdata[t]),
      .mac_start, .mac_clear, .mac_a, .mac_row_en,
      .acc, .acc_valid(acc_valid[t]));
    assign ob_wdata[t] = OB_WORD_W'(acc);
  end

  ob_buffer #(.BYTES(OB_BYTES), .NUM_TILES(TILES), .WORD_W(OB_WORD_W)) u_ob (
    .clk, .we(ob_we), .waddr(ob_waddr), .wdata(ob_wdata),
    .re(ob_re), .rbank(ob_bank), .raddr(ob_raddr), .rdata(ob_rdata));

  // the OB write must coincide with the tiles' result
  a_ob_write_on_result: assert property (@(posedge clk) disable iff (!rst_n) ob_we |-> &acc_valid);
endmodule
