// big_little_sched -- BIG/LITTLE planner (combinational).
//
// From a depthwise layer (C channels, ifmap width W, kernel kh x kw,
// stride s) it chooses how the layer is laid out over the tiles:
//   T_w   = floor(ROWS/kh), the widest kh-row sub-map one TRF holds;
//   BIG    if W > T_w: one channel per tile, sub-maps T_w wide; channels go
//          to tiles 0..C-1 and the next sub-maps along the width to the idle
//          tiles (floor(NUM_TILES/C) copies of each kernel);
//   LITTLE otherwise: N_ch = min(ceil(C/NUM_TILES), floor(T_w/W)) whole-width
//          channels side by side in one TRF row (channel c and
//          c + used*k share a tile, used = ceil(C/N_ch) tiles), copies over
//          idle tiles as for BIG. N_ch is further limited so that a tile's
//          kernels fit its 64-byte WB bank and its outputs its OB bank.
// Per sub-map it also gives the output columns W_out = floor((CW-kw)/s)+1
// (no padding) and the duplication number N = floor((W_out-1)*s/kw)+1,
// the fewest kernel copies that reach every output column.
// The BIG/LITTLE rule and T_w follow the published design; N_ch, N and the
// overlap of BIG sub-maps (sub-map stride W_out*s) are this design's
// formulas, chosen to reproduce the published 128 x 24 x 24 example
// (T_w = 60, N_ch = 2, 22 output columns).
module big_little_sched
  import convdk_pkg::*;
#(
  parameter int ROWS  = TM_ROWS,
  parameter int TILES = NUM_TILES
) (
  input  layer_t      layer,
  output sched_mode_e mode,
  output tile_cfg_t   cfg,
  output logic [7:0]  replicas,    // copies of each kernel over the tiles
  output logic [7:0]  passes,      // macro passes needed to cover all channels
  output logic [7:0]  sub_stride   // ifmap columns between BIG sub-maps
);
  int unsigned tw, cw, wo, nch, used;

  always_comb begin
    tw = (layer.kh == 0) ? 0 : ROWS / int'(layer.kh);
    if (int'(layer.w) > tw) begin
      mode = SCHED_BIG;
      cw   = tw;
      nch  = 1;
    end else begin
      mode = SCHED_LITTLE;
      cw   = int'(layer.w);
      nch  = (int'(layer.c) + TILES - 1) / TILES;
      if (cw != 0 && nch > tw / cw) nch = tw / cw;
    end
    wo = (layer.s == 0 || cw < int'(layer.kw)) ? 0 : (cw - int'(layer.kw)) / int'(layer.s) + 1;
    // the tile's kernels must fit its WB bank and its outputs its OB bank
    if (layer.kh != 0 && layer.kw != 0 && nch > WB_BANK_BYTES / (int'(layer.kh) * int'(layer.kw)))
      nch = WB_BANK_BYTES / (int'(layer.kh) * int'(layer.kw));
    if (wo != 0 && nch > OB_BANK_WORDS / wo) nch = OB_BANK_WORDS / wo;
    if (nch == 0) nch = 1;
    used = (int'(layer.c) + nch - 1) / nch;          // tiles one copy occupies
    if (used >= TILES || used == 0) begin
      replicas = 8'd1;
      passes   = 8'((used + TILES - 1) / TILES);
    end else begin
      replicas = 8'(TILES / used);
      passes   = 8'd1;
    end
    cfg.kh    = layer.kh;
    cfg.kw    = layer.kw;
    cfg.s     = layer.s;
    cfg.tw    = 8'(tw);
    cfg.cw    = 8'(cw);
    cfg.n_ch  = 4'(nch);
    cfg.w_out = 8'(wo);
    cfg.n_dup = (wo == 0 || layer.kw == 0) ? 8'd0 : 8'(((wo - 1) * int'(layer.s)) / int'(layer.kw) + 1);
    sub_stride = 8'(wo * int'(layer.s));
  end
endmodule
