// cim_tile -- one CIM tile: TRF, IA shift-and-mask, TM, eight ADCs,
// shift-and-add and accumulator.
//
// A MAC starts when mac.start is sampled high. The tile then applies the
// IA bit-planes to the TM one per clock, LSB first (bits 0..7 during the 8
// clocks after start); mac.a and mac.row_en must stay stable over those 8
// clocks. Each bit-plane passes the ADC register and the shift-and-add
// register and is added to the accumulator, so the result is in acc ten
// clocks after start, flagged by a one-clock acc_valid pulse. This matches
// the published ten-clock MAC latency; the split into stages is this
// implementation's. A new MAC may start every ten clocks.
// The TM is written through its own ports (tm_we, tm_wl, tm_wdata:
// several word lines at once for duplicated weights) and the TRF is loaded
// in one clock with trf_load.
module cim_tile
  import convdk_pkg::*;
#(
  parameter int ROWS = TM_ROWS
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         trf_load,
  input  logic [ROWS-1:0][IA_BITS-1:0] trf_din,
  input  logic                         tm_we,
  input  logic [ROWS-1:0]              tm_wl,
  input  logic [W_BITS-1:0]            tm_wdata,
  input  logic                         mac_start,
  input  logic                         mac_clear,
  input  logic [2:0]                   mac_a,
  input  logic [ROWS-1:0]              mac_row_en,
  output logic signed [ACC_W-1:0]      acc,
  output logic                         acc_valid
);
  logic [ROWS-1:0][IA_BITS-1:0] ia;
  logic [ROWS-1:0]              in_bits;
  logic [W_BITS-1:0][7:0]       bl_cnt;
  logic [W_BITS-1:0][ADC_BITS-1:0] codes;
  logic                         sa_valid;
  logic signed [SA_W-1:0]       sa_sum;

  // bit-serial sequencer and the tags that travel with each bit-plane
  logic       running;
  logic [2:0] bit_t;
  logic       clear_r;
  logic       v1, v2;
  logic [2:0] t1, t2;
  logic       c1, c2;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      running <= 1'b0;
      bit_t   <= '0;
      clear_r <= 1'b0;
      v1 <= 1'b0; t1 <= '0; c1 <= 1'b0;
      t2 <= '0; c2 <= 1'b0;
    end else begin
      if (mac_start) begin
        running <= 1'b1;
        bit_t   <= '0;
        clear_r <= mac_clear;
      end else if (running) begin
        bit_t <= bit_t + 3'd1;
        if (bit_t == 3'd7) running <= 1'b0;
      end
      v1 <= running;  t1 <= bit_t;  c1 <= clear_r;
      t2 <= t1;       c2 <= c1;
    end
  end
  assign v2 = sa_valid;

  trf #(.ROWS(ROWS), .W(IA_BITS)) u_trf (
    .clk, .rst_n, .load(trf_load), .din(trf_din), .q(ia));

  ia_sm #(.ROWS(ROWS), .IA_W(IA_BITS), .SHIFT_WAYS(SHIFT_WAYS)) u_sm (
    .ia, .bit_sel(bit_t), .shift_a(mac_a), .row_en(mac_row_en & {ROWS{running}}),
    .in_bits);

  tm_array #(.ROWS(ROWS), .COLS(W_BITS)) u_tm (
    .clk, .we(tm_we), .wl(tm_wl), .wdata(tm_wdata), .in_bits, .bl_cnt);

  for (genvar j = 0; j < W_BITS; j++) begin : g_adc
    adc #(.BITS(ADC_BITS)) u_adc (.clk, .bl_cnt(bl_cnt[j]), .code(codes[j]));
  end

  shift_add #(.COLS(W_BITS), .CODE_W(ADC_BITS), .OUT_W(SA_W)) u_sa (
    .clk, .rst_n, .in_valid(v1), .codes, .out_valid(sa_valid), .sum(sa_sum));

  accumulator #(.IN_W(SA_W), .ACC_W(ACC_W), .IA_W(IA_BITS)) u_acc (
    .clk, .rst_n, .in_valid(v2), .in_sum(sa_sum), .bit_idx(t2),
    .clear(c2), .acc, .acc_valid);
endmodule
