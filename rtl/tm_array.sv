// tm_array -- behavioural model of the 180 x 8-bit 8T-SRAM tile memory.
//
// This is a behavioural model of an analog SRAM macro, not synthesizable
// logic for the real part. Each of the ROWS rows holds one INT8 weight; bit
// j of every row sits on read bitline BL[j]. Writing: all word lines raised
// in wl are written with the same byte in one clock, which is how the
// duplicated copies of a kernel weight are stored in a single cycle.
// Computing: every row whose read word line carries in_bits[r] = 1 opens a
// discharge path on each bitline whose stored bit is 1. The precharged
// read bitline drops by I_path*T_pulse/C_RBL per open path; the model
// reports that drop in units of one path, i.e. the number of rows r with
// in_bits[r] & W[r][j], on bl_cnt[j]. The count is combinational (no
// settling delay is modelled). Storage is not reset, as in an SRAM.
// The 180 x 8 organisation, one bitline per weight bit and multi-word-line
// writes follow the published design; the ideal one-step-per-path counting
// (no noise, no nonlinearity) is this model's simplification.
module tm_array #(
  parameter int ROWS = 180,
  parameter int COLS = 8
) (
  input  logic                  clk,
  input  logic                  we,
  input  logic [ROWS-1:0]       wl,
  input  logic [COLS-1:0]       wdata,
  input  logic [ROWS-1:0]       in_bits,
  output logic [COLS-1:0][7:0]  bl_cnt
);
  logic [COLS-1:0] bitcell [ROWS];

  always_ff @(posedge clk) begin
    if (we)
      for (int r = 0; r < ROWS; r++)
        if (wl[r]) bitcell[r] <= wdata;
  end

  always_comb begin
    for (int j = 0; j < COLS; j++) begin
      bl_cnt[j] = '0;
      for (int r = 0; r < ROWS; r++)
        bl_cnt[j] = bl_cnt[j] + 8'(in_bits[r] & bitcell[r][j]);
    end
  end
endmodule
