// convdk_pkg -- constants and types shared by the macro.
//
// The macro is a weight-stationary computing-in-memory (CIM) accelerator
// for depthwise convolution: 64 tiles, each with a 180 x 8-bit tile memory
// (TM) holding INT8 weights and a 180 x 8-bit tile register file (TRF)
// holding INT8 input activations (IAs), fed from a 16 KiB input buffer, a
// 4 KiB weight buffer and a 16 KiB output buffer. These sizes follow the
// published design. The accumulator width, the output word width and the
// largest kernel width are this implementation's choices.
//
// The ConvDK sequence arithmetic itself is in convdk_seq.
package convdk_pkg;

  localparam int NUM_TILES  = 64;      // tiles in the macro
  localparam int TM_ROWS    = 180;     // rows of TM and TRF
  localparam int W_BITS     = 8;       // INT8 weights
  localparam int IA_BITS    = 8;       // INT8 input activations
  localparam int ADC_BITS   = 4;       // 4-bit ADC per bitline
  localparam int IB_BYTES   = 16384;   // input buffer
  localparam int WB_BYTES   = 4096;    // weight buffer
  localparam int OB_BYTES   = 16384;   // output buffer
  localparam int MAX_K      = 7;       // largest kernel height/width handled
  localparam int SHIFT_WAYS = 5;       // IA shifter ways: a in 0..4 (kw up to 5 with gcd(kw,s)=1)
  localparam int MAX_PAR    = 15;      // rows active in one conversion (4-bit ADC full scale)
  localparam int SA_W       = ADC_BITS + W_BITS;  // shift-and-add result, signed
  localparam int ACC_W      = 24;      // accumulator, signed
  localparam int OB_WORD_W  = 32;      // output buffer word
  localparam int FILL_BYTES = 8;       // bytes per clock on the DRAM side of IB/WB

  localparam int IB_BANK_BYTES = IB_BYTES / NUM_TILES;                 // 256
  localparam int WB_BANK_BYTES = WB_BYTES / NUM_TILES;                 // 64
  localparam int OB_BANK_WORDS = OB_BYTES / NUM_TILES / (OB_WORD_W/8); // 64
  localparam int MAX_DUP       = TM_ROWS / 3;  // kw >= 3 for any odd kw > s >= 1

  // Layer as the host describes it (depthwise: input = output channels).
  typedef struct packed {
    logic [11:0] c;    // channels
    logic [7:0]  w;    // ifmap width
    logic [2:0]  kh;   // kernel height
    logic [2:0]  kw;   // kernel width
    logic [2:0]  s;    // stride
  } layer_t;

  typedef enum logic { SCHED_LITTLE = 1'b0, SCHED_BIG = 1'b1 } sched_mode_e;

  // Per-tile mapping chosen by the BIG/LITTLE planner.
  typedef struct packed {
    logic [2:0] kh;
    logic [2:0] kw;
    logic [2:0] s;
    logic [7:0] tw;     // TRF row pitch T_w = floor(180/kh)
    logic [7:0] cw;     // width of one channel's sub-map in a TRF row
    logic [3:0] n_ch;   // channels per tile
    logic [7:0] w_out;  // output columns per channel sub-map
    logic [7:0] n_dup;  // kernel duplication number N
  } tile_cfg_t;

  // Control broadcast to every tile for one MAC (one "compute cycle").
  typedef struct packed {
    logic               start;   // begin a bit-serial MAC
    logic               clear;   // first row group: restart the accumulator
    logic [2:0]         a;       // IA shift
    logic [TM_ROWS-1:0] row_en;  // decoded multiplication enables e
  } mac_ctrl_t;
endpackage
