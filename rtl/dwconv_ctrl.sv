// dwconv_ctrl -- ConvDK sequencer for depthwise convolution on the macro.
//
// All tiles run in lock step, so one controller drives them all. A start
// pulse (with the tile mapping cfg and an OB base address) runs:
//   1. KLOAD (if load_kernels): writes each kernel weight k[cc][j][i] from
//      the WB into the TMs: one clock to the row of block 0, then one clock
//      to the rows of all duplicates 1..N-1 at once (multi-word-line write),
//      so a 3x3 kernel takes 18 clocks whatever N is.
//   2. TLOAD: one clock in which every TRF loads its sub-ifmap from the IB.
//   3. COMP: the loop nest of the ConvDK algorithm,
//        for a = 0..l-1 (IA shift)
//          n = a*n1 mod dn, m = a*m1 mod l
//          while n < N:  for c in channels of the tile: for g in row groups:
//              MAC with shift a and the rows of block n of channel c enabled
//              -> output column m of channel c
//            n += dn, m += l
//      Each MAC is one compute cycle of ten clocks. A (n, a) pair whose
//      output column m is past the last column W_out costs one idle clock;
//      leaving each value of a costs one idle clock.
//   4. DRAIN: waits for the last result to reach the OB, then pulses done.
// Layout of TM and TRF (row pitch tw, channel width cw): kernel row j of
// local channel cc, block n, tap i sits at row j*tw + cc*cw + n*kw + i; the
// IA of row j, column x of channel cc sits at j*tw + cc*cw + x.
// Every result is written to OB address ob_base + c*W_out + m, one clock
// after the tiles flag it (the address travels down an 11-stage tag pipe
// that matches the tile latency).
// Row groups: a 4-bit ADC resolves at most MAX_PAR active rows, so a kernel
// with kh*kw > MAX_PAR is applied in groups of floor(MAX_PAR/kw) kernel rows,
// summed in the accumulator. The loop order, the kernel write schedule and
// the ten-clock MAC follow the published design; the row groups, the skip
// rule, the layout and the handshake are this design's choices.
module dwconv_ctrl
  import convdk_pkg::*;
#(
  parameter int ROWS = TM_ROWS,
  parameter int PAR  = MAX_PAR,
  localparam int OB_AW = $clog2(OB_BANK_WORDS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 load_kernels,
  input  tile_cfg_t            cfg_in,
  input  logic [OB_AW-1:0]     ob_base,
  output logic                 busy,
  output logic                 done,
  // TM write (all tiles)
  output logic                 tm_we,
  output logic [ROWS-1:0]      tm_wl,
  output logic [$clog2(WB_BANK_BYTES)-1:0] wb_raddr,
  // TRF load (all tiles)
  output logic                 trf_load,
  // MAC control (all tiles)
  output logic                 mac_start,
  output logic                 mac_clear,
  output logic [2:0]           mac_a,
  output logic [ROWS-1:0]      mac_row_en,
  // OB write (all tiles)
  output logic                 ob_we,
  output logic [OB_AW-1:0]     ob_waddr
);
  typedef enum logic [2:0] {S_IDLE, S_KLOAD, S_TLOAD, S_COMP, S_DRAIN} state_e;
  state_e    state;
  tile_cfg_t cfg;
  logic [OB_AW-1:0] base;

  // derived constants of the layer
  int unsigned rpg, ng;
  logic [2:0]  seq_l, seq_dn, seq_m1, seq_n1;
  logic [31:0] l, dn, m1, n1;
  convdk_seq u_seq (.kw(cfg.kw), .s(cfg.s), .l(seq_l), .dn(seq_dn), .m1(seq_m1), .n1(seq_n1));
  assign l  = 32'(seq_l);
  assign dn = 32'(seq_dn);
  assign m1 = 32'(seq_m1);
  assign n1 = 32'(seq_n1);
  always_comb begin
    rpg = (cfg.kw == 0) ? 1 : PAR / int'(cfg.kw);
    if (rpg == 0) rpg = 1;
    ng  = (int'(cfg.kh) + rpg - 1) / rpg;
  end

  // KLOAD indices
  logic [3:0] kc;
  logic [2:0] kj, ki;
  logic       kphase;
  // COMP indices
  logic [2:0] a;
  logic [7:0] n, m;
  logic [3:0] c;
  logic [2:0] g;
  logic [3:0] cyc;

  // first n and m of shift value x
  function automatic logic [7:0] n_of(input int unsigned x);
    return 8'((x * n1) % dn);
  endfunction
  function automatic logic [7:0] m_of(input int unsigned x);
    return 8'((x * m1) % l);
  endfunction

  logic issue, skip_n, next_a;
  assign next_a = (state == S_COMP) && cyc == 0 && int'(n) >= int'(cfg.n_dup);
  assign skip_n = (state == S_COMP) && cyc == 0 && !next_a && m >= cfg.w_out;
  assign issue  = (state == S_COMP) && cyc == 0 && !next_a && !skip_n;

  // tag pipe: OB address of each MAC, delivered when its result is ready
  localparam int LAT = 11;
  logic [LAT-1:0]            tag_v;
  logic [LAT-1:0][OB_AW-1:0] tag_addr;
  logic last_group;
  assign last_group = (int'(g) == ng - 1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cfg   <= '0;
      base  <= '0;
      kc <= '0; kj <= '0; ki <= '0; kphase <= 1'b0;
      a <= '0; n <= '0; m <= '0; c <= '0; g <= '0; cyc <= '0;
      tag_v <= '0;
      tag_addr <= '0;
      done <= 1'b0;
    end else begin
      done     <= 1'b0;
      tag_v    <= {tag_v[LAT-2:0], issue && last_group};
      tag_addr <= {tag_addr[LAT-2:0], OB_AW'(int'(base) + int'(c) * int'(cfg.w_out) + int'(m))};
      unique case (state)
        S_IDLE: if (start) begin
          cfg  <= cfg_in;
          base <= ob_base;
          kc <= '0; kj <= '0; ki <= '0; kphase <= 1'b0;
          state <= load_kernels ? S_KLOAD : S_TLOAD;
        end
        S_KLOAD: begin
          // phase 0: block 0; phase 1: all duplicates (skipped when N = 1)
          if (kphase == 1'b0 && cfg.n_dup > 8'd1) kphase <= 1'b1;
          else begin
            kphase <= 1'b0;
            if (ki + 3'd1 < cfg.kw) ki <= ki + 3'd1;
            else begin
              ki <= '0;
              if (kj + 3'd1 < cfg.kh) kj <= kj + 3'd1;
              else begin
                kj <= '0;
                if (kc + 4'd1 < cfg.n_ch) kc <= kc + 4'd1;
                else state <= S_TLOAD;
              end
            end
          end
        end
        S_TLOAD: begin
          state <= S_COMP;
          a <= '0; n <= n_of(0); m <= m_of(0); c <= '0; g <= '0; cyc <= '0;
        end
        S_COMP: begin
          if (next_a) begin
            if (int'(a) + 1 >= l) state <= S_DRAIN;
            else begin
              a <= a + 3'd1;
              n <= n_of(int'(a) + 1);
              m <= m_of(int'(a) + 1);
              c <= '0; g <= '0;
            end
          end else if (skip_n) begin
            n <= 8'(int'(n) + dn);
            m <= 8'(int'(m) + l);
          end else if (cyc == 4'd9) begin
            cyc <= '0;
            if (int'(g) + 1 < ng) g <= g + 3'd1;
            else begin
              g <= '0;
              if (c + 4'd1 < cfg.n_ch) c <= c + 4'd1;
              else begin
                c <= '0;
                n <= 8'(int'(n) + dn);
                m <= 8'(int'(m) + l);
              end
            end
          end else cyc <= cyc + 4'd1;
        end
        S_DRAIN: if (tag_v == '0 && !ob_we) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy     = (state != S_IDLE);
  assign trf_load = (state == S_TLOAD);
  assign tm_we    = (state == S_KLOAD);
  assign wb_raddr = $bits(wb_raddr)'(int'(kc) * int'(cfg.kh) * int'(cfg.kw) + int'(kj) * int'(cfg.kw) + int'(ki));
  assign ob_we    = tag_v[LAT-1];
  assign ob_waddr = tag_addr[LAT-1];

  // word lines of the weight being written
  always_comb begin
    int pos;
    tm_wl = '0;
    for (int d = 0; d < MAX_DUP; d++) begin
      pos = int'(kj) * int'(cfg.tw) + int'(kc) * int'(cfg.cw) + d * int'(cfg.kw) + int'(ki);
      if (((kphase == 1'b0 && d == 0) || (kphase == 1'b1 && d >= 1 && d < int'(cfg.n_dup)))
          && pos < ROWS)
        tm_wl[pos] = 1'b1;
    end
  end

  // decoded multiplication enables: rows of block n, channel c, row group g
  always_comb begin
    int pos;
    mac_row_en = '0;
    for (int j = 0; j < MAX_K; j++)
      for (int i = 0; i < MAX_K; i++) begin
        pos = j * int'(cfg.tw) + int'(c) * int'(cfg.cw) + int'(n) * int'(cfg.kw) + i;
        if (j < int'(cfg.kh) && i < int'(cfg.kw) && j >= int'(g) * rpg && j < (int'(g) + 1) * rpg
            && pos < ROWS)
          mac_row_en[pos] = 1'b1;
      end
  end

  assign mac_start = issue;
  assign mac_clear = (g == '0);
  assign mac_a     = a;

  // a result must reach the OB before the next one overwrites the tag
  property p_one_write_per_mac;
    @(posedge clk) disable iff (!rst_n) issue |=> !issue [*9];
  endproperty
  a_one_write_per_mac: assert property (p_one_write_per_mac);
endmodule
