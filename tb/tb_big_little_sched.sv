// tb_big_little_sched -- planner outputs for hand-worked layers, including
// the published 128 x 24 x 24, 3x3 example (LITTLE, T_w = 60, N_ch = 2,
// 22 output columns), then rules that must hold for random layers: mode,
// T_w, channels per tile within the row, WB bank and OB bank, W_out, the
// fewest copies reaching every output column, and enough passes.
module tb_big_little_sched;
  import convdk_pkg::*;
  layer_t layer;
  sched_mode_e mode;
  tile_cfg_t cfg;
  logic [7:0] replicas, passes, sub_stride;
  int checks = 0, failures = 0;

  big_little_sched dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(int c, int w, int k, int s, bit big, int tw, int cw, int nch, int wo, int nd, int rep, int pas);
    layer = '{c: 12'(c), w: 8'(w), kh: 3'(k), kw: 3'(k), s: 3'(s)};
    #1;
    checks++;
    if ((mode == SCHED_BIG) != big || int'(cfg.tw) != tw || int'(cfg.cw) != cw || int'(cfg.n_ch) != nch ||
        int'(cfg.w_out) != wo || int'(cfg.n_dup) != nd || int'(replicas) != rep || int'(passes) != pas ||
        int'(sub_stride) != wo * s) begin
      failures++;
      $display("FAIL C=%0d W=%0d k=%0d s=%0d: big=%0b tw=%0d cw=%0d nch=%0d wo=%0d N=%0d rep=%0d pass=%0d",
               c, w, k, s, mode, cfg.tw, cfg.cw, cfg.n_ch, cfg.w_out, cfg.n_dup, replicas, passes);
    end
  endtask

  initial begin
    //  C    W   k  s  BIG  Tw  CW  Nch Wout N  rep pass
    chk(128, 24, 3, 1, 0,   60, 24, 2,  22,  8, 1,  1);
    chk(32, 118, 3, 2, 1,   60, 60, 1,  29, 19, 2,  1);
    chk(32, 112, 3, 1, 1,   60, 60, 1,  58, 20, 2,  1);
    chk(960,  7, 5, 1, 0,   36,  7, 2,   3,  1, 1,  8);
    chk(1024, 7, 3, 1, 0,   60,  7, 7,   5,  2, 1,  3);
    chk(16,  60, 3, 1, 0,   60, 60, 1,  58, 20, 4,  1);
    chk(128, 14, 5, 1, 0,   36, 14, 2,  10,  2, 1,  1);
    chk(240, 28, 5, 2, 0,   36, 28, 1,  12,  5, 1,  4);
    repeat (300) begin
      int c, w, k, s, tw, wo, nch, nd;
      bit ok;
      k = (($urandom % 2) != 0) ? 5 : 3;
      s = 1 + int'($urandom % 2);
      c = 1 + int'($urandom % 1200);
      w = k + 1 + int'($urandom % (250 - k));
      layer = '{c: 12'(c), w: 8'(w), kh: 3'(k), kw: 3'(k), s: 3'(s)};
      #1;
      tw = 180 / k;
      nch = int'(cfg.n_ch);
      wo = int'(cfg.w_out);
      nd = int'(cfg.n_dup);
      ok = ((mode == SCHED_BIG) == (w > tw)) && int'(cfg.tw) == tw &&
           nch >= 1 && nch * int'(cfg.cw) <= tw && nch * k * k <= 64 && nch * wo <= 64 &&
           int'(cfg.cw) == ((w > tw) ? tw : w) && wo == (int'(cfg.cw) - k) / s + 1 &&
           nd == ((wo - 1) * s) / k + 1 && int'(passes) * 64 * nch >= c &&
           (int'(passes) - 1) * 64 * nch < c;
      checks++;
      if (!ok) begin
        failures++;
        $display("FAIL random C=%0d W=%0d k=%0d s=%0d: mode=%0d tw=%0d cw=%0d nch=%0d wo=%0d N=%0d pass=%0d",
                 c, w, k, s, mode, cfg.tw, cfg.cw, nch, wo, nd, passes);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
