// convdk_macro_tasks.svh -- testbench tasks shared by the macro-level
// testbenches, included inside a module that declares the macro's port
// signals, the instance `dut`, and the counters checks/failures.
// Provides deterministic INT8 test data (ia_val, w_val), buffer fill and OB
// read tasks, counters of each dataflow mechanism, and run_layer, which
// plans a depthwise layer independently of the macro, checks the macro's
// plan against it, loads kernels and sub-ifmaps, runs the macro and compares
// every output of the first pass with a direct convolution.
// The reference model is a direct depthwise convolution, independent of the
// ConvDK order; the host-side planning mirrors the published BIG/LITTLE rules
// plus this design's buffer-bank limits.
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  // deterministic INT8 test data
  function automatic int ia_val(int seed, int c, int h, int x);
    int v = (c * 7919 + h * 104729 + x * 1299709 + seed * 15485863) ^ (c * x * 31 + h);
    v = v ^ (v >>> 7);
    return int'($signed(8'(v)));
  endfunction
  function automatic int w_val(int seed, int c, int j, int i);
    int v = (c * 3571 + j * 2741 + i * 6547 + seed * 9973) ^ (c * 13 + i * j);
    v = v ^ (v >>> 5);
    return int'($signed(8'(v)));
  endfunction

  // mechanism counters
  int n_dupwrite, n_shift, n_skip, n_group, n_big, n_little, n_reuse, n_copies;
  always @(posedge clk) if (rst_n) begin
    if (dut.tm_we && !$onehot(dut.tm_wl)) n_dupwrite++;
    if (dut.mac_start && dut.mac_a != 0) n_shift++;
    if (dut.u_ctrl.skip_n) n_skip++;
    if (dut.mac_start && !dut.mac_clear) n_group++;
  end

  logic [7:0] ib_img [64][256];
  logic [7:0] wb_img [64][64];

  task automatic fill_buffers();
    for (int t = 0; t < 64; t++) begin
      for (int w = 0; w < 23; w++) begin
        @(negedge clk);
        ib_we = 1; ib_bank = 6'(t); ib_addr = 5'(w);
        for (int b = 0; b < 8; b++) ib_wdata[8*b +: 8] = ib_img[t][w * 8 + b];
      end
    end
    @(negedge clk); ib_we = 0;
  endtask

  task automatic fill_wb();
    for (int t = 0; t < 64; t++)
      for (int w = 0; w < 8; w++) begin
        @(negedge clk);
        wb_we = 1; wb_bank = 6'(t); wb_addr = 3'(w);
        for (int b = 0; b < 8; b++) wb_wdata[8*b +: 8] = wb_img[t][w * 8 + b];
      end
    @(negedge clk); wb_we = 0;
  endtask

  task automatic read_ob(int bank, int addr, output int val);
    ob_re = 1; ob_bank = 6'(bank); ob_raddr = 6'(addr);
    @(negedge clk);
    ob_re = 0;
    val = int'($signed(ob_rdata));
  endtask

  // one layer, output rows h0 .. h0+nrows-1 (one row per run)
  task automatic run_layer(string name, int seed, int C, int W, int k, int s, int h0, int nrows);
    bit big;
    int tw, cw, nch, wo, nd, used, rep, l, ng, rpg;
    int ch, col0, hr, exp, got, t0, t1, kclk, macs, lim;
    bit kl;
    layer = '{c: 12'(C), w: 8'(W), kh: 3'(k), kw: 3'(k), s: 3'(s)};
    // the testbench's own plan
    tw  = 180 / k;
    big = (W > tw);
    cw  = big ? tw : W;
    nch = big ? 1 : (((C + 63) / 64) < (tw / W) ? (C + 63) / 64 : tw / W);
    wo  = (cw - k) / s + 1;
    if (!big && nch > 64 / (k * k)) nch = 64 / (k * k);   // WB bank: 64 bytes per tile
    if (!big && nch > 64 / wo) nch = 64 / wo;             // OB bank: 64 words per tile
    nd  = ((wo - 1) * s) / k + 1;
    used = (C + nch - 1) / nch;
    rep = (used < 64) ? 64 / used : 1;
    l = k;                      // gcd(k, s) = 1 for all layers here
    rpg = 15 / k;
    ng = (k + rpg - 1) / rpg;
    #1;
    chk((plan_mode == SCHED_BIG) == big && int'(plan_cfg.tw) == tw && int'(plan_cfg.cw) == cw &&
        int'(plan_cfg.n_ch) == nch && int'(plan_cfg.w_out) == wo && int'(plan_cfg.n_dup) == nd &&
        int'(plan_replicas) == rep, $sformatf("%s: plan", name));
    if (big) n_big++; else n_little++;
    if (rep > 1) n_copies++;
    // kernels: tile t, local channel cc at cc*k*k + j*k + i
    foreach (wb_img[t, b]) wb_img[t][b] = '0;
    for (int t = 0; t < 64; t++) begin
      for (int cc = 0; cc < nch; cc++) begin
        ch = (t % used) + used * cc;
        if (ch < C)
          for (int j = 0; j < k; j++)
            for (int i = 0; i < k; i++) wb_img[t][cc * k * k + j * k + i] = 8'(w_val(seed, ch, j, i));
      end
    end
    fill_wb();
    for (int r = 0; r < nrows; r++) begin
      // IAs: row j of local channel cc at j*tw + cc*cw + x
      foreach (ib_img[t, b]) ib_img[t][b] = '0;
      for (int t = 0; t < 64; t++) begin
        col0 = big ? (t / used) * wo * s : 0;
        hr   = h0 + r + (big ? 0 : t / used);
        for (int cc = 0; cc < nch; cc++) begin
          ch = (t % used) + used * cc;
          if (ch < C && t / used < rep)
            for (int j = 0; j < k; j++)
              for (int x = 0; x < cw; x++)
                if (col0 + x < W) ib_img[t][j * tw + cc * cw + x] = 8'(ia_val(seed, ch, hr * s + j, col0 + x));
        end
      end
      fill_buffers();
      kl = (r == 0);
      if (!kl) n_reuse++;
      load_kernels = kl;
      @(negedge clk); start = 1; t0 = int'($time / 10); @(negedge clk); start = 0;
      kclk = 0; macs = 0;
      while (!done) begin
        if (dut.tm_we) kclk++;
        if (dut.mac_start) macs++;
        @(negedge clk);
      end
      t1 = int'($time / 10);
      chk(kclk == (kl ? nch * k * k * 2 : 0), $sformatf("%s: kernel write %0d clocks", name, kclk));
      chk(macs == nch * wo * ng, $sformatf("%s: %0d MACs, expected %0d", name, macs, nch * wo * ng));
      lim = kclk + 1 + 10 * macs + l + nd * l + 14;
      chk(t1 - t0 >= kclk + 10 * macs && t1 - t0 <= lim,
          $sformatf("%s: run took %0d clocks (MACs %0d, bound %0d)", name, t1 - t0, macs, lim));
      // compare every output
      for (int t = 0; t < 64; t++) begin
        if (t / used >= rep) continue;
        for (int cc = 0; cc < nch; cc++) begin
          ch = (t % used) + used * cc;
          if (ch >= C) continue;
          hr = h0 + r + (big ? 0 : t / used);
          for (int m = 0; m < wo; m++) begin
            int mg;
            mg = big ? m + (t / used) * wo : m;
            if (mg * s + k > W) continue;
            exp = 0;
            for (int j = 0; j < k; j++)
              for (int i = 0; i < k; i++)
                exp += w_val(seed, ch, j, i) * ia_val(seed, ch, hr * s + j, mg * s + i);
            read_ob(t, cc * wo + m, got);
            checks++;
            if (got != exp) begin
              failures++;
              if (failures < 20) $display("FAIL %s tile %0d ch %0d row %0d col %0d: %0d expected %0d",
                                          name, t, ch, hr, mg, got, exp);
            end
          end
        end
      end
      $display("%s row %0d: %0d MACs in %0d clocks", name, h0 + r, macs, t1 - t0);
    end
  endtask

