// tb_dwconv_ctrl -- ConvDK sequencer against the published worked example:
// kw = 3, s = 2, N = 30 (a one-row kernel here so that the 92 IA columns fit
// a TRF row). The expected order is
//   a=0: n = 0,2,..,28  -> m = 0,3,..,42
//   a=1: n = 1,3,..,29  -> m = 2,5,..,44
//   a=2: n = 0,2,..,28  -> m = 1,4,..,43
// The test checks that order, the enabled rows and shift of each MAC, the
// ten-clock spacing of MACs, the OB address of each result eleven clocks
// after its MAC, the kernel write schedule (block 0, then all duplicates in
// one clock), and a second run with a 5x5 kernel split in two row groups.
// Each run uses a random OB base address.
module tb_dwconv_ctrl;
  import convdk_pkg::*;
  localparam int ROWS = TM_ROWS;
  logic clk = 0, rst_n = 0, start = 0, load_kernels = 0;
  tile_cfg_t cfg_in;
  logic [5:0] ob_base;
  logic busy, done, tm_we, trf_load, mac_start, mac_clear, ob_we;
  logic [ROWS-1:0] tm_wl, mac_row_en;
  logic [5:0] wb_raddr, ob_waddr;
  logic [2:0] mac_a;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  dwconv_ctrl #(.ROWS(ROWS), .PAR(15)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  // expected MAC list
  int exp_n [$], exp_m [$], exp_a [$], exp_g [$], exp_c [$];
  int issue_time [$], wr_addr [$], wr_time [$];
  int kw_cycles;
  int cur_base;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // record MACs, OB writes and kernel writes as they happen
  int mac_idx;
  logic [ROWS-1:0] exp_en;
  int cur_kw, cur_kh, cur_tw, cur_cw, cur_wo, rpg;
  always @(negedge clk) if (rst_n) begin
    if (mac_start) begin
      if (mac_idx < exp_n.size()) begin
        exp_en = '0;
        for (int j = 0; j < cur_kh; j++)
          if (j / rpg == exp_g[mac_idx])
            for (int i = 0; i < cur_kw; i++)
              exp_en[j * cur_tw + exp_c[mac_idx] * cur_cw + exp_n[mac_idx] * cur_kw + i] = 1'b1;
        chk(int'(mac_a) == exp_a[mac_idx], $sformatf("MAC %0d shift %0d expected %0d", mac_idx, mac_a, exp_a[mac_idx]));
        chk(mac_row_en == exp_en, $sformatf("MAC %0d enables (n=%0d)", mac_idx, exp_n[mac_idx]));
        chk(mac_clear == (exp_g[mac_idx] == 0), $sformatf("MAC %0d clear", mac_idx));
        if (mac_idx > 0) chk(cyc - issue_time[$] >= 10, "MACs at least ten clocks apart");
      end else chk(0, "extra MAC");
      issue_time.push_back(cyc);
      mac_idx++;
    end
    if (ob_we) begin
      wr_addr.push_back(int'(ob_waddr) - cur_base);
      wr_time.push_back(cyc);
    end
    if (tm_we) kw_cycles++;
  end

  task automatic run(tile_cfg_t cfg, int nmac_expected, bit kl);
    mac_idx = 0;
    issue_time.delete(); wr_addr.delete(); wr_time.delete();
    kw_cycles = 0;
    cur_kw = int'(cfg.kw); cur_kh = int'(cfg.kh); cur_tw = int'(cfg.tw); cur_cw = int'(cfg.cw);
    cur_wo = int'(cfg.w_out);
    rpg = 15 / cur_kw;
    cur_base = int'($urandom % 16);
    cfg_in = cfg; ob_base = 6'(cur_base); load_kernels = kl;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    chk(mac_idx == nmac_expected, $sformatf("%0d MACs, expected %0d", mac_idx, nmac_expected));
  endtask

  initial begin
    tile_cfg_t cfg;
    int nmac, ng;
    cfg_in = '0; ob_base = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // ---- published example: kw=3, s=2, N=30, 45 output columns
    cfg = '{kh: 3'd1, kw: 3'd3, s: 3'd2, tw: 8'd180, cw: 8'd92, n_ch: 4'd1, w_out: 8'd45, n_dup: 8'd30};
    for (int n = 0; n < 30; n += 2) begin exp_n.push_back(n); exp_m.push_back(3 * n / 2); exp_a.push_back(0); exp_g.push_back(0); exp_c.push_back(0); end
    for (int n = 1; n < 30; n += 2) begin exp_n.push_back(n); exp_m.push_back((3 * n + 1) / 2); exp_a.push_back(1); exp_g.push_back(0); exp_c.push_back(0); end
    for (int n = 0; n < 30; n += 2) begin exp_n.push_back(n); exp_m.push_back((3 * n + 2) / 2); exp_a.push_back(2); exp_g.push_back(0); exp_c.push_back(0); end
    chk(exp_m[15] == 2 && exp_m[29] == 44 && exp_m[30] == 1 && exp_m[44] == 43, "reference list matches the published m values");
    run(cfg, 45, 1);
    chk(kw_cycles == 6, $sformatf("kernel write %0d clocks, expected 6 (3 weights x 2)", kw_cycles));
    chk(wr_addr.size() == 45, "45 OB writes");
    for (int i = 0; i < 45 && i < wr_addr.size(); i++) begin
      chk(wr_addr[i] == exp_m[i], $sformatf("OB write %0d addr %0d expected %0d", i, wr_addr[i], exp_m[i]));
      chk(wr_time[i] - issue_time[i] == 11, $sformatf("OB write %0d in clock %0d after the MAC issue clock", i, wr_time[i] - issue_time[i]));
    end
    // ---- 5x5 kernel, stride 1, two channels side by side, two row groups
    exp_n.delete(); exp_m.delete(); exp_a.delete(); exp_g.delete(); exp_c.delete();
    cfg = '{kh: 3'd5, kw: 3'd5, s: 3'd1, tw: 8'd36, cw: 8'd14, n_ch: 4'd2, w_out: 8'd10, n_dup: 8'd2};
    ng = 2;
    nmac = 0;
    for (int a = 0; a < 5; a++)
      for (int n = 0; n < 2; n++)
        if (n * 5 + a < 10)
          for (int c = 0; c < 2; c++)
            for (int g = 0; g < ng; g++) begin
              exp_n.push_back(n); exp_m.push_back(n * 5 + a); exp_a.push_back(a); exp_g.push_back(g); exp_c.push_back(c);
              nmac++;
            end
    run(cfg, nmac, 1);
    chk(kw_cycles == 2 * 25 * 2, $sformatf("kernel write %0d clocks, expected 100", kw_cycles));
    chk(wr_addr.size() == 20, $sformatf("%0d OB writes, expected 20", wr_addr.size()));
    // ---- same layer again without reloading the kernels
    run(cfg, nmac, 0);
    chk(kw_cycles == 0, "no kernel write when load_kernels = 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
