// tb_workload_vgg19: one deformable layer of the VGG19-3 benchmarks on the
// full-size accelerator.
//
// The deformable layers of VGG19-3 work on 14x14 maps with 512 channels
// (four 128-channel words per pixel), which the input buffer holds whole:
// 49 pixels per parity bank times 4 words = 196 of 256 words. The test
//   1. stores a random 14x14x512 map parity-banked in the input buffer;
//   2. DCN-I: one sampling index per output pixel (pixel position plus a
//      random offset of up to +-2 pixels), 196 indices, OP_BLI over all 512
//      channels (784 output words), every channel checked;
//   3. DCN-II: one index per kernel tap, 9 per pixel, 1764 indices in the
//      index buffer; the first 512 of them are interpolated in one OP_BLI
//      (2048 words, the whole output buffer) and checked;
//   4. builds the tile dependency table from all 1764 DCN-II indices with the
//      map cut into 7x7 tiles of 2x2 pixels (36 indices per output tile) and
//      schedules the 49 tiles with 9 input tiles on chip; both scheduler
//      streams are checked against a model of the scheduling algorithm.
// BLI throughput (one 128-channel word per cycle plus pipeline fill) and the
// TDT build time (one index per cycle) are checked too.
module tb_workload_vgg19;
  import dcn_pkg::*;
  localparam int CH = 128, WB = 1024;
  localparam int IN_AW = 8, OUT_AW = 11, WGT_AW = 13, IDX_AW = 13, INST_AW = 14;
  localparam int HM = 14, NC = 512, NG = 4;
  localparam int N1 = HM * HM, N2 = HM * HM * 9, NB2 = 512;
  localparam int GRID = 7, NTL = GRID * GRID, PT = 4 * 9, ONCHIP = 9;

  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready;
  cmd_t cmd;
  logic ib_we; logic [1:0] ib_wbank; logic [IN_AW-1:0] ib_waddr, ib_raddr;
  logic [WB-1:0] ib_wdata; logic [WB-1:0] ib_rdata [4];
  logic wb_we; logic [WGT_AW-1:0] wb_waddr, wb_raddr; logic [255:0] wb_wdata, wb_rdata;
  logic xb_we; logic [IDX_AW-1:0] xb_waddr; idx_pair_t xb_wdata;
  logic [OUT_AW-1:0] ob_raddr; logic [WB-1:0] ob_rdata;
  logic inst_we; logic [INST_AW-1:0] inst_waddr, inst_raddr; logic [31:0] inst_wdata, inst_rdata;
  logic [3:0] cfg_grid;
  logic [IDX_INT-1:0] cfg_bound_a [GRID_MAX-1];
  logic [IDX_INT-1:0] cfg_bound_b [GRID_MAX-1];
  logic [TID_W:0] cfg_ntiles, cfg_onchip;
  logic sched_out_valid, sched_out_ready, sched_in_valid, sched_in_hit, sched_in_evict, sched_in_ready;
  logic [TID_W-1:0] sched_out_id, sched_in_id, sched_in_victim;
  logic [1:0] sched_in_part;
  logic sched_busy, sched_done;

  dcn_accel dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  feat_t fmap [NC][HM][HM];        // channel, y (row, beta), x (column, alpha)
  int    ia1 [N1], ib1 [N1];       // DCN-I indices, 6 fraction bits
  int    ia2 [N2], ib2 [N2];       // DCN-II indices, ordered by output tile

  function automatic int bank_of(int y, int x);
    if (y % 2 == 1 && x % 2 == 1) return 0;
    if (y % 2 == 1) return 1;
    if (x % 2 == 0) return 2;
    return 3;
  endfunction

  // pixel coordinate plus a random offset of up to +-2 pixels, kept inside
  // the map so that the ceiling neighbour exists
  function automatic int sample(int p);
    int v;
    v = p * 64 + int'($urandom % 257) - 128;
    if (v < 0) v = 0;
    if (v > (HM - 1) * 64 - 1) v = (HM - 1) * 64 - 1;
    return v;
  endfunction

  function automatic feat_t bli(int a, int b, int c);
    int x0, y0, da, db, gm, e, mu, th, s;
    x0 = a >> 6; y0 = b >> 6; da = a % 64; db = b % 64;
    gm = (da * db) >> 6; th = da - gm; mu = db - gm; e = 64 - da - db + gm;
    s = e * fmap[c][y0][x0] + mu * fmap[c][y0+1][x0] + th * fmap[c][y0][x0+1] + gm * fmap[c][y0+1][x0+1];
    return feat_t'(s >>> 6);
  endfunction

  task automatic host_idle();
    ib_we = 0; wb_we = 0; xb_we = 0; inst_we = 0;
  endtask

  task automatic issue(input cmd_t cm, output int cycles);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = cm; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    cycles = 1;
    while (!cmd_ready) begin @(negedge clk); cycles++; end
  endtask

  task automatic check_bli(input int n, input bit second);
    logic [WB-1:0] exp_word;
    for (int m = 0; m < n; m++)
      for (int g = 0; g < NG; g++) begin
        @(negedge clk); ob_raddr = OUT_AW'(m * NG + g);
        @(negedge clk);
        for (int k = 0; k < CH; k++)
          exp_word[k*8 +: 8] = second ? bli(ia2[m], ib2[m], g * CH + k) : bli(ia1[m], ib1[m], g * CH + k);
        chk(ob_rdata == exp_word, $sformatf("%s deformed feature %0d group %0d",
                                            second ? "DCN-II" : "DCN-I", m, g));
      end
  endtask

  function automatic int pc(logic [63:0] v);
    int n = 0;
    for (int k = 0; k < 64; k++) n += v[k];
    return n;
  endfunction

  // ---------------- scheduler reference ----------------
  typedef struct packed { logic [5:0] id; logic [1:0] part; logic evict; logic [5:0] victim; } ent_t;
  int   exp_out [$];
  ent_t exp_in  [$];
  logic [63:0] dref [64];
  int   n_out = 0, n_in = 0;

  task automatic sched_model(input int n, input int m);
    logic [63:0] os, oc, cv, nv, ld, ls, sq;
    int fifo [$];
    bit have = 0;
    int curr = 0;
    os = '0; oc = '0;
    for (int k = 0; k < n; k++) os[k] = 1;
    forever begin
      int best = -1, bc = -1;
      for (int i = 0; i < n; i++) if (os[i]) begin
        int cnt;
        cnt = pc((have ? dref[curr] : 64'hFFFF_FFFF_FFFF_FFFF) & dref[i]);
        if (cnt > bc) begin bc = cnt; best = i; end
      end
      if (best < 0) break;
      exp_out.push_back(best);
      cv = have ? dref[curr] : '0;
      nv = dref[best];
      ld = oc & nv; ls = cv & nv & ~ld; sq = nv & ~ld & ~ls;
      for (int p = 0; p < 3; p++) begin
        logic [63:0] v;
        v = (p == 0) ? ld : (p == 1) ? sq : ls;
        for (int k = 0; k < 64; k++) if (v[k]) begin
          ent_t e;
          e.id = 6'(k); e.part = 2'(p); e.evict = 0; e.victim = '0;
          if (p != 0) begin
            if (fifo.size() >= m) begin e.evict = 1; e.victim = 6'(fifo.pop_front()); oc[e.victim] = 0; end
            fifo.push_back(k); oc[k] = 1;
          end
          exp_in.push_back(e);
        end
      end
      os[best] = 0; curr = best; have = 1;
    end
  endtask

  always @(negedge clk) begin
    sched_out_ready <= ($urandom % 4) != 0;
    sched_in_ready  <= ($urandom % 4) != 0;
  end

  always @(posedge clk) if (rst_n) begin
    if (sched_out_valid && sched_out_ready) begin
      n_out++;
      if (exp_out.size() == 0) chk(0, "unexpected output tile");
      else chk(int'(sched_out_id) == exp_out.pop_front(), "scheduled output tile");
    end
    if (sched_in_valid && sched_in_ready) begin
      n_in++;
      if (exp_in.size() == 0) chk(0, "unexpected input tile");
      else begin
        ent_t e;
        e = exp_in.pop_front();
        chk(sched_in_id == e.id && sched_in_part == e.part && sched_in_hit == (e.part == 0) &&
            sched_in_evict == e.evict && (!e.evict || sched_in_victim == e.victim),
            $sformatf("input tile id %0d part %0d exp %0d/%0d", sched_in_id, sched_in_part, e.id, e.part));
      end
    end
  end

  initial begin
    int cyc;
    cmd_t cm;

    cmd_valid = 0; cmd = '0; host_idle();
    ib_wbank = 0; ib_waddr = 0; ib_wdata = 0; ib_raddr = 0;
    wb_waddr = 0; wb_wdata = 0; wb_raddr = 0; xb_waddr = 0; xb_wdata = '0; ob_raddr = 0;
    inst_waddr = 0; inst_wdata = 0; inst_raddr = 0;
    cfg_grid = 4'(GRID); cfg_ntiles = (TID_W+1)'(NTL); cfg_onchip = (TID_W+1)'(ONCHIP);
    for (int k = 0; k < GRID_MAX - 1; k++) begin
      cfg_bound_a[k] = IDX_INT'((k + 1) * 2); cfg_bound_b[k] = IDX_INT'((k + 1) * 2);
    end
    repeat (3) @(posedge clk); rst_n = 1;

    // ---- 1. input map ----
    foreach (fmap[c, y, x]) fmap[c][y][x] = feat_t'($urandom);
    for (int y = 0; y < HM; y++)
      for (int x = 0; x < HM; x++)
        for (int g = 0; g < NG; g++) begin
          @(negedge clk);
          ib_we = 1; ib_wbank = 2'(bank_of(y, x));
          ib_waddr = IN_AW'(((y / 2) * (HM / 2) + (x / 2)) * NG + g);
          for (int k = 0; k < CH; k++) ib_wdata[k*8 +: 8] = fmap[g*CH + k][y][x];
        end
    @(negedge clk); host_idle();

    // ---- 2. DCN-I ----
    for (int p = 0; p < N1; p++) begin
      ia1[p] = sample(p % HM); ib1[p] = sample(p / HM);
      @(negedge clk); xb_we = 1; xb_waddr = IDX_AW'(p);
      xb_wdata.alpha = idx_t'(ia1[p]); xb_wdata.beta = idx_t'(ib1[p]);
    end
    @(negedge clk); host_idle();
    cm = '0; cm.op = OP_BLI; cm.len = 16'(N1); cm.a_base = 0; cm.o_base = 0; cm.w_base = 0;
    cm.cfg_i = 16'(NG); cm.cfg_j = 16'(HM / 2); cm.cfg_t0 = 0;
    issue(cm, cyc);
    $display("DCN-I BLI: %0d words in %0d cycles", N1 * NG, cyc);
    chk(cyc <= N1 * NG + 10, $sformatf("DCN-I BLI took %0d cycles", cyc));
    check_bli(N1, 0);

    // ---- 3. DCN-II: indices grouped by output tile (2x2 pixels), 9 taps each ----
    begin
      int n = 0;
      foreach (dref[t]) dref[t] = '0;
      for (int t = 0; t < NTL; t++)
        for (int q = 0; q < 4; q++)
          for (int tap = 0; tap < 9; tap++) begin
            int py, px;
            py = (t / GRID) * 2 + q / 2 + tap / 3 - 1;
            px = (t % GRID) * 2 + q % 2 + tap % 3 - 1;
            ia2[n] = sample(px < 0 ? 0 : px); ib2[n] = sample(py < 0 ? 0 : py);
            dref[t][((ia2[n] >> 6) / 2) * GRID + (ib2[n] >> 6) / 2] = 1'b1;
            @(negedge clk); xb_we = 1; xb_waddr = IDX_AW'(1000 + n);
            xb_wdata.alpha = idx_t'(ia2[n]); xb_wdata.beta = idx_t'(ib2[n]);
            n++;
          end
      @(negedge clk); host_idle();
    end
    cm = '0; cm.op = OP_BLI; cm.len = 16'(NB2); cm.a_base = 16'd1000; cm.o_base = 0; cm.w_base = 0;
    cm.cfg_i = 16'(NG); cm.cfg_j = 16'(HM / 2); cm.cfg_t0 = 0;
    issue(cm, cyc);
    $display("DCN-II BLI: %0d words in %0d cycles", NB2 * NG, cyc);
    chk(cyc <= NB2 * NG + 10, $sformatf("DCN-II BLI took %0d cycles", cyc));
    check_bli(NB2, 1);

    // ---- 4. tile dependency table and scheduling ----
    cm = '0; cm.op = OP_TDT; cm.len = 16'(N2); cm.a_base = 16'd1000; cm.per_tile = 16'(PT);
    issue(cm, cyc);
    $display("TDT: %0d indices in %0d cycles", N2, cyc);
    chk(cyc <= N2 + 6, $sformatf("TDT build took %0d cycles", cyc));
    for (int t = 0; t < 64; t++) chk(dut.dep[t] == dref[t], $sformatf("TDT entry %0d", t));
    sched_model(NTL, ONCHIP);
    cm = '0; cm.op = OP_SCHED;
    issue(cm, cyc);
    cyc = 0;
    while (!sched_done && cyc < 100000) begin @(negedge clk); cyc++; end
    repeat (2) @(negedge clk);
    $display("schedule: %0d output tiles, %0d input tile issues in %0d cycles", n_out, n_in, cyc);
    chk(sched_done, "scheduler finished");
    chk(n_out == NTL, "every output tile scheduled once");
    chk(exp_out.size() == 0 && exp_in.size() == 0, "all scheduled tiles seen");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
