// tb_dcn_accel: end-to-end test of the accelerator at its default size
// (16x32 PEs, 128 KB input, 256 KB output, 256 KB weight, 32 KB index and
// 64 KB instruction buffers).
//
// It runs one deformable convolution through the design and checks every
// result against values computed here:
//   1. a 12x12x256 input map is stored parity-banked in the input buffer and
//      20 fractional sampling indices in the index buffer;
//   2. OP_BLI interpolates all 256 channels (two 128-channel groups) of the
//      20 deformed features into the output buffer, and writes the
//      coefficients to the weight buffer;
//   3. OP_CONV with swap=1 (fusion) convolves the deformed features straight
//      out of the output buffer and writes the results to the input buffer;
//   4. a standard OP_CONV (swap=0) from the input buffer to the output buffer;
//   5. OP_TDT builds the tile dependency table for a 40x40 map cut into 5x5
//      tiles from 300 indices, and OP_SCHED schedules it with 5 on-chip input
//      tiles, while a BLI command runs at the same time; both scheduler
//      streams are compared with a reference model of the algorithm.
// Cycle counts of the BLI (one 128-channel word per cycle) and convolution
// commands are checked. Each mechanism (standard convolution, fused
// convolution, BLI, TDT update, loaded/seq/last input tiles, eviction,
// scheduling overlapped with execution) is counted and must occur.
module tb_dcn_accel;
  import dcn_pkg::*;
  localparam int ROWS = 16, COLS = 32, CH = 128, WB = 1024;
  localparam int IN_AW = 8, OUT_AW = 11, WGT_AW = 13, IDX_AW = 13, INST_AW = 14;
  localparam int HM = 12, NC = 256, NG = 2, NB = 20;

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
  int n_conv = 0, n_fused = 0, n_bli = 0, n_tdt = 0;
  int n_hit = 0, n_seq = 0, n_last = 0, n_evict = 0, n_overlap = 0;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- reference data ----------------
  feat_t fmap [NC][HM][HM];       // channel, y (row, beta), x (column, alpha)
  int    ia [NB], ib [NB];        // indices, 6 fraction bits
  feat_t bli_ref [NB][NC];

  function automatic int bank_of(int y, int x);
    if (y % 2 == 1 && x % 2 == 1) return 0;
    if (y % 2 == 1) return 1;
    if (x % 2 == 0) return 2;
    return 3;
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
    while (!cmd_ready) begin
      if (sched_busy) n_overlap++;
      @(negedge clk); cycles++;
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
    sched_out_ready <= ($urandom % 2) == 0;
    sched_in_ready  <= ($urandom % 3) != 0;
  end

  always @(posedge clk) if (rst_n) begin
    if (sched_out_valid && sched_out_ready) begin
      if (exp_out.size() == 0) chk(0, "unexpected output tile");
      else chk(int'(sched_out_id) == exp_out.pop_front(), "scheduled output tile");
    end
    if (sched_in_valid && sched_in_ready) begin
      if (exp_in.size() == 0) chk(0, "unexpected input tile");
      else begin
        ent_t e;
        e = exp_in.pop_front();
        chk(sched_in_id == e.id && sched_in_part == e.part && sched_in_hit == (e.part == 0) &&
            sched_in_evict == e.evict && (!e.evict || sched_in_victim == e.victim),
            $sformatf("input tile id %0d part %0d exp %0d/%0d", sched_in_id, sched_in_part, e.id, e.part));
      end
      case (sched_in_part) 2'd0: n_hit++; 2'd1: n_seq++; default: n_last++; endcase
      if (sched_in_evict) n_evict++;
    end
  end

  // ---------------- main sequence ----------------
  initial begin
    int cyc;
    cmd_t cm;
    feat_t A [ROWS][32];
    feat_t Bw [32][COLS];
    logic [WB-1:0] exp_word;

    cmd_valid = 0; cmd = '0; host_idle();
    ib_wbank = 0; ib_waddr = 0; ib_wdata = 0; ib_raddr = 0;
    wb_waddr = 0; wb_wdata = 0; wb_raddr = 0; xb_waddr = 0; xb_wdata = '0; ob_raddr = 0;
    inst_waddr = 0; inst_wdata = 0; inst_raddr = 0;
    cfg_grid = 5; cfg_ntiles = 25; cfg_onchip = 5;
    for (int k = 0; k < GRID_MAX - 1; k++) begin
      cfg_bound_a[k] = IDX_INT'((k + 1) * 8); cfg_bound_b[k] = IDX_INT'((k + 1) * 8);
    end
    repeat (3) @(posedge clk); rst_n = 1;

    // ---- instruction buffer round trip ----
    @(negedge clk); inst_we = 1; inst_waddr = 14'd77; inst_wdata = 32'hC0DE_1234;
    @(negedge clk); inst_we = 0; inst_raddr = 14'd77;
    @(negedge clk); chk(inst_rdata == 32'hC0DE_1234, "instruction buffer");

    // ---- input map, parity banked ----
    foreach (fmap[c, y, x]) fmap[c][y][x] = feat_t'($urandom);
    for (int y = 0; y < HM; y++)
      for (int x = 0; x < HM; x++)
        for (int g = 0; g < NG; g++) begin
          @(negedge clk);
          ib_we = 1; ib_wbank = 2'(bank_of(y, x));
          ib_waddr = IN_AW'(((y / 2) * (HM / 2) + (x / 2)) * NG + g);
          for (int k = 0; k < CH; k++) ib_wdata[k*8 +: 8] = fmap[g*CH + k][y][x];
        end
    // ---- indices ----
    for (int m = 0; m < NB; m++) begin
      ia[m] = $urandom % ((HM - 1) * 64);
      ib[m] = $urandom % ((HM - 1) * 64);
      if (m == 3) ia[m] = ia[m] & ~63;          // an integer index
      @(negedge clk);
      ib_we = 0;
      xb_we = 1; xb_waddr = IDX_AW'(m); xb_wdata.alpha = idx_t'(ia[m]); xb_wdata.beta = idx_t'(ib[m]);
    end
    @(negedge clk); host_idle();

    // ---- BLI reference ----
    for (int m = 0; m < NB; m++) begin
      int x0, y0, da, db, gm, e, mu, th;
      x0 = ia[m] >> 6; y0 = ib[m] >> 6; da = ia[m] % 64; db = ib[m] % 64;
      gm = (da * db) >> 6; th = da - gm; mu = db - gm; e = 64 - da - db + gm;
      for (int c = 0; c < NC; c++) begin
        int s;
        s = e * fmap[c][y0][x0] + mu * fmap[c][y0+1][x0] + th * fmap[c][y0][x0+1] + gm * fmap[c][y0+1][x0+1];
        bli_ref[m][c] = feat_t'(s >>> 6);
      end
    end

    // ---- 2. BLI ----
    cm = '0; cm.op = OP_BLI; cm.len = 16'(NB); cm.a_base = 0; cm.o_base = 0; cm.w_base = 16'd100;
    cm.cfg_i = 16'(NG); cm.cfg_j = 16'(HM / 2); cm.cfg_t0 = 0;
    issue(cm, cyc);
    n_bli++;
    chk(cyc <= NB * NG + 10, $sformatf("BLI took %0d cycles for %0d words", cyc, NB * NG));
    $display("BLI: %0d words of 128 channels in %0d cycles", NB * NG, cyc);
    for (int m = 0; m < NB; m++)
      for (int g = 0; g < NG; g++) begin
        @(negedge clk); ob_raddr = OUT_AW'(m * NG + g);
        @(negedge clk);
        for (int k = 0; k < CH; k++) exp_word[k*8 +: 8] = bli_ref[m][g*CH + k];
        chk(ob_rdata == exp_word, $sformatf("deformed feature %0d group %0d", m, g));
      end
    for (int m = 0; m < NB; m++) begin
      int da, db, gm;
      da = ia[m] % 64; db = ib[m] % 64; gm = (da * db) >> 6;
      @(negedge clk); wb_raddr = WGT_AW'(100 + m);
      @(negedge clk);
      chk(wb_rdata[31:0] == {8'(64 - da - db + gm), 8'(db - gm), 8'(da - gm), 8'(gm)},
          $sformatf("coefficients of index %0d in weight buffer", m));
    end

    // ---- 3. fused convolution: deformed features from the output buffer ----
    begin
      localparam int K = 16;
      acc_t s;
      for (int k = 0; k < K; k++) begin
        for (int cc = 0; cc < COLS; cc++) Bw[k][cc] = feat_t'($urandom);
        @(negedge clk); wb_we = 1; wb_waddr = WGT_AW'(500 + k);
        for (int cc = 0; cc < COLS; cc++) wb_wdata[cc*8 +: 8] = Bw[k][cc];
      end
      @(negedge clk); host_idle();
      // feature row r at step k = output word k/8, byte (k%8)*16 + r
      for (int r = 0; r < ROWS; r++)
        for (int k = 0; k < K; k++) begin
          int w, byt, m, g;
          w = k / 8; byt = (k % 8) * 16 + r; m = w / NG; g = w % NG;
          A[r][k] = bli_ref[m][g * CH + byt];
        end
      cm = '0; cm.op = OP_CONV; cm.swap = 1; cm.len = 16'(K); cm.a_base = 0; cm.w_base = 16'd500;
      cm.o_base = 16'd600; cm.shift = 5'd6;
      issue(cm, cyc);
      n_fused++;
      chk(cyc <= K + ROWS + COLS + 2 + ROWS + 2, $sformatf("fused conv took %0d cycles", cyc));
      // results: word o_base+q -> input buffer bank (600+q)%4, address (600+q)/4
      @(negedge clk); ib_raddr = IN_AW'(150);
      @(negedge clk);
      for (int q = 0; q < 4; q++)
        for (int sl = 0; sl < 4; sl++)
          for (int cc = 0; cc < COLS; cc++) begin
            s = 0;
            for (int k = 0; k < K; k++) s += acc_t'(A[4*q+sl][k]) * acc_t'(Bw[k][cc]);
            chk(ib_rdata[q][(sl*COLS + cc)*8 +: 8] == requant(s, 5'd6),
                $sformatf("fused conv row %0d col %0d", 4*q+sl, cc));
          end
    end

    // ---- 4. standard convolution: input buffer -> output buffer ----
    begin
      localparam int K = 10;
      acc_t s;
      logic [WB-1:0] wd [2];
      for (int r = 0; r < ROWS; r++) for (int k = 0; k < K; k++) A[r][k] = feat_t'($urandom);
      for (int k = 0; k < K; k++) for (int cc = 0; cc < COLS; cc++) Bw[k][cc] = feat_t'($urandom);
      // slices 3200.. : word 400 (bank 0, addr 100) slices 0..7, word 401 (bank 1, addr 100) slices 0..1
      wd[0] = '0; wd[1] = '0;
      for (int k = 0; k < K; k++)
        for (int r = 0; r < ROWS; r++) wd[k / 8][((k % 8) * 16 + r) * 8 +: 8] = A[r][k];
      for (int w = 0; w < 2; w++) begin
        @(negedge clk); ib_we = 1; ib_wbank = 2'(w); ib_waddr = IN_AW'(100); ib_wdata = wd[w];
      end
      for (int k = 0; k < K; k++) begin
        @(negedge clk); ib_we = 0; wb_we = 1; wb_waddr = WGT_AW'(700 + k);
        for (int cc = 0; cc < COLS; cc++) wb_wdata[cc*8 +: 8] = Bw[k][cc];
      end
      @(negedge clk); host_idle();
      cm = '0; cm.op = OP_CONV; cm.swap = 0; cm.len = 16'(K); cm.a_base = 16'd3200; cm.w_base = 16'd700;
      cm.o_base = 16'd200; cm.shift = 5'd4;
      issue(cm, cyc);
      n_conv++;
      chk(cyc <= K + ROWS + COLS + 2 + ROWS + 2, $sformatf("conv took %0d cycles", cyc));
      $display("standard conv K=%0d: %0d cycles", K, cyc);
      for (int q = 0; q < 4; q++) begin
        @(negedge clk); ob_raddr = OUT_AW'(200 + q);
        @(negedge clk);
        for (int sl = 0; sl < 4; sl++)
          for (int cc = 0; cc < COLS; cc++) begin
            s = 0;
            for (int k = 0; k < K; k++) s += acc_t'(A[4*q+sl][k]) * acc_t'(Bw[k][cc]);
            chk(ob_rdata[(sl*COLS + cc)*8 +: 8] == requant(s, 5'd4),
                $sformatf("conv row %0d col %0d", 4*q+sl, cc));
          end
      end
    end

    // ---- 5. TDT and scheduling ----
    begin
      localparam int PT = 12, NTL = 25, NI = PT * NTL;
      foreach (dref[t]) dref[t] = '0;
      for (int n = 0; n < NI; n++) begin
        int a, b, r, cl;
        a = $urandom % (40 * 64); b = $urandom % (40 * 64);
        // keep most of a tile's indices near it so that reuse exists
        if ((n % 3) != 0) begin
          int t, tr, tc;
          t = n / PT; tr = t / 5; tc = t % 5;
          a = ((tr * 8) + ($urandom % 12)) * 64; b = ((tc * 8) + ($urandom % 12)) * 64;
          if (a >= 40 * 64) a = 39 * 64;
          if (b >= 40 * 64) b = 39 * 64;
        end
        r = (a / 64) / 8; cl = (b / 64) / 8;
        dref[n / PT][r * 5 + cl] = 1'b1;
        @(negedge clk); xb_we = 1; xb_waddr = IDX_AW'(1000 + n);
        xb_wdata.alpha = idx_t'(a); xb_wdata.beta = idx_t'(b);
      end
      @(negedge clk); host_idle();
      cm = '0; cm.op = OP_TDT; cm.len = 16'(NI); cm.a_base = 16'd1000; cm.per_tile = 16'(PT);
      issue(cm, cyc);
      n_tdt += NI;
      chk(cyc <= NI + 6, $sformatf("TDT build took %0d cycles for %0d indices", cyc, NI));
      for (int t = 0; t < 64; t++) chk(dut.dep[t] == dref[t], $sformatf("TDT entry %0d", t));
      sched_model(NTL, 5);
      cm = '0; cm.op = OP_SCHED;
      issue(cm, cyc);
      // a BLI command runs while the scheduler works
      cm = '0; cm.op = OP_BLI; cm.len = 16'(NB); cm.a_base = 0; cm.o_base = 16'd1000; cm.w_base = 16'd100;
      cm.cfg_i = 16'(NG); cm.cfg_j = 16'(HM / 2); cm.cfg_t0 = 0;
      issue(cm, cyc);
      n_bli++;
      @(negedge clk); ob_raddr = OUT_AW'(1000 + 7);
      @(negedge clk);
      for (int k = 0; k < CH; k++) exp_word[k*8 +: 8] = bli_ref[3][CH + k];
      chk(ob_rdata == exp_word, "BLI during scheduling");
      cyc = 0;
      while (!sched_done && cyc < 100000) begin @(negedge clk); cyc++; end
      repeat (2) @(negedge clk);
      chk(sched_done, "scheduler finished");
      chk(exp_out.size() == 0 && exp_in.size() == 0, "all scheduled tiles seen");
    end

    $display("mechanisms: conv %0d fused %0d bli %0d tdt %0d loaded %0d seq %0d last %0d evict %0d overlap %0d",
             n_conv, n_fused, n_bli, n_tdt, n_hit, n_seq, n_last, n_evict, n_overlap);
    chk(n_conv > 0, "standard convolution happened");
    chk(n_fused > 0, "fused convolution happened");
    chk(n_bli > 0, "BLI happened");
    chk(n_tdt > 0, "TDT update happened");
    chk(n_hit > 0, "on-chip (loaded) input tile issued");
    chk(n_seq > 0, "sequential input tile issued");
    chk(n_last > 0, "last-load input tile issued");
    chk(n_evict > 0, "FIFO eviction happened");
    chk(n_overlap > 0, "scheduling overlapped execution");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
