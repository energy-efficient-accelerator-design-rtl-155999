// tb_tile_scheduler: self-checking test of the runtime tile scheduler.
// A random tile dependency table is scheduled and the two output streams are
// compared, entry by entry, with a reference model of the bit-vector
// algorithm written here: output tile order (most dependencies first, then
// most overlap with the current tile, lower ID on ties), input tiles in the
// order loadedVec, seqLoadVec, lastLoadVec (ascending IDs inside each), the
// hit flag, and FIFO replacement with M on-chip tiles (evict flag and victim).
// Runs with random stalls on both streams and once with no stalls, where the
// cycle count is checked against the pre-scheduling bound: each output tile
// costs at most max(N, its input tiles) plus a few cycles, not their sum.
module tb_tile_scheduler;
  import dcn_pkg::*;
  localparam int NT = 64, TW = 6;
  logic clk = 0, rst_n = 0;
  logic start, out_valid, out_ready, in_valid, in_ready, in_hit, in_evict, busy, done;
  logic [TW:0] cfg_ntiles, cfg_onchip;
  logic [NT-1:0] dep [NT];
  logic [TW-1:0] out_id, in_id, in_victim;
  logic [1:0] in_part;
  int checks = 0, failures = 0;
  int n_hit = 0, n_seq = 0, n_last = 0, n_evict = 0;

  tile_scheduler dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  typedef struct packed { logic [TW-1:0] id; logic [1:0] part; logic evict; logic [TW-1:0] victim; } ent_t;
  int     exp_out [$];
  ent_t   exp_in  [$];
  int     bound;

  function automatic int pc(logic [NT-1:0] v);
    int n = 0;
    for (int k = 0; k < NT; k++) n += v[k];
    return n;
  endfunction

  task automatic model(input int n, input int m);
    logic [NT-1:0] os, oc, cv, nv, ld, ls, sq;
    int fifo [$];
    bit have = 0;
    int curr = 0;
    exp_out.delete(); exp_in.delete();
    os = '0; oc = '0;
    for (int k = 0; k < n; k++) os[k] = 1;
    bound = 20;
    forever begin
      int best = -1, bc = -1;
      for (int i = 0; i < n; i++) if (os[i]) begin
        int cnt;
        cnt = pc((have ? dep[curr] : {NT{1'b1}}) & dep[i]);
        if (cnt > bc) begin bc = cnt; best = i; end
      end
      if (best < 0) break;
      exp_out.push_back(best);
      cv = have ? dep[curr] : '0;
      nv = dep[best];
      ld = oc & nv;
      ls = cv & nv & ~ld;
      sq = nv & ~ld & ~ls;
      bound += (pc(nv) > n ? pc(nv) : n) + 8;
      for (int p = 0; p < 3; p++) begin
        logic [NT-1:0] v;
        v = (p == 0) ? ld : (p == 1) ? sq : ls;
        for (int k = 0; k < NT; k++) if (v[k]) begin
          ent_t e;
          e.id = TW'(k); e.part = 2'(p); e.evict = 0; e.victim = '0;
          if (p != 0) begin
            if (fifo.size() >= m) begin
              e.evict = 1; e.victim = TW'(fifo.pop_front()); oc[e.victim] = 0;
            end
            fifo.push_back(k); oc[k] = 1;
          end
          exp_in.push_back(e);
        end
      end
      os[best] = 0; curr = best; have = 1;
    end
  endtask

  bit stall;
  always @(negedge clk) begin
    out_ready <= stall ? ($urandom % 3 == 0) : 1'b1;
    in_ready  <= stall ? ($urandom % 2 == 0) : 1'b1;
  end

  // stream monitors
  int got_out, got_in;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      if (exp_out.size() == 0) chk(0, "unexpected output tile");
      else chk(int'(out_id) == exp_out.pop_front(), $sformatf("output tile %0d", got_out));
      got_out++;
    end
    if (in_valid && in_ready) begin
      ent_t e;
      if (exp_in.size() == 0) chk(0, "unexpected input tile");
      else begin
        e = exp_in.pop_front();
        chk(in_id == e.id && in_part == e.part && in_hit == (e.part == 0) &&
            in_evict == e.evict && (!e.evict || in_victim == e.victim),
            $sformatf("input tile %0d: got id %0d part %0d ev %0d/%0d exp id %0d part %0d ev %0d/%0d",
                      got_in, in_id, in_part, in_evict, in_victim, e.id, e.part, e.evict, e.victim));
      end
      case (in_part) 2'd0: n_hit++; 2'd1: n_seq++; default: n_last++; endcase
      if (in_evict) n_evict++;
      got_in++;
    end
  end

  task automatic run(input int n, input int m, input int density, input bit st);
    int cyc;
    stall = st;
    foreach (dep[t]) begin
      dep[t] = '0;
      if (t < n) for (int k = 0; k < n; k++) dep[t][k] = ($urandom % 100) < density;
    end
    model(n, m);
    cfg_ntiles = (TW+1)'(n); cfg_onchip = (TW+1)'(m);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (!done && cyc < 200000) begin @(negedge clk); cyc++; end
    chk(done, "done");
    chk(exp_out.size() == 0 && exp_in.size() == 0, "all expected entries seen");
    if (!st) chk(cyc <= bound, $sformatf("cycles %0d within pre-scheduling bound %0d", cyc, bound));
  endtask

  initial begin
    start = 0; cfg_ntiles = 0; cfg_onchip = 0; stall = 0;
    foreach (dep[t]) dep[t] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    run(25, 6, 30, 1);
    run(25, 6, 30, 0);
    run(9, 3, 50, 1);
    run(64, 20, 15, 0);
    run(16, 16, 40, 1);
    chk(n_hit > 0 && n_seq > 0 && n_last > 0 && n_evict > 0, "all three queues and eviction used");
    $display("queues: loaded %0d seq %0d last %0d, evictions %0d", n_hit, n_seq, n_last, n_evict);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
