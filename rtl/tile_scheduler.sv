// tile_scheduler: runtime output- and input-tile scheduler driven by the tile
// dependency table.
//
// Output tile scheduling. The first output tile is the one that depends on the
// most input tiles. Each following one is the un-executed output tile whose
// dependency vector shares the most set bits with the current tile's vector.
// The scan examines one table entry per cycle: AND with the current vector
// (all ones for the first pick), NZ bit counter (popcount), and a two-stage
// pipelined running maximum; ties go to the lower tile ID. A chosen tile is
// removed from the un-executed set (OS) at once.
//
// Input tile scheduling, for the chosen tile `next` with `curr` the tile
// chosen before it (none for the first):
//   loadedVec   = OC & B[next]                       already on chip
//   lastLoadVec = B[curr] & B[next] & ~loadedVec
//   seqLoadVec  = B[next] & ~loadedVec & ~lastLoadVec
// Three NZ ID decoders turn the vectors into tile IDs (lowest first, one per
// cycle each) and push them into three queues, which are issued strictly in
// the order loaded, seq, last. On-chip tiles (OC) are replaced first in, first
// out: issuing a tile that is not on chip when cfg_onchip tiles are held
// evicts the oldest one (in_evict/in_victim).
//
// Pre-scheduling: once a tile's ID has been issued on the output stream, the
// scan for the tile after it runs while that tile's input queue drains. The
// split into the three vectors for the new tile waits until the queues are
// empty, so that OC is up to date.
//
// Interface: pulse `start` with cfg_ntiles (N) and cfg_onchip (M) and a built
// table `dep`. Output tile IDs leave on out_valid/out_ready, input tile IDs on
// in_valid/in_ready with in_part (0 loaded, 1 seq, 2 last) and in_hit
// (part 0: no load needed). `done` rises when every tile has been issued and
// stays high until the next start. OC is cleared by start.
//
// The vector formulas, the three queues and FIFO replacement follow the
// paper's algorithm and block diagram; the handshakes, the one-entry-per-cycle
// scan and the tie rule are this design's choices. The handshake assertions
// at the end are disabled during reset, which makes lint see rst_n used both
// asynchronously (flip-flops) and synchronously (assertions); this is expected.
module tile_scheduler
  import dcn_pkg::*;
#(
  parameter int NT = dcn_pkg::NT_MAX,
  parameter int TW = $clog2(NT)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [TW:0]   cfg_ntiles,
  input  logic [TW:0]   cfg_onchip,
  input  logic [NT-1:0] dep [NT],
  output logic          out_valid,
  output logic [TW-1:0] out_id,
  input  logic          out_ready,
  output logic          in_valid,
  output logic [TW-1:0] in_id,
  output logic [1:0]    in_part,
  output logic          in_hit,
  output logic          in_evict,
  output logic [TW-1:0] in_victim,
  input  logic          in_ready,
  output logic          busy,
  output logic          done
);

  typedef enum logic [2:0] {S_IDLE, S_SCAN, S_WAITQ, S_EMIT, S_FINISH} state_e;
  state_e state;

  logic [NT-1:0] os, oc;
  logic          have_curr;
  logic [TW-1:0] curr;

  // ---------------- output tile scan ----------------
  logic [TW:0]   scan_i;
  logic          sa_v, sa_ok;
  logic [TW:0]   sa_cnt;
  logic [TW-1:0] sa_id;
  logic          best_v;
  logic [TW:0]   best_cnt;
  logic [TW-1:0] best_id;

  function automatic logic [TW:0] nz_count(logic [NT-1:0] v);
    logic [TW:0] n;
    n = '0;
    for (int k = 0; k < NT; k++) n += (TW+1)'(v[k]);
    return n;
  endfunction

  function automatic logic [TW-1:0] lowest(logic [NT-1:0] v);
    for (int k = 0; k < NT; k++) if (v[k]) return TW'(k);
    return '0;
  endfunction

  logic [NT-1:0] cur_vec, scan_vec;
  assign cur_vec  = have_curr ? dep[curr] : '1;
  assign scan_vec = cur_vec & dep[scan_i[TW-1:0]];

  // ---------------- decoders and priority queues ----------------
  logic [NT-1:0] dv [3];
  logic [TW-1:0] q  [3][NT];
  logic [TW:0]   wp [3];
  logic [TW:0]   rp [3];
  logic          q_empty [3];
  logic          all_empty;

  for (genvar p = 0; p < 3; p++) begin : g_qe
    assign q_empty[p] = (wp[p] == rp[p]);
  end
  assign all_empty = q_empty[0] && q_empty[1] && q_empty[2] &&
                     dv[0] == '0 && dv[1] == '0 && dv[2] == '0;

  // Issue order: queue 0, then 1 once decoder 0 is finished, then 2.
  logic       sel_v;
  logic [1:0] sel_p;
  always_comb begin
    sel_v = 1'b0;
    sel_p = 2'd0;
    if (!q_empty[0]) begin
      sel_v = 1'b1; sel_p = 2'd0;
    end else if (dv[0] == '0 && !q_empty[1]) begin
      sel_v = 1'b1; sel_p = 2'd1;
    end else if (dv[0] == '0 && dv[1] == '0 && q_empty[1] && !q_empty[2]) begin
      sel_v = 1'b1; sel_p = 2'd2;
    end
  end

  // FIFO of on-chip input tiles for replacement.
  logic [TW-1:0] fifo [NT];
  logic [TW-1:0] f_head;
  logic [TW:0]   f_cnt;

  assign in_valid  = sel_v;
  assign in_part   = sel_p;
  assign in_id     = q[sel_p][rp[sel_p][TW-1:0]];
  assign in_hit    = (sel_p == 2'd0);
  assign in_evict  = sel_v && !in_hit && (f_cnt >= cfg_onchip) && (f_cnt != 0);
  assign in_victim = fifo[f_head];

  logic [TW:0] f_tail;
  assign f_tail = (TW+1)'(f_head) + f_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      os <= '0; oc <= '0;
      have_curr <= 1'b0; curr <= '0;
      scan_i <= '0; sa_v <= 1'b0; sa_ok <= 1'b0; sa_cnt <= '0; sa_id <= '0;
      best_v <= 1'b0; best_cnt <= '0; best_id <= '0;
      out_valid <= 1'b0; out_id <= '0;
      done <= 1'b0;
      f_head <= '0; f_cnt <= '0;
      for (int p = 0; p < 3; p++) begin
        dv[p] <= '0; wp[p] <= '0; rp[p] <= '0;
        for (int k = 0; k < NT; k++) q[p][k] <= '0;
      end
      for (int k = 0; k < NT; k++) fifo[k] <= '0;
    end else begin
      // decoders: one ID per cycle each
      for (int p = 0; p < 3; p++) begin
        if (dv[p] != '0) begin
          q[p][wp[p][TW-1:0]] <= lowest(dv[p]);
          wp[p] <= wp[p] + 1'b1;
          dv[p][lowest(dv[p])] <= 1'b0;
        end
      end

      // issue
      if (sel_v && in_ready) begin
        rp[sel_p] <= rp[sel_p] + 1'b1;
        if (sel_p != 2'd0) begin
          if (in_evict) begin
            oc[fifo[f_head]] <= 1'b0;
            f_head <= (f_head == TW'(NT-1)) ? '0 : f_head + 1'b1;
            fifo[TW'(f_tail % NT)] <= in_id;
          end else begin
            fifo[TW'(f_tail % NT)] <= in_id;
            f_cnt <= f_cnt + 1'b1;
          end
          oc[in_id] <= 1'b1;
        end
      end

      // scan pipeline stage B: running maximum
      if (sa_v && sa_ok && (!best_v || sa_cnt > best_cnt)) begin
        best_v   <= 1'b1;
        best_cnt <= sa_cnt;
        best_id  <= sa_id;
      end

      case (state)
        S_IDLE: begin
          if (start) begin
            for (int k = 0; k < NT; k++) os[k] <= (k < int'(cfg_ntiles));
            oc <= '0;
            f_head <= '0; f_cnt <= '0;
            have_curr <= 1'b0;
            done <= 1'b0;
            scan_i <= '0; sa_v <= 1'b0; best_v <= 1'b0;
            state <= S_SCAN;
          end
        end
        S_SCAN: begin
          // stage A: AND + NZ bit counter
          if (scan_i < cfg_ntiles) begin
            sa_v   <= 1'b1;
            sa_ok  <= os[scan_i[TW-1:0]];
            sa_cnt <= nz_count(scan_vec);
            sa_id  <= scan_i[TW-1:0];
            scan_i <= scan_i + 1'b1;
          end else begin
            sa_v <= 1'b0;
            if (!sa_v) state <= S_WAITQ;
          end
        end
        S_WAITQ: begin
          if (!best_v) begin
            state <= S_FINISH;
          end else if (all_empty) begin
            dv[0] <= oc & dep[best_id];
            dv[2] <= (have_curr ? dep[curr] : '0) & dep[best_id] & ~oc;
            dv[1] <= dep[best_id] & ~oc & ~((have_curr ? dep[curr] : '0) & dep[best_id]);
            for (int p = 0; p < 3; p++) begin
              wp[p] <= '0; rp[p] <= '0;
            end
            os[best_id] <= 1'b0;
            curr <= best_id;
            have_curr <= 1'b1;
            out_valid <= 1'b1;
            out_id <= best_id;
            state <= S_EMIT;
          end
        end
        S_EMIT: begin
          if (out_ready) begin
            out_valid <= 1'b0;
            scan_i <= '0; sa_v <= 1'b0; best_v <= 1'b0;
            state <= S_SCAN;
          end
        end
        S_FINISH: begin
          if (all_empty) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // An offered input tile stays put until it is taken.
  a_in_stable: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && !in_ready |=> in_valid && $stable(in_id) && $stable(in_part));
  // An offered output tile stays put until it is taken.
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_id));

endmodule
