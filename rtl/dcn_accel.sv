// dcn_accel: top level of the deformable-convolution accelerator.
//
// A conventional output-stationary neural-network accelerator (buffers and a
// 16x32 PE array) extended for deformable convolution. A deformable
// convolution runs as: (1) a standard convolution that produces the sampling
// indices (alpha, beta), which are placed in the index buffer; (2) bilinear
// interpolation (BLI), where the address converter and coefficient block turn
// each index into four bank addresses and four coefficients and the clustered
// PE array interpolates 128 channels per cycle into the output buffer; and
// (3) a standard convolution over those deformed features, read straight from
// the output buffer by swapping the roles of the input and output buffers
// (BLI/convolution fusion). Alongside, the tile dependency table (TDT) is
// built from the indices and the runtime tile scheduler orders output tiles
// and the loading of input tiles.
//
// Commands (cmd_t, already decoded) are accepted when cmd_ready is high:
//   OP_CONV  K = len steps. Step k reads the 16-byte feature slice a_base+k
//            (byte r feeds array row r; slice s of buffer word s>>3) and the
//            weight word w_base+k (byte c feeds column c). Results are
//            requantised (>>> shift, saturate to 8 bits); rows 4q..4q+3 are
//            packed, row 4q+s in bytes 32s..32s+31, into word o_base+q.
//            swap=0: features from the input buffer (word w is bank w%4,
//            address w/4), results to the output buffer; swap=1: features from
//            the output buffer, results to the input buffer (same mapping).
//            Takes K + ROWS + COLS + 2 + ROWS cycles.
//   OP_BLI   len indices from index-buffer address a_base; for each index m and
//            channel group g < cfg_i, the 128 interpolated channels go to
//            output word o_base + m*cfg_i + g; coefficients of index m are also
//            written to weight word w_base + m and read back from there into
//            the clusters. One word per cycle, 7 cycles of pipeline latency:
//            index read (0), address conversion and coefficients (1-2),
//            coefficient write (3) and read-back (4), coefficient load and
//            input-buffer bank reads (5), interpolation (6), output write (7).
//   OP_TDT   clears the TDT and feeds it len indices from a_base; indices
//            belong to output tile floor(n / per_tile).
//   OP_SCHED starts the tile scheduler (runs in the background; the order of
//            output tiles and of input tile loads leaves on the sched_* ports).
// The host ports (buffer writes and reads) are meant for use while cmd_ready
// is high; a read returns data one cycle after the address.
//
// Buffer sizes, array size, the clustered BLI mapping, the parity-banked input
// buffer, the TDT and the scheduler follow the paper. The command interface,
// the slice-based operand feeding, requantisation and packing of results, and
// all handshakes are this design's own choices: the paper gives no instruction
// set, so its instruction decoder is not included and the instruction buffer
// is only brought out to a read port.
module dcn_accel
  import dcn_pkg::*;
#(
  parameter int ROWS        = 16,
  parameter int COLS        = 32,
  parameter int IN_BUF_KB   = 128,
  parameter int OUT_BUF_KB  = 256,
  parameter int WGT_BUF_KB  = 256,
  parameter int IDX_BUF_KB  = 32,
  parameter int INST_BUF_KB = 64,
  // derived
  parameter int CH        = ROWS * COLS / 4,                 // channels per word
  parameter int WB        = CH * FEAT_W,                     // feature word bits
  parameter int IN_DEPTH  = IN_BUF_KB * 1024 / 4 / (WB / 8),
  parameter int OUT_DEPTH = OUT_BUF_KB * 1024 / (WB / 8),
  parameter int WGT_DEPTH = WGT_BUF_KB * 1024 / COLS,
  parameter int IDX_DEPTH = IDX_BUF_KB * 1024 / 4,
  parameter int INST_DEPTH = INST_BUF_KB * 1024 / 4,
  parameter int IN_AW   = $clog2(IN_DEPTH),
  parameter int OUT_AW  = $clog2(OUT_DEPTH),
  parameter int WGT_AW  = $clog2(WGT_DEPTH),
  parameter int IDX_AW  = $clog2(IDX_DEPTH),
  parameter int INST_AW = $clog2(INST_DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // decoded commands
  input  logic                 cmd_valid,
  input  cmd_t                 cmd,
  output logic                 cmd_ready,
  // host / DMA access to the buffers
  input  logic                 ib_we,
  input  logic [1:0]           ib_wbank,
  input  logic [IN_AW-1:0]     ib_waddr,
  input  logic [WB-1:0]        ib_wdata,
  input  logic [IN_AW-1:0]     ib_raddr,
  output logic [WB-1:0]        ib_rdata [4],
  input  logic                 wb_we,
  input  logic [WGT_AW-1:0]    wb_waddr,
  input  logic [COLS*FEAT_W-1:0] wb_wdata,
  input  logic [WGT_AW-1:0]    wb_raddr,
  output logic [COLS*FEAT_W-1:0] wb_rdata,
  input  logic                 xb_we,
  input  logic [IDX_AW-1:0]    xb_waddr,
  input  idx_pair_t            xb_wdata,
  input  logic [OUT_AW-1:0]    ob_raddr,
  output logic [WB-1:0]        ob_rdata,
  input  logic                 inst_we,
  input  logic [INST_AW-1:0]   inst_waddr,
  input  logic [31:0]          inst_wdata,
  input  logic [INST_AW-1:0]   inst_raddr,
  output logic [31:0]          inst_rdata,
  // tile configuration
  input  logic [3:0]           cfg_grid,
  input  logic [IDX_INT-1:0]   cfg_bound_a [GRID_MAX-1],
  input  logic [IDX_INT-1:0]   cfg_bound_b [GRID_MAX-1],
  input  logic [TID_W:0]       cfg_ntiles,
  input  logic [TID_W:0]       cfg_onchip,
  // tile scheduler streams
  output logic                 sched_out_valid,
  output logic [TID_W-1:0]     sched_out_id,
  input  logic                 sched_out_ready,
  output logic                 sched_in_valid,
  output logic [TID_W-1:0]     sched_in_id,
  output logic [1:0]           sched_in_part,
  output logic                 sched_in_hit,
  output logic                 sched_in_evict,
  output logic [TID_W-1:0]     sched_in_victim,
  input  logic                 sched_in_ready,
  output logic                 sched_busy,
  output logic                 sched_done
);

  localparam int CL  = 4;
  localparam int NCL = ROWS / CL * COLS;

  typedef enum logic [2:0] {
    ST_IDLE, ST_CONV, ST_DRAIN, ST_BLI, ST_TDT
  } state_e;

  state_e state;
  cmd_t   c;              // command being executed
  logic [15:0] t;         // step counter
  logic [15:0] g;         // BLI channel group
  logic [15:0] n_out;     // BLI words written
  logic [15:0] tile_cnt;  // TDT index within tile
  logic [TID_W-1:0] tile_id;

  assign cmd_ready = (state == ST_IDLE);
  wire idle = (state == ST_IDLE);

  // ------------------------------------------------------------------
  // Buffers
  // ------------------------------------------------------------------
  logic             ibuf_we;
  logic [1:0]       ibuf_wbank;
  logic [IN_AW-1:0] ibuf_waddr;
  logic [WB-1:0]    ibuf_wdata;
  logic [IN_AW-1:0] ibuf_raddr [4];
  logic [WB-1:0]    ibuf_rdata [4];

  input_buffer #(.CH(CH), .DEPTH(IN_DEPTH)) u_ibuf (
    .clk, .rst_n,
    .wr_en (ibuf_we), .wr_bank (ibuf_wbank), .wr_addr (ibuf_waddr), .wr_data (ibuf_wdata),
    .rd_addr (ibuf_raddr), .rd_data (ibuf_rdata)
  );
  assign ib_rdata = ibuf_rdata;

  logic              obuf_we;
  logic [OUT_AW-1:0] obuf_waddr, obuf_raddr;
  logic [WB-1:0]     obuf_wdata, obuf_rdata;

  sram_1r1w #(.WIDTH(WB), .DEPTH(OUT_DEPTH)) u_obuf (
    .clk, .rst_n, .we (obuf_we), .waddr (obuf_waddr), .wdata (obuf_wdata),
    .raddr (obuf_raddr), .rdata (obuf_rdata)
  );
  assign ob_rdata = obuf_rdata;

  logic                   wbuf_we;
  logic [WGT_AW-1:0]      wbuf_waddr, wbuf_raddr;
  logic [COLS*FEAT_W-1:0] wbuf_wdata, wbuf_rdata;

  sram_1r1w #(.WIDTH(COLS*FEAT_W), .DEPTH(WGT_DEPTH)) u_wbuf (
    .clk, .rst_n, .we (wbuf_we), .waddr (wbuf_waddr), .wdata (wbuf_wdata),
    .raddr (wbuf_raddr), .rdata (wbuf_rdata)
  );
  assign wb_rdata = wbuf_rdata;

  logic [IDX_AW-1:0] xbuf_raddr;
  idx_pair_t         xbuf_rdata;

  sram_1r1w #(.WIDTH($bits(idx_pair_t)), .DEPTH(IDX_DEPTH)) u_xbuf (
    .clk, .rst_n, .we (xb_we), .waddr (xb_waddr), .wdata (xb_wdata),
    .raddr (xbuf_raddr), .rdata (xbuf_rdata)
  );

  sram_1r1w #(.WIDTH(32), .DEPTH(INST_DEPTH)) u_inst (
    .clk, .rst_n, .we (inst_we), .waddr (inst_waddr), .wdata (inst_wdata),
    .raddr (inst_raddr), .rdata (inst_rdata)
  );

  // ------------------------------------------------------------------
  // PE array
  // ------------------------------------------------------------------
  logic  arr_bli, arr_en, arr_clear, arr_drain, arr_coef_load;
  feat_t arr_feat [ROWS];
  feat_t arr_wgt  [COLS];
  acc_t  arr_col  [COLS];
  coef_t arr_coef [CL];
  feat_t arr_x    [NCL][CL];
  feat_t arr_bo   [NCL];

  pe_array #(.ROWS(ROWS), .COLS(COLS), .CL(CL)) u_array (
    .clk, .rst_n,
    .bli_mode (arr_bli), .en (arr_en), .clear (arr_clear), .drain (arr_drain),
    .feat_in (arr_feat), .wgt_in (arr_wgt), .col_out (arr_col),
    .coef_load (arr_coef_load), .coef (arr_coef), .bli_x (arr_x), .bo (arr_bo)
  );

  // ------------------------------------------------------------------
  // Address converter, coefficient calculation, TDT, scheduler
  // ------------------------------------------------------------------
  // index pipeline tags: stage 0 = index read issued, 1 = index data valid
  logic        v1;
  logic        first1, first2, first3;
  logic [15:0] m1, m2, m3;
  logic [15:0] g1;
  logic [TID_W-1:0] tile1;

  logic        ac_valid;
  logic [15:0] ac_addr [4];
  logic [1:0]  ac_bank [4];
  logic [15:0] ac_baddr [4];
  logic [1:0]  ac_bcorner [4];

  addr_conv #(.ADDR_W(16)) u_addr (
    .clk, .rst_n,
    .in_valid (v1 && state == ST_BLI),
    .alpha (xbuf_rdata.alpha), .beta (xbuf_rdata.beta), .grp (g1),
    .cfg_i (c.cfg_i), .cfg_j (c.cfg_j), .cfg_t0 (c.cfg_t0),
    .out_valid (ac_valid), .addr (ac_addr), .bank (ac_bank),
    .bank_addr (ac_baddr), .bank_corner (ac_bcorner)
  );

  logic      cc_valid;
  bli_coef_t cc_coef;
  bli_coef_t wb_coef;

  coef_calc u_coef (
    .clk, .rst_n,
    .in_valid (v1 && state == ST_BLI),
    .dalpha (xbuf_rdata.alpha[IDX_FRAC-1:0]), .dbeta (xbuf_rdata.beta[IDX_FRAC-1:0]),
    .out_valid (cc_valid), .coef (cc_coef)
  );

  logic [GRID_MAX*GRID_MAX-1:0] dep [GRID_MAX*GRID_MAX];
  logic tdt_busy, tdt_clear;

  tdt u_tdt (
    .clk, .rst_n, .clear (tdt_clear),
    .upd_valid (v1 && state == ST_TDT), .upd_out_tile (tile1),
    .alpha_int (xbuf_rdata.alpha[IDX_W-1:IDX_FRAC]), .beta_int (xbuf_rdata.beta[IDX_W-1:IDX_FRAC]),
    .cfg_grid, .cfg_bound_a, .cfg_bound_b, .dep, .busy (tdt_busy)
  );

  tile_scheduler u_sched (
    .clk, .rst_n,
    .start (idle && cmd_valid && cmd.op == OP_SCHED),
    .cfg_ntiles, .cfg_onchip, .dep,
    .out_valid (sched_out_valid), .out_id (sched_out_id), .out_ready (sched_out_ready),
    .in_valid (sched_in_valid), .in_id (sched_in_id), .in_part (sched_in_part),
    .in_hit (sched_in_hit), .in_evict (sched_in_evict), .in_victim (sched_in_victim),
    .in_ready (sched_in_ready), .busy (sched_busy), .done (sched_done)
  );

  // ------------------------------------------------------------------
  // Sequencer
  // ------------------------------------------------------------------
  // CONV read stage
  logic [15:0] conv_slice;   // a_base + t
  logic [15:0] conv_fw;      // buffer word
  logic        rd_v_q;       // operand data valid this cycle
  logic [2:0]  slice_q;
  logic [1:0]  bank_q;
  logic        swap_q;

  assign conv_slice = c.a_base + t;
  assign conv_fw    = conv_slice >> 3;

  // drain packing
  logic [WB-1:0] pack;
  logic [4:0]    drow;       // row being drained (ROWS-1 .. 0)
  logic [15:0]   dst_fw;
  assign dst_fw = c.o_base + 16'(drow >> 2);

  // BLI stage 4..7 registers
  logic        v4, v5, v6, v7;
  logic        first4, first5;
  logic [15:0] m4;
  logic [15:0] baddr4 [4], baddr5 [4];
  logic [1:0]  bank4 [4], bank5 [4], bank6 [4];

  // BLI items in flight between the index read and the address converter output.
  logic [2:0] fly;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) fly <= '0;
    else        fly <= {fly[1:0], v1 && state == ST_BLI};
  end

  wire bli_issue = (state == ST_BLI) && (t < c.len);
  wire tdt_issue = (state == ST_TDT) && (t < c.len);

  // PE order in a cluster: eta/lb, mu/lt, theta/rb, gamma/rt.
  localparam logic [1:0] PE_CORNER [4] = '{C_LB, C_LT, C_RB, C_RT};

  // Last drained row of a word completes it (row 4q lands in bytes 0..31).
  logic [WB-1:0] drain_word;
  always_comb begin
    drain_word = pack;
    for (int cc = 0; cc < COLS; cc++)
      drain_word[cc*FEAT_W +: FEAT_W] = requant(arr_col[cc], c.shift);
  end

  // ---- combinational buffer/array control ----
  always_comb begin
    // defaults: host access
    ibuf_we    = idle && ib_we;
    ibuf_wbank = ib_wbank;
    ibuf_waddr = ib_waddr;
    ibuf_wdata = ib_wdata;
    for (int b = 0; b < 4; b++) ibuf_raddr[b] = ib_raddr;
    obuf_we    = 1'b0;
    obuf_waddr = '0;
    obuf_wdata = '0;
    obuf_raddr = ob_raddr;
    wbuf_we    = idle && wb_we;
    wbuf_waddr = wb_waddr;
    wbuf_wdata = wb_wdata;
    wbuf_raddr = wb_raddr;
    xbuf_raddr = IDX_AW'(c.a_base + t);

    arr_bli       = (state == ST_BLI);
    arr_en        = (state == ST_CONV);
    arr_clear     = (state == ST_CONV) && (t == 16'd0);
    arr_drain     = (state == ST_DRAIN);
    // coefficients come back from the weight buffer (written at stage 3,
    // read at stage 4, loaded into the clusters at stage 5)
    arr_coef_load = (state == ST_BLI) && v5 && first5;
    wb_coef       = bli_coef_t'(wbuf_rdata[$bits(bli_coef_t)-1:0]);
    arr_coef[0]   = wb_coef.eta;
    arr_coef[1]   = wb_coef.mu;
    arr_coef[2]   = wb_coef.theta;
    arr_coef[3]   = wb_coef.gamma;

    for (int r = 0; r < ROWS; r++) begin
      logic [WB-1:0] src;
      src = swap_q ? obuf_rdata : ibuf_rdata[bank_q];
      arr_feat[r] = rd_v_q ? feat_t'(src[(int'(slice_q) * ROWS + r) * FEAT_W +: FEAT_W]) : '0;
    end
    for (int cc = 0; cc < COLS; cc++)
      arr_wgt[cc] = rd_v_q ? feat_t'(wbuf_rdata[cc*FEAT_W +: FEAT_W]) : '0;

    for (int k = 0; k < NCL; k++)
      for (int j = 0; j < CL; j++)
        arr_x[k][j] = feat_t'(ibuf_rdata[bank6[PE_CORNER[j]]][k*FEAT_W +: FEAT_W]);

    if (state == ST_CONV) begin
      if (c.swap) obuf_raddr = OUT_AW'(conv_fw);
      else        for (int b = 0; b < 4; b++) ibuf_raddr[b] = IN_AW'(conv_fw >> 2);
      wbuf_raddr = WGT_AW'(c.w_base + t);
    end

    if (state == ST_DRAIN && drow[1:0] == 2'd0) begin
      if (c.swap) begin
        ibuf_we    = 1'b1;
        ibuf_wbank = dst_fw[1:0];
        ibuf_waddr = IN_AW'(dst_fw >> 2);
        ibuf_wdata = drain_word;
      end else begin
        obuf_we    = 1'b1;
        obuf_waddr = OUT_AW'(dst_fw);
        obuf_wdata = drain_word;
      end
    end

    if (state == ST_BLI) begin
      for (int b = 0; b < 4; b++) ibuf_raddr[b] = IN_AW'(baddr5[b]);
      if (v4 && first4) wbuf_raddr = WGT_AW'(c.w_base + m4);
      if (cc_valid && first3) begin
        wbuf_we    = 1'b1;
        wbuf_waddr = WGT_AW'(c.w_base + m3);
        wbuf_wdata = '0;
        wbuf_wdata[31:0] = cc_coef;
      end
      if (v7) begin
        obuf_we    = 1'b1;
        obuf_waddr = OUT_AW'(c.o_base + n_out);
        for (int k = 0; k < NCL; k++) obuf_wdata[k*FEAT_W +: FEAT_W] = arr_bo[k];
      end
    end
  end

  // ---- sequencing ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_IDLE;
      c <= '0;
      t <= '0; g <= '0; n_out <= '0; tile_cnt <= '0; tile_id <= '0;
      rd_v_q <= 1'b0; slice_q <= '0; bank_q <= '0; swap_q <= 1'b0;
      pack <= '0; drow <= '0;
      v1 <= 1'b0; first1 <= 1'b0; first2 <= 1'b0; first3 <= 1'b0;
      m1 <= '0; m2 <= '0; m3 <= '0; g1 <= '0; tile1 <= '0;
      v4 <= 1'b0; v5 <= 1'b0; v6 <= 1'b0; v7 <= 1'b0;
      first4 <= 1'b0; first5 <= 1'b0; m4 <= '0;
      for (int b = 0; b < 4; b++) begin
        baddr4[b] <= '0; baddr5[b] <= '0; bank4[b] <= '0; bank5[b] <= '0; bank6[b] <= '0;
      end
      tdt_clear <= 1'b0;
    end else begin
      tdt_clear <= 1'b0;
      // CONV operand read tags
      rd_v_q  <= (state == ST_CONV) && (t < c.len);
      slice_q <= conv_slice[2:0];
      bank_q  <= conv_fw[1:0];
      // index pipeline tags
      v1     <= bli_issue || tdt_issue;
      first1 <= (g == 16'd0);
      m1     <= t;
      g1     <= g;
      tile1  <= tile_id;
      first2 <= first1; m2 <= m1;
      first3 <= first2; m3 <= m2;
      // BLI stages 4 to 7
      v4 <= ac_valid && state == ST_BLI;
      first4 <= first3; m4 <= m3;
      v5 <= v4; first5 <= first4;
      v6 <= v5;
      v7 <= v6;
      for (int b = 0; b < 4; b++) begin
        baddr4[b] <= ac_baddr[b]; baddr5[b] <= baddr4[b];
        bank4[b]  <= ac_bank[b];  bank5[b]  <= bank4[b];  bank6[b] <= bank5[b];
      end
      if (v7) n_out <= n_out + 1'b1;

      case (state)
        ST_IDLE: begin
          if (cmd_valid) begin
            c <= cmd;
            t <= '0; g <= '0; n_out <= '0; tile_cnt <= '0; tile_id <= '0;
            swap_q <= cmd.swap;
            case (cmd.op)
              OP_CONV: state <= ST_CONV;
              OP_BLI:  state <= ST_BLI;
              OP_TDT:  begin state <= ST_TDT; tdt_clear <= 1'b1; end
              default: state <= ST_IDLE;   // OP_SCHED starts the scheduler only
            endcase
          end
        end
        ST_CONV: begin
          t <= t + 1'b1;
          if (t == c.len + 16'(ROWS + COLS + 1)) begin
            state <= ST_DRAIN;
            drow  <= 5'(ROWS - 1);
            pack  <= '0;
          end
        end
        ST_DRAIN: begin
          for (int cc = 0; cc < COLS; cc++)
            pack[(int'(drow[1:0]) * COLS + cc) * FEAT_W +: FEAT_W] <= requant(arr_col[cc], c.shift);
          if (drow == 5'd0) state <= ST_IDLE;
          else              drow <= drow - 1'b1;
        end
        ST_BLI: begin
          if (t < c.len) begin
            if (g == c.cfg_i - 1'b1) begin
              g <= '0;
              t <= t + 1'b1;
            end else begin
              g <= g + 1'b1;
            end
          end else if (!v1 && fly == '0 && !ac_valid && !v4 && !v5 && !v6 && !v7) begin
            state <= ST_IDLE;
          end
        end
        ST_TDT: begin
          if (t < c.len) begin
            t <= t + 1'b1;
            if (tile_cnt == c.per_tile - 1'b1) begin
              tile_cnt <= '0;
              tile_id  <= tile_id + 1'b1;
            end else begin
              tile_cnt <= tile_cnt + 1'b1;
            end
          end else if (!v1 && !tdt_busy) begin
            state <= ST_IDLE;
          end
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

endmodule
