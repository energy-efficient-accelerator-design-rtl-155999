// addr_conv: address converter for bilinear interpolation.
//
// For a sampling index (alpha, beta), unsigned fixed point with FRAC fraction
// bits, it finds the four integer neighbours
//   lb = (floor a, floor b)   rb = (ceil a, floor b)
//   lt = (floor a, ceil b)    rt = (ceil a, ceil b)
// and the word address of each in the parity-banked input buffer, following
//   addr = (floor(b'/2) * j + floor(a'/2)) * i - T0 + grp
// where a', b' are the neighbour's integer coordinates, j = H/2 (words per bank
// row), i = ceil(c/(A/4)) (channel-group words per position), T0 the base of the
// resident tile and grp the channel group being read. Each neighbour lives in
// the bank given by its coordinate parity (beta: row, alpha: column):
//   bank0 odd row/odd col, bank1 odd row/even col,
//   bank2 even row/even col, bank3 even row/odd col.
// The four neighbours always fall in four different banks, so the outputs are
// also given per bank (bank_addr, and bank_corner = which corner it serves).
//
// The ceiling is taken as floor + 1; for an integer index that neighbour gets
// a zero BLI coefficient, and this keeps the four banks distinct.
//
// Timing: fully pipelined, one index per cycle, outputs two cycles after
// in_valid (stage 1: neighbours, halving and row products; stage 2: multiply by
// i, subtract T0, add grp). The formula and the parity banks follow the paper;
// the pipeline split and the widths are this design's choices.
module addr_conv
  import dcn_pkg::*;
#(
  parameter int IW     = IDX_W,
  parameter int FRAC   = IDX_FRAC,
  parameter int ADDR_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [IW-1:0]     alpha,
  input  logic [IW-1:0]     beta,
  input  logic [15:0]       grp,
  input  logic [15:0]       cfg_i,
  input  logic [15:0]       cfg_j,
  input  logic [15:0]       cfg_t0,
  output logic              out_valid,
  output logic [ADDR_W-1:0] addr        [4],   // indexed by corner_e
  output logic [1:0]        bank        [4],   // bank of each corner
  output logic [ADDR_W-1:0] bank_addr   [4],   // address presented to bank b
  output logic [1:0]        bank_corner [4]    // corner read from bank b
);

  localparam int II = IW - FRAC;

  function automatic logic [1:0] bank_of(logic row_odd, logic col_odd);
    case ({row_odd, col_odd})
      2'b11:   return 2'd0;
      2'b10:   return 2'd1;
      2'b00:   return 2'd2;
      default: return 2'd3;
    endcase
  endfunction

  // ---------------- stage 1 ----------------
  logic [II:0] a_n [2];   // floor, floor+1 of alpha
  logic [II:0] b_n [2];
  assign a_n[0] = {1'b0, alpha[IW-1:FRAC]};
  assign a_n[1] = {1'b0, alpha[IW-1:FRAC]} + 1'b1;
  assign b_n[0] = {1'b0, beta[IW-1:FRAC]};
  assign b_n[1] = {1'b0, beta[IW-1:FRAC]} + 1'b1;

  logic        v1;
  logic [31:0] rowp1 [2];   // floor(b'/2) * j
  logic [31:0] colh1 [2];   // floor(a'/2)
  logic        aodd1 [2];
  logic        bodd1 [2];
  logic [15:0] grp1, i1, t01;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      for (int k = 0; k < 2; k++) begin
        rowp1[k] <= '0; colh1[k] <= '0; aodd1[k] <= 1'b0; bodd1[k] <= 1'b0;
      end
      grp1 <= '0; i1 <= '0; t01 <= '0;
    end else begin
      v1 <= in_valid;
      for (int k = 0; k < 2; k++) begin
        rowp1[k] <= 32'(b_n[k] >> 1) * 32'(cfg_j);
        colh1[k] <= 32'(a_n[k] >> 1);
        aodd1[k] <= a_n[k][0];
        bodd1[k] <= b_n[k][0];
      end
      grp1 <= grp; i1 <= cfg_i; t01 <= cfg_t0;
    end
  end

  // ---------------- stage 2 ----------------
  // corner -> (alpha select, beta select)
  localparam logic [3:0] ASEL = 4'b1010;  // lb:0 rb:1 lt:0 rt:1 (bit = corner)
  localparam logic [3:0] BSEL = 4'b1100;  // lb:0 rb:0 lt:1 rt:1

  logic [31:0] w2 [4];
  logic [1:0]  b2 [4];

  always_comb begin
    for (int k = 0; k < 4; k++) begin
      w2[k] = (rowp1[BSEL[k]] + colh1[ASEL[k]]) * 32'(i1) - 32'(t01) + 32'(grp1);
      b2[k] = bank_of(bodd1[BSEL[k]], aodd1[ASEL[k]]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int k = 0; k < 4; k++) begin
        addr[k] <= '0; bank[k] <= '0; bank_addr[k] <= '0; bank_corner[k] <= '0;
      end
    end else begin
      out_valid <= v1;
      for (int k = 0; k < 4; k++) begin
        addr[k]            <= ADDR_W'(w2[k]);
        bank[k]            <= b2[k];
        bank_addr[b2[k]]   <= ADDR_W'(w2[k]);
        bank_corner[b2[k]] <= 2'(k);
      end
    end
  end

endmodule
