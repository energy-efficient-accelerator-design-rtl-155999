// tdt: tile dependency table with its runtime update logic.
//
// Input and output feature maps are cut into cfg_grid x cfg_grid tiles (up to
// GMAX x GMAX). For every sampling index of an output tile, the
// integer part of alpha is compared with the cfg_grid-1 row boundaries and
// the integer part of beta with the column boundaries. Comparator bit k is
// 1 when the index is at or beyond boundary k, so the comparison vector is a
// thermometer code and the decoder that turns it into a tile row (column) is
// a count of its ones. The dependent input tile is row*cfg_grid + col; its
// one-hot bit vector is ORed into the table entry of the output tile. After
// all indices have passed, dep[t] has bit s set when output tile t needs
// input tile s.
//
// Interface: `clear` empties the table. One index per cycle on upd_valid,
// with the output tile it belongs to. Two pipeline stages (compare; decode and
// OR), so an index is visible in `dep` two cycles after upd_valid; `busy` is
// high while an update is in flight. The boundaries (k+1)*H/grid are
// configuration inputs. The comparator/decoder/OR scheme follows the paper;
// the pipeline and the configuration form are this design's choices.
module tdt
  import dcn_pkg::*;
#(
  parameter int GMAX     = dcn_pkg::GRID_MAX,
  parameter int NT       = GMAX * GMAX,
  parameter int IIW      = IDX_INT,
  parameter int TW       = $clog2(NT)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  logic           upd_valid,
  input  logic [TW-1:0]  upd_out_tile,
  input  logic [IIW-1:0] alpha_int,
  input  logic [IIW-1:0] beta_int,
  input  logic [3:0]     cfg_grid,
  input  logic [IIW-1:0] cfg_bound_a [GMAX-1],
  input  logic [IIW-1:0] cfg_bound_b [GMAX-1],
  output logic [NT-1:0]  dep [NT],
  output logic           busy
);

  localparam int CW = $clog2(GMAX);

  logic                cmp_v;
  logic [TW-1:0]       cmp_t;
  logic [GMAX-2:0] cmp_a, cmp_b;

  function automatic logic [CW-1:0] ones(logic [GMAX-2:0] v);
    logic [CW-1:0] n;
    n = '0;
    for (int k = 0; k < GMAX-1; k++) n += CW'(v[k]);
    return n;
  endfunction

  // Stage 1: boundary comparators.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmp_v <= 1'b0; cmp_t <= '0; cmp_a <= '0; cmp_b <= '0;
    end else begin
      cmp_v <= upd_valid && !clear;
      cmp_t <= upd_out_tile;
      for (int k = 0; k < GMAX-1; k++) begin
        cmp_a[k] <= (k < int'(cfg_grid) - 1) && (alpha_int >= cfg_bound_a[k]);
        cmp_b[k] <= (k < int'(cfg_grid) - 1) && (beta_int  >= cfg_bound_b[k]);
      end
    end
  end

  // Stage 2: decoders, tile ID, OR into the table.
  logic [TW-1:0] in_tile;
  assign in_tile = TW'(ones(cmp_a)) * TW'(cfg_grid) + TW'(ones(cmp_b));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < NT; t++) dep[t] <= '0;
    end else if (clear) begin
      for (int t = 0; t < NT; t++) dep[t] <= '0;
    end else if (cmp_v) begin
      dep[cmp_t][in_tile] <= 1'b1;
    end
  end

  assign busy = cmp_v;

endmodule
