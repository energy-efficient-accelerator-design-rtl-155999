// pe_cluster: four processing elements chained top to bottom, with the
// cluster output select of the clustered computing array.
//
// In standard mode (bli_mode = 0) the cluster is just four rows of one array
// column: features enter each PE from the left, the weight enters the top PE
// and moves down, and during drain the accumulators shift down through the
// four PEs and on to the next cluster (select 0).
//
// In BLI mode (bli_mode = 1) the four PEs hold the coefficients eta, mu,
// theta, gamma (loaded with coef_load) and receive the four neighbouring
// features of one channel in parallel. The chained partial sum leaving the
// bottom PE is the interpolated value times 2^FRAC; it is shifted right by
// FRAC (floor) and captured in the cluster's BLI output register `bo`
// (select 1), one cycle after the features are presented.
//
// The four-PE vertical chain, the 0/1 select and the B-O output follow the
// clustered array figure of the paper; the single-cycle registered B-O and the
// floor rounding are this design's choices.
module pe_cluster
  import dcn_pkg::*;
#(
  parameter int CL   = 4,
  parameter int FRAC = IDX_FRAC
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  bli_mode,
  input  logic  en,
  input  logic  clear,
  input  logic  drain,
  input  feat_t a_in  [CL],   // one feature per PE row (from the left)
  output feat_t a_out [CL],
  input  feat_t w_in,         // weight entering the top PE
  output feat_t w_out,        // weight leaving the bottom PE
  input  acc_t  acc_in,       // drain chain from the cluster above
  output acc_t  acc_out,      // select 0: drain chain to the cluster below
  input  logic  coef_load,
  input  coef_t coef  [CL],   // eta, mu, theta, gamma
  input  feat_t bli_x [CL],   // lb, lt, rb, rt neighbours of one channel
  output feat_t bo            // select 1: BLI output
);

  feat_t w_chain   [CL+1];
  acc_t  acc_chain [CL+1];
  acc_t  ps_chain  [CL+1];
  acc_t  cl_out;

  assign w_chain[0]   = w_in;
  assign acc_chain[0] = acc_in;
  assign ps_chain[0]  = '0;

  for (genvar k = 0; k < CL; k++) begin : g_pe
    pe u_pe (
      .clk, .rst_n, .bli_mode, .en, .clear, .drain,
      .a_in     (a_in[k]),
      .w_in     (w_chain[k]),
      .a_out    (a_out[k]),
      .w_out    (w_chain[k+1]),
      .acc_in   (acc_chain[k]),
      .acc_out  (acc_chain[k+1]),
      .coef_load,
      .coef_in  (coef[k]),
      .bli_x    (bli_x[k]),
      .psum_in  (ps_chain[k]),
      .psum_out (ps_chain[k+1])
    );
  end

  assign w_out = w_chain[CL];

  // Cluster output: accumulator chain in standard mode, BLI sum in BLI mode.
  assign cl_out = bli_mode ? ps_chain[CL] : acc_chain[CL];

  // Output select: 0 continues down the column, 1 goes to B-O.
  assign acc_out = bli_mode ? '0 : cl_out;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        bo <= '0;
    else if (bli_mode) bo <= feat_t'(cl_out >>> FRAC);
  end

endmodule
