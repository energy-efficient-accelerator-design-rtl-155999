// pe_array: the clustered 2-D computing array (ROWS x COLS PEs, grouped into
// clusters of CL vertically adjacent PEs).
//
// Standard mode (bli_mode = 0), output stationary: PE(r,c) accumulates
// sum_k feat_r[k] * wgt_c[k]. The caller presents feat_in[r] and wgt_in[c]
// for step k in the same cycle; the array itself delays row r by r cycles and
// column c by c cycles (input skew) so that matching operands meet in every
// PE. Keep `en` high for K + ROWS + COLS - 1 cycles, feeding zeros after the
// last step. Then each `drain` cycle shifts the accumulators one PE down every
// column: col_out[c] shows PE(ROWS-1-d, c) during drain cycle d, bottom row
// first. `clear` zeroes all accumulators.
//
// BLI mode (bli_mode = 1): the NCL = ROWS/CL*COLS clusters each interpolate one
// channel. The coefficients (eta, mu, theta, gamma) are broadcast to all
// clusters with coef_load; bli_x[k] carries the four neighbours of channel k.
// bo[k] is valid one cycle after bli_x. Cluster k sits in cluster row k/COLS
// and column k%COLS.
//
// The 16x32 size and the 4-PE clusters follow the paper; the skew registers,
// the drain order and the channel-to-cluster order are this design's choices.
module pe_array
  import dcn_pkg::*;
#(
  parameter int ROWS = 16,
  parameter int COLS = 32,
  parameter int CL   = 4,
  parameter int NCL  = ROWS / CL * COLS
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  bli_mode,
  input  logic  en,
  input  logic  clear,
  input  logic  drain,
  input  feat_t feat_in [ROWS],
  input  feat_t wgt_in  [COLS],
  output acc_t  col_out [COLS],
  input  logic  coef_load,
  input  coef_t coef    [CL],
  input  feat_t bli_x   [NCL][CL],
  output feat_t bo      [NCL]
);

  localparam int CR = ROWS / CL;

  // Input skew: row r passes r registers, column c passes c registers.
  feat_t f_sk [ROWS];
  feat_t w_sk [COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_fskew
    if (r == 0) begin : g_0
      assign f_sk[r] = feat_in[r];
    end else begin : g_n
      feat_t d [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int s = 0; s < r; s++) d[s] <= '0;
        end else if (en) begin
          d[0] <= feat_in[r];
          for (int s = 1; s < r; s++) d[s] <= d[s-1];
        end
      end
      assign f_sk[r] = d[r-1];
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_wskew
    if (c == 0) begin : g_0
      assign w_sk[c] = wgt_in[c];
    end else begin : g_n
      feat_t d [c];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int s = 0; s < c; s++) d[s] <= '0;
        end else if (en) begin
          d[0] <= wgt_in[c];
          for (int s = 1; s < c; s++) d[s] <= d[s-1];
        end
      end
      assign w_sk[c] = d[c-1];
    end
  end

  // Horizontal feature links, vertical weight and drain links.
  feat_t a_link [ROWS][COLS+1];
  feat_t w_link [CR+1][COLS];
  acc_t  c_link [CR+1][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row_in
    assign a_link[r][0] = f_sk[r];
  end

  for (genvar c = 0; c < COLS; c++) begin : g_col
    assign w_link[0][c] = w_sk[c];
    assign c_link[0][c] = '0;
    assign col_out[c]   = c_link[CR][c];

    for (genvar q = 0; q < CR; q++) begin : g_cl
      feat_t a_i [CL];
      feat_t a_o [CL];
      for (genvar k = 0; k < CL; k++) begin : g_k
        assign a_i[k] = a_link[q*CL+k][c];
        assign a_link[q*CL+k][c+1] = a_o[k];
      end

      pe_cluster #(.CL(CL)) u_cl (
        .clk, .rst_n, .bli_mode, .en, .clear, .drain,
        .a_in      (a_i),
        .a_out     (a_o),
        .w_in      (w_link[q][c]),
        .w_out     (w_link[q+1][c]),
        .acc_in    (c_link[q][c]),
        .acc_out   (c_link[q+1][c]),
        .coef_load,
        .coef,
        .bli_x     (bli_x[q*COLS+c]),
        .bo        (bo[q*COLS+c])
      );
    end
  end

endmodule
