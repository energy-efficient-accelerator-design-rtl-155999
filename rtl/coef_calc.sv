// coef_calc: BLI coefficient calculation.
//
// From the fraction parts da = alpha - floor(alpha) and db = beta - floor(beta)
// (FRAC bits each, value da / 2^FRAC) it forms
//   gamma = da*db, theta = da - gamma, mu = db - gamma,
//   eta   = 1 - da - db + gamma,
// i.e. eta = (1-da)(1-db), mu = (1-da)db, theta = da(1-db), gamma = da*db.
// The only multiplication, da*db, is done first (stage 1, truncated to FRAC
// fraction bits); the other three need only additions and subtractions
// (stage 2). Coefficients are signed COEF_W-bit numbers with FRAC fraction bits
// (1.0 = 2^FRAC); they always sum to exactly 1.0. Since da, db < 1, gamma
// stays below 1.0 and its top two bits are always zero (with FRAC = 6).
//
// Timing: one index per cycle, result two cycles after in_valid, the same
// latency as addr_conv. The product-first structure follows the paper; the
// number format and truncation are this design's choices.
module coef_calc
  import dcn_pkg::*;
#(
  parameter int FRAC = IDX_FRAC
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [FRAC-1:0] dalpha,
  input  logic [FRAC-1:0] dbeta,
  output logic            out_valid,
  output bli_coef_t       coef
);

  logic            v1;
  logic [FRAC-1:0] g1, da1, db1;
  logic [2*FRAC-1:0] p;

  assign p = dalpha * dbeta;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; g1 <= '0; da1 <= '0; db1 <= '0;
    end else begin
      v1  <= in_valid;
      g1  <= p[2*FRAC-1:FRAC];
      da1 <= dalpha;
      db1 <= dbeta;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      coef      <= '0;
    end else begin
      out_valid  <= v1;
      coef.gamma <= coef_t'(g1);
      coef.theta <= coef_t'(da1) - coef_t'(g1);
      coef.mu    <= coef_t'(db1) - coef_t'(g1);
      coef.eta   <= coef_t'(1 << FRAC) - coef_t'(da1) - coef_t'(db1) + coef_t'(g1);
    end
  end

endmodule
