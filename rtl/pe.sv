// pe: one 8-bit fixed-point processing element of the 2-D computing array.
//
// Standard convolution (bli_mode = 0) uses an output-stationary dataflow: the
// feature arrives from the left and the weight from above, both are registered
// and passed on (right and down), and their product is added to the local
// accumulator while `en` is high. `clear` zeroes the accumulator. `drain`
// replaces the accumulator with the one of the PE above, so that finished
// results leave the array at the bottom of each column, one row per cycle.
//
// BLI (bli_mode = 1) uses a weight-stationary dataflow: `coef_load` stores a
// BLI coefficient, and psum_out = psum_in + coef * bli_x is formed
// combinationally so that the four PEs of a cluster form one dot product.
//
// All registers reset to zero. The output-stationary and weight-stationary
// dataflows follow the paper; the drain chain and the combinational BLI chain
// are this design's choices.
module pe
  import dcn_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  bli_mode,
  input  logic  en,
  input  logic  clear,
  input  logic  drain,
  input  feat_t a_in,
  input  feat_t w_in,
  output feat_t a_out,
  output feat_t w_out,
  input  acc_t  acc_in,
  output acc_t  acc_out,
  input  logic  coef_load,
  input  coef_t coef_in,
  input  feat_t bli_x,
  input  acc_t  psum_in,
  output acc_t  psum_out
);

  acc_t  acc_q;
  coef_t coef_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q  <= '0;
      a_out  <= '0;
      w_out  <= '0;
      coef_q <= '0;
    end else begin
      if (coef_load) coef_q <= coef_in;
      if (!bli_mode) begin
        if (clear)      acc_q <= '0;
        else if (drain) acc_q <= acc_in;
        else if (en)    acc_q <= acc_q + acc_t'(a_in) * acc_t'(w_in);
        if (en) begin
          a_out <= a_in;
          w_out <= w_in;
        end
      end
    end
  end

  assign acc_out  = acc_q;
  assign psum_out = psum_in + acc_t'(coef_q) * acc_t'(bli_x);

endmodule
