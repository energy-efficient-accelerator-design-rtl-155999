// tb_coef_calc: self-checking test of the BLI coefficient block.
// Exhaustive over all 64x64 fraction pairs: eta, mu, theta, gamma must equal
// (1-da)(1-db), (1-da)db, da(1-db), da*db with gamma = floor(da*db/64) and the
// others formed from it, must sum to 64, and must appear two cycles after the
// input with one input per cycle.
module tb_coef_calc;
  import dcn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid;
  logic [5:0] dalpha, dbeta;
  bli_coef_t coef;
  int checks = 0, failures = 0;

  coef_calc dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int qa [$], qb [$];

  initial begin
    in_valid = 0; dalpha = 0; dbeta = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 64 * 64 + 2; n++) begin
      @(negedge clk);
      if (n >= 2) begin
        int a, b, gm;
        a = qa.pop_front(); b = qb.pop_front();
        gm = (a * b) >> 6;
        chk(out_valid, "valid two cycles later");
        chk(coef.gamma == coef_t'(gm) && coef.theta == coef_t'(a - gm) &&
            coef.mu == coef_t'(b - gm) && coef.eta == coef_t'(64 - a - b + gm),
            $sformatf("da=%0d db=%0d got %0d %0d %0d %0d", a, b, coef.eta, coef.mu, coef.theta, coef.gamma));
        chk(int'(coef.eta) + int'(coef.mu) + int'(coef.theta) + int'(coef.gamma) == 64, "sum is one");
      end
      if (n < 64 * 64) begin
        in_valid = 1; dalpha = 6'(n % 64); dbeta = 6'(n / 64);
        qa.push_back(n % 64); qb.push_back(n / 64);
      end else in_valid = 0;
    end
    @(negedge clk);
    chk(!out_valid, "valid drops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
