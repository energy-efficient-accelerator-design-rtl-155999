// tb_pe: self-checking test of one processing element.
// Checks the output-stationary MAC (accumulate, one-cycle pass-through of
// feature and weight), clear, drain (accumulator replaced by the one above)
// and the weight-stationary BLI partial sum, against values worked out here.
module tb_pe;
  import dcn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic bli_mode, en, clear, drain, coef_load;
  feat_t a_in, w_in, a_out, w_out, bli_x;
  acc_t acc_in, acc_out, psum_in, psum_out;
  coef_t coef_in;
  int checks = 0, failures = 0;

  pe dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #20000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    acc_t ref_acc;
    bli_mode = 0; en = 0; clear = 0; drain = 0; coef_load = 0;
    a_in = 0; w_in = 0; bli_x = 0; acc_in = 0; psum_in = 0; coef_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    ref_acc = 0;
    en = 1;
    for (int k = 0; k < 20; k++) begin
      feat_t a, w;
      a = feat_t'($urandom); w = feat_t'($urandom);
      a_in = a; w_in = w;
      ref_acc += acc_t'(a) * acc_t'(w);
      @(negedge clk);
      chk(a_out == a && w_out == w, "pass-through");
      chk(acc_out == ref_acc, $sformatf("mac step %0d got %0d exp %0d", k, acc_out, ref_acc));
    end
    en = 0;
    // hold when en low
    a_in = 5; w_in = 5; @(negedge clk);
    chk(acc_out == ref_acc, "hold");
    // drain
    drain = 1; acc_in = 32'sd12345; @(negedge clk); drain = 0;
    chk(acc_out == 32'sd12345, "drain");
    clear = 1; @(negedge clk); clear = 0;
    chk(acc_out == 0, "clear");
    // BLI: stationary coefficient
    bli_mode = 1; coef_load = 1; coef_in = 8'sd37; @(negedge clk); coef_load = 0;
    for (int k = 0; k < 10; k++) begin
      bli_x = feat_t'($urandom); psum_in = acc_t'($urandom % 10000) - 5000;
      #1;
      chk(psum_out == psum_in + 37 * acc_t'(bli_x), "bli psum");
      @(negedge clk);
    end
    // accumulator untouched in BLI mode
    en = 1; a_in = 9; w_in = 9; @(negedge clk); en = 0;
    chk(acc_out == 0, "bli mode leaves accumulator");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
