// tb_pe_cluster: self-checking test of a four-PE cluster.
// BLI mode: random coefficients that sum to 64 and random features; B-O must
// equal floor(sum(coef*x)/64) one cycle after the features. Standard mode:
// a 4-row output-stationary accumulation and a drain that moves the four
// accumulators out of the bottom, bottom row first.
module tb_pe_cluster;
  import dcn_pkg::*;
  localparam int CL = 4;
  logic clk = 0, rst_n = 0;
  logic bli_mode, en, clear, drain, coef_load;
  feat_t a_in [CL], a_out [CL], bli_x [CL];
  feat_t w_in, w_out, bo;
  acc_t acc_in, acc_out;
  coef_t coef [CL];
  int checks = 0, failures = 0;

  pe_cluster dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #50000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    acc_t ref_acc [CL];
    feat_t wd [CL];
    bli_mode = 0; en = 0; clear = 0; drain = 0; coef_load = 0;
    w_in = 0; acc_in = 0;
    for (int k = 0; k < CL; k++) begin a_in[k] = 0; bli_x[k] = 0; coef[k] = 0; ref_acc[k] = 0; wd[k] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    // ---- BLI ----
    @(negedge clk);
    bli_mode = 1;
    for (int it = 0; it < 40; it++) begin
      int da, db, gm, s, exp_v;
      da = $urandom % 64; db = $urandom % 64; gm = (da * db) >> 6;
      coef[0] = coef_t'(64 - da - db + gm); coef[1] = coef_t'(db - gm);
      coef[2] = coef_t'(da - gm);           coef[3] = coef_t'(gm);
      coef_load = 1; @(negedge clk); coef_load = 0;
      s = 0;
      for (int k = 0; k < CL; k++) begin
        bli_x[k] = feat_t'($urandom);
        s += int'(coef[k]) * int'(bli_x[k]);
      end
      exp_v = s >>> 6;
      @(negedge clk);
      chk(bo == feat_t'(exp_v), $sformatf("bli it %0d got %0d exp %0d", it, bo, exp_v));
      chk(acc_out == 0, "select 1 keeps the column chain quiet");
    end
    // ---- standard mode ----
    bli_mode = 0;
    clear = 1; @(negedge clk); clear = 0;
    en = 1;
    // weight moves down one PE per cycle: PE k sees w_in of cycle t-k
    for (int t = 0; t < 12 + CL; t++) begin
      w_in = (t < 12) ? feat_t'($urandom) : '0;
      for (int k = 0; k < CL; k++) a_in[k] = feat_t'($urandom);
      // PE k uses weight wd[k] (w_in delayed by k) and a_in[k]
      for (int k = CL-1; k > 0; k--) wd[k] = wd[k-1];
      wd[0] = w_in;
      for (int k = 0; k < CL; k++) ref_acc[k] += acc_t'(a_in[k]) * acc_t'(wd[k]);
      @(negedge clk);
      for (int k = 0; k < CL; k++) chk(a_out[k] == a_in[k], "feature passes right");
    end
    en = 0;
    drain = 1;
    for (int d = 0; d < CL; d++) begin
      #1;
      chk(acc_out == ref_acc[CL-1-d], $sformatf("drain row %0d got %0d exp %0d", CL-1-d, acc_out, ref_acc[CL-1-d]));
      @(negedge clk);
    end
    drain = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
