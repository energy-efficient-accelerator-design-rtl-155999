// tb_pe_array: self-checking test of the clustered 16x32 PE array.
// Standard mode: a random 16xK by Kx32 matrix product fed one step per cycle
// (the array skews internally), run for K+ROWS+COLS-1 enabled cycles, then
// drained bottom row first; every result is compared with a product computed
// here. BLI mode: random coefficients broadcast to all 128 clusters and random
// neighbours per channel; each B-O must equal floor(sum(coef*x)/64), one cycle
// after the features.
module tb_pe_array;
  import dcn_pkg::*;
  localparam int ROWS = 16, COLS = 32, CL = 4, NCL = ROWS / CL * COLS, K = 12;
  logic clk = 0, rst_n = 0;
  logic bli_mode, en, clear, drain, coef_load;
  feat_t feat_in [ROWS];
  feat_t wgt_in [COLS];
  acc_t  col_out [COLS];
  coef_t coef [CL];
  feat_t bli_x [NCL][CL];
  feat_t bo [NCL];
  int checks = 0, failures = 0;

  pe_array #(.ROWS(ROWS), .COLS(COLS), .CL(CL)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  feat_t A [ROWS][K];
  feat_t B [K][COLS];
  acc_t  R [ROWS][COLS];

  initial begin
    bli_mode = 0; en = 0; clear = 0; drain = 0; coef_load = 0;
    foreach (feat_in[r]) feat_in[r] = 0;
    foreach (wgt_in[c]) wgt_in[c] = 0;
    foreach (coef[k]) coef[k] = 0;
    foreach (bli_x[k, j]) bli_x[k][j] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      foreach (A[r, k]) A[r][k] = feat_t'($urandom);
      foreach (B[k, c]) B[k][c] = feat_t'($urandom);
      foreach (R[r, c]) begin
        R[r][c] = 0;
        for (int k = 0; k < K; k++) R[r][c] += acc_t'(A[r][k]) * acc_t'(B[k][c]);
      end
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      en = 1;
      for (int t = 0; t < K + ROWS + COLS - 1; t++) begin
        foreach (feat_in[r]) feat_in[r] = (t < K) ? A[r][t] : '0;
        foreach (wgt_in[c])  wgt_in[c]  = (t < K) ? B[t][c] : '0;
        @(negedge clk);
      end
      en = 0;
      drain = 1;
      for (int d = 0; d < ROWS; d++) begin
        #1;
        foreach (col_out[c])
          chk(col_out[c] == R[ROWS-1-d][c], $sformatf("rep %0d row %0d col %0d got %0d exp %0d",
              rep, ROWS-1-d, c, col_out[c], R[ROWS-1-d][c]));
        @(negedge clk);
      end
      drain = 0;
    end
    // ---- BLI mode ----
    bli_mode = 1;
    for (int it = 0; it < 8; it++) begin
      int da, db, gm;
      int expv [NCL];
      da = $urandom % 64; db = $urandom % 64; gm = (da * db) >> 6;
      coef[0] = coef_t'(64 - da - db + gm); coef[1] = coef_t'(db - gm);
      coef[2] = coef_t'(da - gm);           coef[3] = coef_t'(gm);
      coef_load = 1; @(negedge clk); coef_load = 0;
      foreach (bli_x[k, j]) bli_x[k][j] = feat_t'($urandom);
      for (int k = 0; k < NCL; k++) begin
        int s;
        s = 0;
        for (int j = 0; j < CL; j++) s += int'(coef[j]) * int'(bli_x[k][j]);
        expv[k] = s >>> 6;
      end
      @(negedge clk);
      for (int k = 0; k < NCL; k++)
        chk(bo[k] == feat_t'(expv[k]), $sformatf("bli cluster %0d got %0d exp %0d", k, bo[k], expv[k]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
