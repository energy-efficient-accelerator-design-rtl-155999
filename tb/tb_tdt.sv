// tb_tdt: self-checking test of the tile dependency table.
// Builds a table on a 40x40 map with 5x5 tiles (boundaries 8, 16, 24, 32),
// then on 8x8 tiles, from random indices tagged with random output tiles, and
// compares every entry with a table computed here: input tile =
// (number of row boundaries <= alpha) * grid + (number of column boundaries
// <= beta). Also checks the paper's worked example: alpha between 0.4H and
// 0.6H and beta between 0.2H and 0.4H give input tile 11.
module tb_tdt;
  import dcn_pkg::*;
  localparam int G = 8, NT = 64;
  logic clk = 0, rst_n = 0;
  logic clear, upd_valid, busy;
  logic [5:0] upd_out_tile;
  logic [9:0] alpha_int, beta_int;
  logic [3:0] cfg_grid;
  logic [9:0] cfg_bound_a [G-1];
  logic [9:0] cfg_bound_b [G-1];
  logic [NT-1:0] dep [NT];
  logic [NT-1:0] model [NT];
  int checks = 0, failures = 0;

  tdt dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run(input int grid, input int h, input int nidx);
    int ntiles;
    ntiles = grid * grid;
    cfg_grid = 4'(grid);
    for (int k = 0; k < G - 1; k++) begin
      cfg_bound_a[k] = 10'((k + 1) * h / grid);
      cfg_bound_b[k] = 10'((k + 1) * h / grid);
    end
    foreach (model[t]) model[t] = '0;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int n = 0; n < nidx; n++) begin
      int a, b, r, c;
      upd_valid = 1;
      upd_out_tile = 6'($urandom % ntiles);
      a = $urandom % h; b = $urandom % h;
      if (n == 0) begin a = h * 5 / 10; b = h * 3 / 10; end   // worked example
      alpha_int = 10'(a); beta_int = 10'(b);
      r = 0; c = 0;
      for (int k = 1; k < grid; k++) begin
        if (a >= k * h / grid) r++;
        if (b >= k * h / grid) c++;
      end
      if (n == 0 && grid == 5) chk(r * grid + c == 11, "worked example is tile 11");
      model[upd_out_tile][r * grid + c] = 1'b1;
      @(negedge clk);
    end
    upd_valid = 0;
    chk(busy, "second stage busy right after the last index");
    @(negedge clk);
    chk(!busy, "idle two cycles after the last index");
    for (int t = 0; t < NT; t++) chk(dep[t] == model[t], $sformatf("grid %0d entry %0d", grid, t));
  endtask

  initial begin
    clear = 0; upd_valid = 0; upd_out_tile = 0; alpha_int = 0; beta_int = 0; cfg_grid = 5;
    foreach (cfg_bound_a[k]) begin cfg_bound_a[k] = 0; cfg_bound_b[k] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    run(5, 40, 300);
    run(8, 64, 600);
    run(3, 30, 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
