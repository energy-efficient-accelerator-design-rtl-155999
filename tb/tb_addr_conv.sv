// tb_addr_conv: self-checking test of the BLI address converter.
// Random indices and configurations; for each corner the expected word address
// (floor(b'/2)*j + floor(a'/2))*i - T0 + grp and the parity bank are computed
// here. Also checks that the four banks are distinct, that the per-bank
// outputs agree with the per-corner ones, and the two-cycle latency with one
// index per cycle.
module tb_addr_conv;
  import dcn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid;
  logic [IDX_W-1:0] alpha, beta;
  logic [15:0] grp, cfg_i, cfg_j, cfg_t0;
  logic [15:0] addr [4], bank_addr [4];
  logic [1:0]  bank [4], bank_corner [4];
  int checks = 0, failures = 0;

  addr_conv dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  typedef struct { int a, b, g, i, j, t0; } item_t;
  item_t pipe [$];

  function automatic int ebank(int b, int a);  // row from b, column from a
    bit ro, co;
    ro = b[0]; co = a[0];
    if (ro && co) return 0;
    if (ro && !co) return 1;
    if (!ro && !co) return 2;
    return 3;
  endfunction

  initial begin
    int n = 0;
    in_valid = 0; alpha = 0; beta = 0; grp = 0; cfg_i = 1; cfg_j = 8; cfg_t0 = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 300; cyc++) begin
      @(negedge clk);
      // check output of item issued two cycles ago
      if (out_valid) begin
        item_t it;
        it = pipe.pop_front();
        for (int k = 0; k < 4; k++) begin
          int ai, bi, ex;
          ai = (it.a >> 6) + ((k == 1 || k == 3) ? 1 : 0);   // rb, rt use ceil a
          bi = (it.b >> 6) + ((k == 2 || k == 3) ? 1 : 0);   // lt, rt use ceil b
          ex = ((bi / 2) * it.j + (ai / 2)) * it.i - it.t0 + it.g;
          chk(addr[k] == 16'(ex), $sformatf("corner %0d addr %0d exp %0d", k, addr[k], ex));
          chk(bank[k] == 2'(ebank(bi, ai)), "bank");
          chk(bank_addr[bank[k]] == addr[k] && bank_corner[bank[k]] == 2'(k), "per-bank alignment");
        end
        chk(bank[0] != bank[1] && bank[0] != bank[2] && bank[0] != bank[3] &&
            bank[1] != bank[2] && bank[1] != bank[3] && bank[2] != bank[3], "distinct banks");
        n++;
      end
      in_valid = ($urandom % 4) != 0;
      alpha  = IDX_W'($urandom % (40 * 64));
      beta   = IDX_W'($urandom % (40 * 64));
      if (cyc % 7 == 0) alpha[5:0] = 0;   // integer index
      cfg_i  = 16'(1 + $urandom % 4);
      cfg_j  = 16'(20 + $urandom % 4);
      cfg_t0 = 16'($urandom % 16);
      grp    = 16'($urandom % 4);
      if (in_valid) pipe.push_back('{int'(alpha), int'(beta), int'(grp), int'(cfg_i), int'(cfg_j), int'(cfg_t0)});
      // latency: result appears after exactly two clock edges
      if (in_valid) begin
        fork begin
          @(posedge clk); @(posedge clk); #1; chk(out_valid, "two-cycle latency");
        end join_none
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (4) @(negedge clk);
    chk(n > 150, "enough results");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
