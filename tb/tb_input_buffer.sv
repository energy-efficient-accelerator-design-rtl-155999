// tb_input_buffer: self-checking test of the four-bank input buffer.
// Writes random words into random banks and addresses, then reads four
// independent addresses (one per bank) each cycle and checks all four words
// one cycle later against a copy kept here.
module tb_input_buffer;
  import dcn_pkg::*;
  localparam int CH = 8, DEPTH = 32, AW = 5, W = CH * FEAT_W;
  logic clk = 0, rst_n = 0;
  logic wr_en;
  logic [1:0] wr_bank;
  logic [AW-1:0] wr_addr;
  logic [W-1:0] wr_data;
  logic [AW-1:0] rd_addr [4];
  logic [W-1:0] rd_data [4];
  logic [W-1:0] model [4][DEPTH];
  int checks = 0, failures = 0;

  input_buffer #(.CH(CH), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [W-1:0] exp_d [4];
    wr_en = 0; wr_bank = 0; wr_addr = 0; wr_data = 0;
    foreach (rd_addr[b]) rd_addr[b] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int b = 0; b < 4; b++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = 2'(b); wr_addr = AW'(a); wr_data = {$urandom, $urandom};
        model[b][a] = wr_data;
      end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 200; n++) begin
      foreach (rd_addr[b]) begin
        rd_addr[b] = AW'($urandom);
        exp_d[b] = model[b][rd_addr[b]];
      end
      @(negedge clk);
      foreach (rd_data[b]) chk(rd_data[b] == exp_d[b], $sformatf("bank %0d", b));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
