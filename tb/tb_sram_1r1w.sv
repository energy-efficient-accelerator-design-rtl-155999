// tb_sram_1r1w: self-checking test of the one-write one-read buffer memory.
// Writes random words to random addresses while reading others, keeps a copy
// here, and checks every read one cycle later, including a read of the address
// written in the same cycle (old word expected).
module tb_sram_1r1w;
  localparam int WIDTH = 40, DEPTH = 64, AW = 6;
  logic clk = 0, rst_n = 0;
  logic we;
  logic [AW-1:0] waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;
  int checks = 0, failures = 0;
  logic [WIDTH-1:0] model [DEPTH];
  logic [WIDTH-1:0] expq;
  logic expv;

  sram_1r1w #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);
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
    we = 0; waddr = 0; raddr = 0; wdata = 0; expv = 0; expq = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = {$urandom, $urandom}; model[a] = wdata;
    end
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      if (expv) chk(rdata == expq, $sformatf("read %0d", n));
      raddr = AW'($urandom);
      we = ($urandom % 2) == 1;
      waddr = (n % 5 == 0) ? raddr : AW'($urandom);
      wdata = {$urandom, $urandom};
      expq = model[raddr];
      expv = 1;
      if (we) model[waddr] = wdata;
    end
    @(negedge clk);
    chk(rdata == expq, "last read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
