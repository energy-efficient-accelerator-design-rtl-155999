// sram_1r1w: synchronous on-chip buffer with one write and one read port.
//
// Used for the output, weight, index and instruction buffers. A write takes
// effect at the clock edge when `we` is high; a read returns the word at
// `raddr` one cycle later (registered output). Reading the address being
// written in the same cycle returns the old word. The contents are not reset;
// only the read register is. Capacity = WIDTH * DEPTH bits; the defaults give
// 256 KB (the weight buffer's size). The port structure and latency are this
// design's choices; the capacities of the individual buffers follow the paper.
module sram_1r1w #(
  parameter int WIDTH = 256,
  parameter int DEPTH = 8192,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rdata <= '0;
    else        rdata <= mem[raddr];
  end

endmodule
