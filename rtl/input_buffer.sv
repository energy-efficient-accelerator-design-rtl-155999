// input_buffer: the parity-banked input feature buffer.
//
// The input feature map is split into four partitions by the parity of each
// feature's (row, column) coordinate, and each partition lives in its own
// bank; bank numbering follows addr_conv (0 odd row/odd col, 1 odd row/even
// col, 2 even row/even col, 3 even row/odd col). Within a bank, features are
// stored channel-major and a word holds CH channels of one position, so the
// four bilinear neighbours of CH channels are read in a single cycle, one word
// from each bank.
//
// Interface: one write port (bank, address, word) and an independent read
// address per bank. Read data appears one cycle after the address (registered
// output). Contents are not reset. Default capacity 4 banks x 256 words x
// 128 bytes = 128 KB. The four parity banks and the wide channel-major word
// follow the paper; the port arrangement and latency are this design's choices.
module input_buffer
  import dcn_pkg::*;
#(
  parameter int CH    = 128,
  parameter int DEPTH = 256,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                wr_en,
  input  logic [1:0]          wr_bank,
  input  logic [AW-1:0]       wr_addr,
  input  logic [CH*FEAT_W-1:0] wr_data,
  input  logic [AW-1:0]       rd_addr [4],
  output logic [CH*FEAT_W-1:0] rd_data [4]
);

  for (genvar b = 0; b < 4; b++) begin : g_bank
    sram_1r1w #(.WIDTH(CH*FEAT_W), .DEPTH(DEPTH)) u_bank (
      .clk, .rst_n,
      .we    (wr_en && wr_bank == 2'(b)),
      .waddr (wr_addr),
      .wdata (wr_data),
      .raddr (rd_addr[b]),
      .rdata (rd_data[b])
    );
  end

endmodule
