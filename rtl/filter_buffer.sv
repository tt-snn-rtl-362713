// filter_buffer: the 144 kB weight global buffer, split into four 36 kB
// banks, one per TT core, so that all clusters can be fed in the same cycle
// (cluster 1 streams w(1) while clusters 2 and 3 fill their scratch pads
// with w(2) and w(3), and cluster 4 streams w(4)).
//
// Bank layout (8-bit signed weights, R = TT rank, I/O = in/out channels):
//   bank 0, w(1): 8 bytes/word, word rt*I + k holds w1[k][rt*8 + j], j=0..7
//   bank 1, w(2): 4 bytes/word, word sel*8 + r holds, for PE row r and
//           scratch-pad index sel = (g*NCHUNK + ch)*3 + tap, the 3x1 kernel
//           tap of output rank channel g*4 + j and input channel ch*8 + r
//   bank 2, w(3): same layout for the 1x3 kernel
//   bank 3, w(4): 8 bytes/word, word ot*R + k holds w4[k][ot*8 + j]
// Byte j of a word is bits [8j+7:8j]. The host writes one word per cycle
// (wr_bank selects the bank, 4-byte banks take wr_data[31:0]); each bank has
// its own read port with data one cycle after the address.
// The 144 kB total follows the paper; the banking and layouts are this
// design's choice.
module filter_buffer
  import ttsnn_pkg::*;
#(
  parameter int unsigned BANK_BYTES = FILTER_BUF_BYTES / 4,
  localparam int unsigned W8   = OS_COLS * 8,        // 64-bit banks
  localparam int unsigned W4   = WS_COLS * 8,        // 32-bit banks
  localparam int unsigned D8   = BANK_BYTES / (W8 / 8),
  localparam int unsigned D4   = BANK_BYTES / (W4 / 8),
  localparam int unsigned AW8  = $clog2(D8),
  localparam int unsigned AW4  = $clog2(D4)
) (
  input  logic           clk,
  // host write port
  input  logic           wr_en,
  input  logic [1:0]     wr_bank,
  input  logic [AW4-1:0] wr_addr,
  input  logic [W8-1:0]  wr_data,
  // w(1) read (cluster 1)
  input  logic           rd1_en,
  input  logic [AW8-1:0] rd1_addr,
  output logic [W8-1:0]  rd1_data,
  // w(2), w(3) read (scratch-pad fill of clusters 2 and 3, same address)
  input  logic           rd23_en,
  input  logic [AW4-1:0] rd23_addr,
  output logic [W4-1:0]  rd2_data,
  output logic [W4-1:0]  rd3_data,
  // w(4) read (cluster 4)
  input  logic           rd4_en,
  input  logic [AW8-1:0] rd4_addr,
  output logic [W8-1:0]  rd4_data
);
  logic           re1 [1], re23 [1], re4 [1];
  logic [AW8-1:0] ra1 [1], ra4 [1];
  logic [AW4-1:0] ra23 [1];
  logic [W8-1:0]  d1 [1], d4 [1];
  logic [W4-1:0]  d2 [1], d3 [1];

  always_comb begin
    re1[0] = rd1_en;   ra1[0]  = rd1_addr;
    re23[0] = rd23_en; ra23[0] = rd23_addr;
    re4[0] = rd4_en;   ra4[0]  = rd4_addr;
    rd1_data = d1[0]; rd2_data = d2[0]; rd3_data = d3[0]; rd4_data = d4[0];
  end

  gbuf_sram #(.WIDTH(W8), .DEPTH(D8), .NRD(1)) u_w1 (
    .clk, .we(wr_en && wr_bank == 2'd0), .waddr(wr_addr[AW8-1:0]), .wdata(wr_data),
    .wmask('1), .re(re1), .raddr(ra1), .rdata(d1));
  gbuf_sram #(.WIDTH(W4), .DEPTH(D4), .NRD(1)) u_w2 (
    .clk, .we(wr_en && wr_bank == 2'd1), .waddr(wr_addr), .wdata(wr_data[W4-1:0]),
    .wmask('1), .re(re23), .raddr(ra23), .rdata(d2));
  gbuf_sram #(.WIDTH(W4), .DEPTH(D4), .NRD(1)) u_w3 (
    .clk, .we(wr_en && wr_bank == 2'd2), .waddr(wr_addr), .wdata(wr_data[W4-1:0]),
    .wmask('1), .re(re23), .raddr(ra23), .rdata(d3));
  gbuf_sram #(.WIDTH(W8), .DEPTH(D8), .NRD(1)) u_w4 (
    .clk, .we(wr_en && wr_bank == 2'd3), .waddr(wr_addr[AW8-1:0]), .wdata(wr_data),
    .wmask('1), .re(re4), .raddr(ra4), .rdata(d4));
endmodule
