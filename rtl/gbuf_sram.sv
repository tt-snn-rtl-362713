// gbuf_sram: SRAM global buffer with one bit-masked write port and NRD
// synchronous read ports (data one cycle after the address).
//
// The accelerator has five such buffers: the 32 kB input spike buffer, the
// 32 kB output buffer behind cluster 1, the 32 kB membrane-potential (MemP)
// buffer and the 32 kB output spike buffer, plus the four banks of the
// 144 kB filter buffer. The capacities follow the paper; word widths, port
// counts and read latency are this design's choice. Written as an array, so
// synthesis maps it to a memory; a real chip would use an SRAM macro of the
// same ports. The contents are not reset. A read and a write of the same
// address in one cycle return the old word.
module gbuf_sram #(
  parameter int unsigned WIDTH = 128,
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned NRD   = 1,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [WIDTH-1:0] wmask,
  input  logic             re    [NRD],
  input  logic [AW-1:0]    raddr [NRD],
  output logic [WIDTH-1:0] rdata [NRD]
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= (mem[waddr] & ~wmask) | (wdata & wmask);
  end

  for (genvar p = 0; p < NRD; p++) begin : g_rd
    always_ff @(posedge clk) begin
      if (re[p]) rdata[p] <= mem[raddr[p]];
    end
  end
endmodule
