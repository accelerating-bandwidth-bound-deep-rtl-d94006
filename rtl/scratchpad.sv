// scratchpad: PIM-local SRAM for the localized B and C matrices.
//
// SP_BYTES of storage organised as lines of W 32-bit words, W being the SIMD width, so one
// line feeds or drains all lanes of the vector unit in one cycle. One synchronous read port
// (data one cycle after the request) and one write port with a per-word write enable, so
// cache blocks of 16 words can be written into lines wider or narrower than a block. A read
// and a write to the same line in one cycle return the old data. Sizes follow the paper
// (8 KB with 8-wide SIMD for StepStone-BG, 32 KB / 32-wide for -DV, 256 KB / 256-wide for
// -CH); the line organisation and port count are this design's choice. Written as an array
// so a synthesis flow can map it onto an SRAM macro.
module scratchpad #(
  parameter int unsigned W        = 8,
  parameter int unsigned SP_BYTES = 8192,
  localparam int unsigned LINES   = SP_BYTES / (4 * W),
  localparam int unsigned LA_W    = $clog2(LINES)
) (
  input  logic                clk,
  input  logic                re,
  input  logic [LA_W-1:0]     raddr,
  output logic [W-1:0][31:0]  rdata,
  input  logic [W-1:0]        we,
  input  logic [LA_W-1:0]     waddr,
  input  logic [W-1:0][31:0]  wdata
);
  logic [W-1:0][31:0] mem [LINES];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    for (int l = 0; l < W; l++)
      if (we[l]) mem[waddr][l] <= wdata[l];
  end
endmodule
