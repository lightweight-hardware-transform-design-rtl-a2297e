// Input memory of the transform: 1 read / 1 write port SRAM model.
//
// What it does.  Holds the dequantised coefficients of a block and the
// intermediate result between the vertical and the horizontal pass.  One
// word is a 2x2 tile of samples, so both a column pair (rows 2k, 2k+1) and a
// row pair (columns 2c, 2c+1) lie in one word; a lane mask writes single
// samples.
//
// Interface and timing.  Write: we, waddr, wmask (one bit per lane), wdata.
// Read: re, raddr; rdata is valid the cycle after re (registered read).
// Lane l of a tile holds the sample at (row 2i + l[1], col 2j + l[0]).
//
// The shared input/output memories follow the paper; the size (2 areas of
// 64x64 samples), the tile layout and the 1R1W organisation are this
// design's.
module input_mem #(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned LANES = 4,
  parameter int unsigned DW    = vvc_tr_pkg::NBI
) (
  input  logic                         clk,
  input  logic                         we,
  input  logic [$clog2(DEPTH)-1:0]     waddr,
  input  logic [LANES-1:0]             wmask,
  input  logic [LANES-1:0][DW-1:0]     wdata,
  input  logic                         re,
  input  logic [$clog2(DEPTH)-1:0]     raddr,
  output logic [LANES-1:0][DW-1:0]     rdata
);
  logic [LANES-1:0][DW-1:0] mem [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  end

  always_ff @(posedge clk) begin
    if (we)
      for (int l = 0; l < LANES; l++)
        if (wmask[l]) mem[waddr][l] <= wdata[l];
    if (re) rdata <= mem[raddr];
  end
endmodule
