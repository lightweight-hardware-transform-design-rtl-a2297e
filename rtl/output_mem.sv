// Output memory of the transform: 1 read / 1 write port SRAM model.
//
// What it does.  Receives the residual samples of the final (horizontal)
// pass, two per cycle, and holds them for the reader (the reconstruction).
// One word is a row pair (row r, columns 2k and 2k+1), address {bank, r, k};
// the default 4096 words hold two 64x64 blocks.
//
// Interface and timing.  Write: we, waddr, wdata (two NBO-bit samples).
// Read: re, raddr; rdata is valid the cycle after re.
//
// The 2 samples/cycle output and the shared output memory follow the
// paper; the size and word layout are this design's.
module output_mem #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned DW    = vvc_tr_pkg::NBO
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [1:0][DW-1:0]       wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [1:0][DW-1:0]       rdata
);
  logic [1:0][DW-1:0] mem [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  end

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
