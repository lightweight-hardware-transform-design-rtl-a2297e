// MTS coefficient ROM.
//
// Holds the coefficient vectors that feed the 32 regular multipliers of the
// 1-D inverse MTS core: 32 coefficients of 8 bits per row (256-bit rows),
// one row per input cycle of a line.  Only DCT-II (4..64 points) and DST-VII
// (4..32 points) are stored; DCT-VIII reuses the DST-VII rows.
//
// Row layout (this design's choice; the paper stores 68 rows of 256 bits in
// a layout it does not detail):
//   * zeroing lines (64-pt DCT-II, 32-pt DST-VII): row c holds basis row c,
//     multiplier j gets T[c][j] for output sample j;
//   * all other lines: row c feeds the multiplier pair (2n, 2n+1) with
//     T[2c][n] and T[2c+1][n], n < min(N,16).
// The contents are computed at elaboration from the kernel functions of
// vvc_tr_pkg, giving 92 rows.
//
// Timing: registered read, data valid one cycle after rd_en/address.
module mts_rom
  import vvc_tr_pkg::*;
#(
  parameter int unsigned ROWS = MTS_ROM_ROWS
) (
  input  logic                     clk,
  input  logic                     rd_en,
  input  logic                     is_dst,   // 1: DST-VII (also used for DCT-VIII)
  input  size_code_t               size,     // 0:4 .. 4:64
  input  logic [4:0]               row,      // input cycle index within the line
  output logic [NMULT*COEF_W-1:0]  coef      // coefficient of multiplier j in [8j+7:8j]
);

  typedef logic [NMULT*COEF_W-1:0] row_t;
  typedef row_t rom_t [ROWS];

  function automatic rom_t build_rom();
    rom_t r;
    row_t rw;
    int   v, base, n_pt;
    for (int i = 0; i < ROWS; i++) r[i] = '0;
    for (int d = 0; d < 2; d++) begin
      for (int s = 0; s < 5; s++) begin
        if (d == 1 && s == 4) continue;
        n_pt = 4 << s;
        base = mts_rom_base(d[0], s);
        for (int c = 0; c < n_pt / 2; c++) begin
          rw = '0;
          for (int j = 0; j < 32; j++) begin
            if ((d == 0 && s == 4) || (d == 1 && s == 3)) begin
              // zeroing: multiplier j -> output j, basis row c
              v = (d == 0) ? dct2_coef(n_pt, c, j) : dst7_coef(n_pt, c, j);
            end else if (j / 2 < n_pt && j / 2 < 16) begin
              // pair: multiplier 2n+b -> basis row 2c+b, output n
              v = (d == 0) ? dct2_coef(n_pt, 2 * c + j % 2, j / 2)
                           : dst7_coef(n_pt, 2 * c + j % 2, j / 2);
            end else begin
              v = 0;
            end
            rw[COEF_W*j +: COEF_W] = COEF_W'(v);
          end
          r[base + c] = rw;
        end
      end
    end
    return r;
  endfunction

  localparam rom_t ROM = build_rom();

  logic [6:0] addr;
  always_comb addr = 7'(mts_rom_base(is_dst, int'(size)) + int'(row));

  always_ff @(posedge clk) begin
    if (rd_en) coef <= (int'(addr) < ROWS) ? ROM[addr] : '0;
  end

endmodule
