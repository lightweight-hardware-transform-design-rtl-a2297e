// End-to-end testbench of vvc_itr_top (default parameters, full size).
//
// What it checks.  Blocks of every size 4..64 in width and height with all
// type pairs (DCT-II, DST-VII, DCT-VIII), blocks with LFNST (4x4 and 8x8
// with 8 inputs, 4xN and Nx4 with 16 inputs and 16 outputs, larger blocks
// with 48 outputs, all sets and both indices) and HEVC/AVC-style blocks
// (AVC_VVC = 0, DCT-II only) are loaded through the inverse quantiser port,
// transformed and read back from the output memory.  The expected residual
// comes from a direct 2-D matrix product with the same kernels and
// roundings (vertical: >>7, 16-bit clip; horizontal: >>10, 11-bit clip);
// for LFNST blocks the expected coefficients come from a direct product
// with the kernel ROM model.  Coefficients are only placed where the
// standard allows non-zero values (zeroing regions, LFNST inputs), so the
// reference is exact.
// The time from start to done is checked against the fixed schedule:
// W*H cycles for the two passes plus the fixed pipeline latencies (and
// the fixed LFNST phase), independent of the kernel types.
// Mechanisms counted (each must occur): LFNST phase, bypass lines, zeroed
// lines (64-point DCT-II, 32-point DST-VII/DCT-VIII), DST-VII and DCT-VIII
// lines, HEVC/AVC mode and a switch of line size between the passes.
//
// The inverse quantiser is outside the design; the testbench models it as
// iq_coef0/1 = 2 * iq_level0/1.  The LFNST kernel ROM is the behavioural model
// lfnst_rom_model (not the standard's trained kernels).
module tb_vvc_itr_top;
  import vvc_tr_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                    ld_valid = 1'b0;
  logic [5:0]              ld_row = '0, ld_col = '0;
  logic signed [15:0]      ld_level0 = '0, ld_level1 = '0;
  logic signed [15:0]      iq_level0, iq_level1;
  logic signed [NBI-1:0]   iq_coef0, iq_coef1;
  logic                    start = 1'b0, AVC_VVC = 1'b1;
  size_code_t              tr_width = '0, tr_height = '0;
  tr_type_e                MTS_type_hor = TR_DCT2, MTS_type_ver = TR_DCT2;
  logic [1:0]              LFNST_set_idx = '0, LFNST_idx = '0;
  logic                    busy, done, out_bank;
  logic                    rd_en = 1'b0;
  logic [11:0]             rd_addr = '0;
  logic [1:0][NBO-1:0]     rd_data;
  logic                    lfnst_rom_en;
  logic [7:0]              lfnst_rom_addr;
  logic [NMULT*COEF_W-1:0] lfnst_rom_data;
  logic                    ev_lfnst, ev_bypass;

  vvc_itr_top dut (.*);

  lfnst_rom_model u_rom (.clk(clk), .en(lfnst_rom_en), .addr(lfnst_rom_addr), .data(lfnst_rom_data));

  // inverse quantiser model
  always_comb iq_coef0 = NBI'(2 * int'(iq_level0));
  always_comb iq_coef1 = NBI'(2 * int'(iq_level1));

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #20_000_000;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // mechanism counters
  int n_lfnst_ev = 0, n_bypass = 0, n_zero = 0, n_dst = 0, n_dct8 = 0, n_avc = 0, n_switch = 0;
  always @(posedge clk) begin
    if (ev_lfnst) n_lfnst_ev++;
    if (ev_bypass) n_bypass++;
  end

  function automatic int ref_coef(tr_type_e t, int n_pt, int k, int n);
    if (t == TR_DCT2) return dct2_coef(n_pt, k, n);
    if (t == TR_DST7) return dst7_coef(n_pt, k, n);
    return ((k % 2) ? -1 : 1) * dst7_coef(n_pt, k, n_pt - 1 - n);
  endfunction

  function automatic int lcoef(input int a, input int lane);
    return ((a * 37 + lane * 11 + a * lane * 5) % 255) - 127;
  endfunction

  function automatic int clip(longint v, int lo, int hi);
    if (v < lo) return lo;
    if (v > hi) return hi;
    return int'(v);
  endfunction

  int C [64][64];
  int M [64][64];
  int R [64][64];

  task automatic run_block(int wsz, int hsz, tr_type_e th, tr_type_e tv, int lset, int lidx, int vvc, int amp);
    int w, h, ew, eh, nin, nout, lf;
    int z[16];
    int y[48];
    longint acc;
    int t0, t1, exp_cyc;
    logic bank;
    tr_type_e eth, etv;
    int dpos[16];
    dpos = '{0, 4, 1, 8, 5, 2, 12, 9, 6, 3, 13, 10, 7, 14, 11, 15};
    w = 4 << wsz; h = 4 << hsz;
    eth = vvc ? th : TR_DCT2;
    etv = vvc ? tv : TR_DCT2;
    lf = (vvc != 0) && (lidx != 0) && (th == TR_DCT2) && (tv == TR_DCT2);
    ew = eff_len(eth, 3'(wsz));
    eh = eff_len(etv, 3'(hsz));
    if (etv != TR_DCT2 || eth != TR_DCT2) begin
      if (etv == TR_DST7 || eth == TR_DST7) n_dst++;
      if (etv == TR_DCT8 || eth == TR_DCT8) n_dct8++;
    end
    if (is_zero_mode(eth, 3'(wsz)) || is_zero_mode(etv, 3'(hsz))) n_zero++;
    if (!vvc) n_avc++;
    if (w != h) n_switch++;
    for (int r = 0; r < 64; r++) for (int c = 0; c < 64; c++) C[r][c] = 0;
    // load levels
    nin = ((w == 4 && h == 4) || (w == 8 && h == 8)) ? 8 : 16;
    nout = (w >= 8 && h >= 8) ? 48 : 16;
    for (int r = 0; r < h; r++)
      for (int c = 0; c < w; c++) begin
        int lv;
        lv = 0;
        if (lf) begin
          for (int i = 0; i < nin; i++)
            if (dpos[i] == r * 4 + c && r < 4 && c < 4) lv = int'($urandom_range(0, 2 * amp)) - amp;
        end else if (r < eh && c < ew) begin
          lv = int'($urandom_range(0, 2 * amp)) - amp;
        end
        C[r][c] = 2 * lv;
        if (c % 2 == 0) begin
          ld_valid <= 1'b1; ld_row <= 6'(r); ld_col <= 6'(c); ld_level0 <= 16'(lv);
        end else begin
          ld_level1 <= 16'(lv);
          @(posedge clk);
        end
      end
    ld_valid <= 1'b0;
    // LFNST reference
    if (lf) begin
      for (int i = 0; i < 16; i++) z[i] = (i < nin) ? C[dpos[i] / 4][dpos[i] % 4] : 0;
      for (int j = 0; j < nout; j++) begin
        int addr;
        addr = (lset * 2 + lidx - 1) * 32 + ((nout == 48) ? 8 : 0) + j / 2;
        acc = 0;
        for (int i = 0; i < 16; i++) acc += longint'(lcoef(addr, 16 * (j % 2) + i)) * z[i];
        y[j] = clip((acc + 64) >>> 7, -32768, 32767);
      end
      for (int r = 0; r < 8; r++) for (int c = 0; c < 8; c++) C[r][c] = 0;
      for (int j = 0; j < nout; j++) begin
        if (nout == 16) C[j / 4][j % 4] = y[j];
        else if (j < 32) C[j / 8][j % 8] = y[j];
        else C[4 + (j - 32) / 4][(j - 32) % 4] = y[j];
      end
    end
    // separable reference: vertical then horizontal
    for (int c = 0; c < w; c++)
      for (int r = 0; r < h; r++) begin
        acc = 0;
        for (int k = 0; k < h; k++) acc += longint'(ref_coef(etv, h, k, r)) * C[k][c];
        M[r][c] = clip((acc + 64) >>> 7, -32768, 32767);
      end
    for (int r = 0; r < h; r++)
      for (int c = 0; c < w; c++) begin
        acc = 0;
        for (int k = 0; k < ew; k++) acc += longint'(ref_coef(eth, w, k, c)) * M[r][k];
        R[r][c] = clip((acc + 512) >>> 10, -1024, 1023);
      end
    // run
    start <= 1'b1; AVC_VVC <= vvc[0]; tr_width <= 3'(wsz); tr_height <= 3'(hsz);
    MTS_type_hor <= th; MTS_type_ver <= tv; LFNST_set_idx <= 2'(lset); LFNST_idx <= 2'(lidx);
    @(posedge clk);
    t0 = cycle;
    start <= 1'b0;
    bank = out_bank;
    while (!done) @(posedge clk);
    t1 = cycle;
    // fixed schedule: two passes of W*H/2 cycles, 2 x (L1 + L2) + 5 cycles,
    // and 6 + L1 + W_LFNST cycles for the LFNST phase
    exp_cyc = w * h + 2 * (LFNST_LAT + MTS_LAT) + 5 + (lf ? 6 + LFNST_LAT + nout / 2 : 0);
    checks++;
    if (t1 - t0 != exp_cyc) begin
      failures++;
      $display("cycle count %0dx%0d lf=%0d: %0d expected %0d", w, h, lf, t1 - t0, exp_cyc);
    end
    // read back
    for (int r = 0; r < h; r++)
      for (int k = 0; k < w / 2; k++) begin
        rd_en <= 1'b1; rd_addr <= {bank, 6'(r), 5'(k)};
        @(posedge clk);
        rd_en <= 1'b0;
        @(negedge clk);
        checks++;
        if (int'($signed(rd_data[0])) != R[r][2*k] || int'($signed(rd_data[1])) != R[r][2*k+1]) begin
          failures++;
          if (failures < 12)
            $display("data %0dx%0d th=%0d tv=%0d lf=%0d vvc=%0d (%0d,%0d): got %0d %0d exp %0d %0d",
                     w, h, th, tv, lf, vvc, r, 2*k, $signed(rd_data[0]), $signed(rd_data[1]), R[r][2*k], R[r][2*k+1]);
        end
        @(posedge clk);
      end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // all sizes with DCT-II
    for (int ws = 0; ws < 5; ws++)
      for (int hs = 0; hs < 5; hs++)
        run_block(ws, hs, TR_DCT2, TR_DCT2, 0, 0, 1, 300);
    // DST-VII / DCT-VIII for sizes 4..32
    for (int ws = 0; ws < 4; ws++)
      for (int hs = 0; hs < 4; hs++)
        run_block(ws, hs, tr_type_e'(1 + ((ws + hs) % 2)), tr_type_e'(2 - ((ws + hs) % 2)), 0, 0, 1, 300);
    run_block(1, 1, TR_DST7, TR_DST7, 0, 0, 1, 300);
    run_block(2, 0, TR_DCT8, TR_DCT8, 0, 0, 1, 300);
    // LFNST, all classes, sets and indices
    for (int s = 0; s < 4; s++)
      for (int i = 1; i < 3; i++) begin
        run_block(0, 0, TR_DCT2, TR_DCT2, s, i, 1, 200);
        run_block(1, 1, TR_DCT2, TR_DCT2, s, i, 1, 200);
        run_block(0, 2, TR_DCT2, TR_DCT2, s, i, 1, 200);
        run_block(3, 0, TR_DCT2, TR_DCT2, s, i, 1, 200);
        run_block(2, 2, TR_DCT2, TR_DCT2, s, i, 1, 200);
        run_block(1, 3, TR_DCT2, TR_DCT2, s, i, 1, 200);
      end
    // HEVC/AVC-style blocks: DCT-II only, LFNST ignored
    run_block(2, 2, TR_DST7, TR_DCT8, 1, 1, 0, 300);
    run_block(3, 1, TR_DCT2, TR_DCT2, 0, 2, 0, 300);
    // large amplitudes (clipping) and random blocks
    run_block(4, 4, TR_DCT2, TR_DCT2, 0, 0, 1, 16000);
    run_block(3, 3, TR_DST7, TR_DCT8, 0, 0, 1, 16000);
    for (int b = 0; b < 20; b++) begin
      int ws, hs, lf;
      ws = int'($urandom_range(0, 4)); hs = int'($urandom_range(0, 4));
      lf = int'($urandom_range(0, 2));
      if (lf != 0 || ws == 4 || hs == 4)
        run_block(ws, hs, TR_DCT2, TR_DCT2, int'($urandom_range(0, 3)), lf, 1, 1000);
      else
        run_block(ws, hs, tr_type_e'($urandom_range(0, 2)), tr_type_e'($urandom_range(0, 2)), 0, 0, 1, 1000);
    end
    // mechanisms
    checks++;
    if (n_lfnst_ev == 0 || n_bypass == 0 || n_zero == 0 || n_dst == 0 || n_dct8 == 0 || n_avc == 0 || n_switch == 0) begin
      failures++;
      $display("mechanism missing: lfnst=%0d bypass=%0d zero=%0d dst=%0d dct8=%0d avc=%0d switch=%0d",
               n_lfnst_ev, n_bypass, n_zero, n_dst, n_dct8, n_avc, n_switch);
    end
    $display("mechanisms: lfnst=%0d bypass_cycles=%0d zero=%0d dst=%0d dct8=%0d avc=%0d size_switch=%0d",
             n_lfnst_ev, n_bypass, n_zero, n_dst, n_dct8, n_avc, n_switch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
