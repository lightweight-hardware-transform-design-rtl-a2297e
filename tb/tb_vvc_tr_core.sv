// Testbench of vvc_tr_core.
//
// Drives a mix of MTS lines (all types and sizes, both passes) and LFNST
// vectors (all classes, sets and indices) back to back, in random order,
// and compares
//   * MTS results with a direct 1-D matrix product of the real-valued-free
//     integer kernels, with the rounding of the pass, on MTS_out_inter
//     (vertical pass) or MTS_out_fin (horizontal pass);
//   * LFNST results with a direct product with the kernel ROM model;
//   * the latency: first MTS pair L1 + L2 cycles after the first input pair,
//     first LFNST pair L1 cycles after LFNST_start.
// Lines sent with AVC_VVC = 0 must be transformed with DCT-II whatever
// MTS_type says.  Consecutive items are driven without idle cycles between
// them (input_enable is only lowered once, after the last item).  Counts of bypassed lines, LFNST vectors, DST-VII/DCT-VIII
// lines, zeroed lines and HEVC/AVC lines must all be non-zero.
module tb_vvc_tr_core;
  import vvc_tr_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                    input_enable = 1'b0, line_first = 1'b0, AVC_VVC = 1'b1;
  size_code_t              tr_size = '0;
  tr_type_e                MTS_type = TR_DCT2;
  tr_dir_e                 MTS_dir = DIR_VERT;
  logic                    LFNST_start = 1'b0, LFNST_out48 = 1'b0;
  logic [1:0]              LFNST_set_idx = '0, LFNST_idx = '0;
  logic [1:0][NBI-1:0]     tr_src_in = '0;
  logic                    lfnst_rom_en;
  logic [7:0]              lfnst_rom_addr;
  logic [NMULT*COEF_W-1:0] lfnst_rom_data;
  logic                    MTS_valid_inter, MTS_valid_fin, MTS_first, MTS_ready;
  logic [1:0][NBI-1:0]     MTS_out_inter;
  logic [1:0][NBO-1:0]     MTS_out_fin;
  logic                    LFNST_valid, LFNST_ready;
  logic [1:0][NBI-1:0]     LFNST_out;
  logic                    lfnst_busy;

  vvc_tr_core dut (.*);
  lfnst_rom_model u_rom (.clk(clk), .en(lfnst_rom_en), .addr(lfnst_rom_addr), .data(lfnst_rom_data));

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #5_000_000;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  int n_bypass = 0, n_lfnst = 0, n_dst = 0, n_zero = 0, n_avc = 0;

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

  int mq[$], mt[$], lq[$];

  task automatic send_line(tr_type_e t, int szc, int dir, int vvc);
    int n_pt, neff;
    int y[64];
    longint x;
    tr_type_e et;
    et = vvc ? t : TR_DCT2;
    n_pt = 4 << szc;
    neff = eff_len(et, 3'(szc));
    n_bypass++;
    if (et != TR_DCT2) n_dst++;
    if (is_zero_mode(et, 3'(szc))) n_zero++;
    if (!vvc) n_avc++;
    for (int k = 0; k < 64; k++) y[k] = (k < neff) ? int'($urandom_range(0, 8000)) - 4000 : 0;
    for (int n = 0; n < n_pt; n++) begin
      x = 0;
      for (int k = 0; k < neff; k++) x += longint'(ref_coef(et, n_pt, k, n)) * y[k];
      mq.push_back(dir == 0 ? clip((x + 512) >>> 10, -1024, 1023) : clip((x + 64) >>> 7, -32768, 32767));
    end
    mt.push_back(cycle + 1 + LFNST_LAT + MTS_LAT);
    for (int c = 0; c < n_pt / 2; c++) begin
      input_enable <= 1'b1; line_first <= (c == 0); AVC_VVC <= vvc[0];
      tr_size <= 3'(szc); MTS_type <= t; MTS_dir <= tr_dir_e'(dir); LFNST_idx <= 2'($urandom_range(0, 2));
      if (is_zero_mode(et, 3'(szc))) tr_src_in <= {NBI'(y[c]), NBI'(y[c])};
      else tr_src_in <= {NBI'(y[2*c+1]), NBI'(y[2*c])};
      // LFNST_idx is ignored in the horizontal pass and for DST/DCT8 lines
      if (dir == 1 && et == TR_DCT2) LFNST_idx <= 2'd0;
      @(posedge clk);
    end
  endtask

  task automatic send_lfnst(int nin, int nout, int set, int kidx);
    int z[16];
    longint acc;
    n_lfnst++;
    for (int i = 0; i < 16; i++) z[i] = (i < nin) ? int'($urandom_range(0, 8000)) - 4000 : 0;
    for (int j = 0; j < nout; j++) begin
      int addr;
      addr = (set * 2 + kidx - 1) * 32 + ((nout == 48) ? 8 : 0) + j / 2;
      acc = 0;
      for (int i = 0; i < 16; i++) acc += longint'(lcoef(addr, 16 * (j % 2) + i)) * z[i];
      lq.push_back(clip((acc + 64) >>> 7, -32768, 32767));
    end
    LFNST_start <= 1'b1; LFNST_out48 <= (nout == 48); LFNST_set_idx <= 2'(set); LFNST_idx <= 2'(kidx);
    MTS_type <= TR_DCT2; MTS_dir <= DIR_VERT; AVC_VVC <= 1'b1; input_enable <= 1'b0;
    @(posedge clk);
    LFNST_start <= 1'b0;
    for (int p = 0; p < nout / 2; p++) begin
      input_enable <= (p < nin / 2);
      tr_src_in <= {NBI'(z[(2*p+1) % 16]), NBI'(z[(2*p) % 16])};
      @(posedge clk);
    end
  endtask

  // checkers
  always @(posedge clk) begin
    if (rst_n && (MTS_valid_inter || MTS_valid_fin)) begin
      int ea, eb, ga, gb;
      if (MTS_first) begin
        int et;
        et = mt.pop_front();
        checks++;
        if (et != cycle) begin
          failures++;
          $display("MTS latency: first pair at %0d expected %0d", cycle, et);
        end
      end
      ea = mq.pop_front(); eb = mq.pop_front();
      ga = MTS_valid_fin ? int'($signed(MTS_out_fin[0])) : int'($signed(MTS_out_inter[0]));
      gb = MTS_valid_fin ? int'($signed(MTS_out_fin[1])) : int'($signed(MTS_out_inter[1]));
      checks++;
      if (ga != ea || gb != eb) begin
        failures++;
        if (failures < 10) $display("MTS data at %0d: %0d %0d expected %0d %0d", cycle, ga, gb, ea, eb);
      end
    end
    if (rst_n && LFNST_valid) begin
      int ea, eb;
      ea = lq.pop_front(); eb = lq.pop_front();
      checks++;
      if (int'($signed(LFNST_out[0])) != ea || int'($signed(LFNST_out[1])) != eb) begin
        failures++;
        if (failures < 10) $display("LFNST data at %0d: %0d %0d expected %0d %0d", cycle, $signed(LFNST_out[0]), $signed(LFNST_out[1]), ea, eb);
      end
    end
  end

  // LFNST latency: first output of each vector
  logic lf_prev_valid = 1'b0;
  int   lf_starts[$];
  always @(posedge clk) begin
    if (LFNST_start) lf_starts.push_back(cycle + 1 + LFNST_LAT);
    lf_prev_valid <= LFNST_valid && !LFNST_ready;
    if (rst_n && LFNST_valid && !lf_prev_valid) begin
      int e;
      e = lf_starts.pop_front();
      checks++;
      if (e != cycle + 1) begin
        failures++;
        $display("LFNST latency: first pair at %0d expected %0d", cycle + 1, e);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int t = 0; t < 3; t++)
      for (int s = 0; s < 5; s++)
        for (int d = 0; d < 2; d++)
          if (!(t != 0 && s == 4)) send_line(tr_type_e'(t), s, d, 1);
    for (int s = 0; s < 4; s++)
      for (int i = 1; i < 3; i++) begin
        send_lfnst(8, 16, s, i);
        send_lfnst(16, 16, s, i);
        send_lfnst(16, 48, s, i);
        send_lfnst(8, 48, s, i);
      end
    send_line(TR_DST7, 2, 1, 0);
    send_line(TR_DCT8, 3, 0, 0);
    for (int b = 0; b < 60; b++) begin
      int k;
      k = int'($urandom_range(0, 3));
      if (k == 0) send_lfnst(($urandom_range(0, 1) != 0) ? 16 : 8, ($urandom_range(0, 1) != 0) ? 48 : 16,
                             int'($urandom_range(0, 3)), int'($urandom_range(1, 2)));
      else begin
        int t, s;
        t = int'($urandom_range(0, 2));
        s = (t == 0) ? int'($urandom_range(0, 4)) : int'($urandom_range(0, 3));
        send_line(tr_type_e'(t), s, int'($urandom_range(0, 1)), 1);
      end
    end
    input_enable <= 1'b0;
    repeat (LFNST_LAT + MTS_LAT + 40) @(posedge clk);
    checks++;
    if (mq.size() != 0 || lq.size() != 0) begin
      failures++;
      $display("missing outputs: %0d MTS, %0d LFNST", mq.size(), lq.size());
    end
    checks++;
    if (n_bypass == 0 || n_lfnst == 0 || n_dst == 0 || n_zero == 0 || n_avc == 0) failures++;
    $display("lines=%0d lfnst=%0d dst/dct8=%0d zeroed=%0d avc=%0d", n_bypass, n_lfnst, n_dst, n_zero, n_avc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
