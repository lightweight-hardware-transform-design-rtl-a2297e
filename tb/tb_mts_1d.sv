// Self-checking testbench of the 1-D inverse MTS core.
//
// Streams back-to-back lines of every type (DCT-II, DST-VII, DCT-VIII) and
// size (4..64, DST/DCT-VIII up to 32) with random coefficients, in both
// rounding passes, and compares every output pair with a direct matrix
// product X[n] = sum_k T[k][n] Y[k] computed here (DCT-VIII from its own
// cosine-index relation to DST-VII, entry (-1)^k S[k][N-1-n]).  It also
// checks that the first output pair of each line appears exactly MTS_LAT
// cycles after the line's first input, and spot-checks kernel entries
// against literal values of the standard's matrices.
module tb_mts_1d;
  import vvc_tr_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_first, in_final;
  tr_type_e in_type;
  size_code_t in_size;
  logic signed [NBI-1:0] in_a, in_b;
  logic out_valid, out_first, out_last, out_final;
  logic signed [NBI-1:0] out_a, out_b;

  mts_1d dut (.*);

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // expected output queue
  int exp_q[$];
  int exp_start_q[$];    // expected cycle of the first pair of each line
  int n_lines = 0;

  function automatic int ref_coef(tr_type_e t, int n_pt, int k, int n);
    if (t == TR_DCT2) return dct2_coef(n_pt, k, n);
    if (t == TR_DST7) return dst7_coef(n_pt, k, n);
    return ((k % 2) ? -1 : 1) * dst7_coef(n_pt, k, n_pt - 1 - n);
  endfunction

  function automatic int rnd(longint x, int fin);
    longint r;
    if (fin) begin
      r = (x + 512) >>> 10;
      if (r < -1024) r = -1024;
      if (r > 1023) r = 1023;
    end else begin
      r = (x + 64) >>> 7;
      if (r < -32768) r = -32768;
      if (r > 32767) r = 32767;
    end
    return int'(r);
  endfunction

  task automatic send_line(tr_type_e t, int szc, int fin, int amp);
    int n_pt, neff, half;
    int y[64];
    longint x;
    n_pt = 4 << szc;
    half = n_pt / 2;
    neff = eff_len(t, 3'(szc));
    for (int k = 0; k < 64; k++) y[k] = 0;
    for (int k = 0; k < neff; k++) y[k] = int'($urandom_range(0, 2*amp)) - amp;
    for (int n = 0; n < n_pt; n++) begin
      x = 0;
      for (int k = 0; k < neff; k++) x += longint'(ref_coef(t, n_pt, k, n)) * y[k];
      exp_q.push_back(rnd(x, fin));
    end
    exp_start_q.push_back(cycle + 1 + MTS_LAT);
    for (int c = 0; c < half; c++) begin
      in_valid <= 1; in_first <= (c == 0); in_type <= t; in_size <= 3'(szc); in_final <= fin[0];
      if (is_zero_mode(t, 3'(szc))) begin
        in_a <= NBI'(y[c]); in_b <= NBI'(y[c]);
      end else begin
        in_a <= NBI'(y[2*c]); in_b <= NBI'(y[2*c+1]);
      end
      @(posedge clk);
    end
    n_lines++;
  endtask

  // output checker
  int got_lines = 0;
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int ea, eb;
      if (out_first) begin
        int es;
        es = exp_start_q.pop_front();
        checks++;
        if (cycle != es) begin
          failures++;
          $display("latency error: line %0d first output at %0d, expected %0d", got_lines, cycle, es);
        end
      end
      ea = exp_q.pop_front();
      eb = exp_q.pop_front();
      checks++;
      if (int'(out_a) != ea || int'(out_b) != eb) begin
        failures++;
        if (failures < 10) $display("data error line %0d: got %0d %0d exp %0d %0d", got_lines, out_a, out_b, ea, eb);
      end
      if (out_last) got_lines++;
    end
  end

  task automatic spot(int got, int exp_v, string what);
    checks++;
    if (got != exp_v) begin failures++; $display("kernel %s = %0d, expected %0d", what, got, exp_v); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_first = 0; in_final = 0; in_type = TR_DCT2; in_size = 0; in_a = 0; in_b = 0;
    // literal entries of the standard's matrices
    spot(dct2_coef(4, 1, 0), 83, "DCT2-4[1][0]");
    spot(dct2_coef(4, 3, 1), -83, "DCT2-4[3][1]");
    spot(dct2_coef(8, 1, 2), 50, "DCT2-8[1][2]");
    spot(dct2_coef(32, 1, 0), 90, "DCT2-32[1][0]");
    spot(dct2_coef(32, 31, 0), 4, "DCT2-32[31][0]");
    spot(dct2_coef(64, 1, 0), 91, "DCT2-64[1][0]");
    spot(dct2_coef(64, 63, 63), -2, "DCT2-64[63][63]");
    spot(dst7_coef(4, 1, 3), -74, "DST7-4[1][3]");
    spot(dst7_coef(4, 2, 1), -29, "DST7-4[2][1]");
    spot(dst7_coef(4, 3, 3), -29, "DST7-4[3][3]");
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int rep = 0; rep < 3; rep++)
      for (int t = 0; t < 3; t++)
        for (int s = 0; s < 5; s++) begin
          if (t != 0 && s == 4) continue;
          send_line(tr_type_e'(t), s, rep % 2, (rep == 2) ? 32767 : 500);
        end
    // mixed random sizes back to back
    for (int i = 0; i < 40; i++) begin
      int t, s;
      t = $urandom_range(0, 2);
      s = (t == 0) ? $urandom_range(0, 4) : $urandom_range(0, 3);
      send_line(tr_type_e'(t), s, $urandom_range(0, 1), 4000);
    end
    in_valid <= 0;
    repeat (80) @(posedge clk);
    checks++;
    if (got_lines != n_lines || exp_q.size() != 0) begin
      failures++;
      $display("lines: got %0d sent %0d, %0d samples left", got_lines, n_lines, exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
