// Self-checking testbench of the inverse LFNST core.
//
// Runs blocks of the four size classes (4x4: 8 in/16 out, 8x8: 8 in/48 out,
// 4xN: 16 in/16 out, 8xN: 16 in/48 out) back to back, each with its inputs
// delivered at the rate of its class (1, 1/3, 2 and 2/3 samples per cycle),
// and every kernel set and index.  Expected outputs come from a direct
// product y[j] = sum_i T[i][j] z[i] with the ROM model's formula, rounded by
// 7 bits and clipped to 16 bits; the first output of each block must appear
// LFNST_LAT cycles after its start pulse.
module tb_lfnst_core;
  import vvc_tr_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, out48, in_valid;
  logic [1:0] set_idx, idx;
  logic signed [NBI-1:0] in_a, in_b;
  logic rom_en;
  logic [7:0] rom_addr;
  logic [255:0] rom_data;
  logic out_valid, out_first, out_last;
  logic signed [NBI-1:0] out_a, out_b;

  lfnst_core dut (.*);
  lfnst_rom_model u_rom (.clk(clk), .en(rom_en), .addr(rom_addr), .data(rom_data));

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  int exp_q[$];
  int exp_start_q[$];
  int n_blocks = 0, got_blocks = 0;

  function automatic int coef(input int a, input int lane);
    return ((a * 37 + lane * 11 + a * lane * 5) % 255) - 127;
  endfunction

  task automatic run_block(int cls, int set, int kidx);
    int nin, nout, w, gap, npairs;
    int z[16];
    longint acc;
    int addr, r;
    nin  = (cls == 0 || cls == 1) ? 8 : 16;
    nout = (cls == 1 || cls == 3) ? 48 : 16;
    w    = nout / 2;
    npairs = nin / 2;
    gap  = w / npairs;                 // cycles per input pair
    for (int i = 0; i < 16; i++) z[i] = (i < nin) ? int'($urandom_range(0, 8000)) - 4000 : 0;
    for (int j = 0; j < nout; j++) begin
      addr = (set * 2 + kidx - 1) * 32 + ((nout == 48) ? 8 : 0) + j / 2;
      acc = 0;
      for (int i = 0; i < 16; i++) acc += longint'(coef(addr, 16 * (j % 2) + i)) * z[i];
      r = int'((acc + 64) >>> 7);
      if (r > 32767) r = 32767;
      if (r < -32768) r = -32768;
      exp_q.push_back(r);
    end
    exp_start_q.push_back(cycle + 1 + LFNST_LAT);
    start <= 1; out48 <= (nout == 48); set_idx <= 2'(set); idx <= 2'(kidx); in_valid <= 0;
    @(posedge clk);
    start <= 0;
    for (int c = 0; c < w; c++) begin
      if (c % gap == 0 && c / gap < npairs) begin
        in_valid <= 1; in_a <= NBI'(z[2*(c/gap)]); in_b <= NBI'(z[2*(c/gap)+1]);
      end else begin
        in_valid <= 0;
      end
      if (c == w - 1) break;
      @(posedge clk);
    end
    n_blocks++;
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int ea, eb;
      if (out_first) begin
        int es;
        es = exp_start_q.pop_front();
        checks++;
        if (cycle != es) begin
          failures++;
          $display("latency error block %0d: %0d vs %0d", got_blocks, cycle, es);
        end
      end
      ea = exp_q.pop_front();
      eb = exp_q.pop_front();
      checks++;
      if (int'(out_a) != ea || int'(out_b) != eb) begin
        failures++;
        if (failures < 10) $display("data error block %0d: got %0d %0d exp %0d %0d", got_blocks, out_a, out_b, ea, eb);
      end
      if (out_last) got_blocks++;
    end
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; out48 = 0; set_idx = 0; idx = 1; in_valid = 0; in_a = 0; in_b = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int set = 0; set < 4; set++)
      for (int k = 1; k <= 2; k++)
        for (int cls = 0; cls < 4; cls++) begin
          @(posedge clk);
          run_block(cls, set, k);
        end
    for (int i = 0; i < 30; i++) begin
      @(posedge clk);
      run_block($urandom_range(0, 3), $urandom_range(0, 3), $urandom_range(1, 2));
    end
    in_valid <= 0;
    repeat (60) @(posedge clk);
    checks++;
    if (got_blocks != n_blocks || exp_q.size() != 0) begin
      failures++;
      $display("blocks: got %0d sent %0d, %0d left", got_blocks, n_blocks, exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
