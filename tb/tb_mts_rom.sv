// Testbench of mts_rom.
//
// Reads every row of every kernel (DCT-II 4..64, DST-VII 4..32) and checks
// each of the 32 lanes against the real-valued kernels, independently of
// the integer tables in the package:
//   DCT-II  T[k][n] ~ 64*sqrt(2)*cos(pi*k*(2n+1)/(2N)), T[0][n] = 64
//   DST-VII T[i][j] ~ 128*sqrt(N/(2N+1))*sin(pi*(2i+1)*(j+1)/(2N+1))
// within +-3 (the integer kernels are hand-tuned roundings), with the lane
// mapping of the row layout (pair lines: lane 2n+b holds T[2c+b][n];
// zeroing lines: lane j holds T[c][j]) and zero in unused lanes.  A few
// exact values are checked too, and that data follow rd_en by one cycle.
module tb_mts_rom;
  import vvc_tr_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic       rd_en = 1'b0, is_dst = 1'b0;
  size_code_t size = '0;
  logic [4:0] row = '0;
  logic [NMULT*COEF_W-1:0] coef;

  mts_rom dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #1_000_000;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  function automatic real ideal(int d, int n_pt, int k, int n);
    real pi;
    pi = 3.14159265358979;
    if (d == 0) return (k == 0) ? 64.0 : 64.0 * $sqrt(2.0) * $cos(pi * k * (2 * n + 1) / (2.0 * n_pt));
    return 128.0 * $sqrt(n_pt / (2.0 * n_pt + 1.0)) * $sin(pi * (2 * k + 1) * (n + 1) / (2.0 * n_pt + 1.0));
  endfunction

  function automatic int lane(int j);
    return int'($signed(coef[COEF_W*j +: COEF_W]));
  endfunction

  initial begin
    int n_pt, v, bad;
    real e;
    @(posedge clk);
    for (int d = 0; d < 2; d++)
      for (int s = 0; s < 5; s++) begin
        if (d == 1 && s == 4) continue;
        n_pt = 4 << s;
        for (int c = 0; c < n_pt / 2; c++) begin
          rd_en <= 1'b1; is_dst <= d[0]; size <= 3'(s); row <= 5'(c);
          @(posedge clk);
          rd_en <= 1'b0;
          @(negedge clk);
          bad = 0;
          for (int j = 0; j < 32; j++) begin
            v = lane(j);
            if ((d == 0 && s == 4) || (d == 1 && s == 3)) e = ideal(d, n_pt, c, j);
            else if (j / 2 < n_pt && j / 2 < 16) e = ideal(d, n_pt, 2 * c + j % 2, j / 2);
            else e = 0.0;
            checks++;
            if (real'(v) - e > 3.0 || e - real'(v) > 3.0) begin
              failures++; bad++;
              if (failures < 10) $display("type %0d N=%0d row %0d lane %0d: %0d vs %f", d, n_pt, c, j, v, e);
            end
          end
        end
      end
    // exact values of the standard's kernels
    rd_en <= 1'b1; is_dst <= 1'b0; size <= 3'd0; row <= 5'd0;
    @(posedge clk); rd_en <= 1'b0; @(negedge clk);
    checks++; if (!(lane(0) == 64 && lane(1) == 83 && lane(3) == 36)) failures++;
    rd_en <= 1'b1; is_dst <= 1'b1; size <= 3'd0; row <= 5'd0;
    @(posedge clk); rd_en <= 1'b0; @(negedge clk);
    checks++; if (!(lane(0) == 29 && lane(2) == 55 && lane(4) == 74 && lane(6) == 84)) failures++;
    // no read: data hold
    @(posedge clk); @(negedge clk);
    checks++; if (!(lane(0) == 29)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
