// Testbench of the two control units.
//
// ctrl_unit1: for every type, direction and LFNST index, sel1 must be set
// exactly for a DCT-II line of the vertical pass with a non-zero index, and
// sel2 must be its complement; lfnst_busy must rise after an LFNST start
// and fall after the ready pulse.
// ctrl_unit2: sel3 for DCT-II, sel4 for DST-VII and DCT-VIII, the kernel
// type follows the selects, and the horizontal pass is the final one.
module tb_ctrl_units;
  import vvc_tr_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  tr_type_e   mts_type = TR_DCT2;
  tr_dir_e    mts_dir = DIR_VERT;
  logic [1:0] lfnst_idx = '0;
  logic       lfnst_start = 1'b0, lfnst_ready = 1'b0;
  logic       sel1, sel2, lfnst_busy;
  logic       sel3, sel4, final_pass;
  tr_type_e   core_type;

  ctrl_unit1 u1 (.*);
  ctrl_unit2 u2 (.mts_type, .mts_dir, .sel3, .sel4, .core_type, .final_pass);

  int checks = 0, failures = 0;

  initial begin
    #100_000;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (type %0d dir %0d idx %0d)", what, mts_type, mts_dir, lfnst_idx);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int t = 0; t < 3; t++)
      for (int d = 0; d < 2; d++)
        for (int i = 0; i < 4; i++) begin
          mts_type <= tr_type_e'(t); mts_dir <= tr_dir_e'(d); lfnst_idx <= 2'(i);
          @(negedge clk);
          chk(sel1 == (t == 0 && d == 1 && i != 0), "sel1");
          chk(sel2 == !sel1, "sel2");
          chk(sel3 == (t == 0), "sel3");
          chk(sel4 == (t != 0), "sel4");
          chk(core_type == tr_type_e'(t), "core_type");
          chk(final_pass == (d == 0), "final");
          @(posedge clk);
        end
    // busy flag
    chk(!lfnst_busy, "busy idle");
    lfnst_start <= 1'b1; @(posedge clk); lfnst_start <= 1'b0;
    repeat (5) begin @(negedge clk); chk(lfnst_busy, "busy high"); @(posedge clk); end
    lfnst_ready <= 1'b1; @(posedge clk); lfnst_ready <= 1'b0;
    @(negedge clk); chk(!lfnst_busy, "busy low");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
