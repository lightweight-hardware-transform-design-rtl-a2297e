// Testbench of input_mem: random masked writes and reads against a
// reference array, read data one cycle after the read enable, data held
// while no read is issued, and a read of the word being written returns
// the old contents (read before write).
module tb_input_mem;
  import vvc_tr_pkg::*;

  localparam int unsigned DEPTH = 2048;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                    we = 1'b0, re = 1'b0;
  logic [10:0]             waddr = '0, raddr = '0;
  logic [3:0]              wmask = '0;
  logic [3:0][NBI-1:0]     wdata = '0, rdata;

  input_mem dut (.*);

  logic [3:0][NBI-1:0] ref_m [DEPTH];
  int checks = 0, failures = 0;
  logic seen = 1'b0;   // read data is compared from the first read on

  initial begin
    #2_000_000;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    logic [3:0][NBI-1:0] e;
    e = '0;
    for (int i = 0; i < DEPTH; i++) ref_m[i] = '0;
    @(posedge clk);
    for (int i = 0; i < 4000; i++) begin
      we    <= ($urandom_range(0, 1) == 1);
      waddr <= 11'($urandom_range(0, 63));
      wmask <= 4'($urandom);
      wdata <= {NBI'($urandom), NBI'($urandom), NBI'($urandom), NBI'($urandom)};
      re    <= ($urandom_range(0, 2) != 0);
      raddr <= 11'($urandom_range(0, 63));
      @(negedge clk);
      if (re) seen = 1'b1;
      e = (re) ? ref_m[raddr] : e;
      if (we) for (int l = 0; l < 4; l++) if (wmask[l]) ref_m[waddr][l] = wdata[l];
      @(posedge clk);
      #1;
      if (seen) checks++;
      if (seen && rdata != e) begin
        failures++;
        if (failures < 10) $display("read %0d: got %h expected %h", raddr, rdata, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
