// Testbench of output_mem: random writes and reads against a reference
// array over the whole depth, read data one cycle after the read enable
// and held while no read is issued.
module tb_output_mem;
  import vvc_tr_pkg::*;

  localparam int unsigned DEPTH = 4096;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                we = 1'b0, re = 1'b0;
  logic [11:0]         waddr = '0, raddr = '0;
  logic [1:0][NBO-1:0] wdata = '0, rdata;

  output_mem dut (.*);

  logic [1:0][NBO-1:0] ref_m [DEPTH];
  int checks = 0, failures = 0;
  logic seen = 1'b0;   // read data is compared from the first read on

  initial begin
    #2_000_000;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    logic [1:0][NBO-1:0] e;
    e = '0;
    for (int i = 0; i < DEPTH; i++) ref_m[i] = '0;
    @(posedge clk);
    for (int i = 0; i < 9000; i++) begin
      we    <= ($urandom_range(0, 1) == 1);
      waddr <= (i < 4096) ? 12'(i) : 12'($urandom);
      wdata <= {NBO'($urandom), NBO'($urandom)};
      re    <= ($urandom_range(0, 2) != 0);
      raddr <= 12'($urandom);
      @(negedge clk);
      if (re) seen = 1'b1;
      e = (re) ? ref_m[raddr] : e;
      if (we) ref_m[waddr] = wdata;
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
