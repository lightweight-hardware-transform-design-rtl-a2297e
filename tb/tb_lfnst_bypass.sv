// Testbench of lfnst_bypass: random items with random gaps must come out
// unchanged, in order, exactly L1 cycles after they went in, and no output
// may be valid without an input L1 cycles before.
module tb_lfnst_bypass;
  import vvc_tr_pkg::*;

  localparam int unsigned W = 43;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         in_valid = 1'b0;
  logic [W-1:0] in_data = '0;
  logic         out_valid;
  logic [W-1:0] out_data;

  lfnst_bypass dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #100_000;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  logic [W-1:0] dq[$];
  int           tq[$];

  always @(posedge clk) begin
    if (rst_n && in_valid) begin
      dq.push_back(in_data);
      tq.push_back(cycle + int'(LFNST_LAT));
    end
    if (rst_n && out_valid) begin
      checks++;
      if (dq.size() == 0) begin
        failures++;
        $display("output without input at %0d", cycle);
      end else begin
        logic [W-1:0] d;
        int t;
        d = dq.pop_front();
        t = tq.pop_front();
        if (d != out_data || t != cycle) begin
          failures++;
          if (failures < 10) $display("got %h at %0d, expected %h at %0d", out_data, cycle, d, t);
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int i = 0; i < 500; i++) begin
      in_valid <= ($urandom_range(0, 3) != 0);
      in_data  <= {$urandom, $urandom};
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (LFNST_LAT + 5) @(posedge clk);
    checks++;
    if (dq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
