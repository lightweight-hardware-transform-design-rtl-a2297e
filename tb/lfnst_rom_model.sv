// Behavioural model of the LFNST kernel ROM (256 rows of 256 bits).
//
// The real ROM holds the VVC standard's LFNST kernels.  This model fills
// each 8-bit lane with a deterministic pseudo-random value instead,
// coef(addr, lane) = ((addr*37 + lane*11 + addr*lane*5) mod 255) - 127,
// which lets the testbenches compute expected results with the same
// formula.  Registered read, one cycle, like the real ROM interface.
module lfnst_rom_model (
  input  logic         clk,
  input  logic         en,
  input  logic [7:0]   addr,
  output logic [255:0] data
);
  function automatic int coef(input int a, input int lane);
    return ((a * 37 + lane * 11 + a * lane * 5) % 255) - 127;
  endfunction

  always_ff @(posedge clk) begin
    if (en)
      for (int l = 0; l < 32; l++) data[8*l +: 8] <= 8'(coef(int'(addr), l));
  end
endmodule
