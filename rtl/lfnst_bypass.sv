// Bypass of the inverse LFNST: a register delay line of L1 stages.
//
// What it does.  Lines that do not go through the inverse LFNST (any
// DST-VII/DCT-VIII line, any horizontal line, or a block without LFNST)
// are delayed by L1 cycles so that they reach the 1-D MTS with the same
// fixed latency as the inverse LFNST path.
//
// How it works.  A chain of L1 registers carries the valid bit and a
// payload of W bits (sample pair plus the line tags).  The valid bits are
// reset; the payload is not, since it is only used together with valid.
//
// Interface and timing.  in_* sampled at a clock edge appears on out_* L1
// edges later; one item per cycle, no stalls.
//
// A register delay line matching the LFNST latency L1 follows the paper;
// the value L1 = LFNST_LAT = 30 cycles and the payload layout are this
// design's.
module lfnst_bypass #(
  parameter int unsigned L1 = vvc_tr_pkg::LFNST_LAT,
  parameter int unsigned W  = 43
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  output logic [W-1:0] out_data
);
  logic [L1-1:0] vld;
  logic [W-1:0]  dat [L1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[L1-2:0], in_valid};
  end

  always_ff @(posedge clk) begin
    dat[0] <= in_data;
    for (int i = 1; i < L1; i++) dat[i] <= dat[i-1];
  end

  always_comb begin
    out_valid = vld[L1-1];
    out_data  = dat[L1-1];
  end
endmodule
