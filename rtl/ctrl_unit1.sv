// Control unit 1: chooses the inverse LFNST path or the bypass for a line.
//
// What it does.  sel1 sends the input samples to the inverse LFNST, sel2 to
// the bypass delay line.  The inverse LFNST is only used for DCT-II blocks
// with a non-zero LFNST index, and only in the first (vertical) pass, since
// it works on the coefficients before the separable transform.
//
// How it works.  Combinational decode:
//   sel1 = (mts_type == DCT-II) & (mts_dir == vertical) & (lfnst_idx != 0)
//   sel2 = ~sel1
// lfnst_ready is the end-of-LFNST pulse of the LFNST core; lfnst_busy is
// high from an LFNST start to that pulse, so the owner can hold the next
// LFNST start until the core has finished.
//
// The inputs mts_type and mts_dir and the outputs sel1/sel2 follow the
// paper; the use of lfnst_idx and the busy flag are this design's.
module ctrl_unit1
  import vvc_tr_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  tr_type_e   mts_type,
  input  tr_dir_e    mts_dir,
  input  logic [1:0] lfnst_idx,
  input  logic       lfnst_start,
  input  logic       lfnst_ready,
  output logic       sel1,
  output logic       sel2,
  output logic       lfnst_busy
);
  always_comb begin
    sel1 = (mts_type == TR_DCT2) && (mts_dir == DIR_VERT) && (lfnst_idx != 2'd0);
    sel2 = !sel1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           lfnst_busy <= 1'b0;
    else if (lfnst_start) lfnst_busy <= 1'b1;
    else if (lfnst_ready) lfnst_busy <= 1'b0;
  end
endmodule
