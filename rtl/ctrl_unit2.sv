// Control unit 2: enables the DCT-II or the DST-VII/DCT-VIII datapath of
// the shared 1-D MTS and picks the rounding of the pass.
//
// What it does.  sel3 enables the DCT-II kernels, sel4 the DST-VII/DCT-VIII
// kernels; the 32 multipliers are shared, so the two selects decide which
// kernel family the MTS ROM and accumulators use for the line.  The unit
// also gives the kernel type seen by the core (DCT-II whenever sel3) and the
// final flag: the horizontal pass is the second one and uses the final
// rounding.
//
// How it works.  Combinational decode of mts_type and mts_dir.
//
// sel3/sel4 from mts_type follow the paper; the final flag is this design's.
module ctrl_unit2
  import vvc_tr_pkg::*;
(
  input  tr_type_e mts_type,
  input  tr_dir_e  mts_dir,
  output logic     sel3,
  output logic     sel4,
  output tr_type_e core_type,
  output logic     final_pass
);
  always_comb begin
    sel3       = (mts_type == TR_DCT2);
    sel4       = (mts_type == TR_DCT8) || (mts_type == TR_DST7);
    core_type  = sel3 ? TR_DCT2 : (sel4 ? mts_type : TR_DCT2);
    final_pass = (mts_dir == DIR_HOR);
  end
endmodule
