// VVC inverse transform core: inverse LFNST, bypass and 1-D inverse MTS
// with the two control units.
//
// What it does.  Takes one line (or one LFNST input vector) at a time, two
// samples per cycle, and routes it:
//   * control unit 1 sends LFNST input vectors (DCT-II, vertical direction,
//     LFNST_idx != 0) to the inverse LFNST core, everything else to the
//     bypass delay line of L1 cycles;
//   * the bypass output feeds the 1-D MTS, whose kernel family and rounding
//     are set by control unit 2 (sel3: DCT-II, sel4: DST-VII/DCT-VIII);
//   * MTS results of the vertical pass leave on MTS_out_inter (16-bit
//     values on NBI-bit lanes), results of the horizontal pass on
//     MTS_out_fin (NBO bits); LFNST results leave on LFNST_out.
//
// Interface and timing.  input_enable marks valid input pairs tr_src_in;
// line_first marks the first pair of an MTS line, whose length follows
// from MTS_type and tr_size (N = 4 << tr_size; N/2 cycles).  An LFNST
// vector is announced by LFNST_start one cycle before its first pair and
// has up to 8 pairs.  A line leaves the MTS L1 + L2 = LFNST_LAT + MTS_LAT
// cycles after its first pair entered; MTS_ready pulses with the last
// output pair of a line.  An LFNST vector leaves LFNST_LAT cycles after
// LFNST_start, and LFNST_ready pulses with its last pair.  The LFNST kernel
// ROM is outside the core (lfnst_rom_*).
//
// The block diagram (control unit 1 -> LFNST or bypass, L1, control unit 2
// -> shared MTS, L2), the port names of the interface table and the 2
// samples/cycle rate follow the paper.  The LFNST output is not fed straight
// into the MTS here: its samples belong to several MTS lines, so the owner
// writes them back to the input memory and then runs the vertical pass
// through the bypass.  This is this design's choice.
module vvc_tr_core
  import vvc_tr_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    input_enable,
  input  logic                    line_first,
  input  logic                    AVC_VVC,        // 1: VVC; HEVC/AVC use the DCT-II subset
  input  size_code_t              tr_size,
  input  tr_type_e                MTS_type,
  input  tr_dir_e                 MTS_dir,
  input  logic                    LFNST_start,
  input  logic                    LFNST_out48,
  input  logic [1:0]              LFNST_set_idx,
  input  logic [1:0]              LFNST_idx,
  input  logic [1:0][NBI-1:0]     tr_src_in,
  output logic                    lfnst_rom_en,
  output logic [7:0]              lfnst_rom_addr,
  input  logic [NMULT*COEF_W-1:0] lfnst_rom_data,
  output logic                    MTS_valid_inter,
  output logic                    MTS_valid_fin,
  output logic                    MTS_first,
  output logic                    MTS_ready,
  output logic [1:0][NBI-1:0]     MTS_out_inter,
  output logic [1:0][NBO-1:0]     MTS_out_fin,
  output logic                    LFNST_valid,
  output logic                    LFNST_ready,
  output logic [1:0][NBI-1:0]     LFNST_out,
  output logic                    lfnst_busy
);
  localparam int unsigned PW = 1 + 2 + 3 + 1 + 2*NBI;

  // ------------------------------------------------ control unit 1
  logic sel1, sel2;
  tr_type_e type_in;

  // Without VVC only the DCT-II kernels exist (HEVC / AVC style blocks).
  always_comb type_in = AVC_VVC ? MTS_type : TR_DCT2;

  ctrl_unit1 u_cu1 (
    .clk, .rst_n,
    .mts_type   (type_in),
    .mts_dir    (MTS_dir),
    .lfnst_idx  (AVC_VVC ? LFNST_idx : 2'd0),
    .lfnst_start(LFNST_start),
    .lfnst_ready(LFNST_ready),
    .sel1, .sel2, .lfnst_busy
  );

  // ------------------------------------------------ inverse LFNST
  logic lf_valid, lf_first, lf_last;
  logic signed [NBI-1:0] lf_a, lf_b;

  lfnst_core u_lfnst (
    .clk, .rst_n,
    .start   (LFNST_start && sel1),
    .out48   (LFNST_out48),
    .set_idx (LFNST_set_idx),
    .idx     (LFNST_idx),
    .in_valid(input_enable && sel1),
    .in_a    (tr_src_in[0]),
    .in_b    (tr_src_in[1]),
    .rom_en  (lfnst_rom_en),
    .rom_addr(lfnst_rom_addr),
    .rom_data(lfnst_rom_data),
    .out_valid(lf_valid),
    .out_first(lf_first),
    .out_last (lf_last),
    .out_a    (lf_a),
    .out_b    (lf_b)
  );

  always_comb begin
    LFNST_valid  = lf_valid;
    LFNST_ready  = lf_last;
    LFNST_out[0] = lf_a;
    LFNST_out[1] = lf_b;
  end

  // ------------------------------------------------ bypass (L1)
  logic          bp_valid;
  logic [PW-1:0] bp_data;

  lfnst_bypass #(.L1(LFNST_LAT), .W(PW)) u_bypass (
    .clk, .rst_n,
    .in_valid (input_enable && sel2),
    .in_data  ({line_first, type_in, tr_size, MTS_dir, tr_src_in[0], tr_src_in[1]}),
    .out_valid(bp_valid),
    .out_data (bp_data)
  );

  logic                  b_first;
  tr_type_e              b_type;
  size_code_t            b_size;
  tr_dir_e               b_dir;
  logic signed [NBI-1:0] b_a, b_b;

  always_comb {b_first, b_type, b_size, b_dir, b_a, b_b} = bp_data;

  // ------------------------------------------------ control unit 2 + MTS (L2)
  logic     sel3, sel4, fin;
  tr_type_e core_type;

  ctrl_unit2 u_cu2 (
    .mts_type  (b_type),
    .mts_dir   (b_dir),
    .sel3, .sel4,
    .core_type,
    .final_pass(fin)
  );

  logic m_valid, m_first, m_last, m_final;
  logic signed [NBI-1:0] m_a, m_b;

  mts_1d u_mts (
    .clk, .rst_n,
    .in_valid (bp_valid),
    .in_first (b_first),
    .in_type  (core_type),
    .in_size  (b_size),
    .in_final (fin),
    .in_a     (b_a),
    .in_b     (b_b),
    .out_valid(m_valid),
    .out_first(m_first),
    .out_last (m_last),
    .out_final(m_final),
    .out_a    (m_a),
    .out_b    (m_b)
  );

  always_comb begin
    MTS_valid_inter  = m_valid && !m_final;
    MTS_valid_fin    = m_valid && m_final;
    MTS_first        = m_first;
    MTS_ready        = m_last;
    MTS_out_inter[0] = m_a;
    MTS_out_inter[1] = m_b;
    MTS_out_fin[0]   = m_a[NBO-1:0];
    MTS_out_fin[1]   = m_b[NBO-1:0];
  end
endmodule
