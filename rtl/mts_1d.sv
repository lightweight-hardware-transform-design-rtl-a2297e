// 1-D inverse MTS core: inverse DCT-II (4..64 points), DST-VII and DCT-VIII
// (4..32 points) with 32 shared regular multipliers, 2 samples/cycle output
// and a latency that does not depend on the transform size or type.
//
// How it works.  A line of N coefficients enters in N/2 cycles, two samples
// per cycle (Y[2c], Y[2c+1] on in_a / in_b).  For the 64-point DCT-II and
// the 32-point DST-VII/DCT-VIII only the first 32 resp. 16 coefficients can
// be non-zero (zeroing), so these lines carry one coefficient per cycle,
// Y[c] on both lanes.  Every cycle each multiplier m_j multiplies one lane by
// a coefficient read from mts_rom and its product is accumulated:
//   * pair mode (N <= 16, no zeroing): m_2n and m_2n+1 are added and
//     accumulated into output X[n] (direct matrix product, 2N multipliers);
//   * 32-point DCT-II: one butterfly level; m_2n accumulates the even part
//     E[n] (from Y[2c]) and m_2n+1 the odd part O[n] (from Y[2c+1]), n<16;
//   * 64-point DCT-II: Y[c] with even c accumulates E[n], odd c O[n], n<32;
//   * 32-point DST-VII/DCT-VIII: m_j accumulates X[j].
// After the last input of a line the sums are combined (X[n] = E+O,
// X[N-1-n] = E-O for the butterfly lines), rounded, clipped and written as
// pairs X[2k], X[2k+1] into a ring of 64 output time slots.
// DCT-VIII is computed as Lambda * S7^T * Gamma: the odd input coefficients
// change sign (Gamma) before the multipliers and the output vector is
// reversed (Lambda) when the results are written to the ring.
// Pair k of a line whose first input came at cycle t is written to the slot
// read out at cycle t + MTS_LAT + k; a free-running counter reads and clears
// one slot per cycle.  This gives every line the latency of the 64-point line,
// MTS_LAT = 36 cycles from the first input of a line to its first output
// pair, after which the line leaves at 2 samples per cycle.  Lines may follow
// each other back to back in any mix of sizes and types.
//
// Rounding: the first (vertical) pass shifts by 7 and clips to 16 bits, the
// final (horizontal) pass shifts by 20-BIT_DEPTH and clips to NBO bits, as in
// the VVC inverse transform.
//
// The 32 multipliers, the sharing between the types, the butterfly of the
// 64-point DCT-II, zeroing, the DST-VII/DCT-VIII relation, the 2 samples/cycle
// rate and the fixed latency follow the paper; the schedule above, the single
// butterfly level, the widths and the rounding stage are this design's own.
module mts_1d
  import vvc_tr_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  // input line stream
  input  logic                   in_valid,
  input  logic                   in_first,   // first cycle of a line
  input  tr_type_e               in_type,
  input  size_code_t             in_size,    // N = 4 << in_size
  input  logic                   in_final,   // 1: second (final) pass rounding
  input  logic signed [NBI-1:0]  in_a,       // Y[2c]   (Y[c] when zeroing)
  input  logic signed [NBI-1:0]  in_b,       // Y[2c+1] (Y[c] when zeroing)
  // output stream
  output logic                   out_valid,
  output logic                   out_first,  // first pair of a line
  output logic                   out_last,   // last pair of a line (ready pulse)
  output logic                   out_final,
  output logic signed [NBI-1:0]  out_a,      // X[2k]
  output logic signed [NBI-1:0]  out_b       // X[2k+1]
);

  typedef logic signed [ACC_W-1:0] acc_t;

  // ---------------------------------------------------------------- input
  logic [4:0] c_cnt, c_in;
  logic [5:0] half_in;                      // N/2 of the incoming line
  always_comb begin
    half_in = 6'(2 << in_size);
    c_in    = in_first ? 5'd0 : 5'(c_cnt + 5'd1);
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        c_cnt <= '0;
    else if (in_valid) c_cnt <= c_in;
  end

  logic [NMULT*COEF_W-1:0] coef;
  mts_rom u_rom (
    .clk   (clk),
    .rd_en (in_valid),
    .is_dst(in_type != TR_DCT2),
    .size  (in_size),
    .row   (c_in),
    .coef  (coef)
  );

  // stage 1: samples with the Gamma sign change of DCT-VIII
  logic v1, first1, last1, final1;
  logic [4:0] c1;
  tr_type_e type1;
  size_code_t size1;
  logic signed [NBI-1:0] a1, b1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
    end else begin
      v1 <= in_valid;
    end
  end
  always_ff @(posedge clk) begin
    if (in_valid) begin
      first1 <= in_first;
      last1  <= (6'(c_in) == half_in - 6'd1);
      final1 <= in_final;
      c1     <= c_in;
      type1  <= in_type;
      size1  <= in_size;
      if (in_type == TR_DCT8 && is_zero_mode(in_type, in_size)) begin
        a1 <= c_in[0] ? -in_a : in_a;
        b1 <= c_in[0] ? -in_b : in_b;
      end else if (in_type == TR_DCT8) begin
        a1 <= in_a;
        b1 <= -in_b;
      end else begin
        a1 <= in_a;
        b1 <= in_b;
      end
    end
  end

  // stage 2: 32 regular multipliers
  logic v2, first2, last2, final2;
  logic c2_odd;
  tr_type_e type2;
  size_code_t size2;
  logic signed [NBI+COEF_W-1:0] prod [NMULT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v2 <= 1'b0;
    else        v2 <= v1;
  end
  always_ff @(posedge clk) begin
    if (v1) begin
      first2 <= first1;
      last2  <= last1;
      final2 <= final1;
      c2_odd <= c1[0];
      type2  <= type1;
      size2  <= size1;
      for (int j = 0; j < NMULT; j++)
        prod[j] <= $signed(coef[COEF_W*j +: COEF_W]) * ((j % 2 == 0) ? (NBI+COEF_W)'(a1) : (NBI+COEF_W)'(b1));
    end
  end

  // accumulation
  logic zm2, b32_2, b64_2, pair2;
  always_comb begin
    zm2   = is_zero_mode(type2, size2);
    b64_2 = (type2 == TR_DCT2) && (size2 == 3'd4);
    b32_2 = (type2 == TR_DCT2) && (size2 == 3'd3);
    pair2 = !zm2 && !b32_2;
  end

  acc_t acc [64];
  acc_t acc_nx [64];
  always_comb begin
    for (int i = 0; i < 64; i++) begin
      acc_nx[i] = first2 ? '0 : acc[i];
      if (pair2) begin
        if (i < 16) acc_nx[i] = acc_nx[i] + acc_t'(prod[2*i]) + acc_t'(prod[2*i+1]);
      end else if (b64_2 && c2_odd) begin
        if (i >= 32) acc_nx[i] = acc_nx[i] + acc_t'(prod[i-32]);
      end else begin
        if (i < 32) acc_nx[i] = acc_nx[i] + acc_t'(prod[i]);
      end
    end
  end
  always_ff @(posedge clk) begin
    if (v2) acc <= acc_nx;
  end

  // butterfly recombination and DCT-VIII output reversal
  acc_t xv [64];
  acc_t xr [64];
  always_comb begin
    for (int n = 0; n < 64; n++) xv[n] = '0;
    if (b64_2) begin
      for (int n = 0; n < 32; n++) begin
        xv[n]      = acc_nx[n] + acc_nx[32+n];
        xv[63-n]   = acc_nx[n] - acc_nx[32+n];
      end
    end else if (b32_2) begin
      for (int n = 0; n < 16; n++) begin
        xv[n]      = acc_nx[2*n] + acc_nx[2*n+1];
        xv[31-n]   = acc_nx[2*n] - acc_nx[2*n+1];
      end
    end else begin
      for (int n = 0; n < 32; n++) xv[n] = acc_nx[n];
    end
    for (int n = 0; n < 64; n++) begin
      xr[n] = xv[n];
      if (type2 == TR_DCT8 && n < (4 << size2)) xr[n] = xv[(4 << size2) - 1 - n];
    end
  end

  // rounding and clipping
  function automatic logic signed [NBI-1:0] round_clip(input acc_t x, input logic fin);
    acc_t r;
    acc_t lo, hi;
    if (fin) begin
      r  = (x + acc_t'(1 << (20 - BIT_DEPTH - 1))) >>> (20 - BIT_DEPTH);
      lo = -(acc_t'(1) <<< (NBO - 1));
      hi =  (acc_t'(1) <<< (NBO - 1)) - 1;
    end else begin
      r  = (x + acc_t'(64)) >>> 7;
      lo = -acc_t'(32768);
      hi =  acc_t'(32767);
    end
    if (r < lo) r = lo;
    if (r > hi) r = hi;
    return NBI'(r);
  endfunction

  // Output delay line, kept as a ring of 64 time slots of one output pair.
  // When a line completes, its N/2 pairs are written to the slots of the
  // cycles in which they must leave (first input + MTS_LAT - 1 + k); the
  // slot of the current cycle is read and emptied every cycle.  A short line
  // that follows a long one is thus held longer, which gives every line the
  // latency of the 64-point line.
  typedef struct packed {
    logic                  first;
    logic                  last;
    logic                  fin;
    logic signed [NBI-1:0] a;
    logic signed [NBI-1:0] b;
  } slot_t;

  logic [5:0] tc;                 // free-running slot pointer
  logic       ring_v [64];
  slot_t      ring   [64];
  logic [5:0] base_slot;
  logic [5:0] half2;
  always_comb begin
    half2     = 6'(2 << size2);
    base_slot = 6'(tc + 6'(MTS_LAT - 2) - half2);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tc <= '0;
      for (int i = 0; i < 64; i++) ring_v[i] <= 1'b0;
    end else begin
      tc <= tc + 6'd1;
      ring_v[tc] <= 1'b0;
      if (v2 && last2)
        for (int k = 0; k < MTS_WIN; k++)
          if (k < int'(half2)) ring_v[6'(base_slot + 6'(k))] <= 1'b1;
    end
  end
  // A line may only be sent after the previous one has been sent entirely;
  // then its output slots are always free.
  a_slot_free: assert property (@(posedge clk) disable iff (!rst_n)
    (v2 && last2) |-> !ring_v[base_slot])
    else $error("mts_1d: output slot already taken (lines overlap)");

  always_ff @(posedge clk) begin
    if (v2 && last2)
      for (int k = 0; k < MTS_WIN; k++)
        if (k < int'(half2)) begin
          ring[6'(base_slot + 6'(k))].first <= (k == 0);
          ring[6'(base_slot + 6'(k))].last  <= (k == int'(half2) - 1);
          ring[6'(base_slot + 6'(k))].fin   <= final2;
          ring[6'(base_slot + 6'(k))].a     <= round_clip(xr[2*k], final2);
          ring[6'(base_slot + 6'(k))].b     <= round_clip(xr[2*k+1], final2);
        end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_first <= 1'b0;
      out_last  <= 1'b0;
      out_final <= 1'b0;
      out_a     <= '0;
      out_b     <= '0;
    end else begin
      out_valid <= ring_v[tc];
      out_first <= ring_v[tc] & ring[tc].first;
      out_last  <= ring_v[tc] & ring[tc].last;
      out_final <= ring[tc].fin;
      out_a     <= ring[tc].a;
      out_b     <= ring[tc].b;
    end
  end

endmodule
