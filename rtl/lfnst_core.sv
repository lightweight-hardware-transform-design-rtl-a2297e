// Inverse LFNST core: 32 shared regular multipliers, 2 samples/cycle output,
// latency LFNST_LAT that does not depend on the block size.
//
// How it works.  An activation pulse (start) opens an input window of
// W = nOut/2 cycles (8 for 16 outputs, 24 for 48 outputs; as in VVC, 4xN
// and Mx4 blocks give 16 outputs, larger blocks 48).  During the
// window the input vector z (8 inputs for 4x4 and 8x8 blocks, 16 otherwise)
// arrives as pairs z[2p], z[2p+1] at any rate; missing inputs are zero.  At
// the end of the window the vector joins a short queue, so the next block
// can load at once.  Each vector is computed in a slot that opens a fixed
// 25 cycles after its start pulse, so that the blocks leave in order and
// with the same latency whatever their sizes.  Then, for k = 0..W-1, one
// kernel row of 32 coefficients is read from the LFNST ROM (16 for output
// 2k, 16 for output 2k+1), the 32 multipliers form z[i]*T[i][2k] and
// z[i]*T[i][2k+1], and two adder trees give y[2k] and y[2k+1], rounded by 7
// bits and clipped to 16 bits as in the VVC inverse LFNST.  The first pair
// leaves LFNST_LAT = 30 cycles after the start pulse for every block size
// (the latency of the 48-output case), then one pair per cycle.
//
// ROM interface: rom_addr = kernel*32 + (nOut==48 ? 8+k : k) with
// kernel = set_idx*2 + (idx-1), i.e. 8 kernels of 8 rows (16x16) plus 24 rows
// (16x48) = 256 rows of 256 bits; lane 16h+i (8 bits) holds T[i][2k+h].
// Read latency one cycle.  The kernel values are the VVC standard's and are
// not part of this module.
//
// The 32 multipliers, the per-size input/output rates, the 256x256-bit ROM
// and the fixed latency follow the paper; the output-stationary schedule with
// adder trees and the placement of the delay (a queue of input vectors
// rather than a delay line at the output) are this design's.
module lfnst_core
  import vvc_tr_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,      // activation pulse, window opens next cycle
  input  logic                    out48,      // 1: 48 outputs (min(W,H) >= 8), 0: 16 outputs
  input  logic [1:0]              set_idx,    // LFNST transform set 0..3
  input  logic [1:0]              idx,        // LFNST kernel 1..2 within the set
  input  logic                    in_valid,
  input  logic signed [NBI-1:0]   in_a,       // z[2p]
  input  logic signed [NBI-1:0]   in_b,       // z[2p+1]
  output logic                    rom_en,
  output logic [7:0]              rom_addr,
  input  logic [NMULT*COEF_W-1:0] rom_data,
  output logic                    out_valid,
  output logic                    out_first,
  output logic                    out_last,   // end of LFNST (ready pulse)
  output logic signed [NBI-1:0]   out_a,      // y[2k]
  output logic signed [NBI-1:0]   out_b       // y[2k+1]
);

  localparam int unsigned NZ = 16;

  // ------------------------------------------------------------- input window
  logic        win_open;
  logic [4:0]  wcnt, wlen;
  logic [3:0]  pidx;
  logic [2:0]  kern_w;
  logic        out48_w;
  logic signed [NBI-1:0] zcap [NZ];
  logic        win_end;

  always_comb win_end = win_open && (wcnt == wlen);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win_open <= 1'b0;
      wcnt     <= '0;
    end else if (start) begin
      win_open <= 1'b1;
      wcnt     <= 5'd1;
    end else if (win_end) begin
      win_open <= 1'b0;
    end else if (win_open) begin
      wcnt <= wcnt + 5'd1;
    end
  end

  always_ff @(posedge clk) begin
    if (start) begin
      wlen    <= out48 ? 5'd24 : 5'd8;
      kern_w  <= {set_idx, (idx == 2'd2)};
      out48_w <= out48;
      pidx    <= '0;
      for (int i = 0; i < NZ; i++) zcap[i] <= '0;
    end else if (win_open && in_valid) begin
      zcap[2*pidx]   <= in_a;
      zcap[2*pidx+1] <= in_b;
      pidx           <= pidx + 4'd1;
    end
  end

  // ---------------------------------------------------- vector queue
  // Complete vectors wait here until their compute slot, which opens a
  // fixed LFNST_WIN+1 cycles after their start pulse; consecutive compute
  // slots then never overlap, whatever the mix of block sizes.  Starts are
  // at least 8 cycles apart, so at most 3 vectors wait at a time.
  typedef struct packed {
    logic [2:0]                kern;
    logic                      out48;
    logic [NZ-1:0][NBI-1:0]    z;
  } vec_t;

  vec_t       vq [4];
  logic [1:0] vq_wr, vq_rd;
  logic [LFNST_WIN:0] sdl;          // start pulses delayed by 1..LFNST_WIN+1 cycles
  logic       pop;

  always_comb pop = sdl[LFNST_WIN];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sdl   <= '0;
      vq_wr <= '0;
      vq_rd <= '0;
    end else begin
      sdl <= {sdl[LFNST_WIN-1:0], start};
      if (win_end) vq_wr <= vq_wr + 2'd1;
      if (pop)     vq_rd <= vq_rd + 2'd1;
    end
  end

  always_ff @(posedge clk) begin
    if (win_end) begin
      vq[vq_wr].kern  <= kern_w;
      vq[vq_wr].out48 <= out48_w;
      for (int i = 0; i < NZ; i++) vq[vq_wr].z[i] <= zcap[i];
      if (in_valid) begin
        vq[vq_wr].z[2*pidx]   <= in_a;
        vq[vq_wr].z[2*pidx+1] <= in_b;
      end
    end
  end

  // A new start may only come once the window of the previous one closed,
  // and the queue never holds more than 3 vectors (starts >= 8 cycles apart).
  a_start_spacing: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !win_open || win_end)
    else $error("lfnst_core: start inside an open input window");
  a_queue_room: assert property (@(posedge clk) disable iff (!rst_n)
    win_end |-> (2'(vq_wr - vq_rd) != 2'd3) || pop)
    else $error("lfnst_core: vector queue overflow");

  // --------------------------------------------------------------- compute
  logic        busy;
  logic [4:0]  kc, klen;
  logic [2:0]  kern_c;
  logic        out48_c;
  logic signed [NBI-1:0] zc [NZ];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      kc   <= '0;
    end else if (pop) begin
      busy <= 1'b1;
      kc   <= '0;
    end else if (busy) begin
      if (kc == klen - 5'd1) busy <= 1'b0;
      kc <= kc + 5'd1;
    end
  end

  always_ff @(posedge clk) begin
    if (pop) begin
      klen    <= vq[vq_rd].out48 ? 5'd24 : 5'd8;
      kern_c  <= vq[vq_rd].kern;
      out48_c <= vq[vq_rd].out48;
      for (int i = 0; i < NZ; i++) zc[i] <= vq[vq_rd].z[i];
    end
  end

  always_comb begin
    rom_en   = busy;
    rom_addr = {kern_c, 5'(out48_c ? 5'd8 + kc : kc)};
  end

  // pipeline: p1 = ROM data valid, p2 = products, p3 = sums
  logic       v1, v2, v3;
  logic       f1, f2, f3, l1, l2, l3;
  logic signed [NBI+COEF_W-1:0] prod [NMULT];
  logic signed [NBI+COEF_W+4:0] sum0, sum1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; v3 <= 1'b0;
    end else begin
      v1 <= busy; v2 <= v1; v3 <= v2;
    end
  end
  always_ff @(posedge clk) begin
    f1 <= (kc == 5'd0);
    l1 <= (kc == klen - 5'd1);
    f2 <= f1; l2 <= l1;
    f3 <= f2; l3 <= l2;
    for (int j = 0; j < NMULT; j++)
      prod[j] <= $signed(rom_data[COEF_W*j +: COEF_W]) * (NBI+COEF_W)'(zc[j % NZ]);
  end
  always_ff @(posedge clk) begin
    logic signed [NBI+COEF_W+4:0] t0, t1;
    t0 = '0;
    t1 = '0;
    for (int i = 0; i < NZ; i++) begin
      t0 = t0 + (NBI+COEF_W+5)'(prod[i]);
      t1 = t1 + (NBI+COEF_W+5)'(prod[NZ+i]);
    end
    sum0 <= t0;
    sum1 <= t1;
  end

  function automatic logic signed [NBI-1:0] round_clip16(input logic signed [NBI+COEF_W+4:0] x);
    logic signed [NBI+COEF_W+4:0] r;
    r = (x + 64) >>> 7;
    if (r < -32768) r = -32768;
    if (r > 32767)  r = 32767;
    return NBI'(r);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_first <= 1'b0;
      out_last  <= 1'b0;
      out_a     <= '0;
      out_b     <= '0;
    end else begin
      out_valid <= v3;
      out_first <= v3 & f3;
      out_last  <= v3 & l3;
      out_a     <= round_clip16(sum0);
      out_b     <= round_clip16(sum1);
    end
  end

endmodule
