// Top level of the VVC inverse transform: input memory, transform core
// (inverse LFNST + bypass + 1-D inverse MTS), output memory and the block
// sequencer.
//
// What it does.  A block of W x H (4..64) quantised levels is loaded two
// samples per cycle; each pair goes out on iq_level0/1 to the inverse
// quantiser, whose results iq_coef0/1 are written to the input memory.  On
// start, the sequencer runs up to three phases:
//   1. LFNST (only when LFNST_idx != 0 and the vertical type is DCT-II):
//      the top-left 4x4 coefficients are read (4 tile reads), sent in
//      up-right diagonal order to the inverse LFNST as 8 or 16 inputs, and
//      the 16 or 48 outputs are written back to the top-left 4x4 resp. 8x8
//      region (row-major, without the bottom-right 4x4 for 48 outputs);
//   2. vertical pass: W column lines of length H through the bypass and the
//      MTS; results go to the intermediate area of the input memory;
//   3. horizontal pass: H row lines of length W, final rounding; results
//      go to the output memory (address {row, col/2}).
// Each phase waits until the previous one has written all its results.
// done pulses when the last output pair is written.  The output memory has
// two banks of one 64x64 block each; successive blocks alternate between
// them (out_bank), so one block can be read while the next is computed.
//
// Interface and timing.  ld_valid/ld_row/ld_col/ld_level0/ld_level1 load
// the pair at (row, col) and (row, col+1) per cycle while idle (ld_col even;
// its bit 0 is ignored); iq_level0/1 are the levels themselves, handed to
// the external inverse quantiser, whose combinational answers iq_coef0/1
// are written.  start with the block parameters (sampled at start)
// begins the work; busy is high until done.  rd_en/rd_addr read the output
// memory (data on rd_data one cycle later; rd_addr = {bank, row, col/2}).  The LFNST kernel ROM is
// outside (lfnst_rom_en/addr in, lfnst_rom_data back one cycle later), and
// so is the inverse quantiser (iq_level0/1 out, iq_coef0/1 back in the
// same cycle).  During a pass the memory is read at one line of N/2 pairs per
// N/2 cycles, lines back to back (2 samples per cycle); a pass of a W x H
// block takes W*H/2 cycles plus the fixed latency L1 + L2.
//
// The memories shared by all transforms, the core structure and the rate
// follow the paper; the memory layout, the load port, the phase sequence
// and the write-back of the LFNST output are this design's.
module vvc_itr_top
  import vvc_tr_pkg::*;
#(
  parameter int unsigned IN_DEPTH  = 2048,
  parameter int unsigned OUT_DEPTH = 4096
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // coefficient load (through the external inverse quantiser)
  input  logic                    ld_valid,
  input  logic [5:0]              ld_row,
  input  logic [5:0]              ld_col,
  input  logic signed [15:0]      ld_level0,
  input  logic signed [15:0]      ld_level1,
  output logic signed [15:0]      iq_level0,
  output logic signed [15:0]      iq_level1,
  input  logic signed [NBI-1:0]   iq_coef0,
  input  logic signed [NBI-1:0]   iq_coef1,
  // block parameters
  input  logic                    start,
  input  logic                    AVC_VVC,
  input  size_code_t              tr_width,
  input  size_code_t              tr_height,
  input  tr_type_e                MTS_type_hor,
  input  tr_type_e                MTS_type_ver,
  input  logic [1:0]              LFNST_set_idx,
  input  logic [1:0]              LFNST_idx,
  output logic                    busy,
  output logic                    done,
  output logic                    out_bank,    // output bank the running block writes
  // residual read-out
  input  logic                    rd_en,
  input  logic [11:0]             rd_addr,     // {bank, row, col/2}
  output logic [1:0][NBO-1:0]     rd_data,
  // external LFNST kernel ROM
  output logic                    lfnst_rom_en,
  output logic [7:0]              lfnst_rom_addr,
  input  logic [NMULT*COEF_W-1:0] lfnst_rom_data,
  // event counters for observation
  output logic                    ev_lfnst,     // an LFNST phase started
  output logic                    ev_bypass     // a line entered the bypass
);
  typedef enum logic [3:0] {
    S_IDLE, S_LF_RD, S_LF_RUN, S_LF_WAIT, S_V_RUN, S_V_WAIT, S_H_RUN, S_H_WAIT
  } state_e;

  state_e st;

  // block parameters
  size_code_t wsz, hsz;
  tr_type_e   th, tv;
  logic [1:0] lset, lidx;
  logic       vvc;
  logic       out48, in8;

  logic [6:0] wdim, hdim;
  always_comb begin
    wdim = 7'd4 << wsz;
    hdim = 7'd4 << hsz;
  end

  // ------------------------------------------------------------ memories
  logic                  im_we, im_re;
  logic [10:0]           im_waddr, im_raddr;
  logic [3:0]            im_wmask;
  logic [3:0][NBI-1:0]   im_wdata, im_rdata;

  input_mem #(.DEPTH(IN_DEPTH)) u_imem (
    .clk, .we(im_we), .waddr(im_waddr), .wmask(im_wmask), .wdata(im_wdata),
    .re(im_re), .raddr(im_raddr), .rdata(im_rdata)
  );

  logic                om_we;
  logic [11:0]         om_waddr;
  logic [1:0][NBO-1:0] om_wdata;

  output_mem #(.DEPTH(OUT_DEPTH)) u_omem (
    .clk, .we(om_we), .waddr(om_waddr), .wdata(om_wdata),
    .re(rd_en), .raddr(rd_addr), .rdata(rd_data)
  );

  // ------------------------------------------------------------ core
  logic                 c_en, c_first, c_lfstart;
  size_code_t           c_size;
  tr_type_e             c_type;
  tr_dir_e              c_dir;
  logic [1:0]           c_lidx;
  logic [1:0][NBI-1:0]  c_src;
  logic                 mv_inter, mv_fin, m_first, m_ready;
  logic [1:0][NBI-1:0]  m_inter;
  logic [1:0][NBO-1:0]  m_fin;
  logic                 l_valid, l_ready, l_busy;
  logic [1:0][NBI-1:0]  l_out;

  vvc_tr_core u_core (
    .clk, .rst_n,
    .input_enable   (c_en),
    .line_first     (c_first),
    .AVC_VVC        (vvc),
    .tr_size        (c_size),
    .MTS_type       (c_type),
    .MTS_dir        (c_dir),
    .LFNST_start    (c_lfstart),
    .LFNST_out48    (out48),
    .LFNST_set_idx  (lset),
    .LFNST_idx      (c_lidx),
    .tr_src_in      (c_src),
    .lfnst_rom_en, .lfnst_rom_addr, .lfnst_rom_data,
    .MTS_valid_inter(mv_inter),
    .MTS_valid_fin  (mv_fin),
    .MTS_first      (m_first),
    .MTS_ready      (m_ready),
    .MTS_out_inter  (m_inter),
    .MTS_out_fin    (m_fin),
    .LFNST_valid    (l_valid),
    .LFNST_ready    (l_ready),
    .LFNST_out      (l_out),
    .lfnst_busy     (l_busy)
  );

  // ------------------------------------------------------------ read side
  // Line counters of the running pass: line (column or row) and cycle k.
  logic [6:0] ln, kk;
  logic [6:0] nlines, ncyc;
  logic       zmode;
  tr_type_e   ptype;
  size_code_t psize;

  always_comb begin
    if (st == S_H_RUN) begin
      nlines = hdim; ncyc = wdim >> 1; ptype = th; psize = wsz;
    end else begin
      nlines = wdim; ncyc = hdim >> 1; ptype = tv; psize = hsz;
    end
    zmode = is_zero_mode(vvc ? ptype : TR_DCT2, psize);
  end

  // read request pipeline (1 cycle memory latency)
  logic       rq_v, rq_first;
  logic [1:0] rq_la, rq_lb;      // lanes for sample a / b
  logic [2:0] lf_rd;             // LFNST tile reads issued
  logic [3:0] lf_p;              // LFNST pairs sent
  logic       lf_tv;             // LFNST tile data valid next cycle
  logic [1:0] lf_tile;
  logic signed [NBI-1:0] g [4][4];   // top-left 4x4 (row, col)

  // up-right diagonal scan of a 4x4 group: position i -> (row, col)
  function automatic logic [3:0] diag_pos(input int i);
    logic [3:0] t [16];
    t = '{4'h0, 4'h4, 4'h1, 4'h8, 4'h5, 4'h2, 4'hC, 4'h9,
          4'h6, 4'h3, 4'hD, 4'hA, 4'h7, 4'hE, 4'hB, 4'hF};
    return t[i];
  endfunction

  always_comb begin
    im_re    = 1'b0;
    im_raddr = '0;
    rq_lb    = '0;
    rq_la    = '0;
    if (st == S_LF_RD) begin
      im_re    = (lf_rd < 3'd4);
      im_raddr = {1'b0, 4'd0, lf_rd[1], 4'd0, lf_rd[0]};
    end else if (st == S_V_RUN) begin
      im_re = 1'b1;
      // column ln, rows 2k,2k+1 (pair) or row k (zero mode)
      if (zmode) begin
        im_raddr = {1'b0, kk[5:1], ln[5:1]};
        rq_la    = {kk[0], ln[0]};
        rq_lb    = {kk[0], ln[0]};
      end else begin
        im_raddr = {1'b0, kk[4:0], ln[5:1]};
        rq_la    = {1'b0, ln[0]};
        rq_lb    = {1'b1, ln[0]};
      end
    end else if (st == S_H_RUN) begin
      im_re = 1'b1;
      // row ln of the intermediate area, cols 2k,2k+1 (pair) or col k
      if (zmode) begin
        im_raddr = {1'b1, ln[5:1], kk[5:1]};
        rq_la    = {ln[0], kk[0]};
        rq_lb    = {ln[0], kk[0]};
      end else begin
        im_raddr = {1'b1, ln[5:1], kk[4:0]};
        rq_la    = {ln[0], 1'b0};
        rq_lb    = {ln[0], 1'b1};
      end
    end
  end

  logic [1:0] rq_la_q, rq_lb_q;
  size_code_t rq_size;
  tr_type_e   rq_type;
  tr_dir_e    rq_dir;

  // ------------------------------------------------------------ write side
  logic [6:0] oc_k, oc_l;        // output pair / line counters
  logic [5:0] lw_k;              // LFNST output pair counter
  logic [5:0] lw_i;
  logic [5:0] lw_r, lw_c;

  always_comb begin
    lw_i = {lw_k[4:0], 1'b0};
    if (!out48)           begin lw_r = 6'(lw_i >> 2); lw_c = 6'(lw_i & 6'd3); end
    else if (lw_i < 6'd32) begin lw_r = 6'(lw_i >> 3); lw_c = 6'(lw_i & 6'd7); end
    else                  begin lw_r = 6'd4 + 6'((lw_i - 6'd32) >> 2); lw_c = 6'((lw_i - 6'd32) & 6'd3); end
  end

  always_comb begin
    iq_level0 = ld_level0;
    iq_level1 = ld_level1;
    im_we    = 1'b0;
    im_waddr = '0;
    im_wmask = '0;
    im_wdata = '0;
    om_we    = mv_fin;
    om_waddr = {out_bank, oc_l[5:0], oc_k[4:0]};
    om_wdata = m_fin;
    if (st == S_IDLE && ld_valid) begin
      im_we    = 1'b1;
      im_waddr = {1'b0, ld_row[5:1], ld_col[5:1]};
      im_wmask = ld_row[0] ? 4'b1100 : 4'b0011;
      im_wdata = {iq_coef1, iq_coef0, iq_coef1, iq_coef0};
    end else if (l_valid) begin
      im_we    = 1'b1;
      im_waddr = {1'b0, lw_r[5:1], lw_c[5:1]};
      im_wmask = lw_r[0] ? 4'b1100 : 4'b0011;
      im_wdata = {l_out[1], l_out[0], l_out[1], l_out[0]};
    end else if (mv_inter) begin
      // column oc_l, rows 2*oc_k, 2*oc_k+1 of the intermediate area
      im_we    = 1'b1;
      im_waddr = {1'b1, oc_k[4:0], oc_l[5:1]};
      im_wmask = oc_l[0] ? 4'b1010 : 4'b0101;
      im_wdata = {m_inter[1], m_inter[1], m_inter[0], m_inter[0]};
    end
  end

  // ------------------------------------------------------------ sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      wsz <= '0; hsz <= '0; th <= TR_DCT2; tv <= TR_DCT2;
      lset <= '0; lidx <= '0; vvc <= 1'b1;
      out48 <= 1'b0; in8 <= 1'b0;
      ln <= '0; kk <= '0;
      lf_rd <= '0; lf_p <= '0; lf_tv <= 1'b0; lf_tile <= '0;
      rq_v <= 1'b0; rq_first <= 1'b0;
      rq_la_q <= '0; rq_lb_q <= '0; rq_size <= '0; rq_type <= TR_DCT2; rq_dir <= DIR_VERT;
      oc_k <= '0; oc_l <= '0; lw_k <= '0;
      done <= 1'b0; ev_lfnst <= 1'b0; out_bank <= 1'b0;
      for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) g[r][c] <= '0;
    end else begin
      done     <= 1'b0;
      ev_lfnst <= 1'b0;
      rq_v     <= 1'b0;
      rq_first <= 1'b0;
      lf_tv    <= 1'b0;

      // LFNST tile capture
      if (lf_tv)
        for (int l = 0; l < 4; l++)
          g[{lf_tile[1], l[1]}][{lf_tile[0], l[0]}] <= im_rdata[l];

      // output write counters
      if (l_valid) lw_k <= lw_k + 6'd1;
      if (mv_inter || mv_fin) begin
        if (oc_k == ((st == S_H_RUN || st == S_H_WAIT) ? (wdim >> 1) : (hdim >> 1)) - 7'd1) begin
          oc_k <= '0;
          oc_l <= oc_l + 7'd1;
        end else begin
          oc_k <= oc_k + 7'd1;
        end
      end

      unique case (st)
        S_IDLE: if (start) begin
          wsz  <= tr_width;  hsz <= tr_height;
          th   <= MTS_type_hor; tv <= MTS_type_ver;
          lset <= LFNST_set_idx; lidx <= LFNST_idx; vvc <= AVC_VVC;
          out48 <= (tr_width != 3'd0) && (tr_height != 3'd0);
          in8   <= (tr_width == tr_height) && (tr_width <= 3'd1);
          ln <= '0; kk <= '0; lf_rd <= '0; lf_p <= '0; lw_k <= '0;
          oc_k <= '0; oc_l <= '0;
          if (AVC_VVC && (LFNST_idx != 2'd0) && (MTS_type_ver == TR_DCT2) && (MTS_type_hor == TR_DCT2)) begin
            st <= S_LF_RD;
            ev_lfnst <= 1'b1;
          end else begin
            st <= S_V_RUN;
          end
        end
        S_LF_RD: begin
          if (lf_rd < 3'd4) begin
            lf_rd   <= lf_rd + 3'd1;
            lf_tv   <= 1'b1;
            lf_tile <= lf_rd[1:0];
          end else if (!lf_tv) begin
            st <= S_LF_RUN;
          end
        end
        S_LF_RUN: begin
          // cycle 0 of this state carries LFNST_start, then the pairs
          if (lf_p == (in8 ? 4'd4 : 4'd8)) st <= S_LF_WAIT;
          lf_p <= lf_p + 4'd1;
        end
        S_LF_WAIT: if (l_ready) st <= S_V_RUN;
        S_V_RUN, S_H_RUN: begin
          rq_v     <= 1'b1;
          rq_first <= (kk == 7'd0);
          rq_la_q  <= rq_la;
          rq_lb_q  <= rq_lb;
          rq_size  <= psize;
          rq_type  <= ptype;
          rq_dir   <= (st == S_H_RUN) ? DIR_HOR : DIR_VERT;
          if (kk == ncyc - 7'd1) begin
            kk <= '0;
            if (ln == nlines - 7'd1) begin
              ln <= '0;
              st <= (st == S_H_RUN) ? S_H_WAIT : S_V_WAIT;
            end else begin
              ln <= ln + 7'd1;
            end
          end else begin
            kk <= kk + 7'd1;
          end
        end
        S_V_WAIT: if (oc_l == wdim) begin
          oc_l <= '0; oc_k <= '0;
          st <= S_H_RUN;
        end
        S_H_WAIT: if (oc_l == hdim) begin
          st   <= S_IDLE;
          done <= 1'b1;
          out_bank <= !out_bank;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // core input drive
  logic [3:0] zi_a, zi_b;
  always_comb begin
    zi_a = diag_pos(2 * (int'(lf_p) - 1));
    zi_b = diag_pos(2 * (int'(lf_p) - 1) + 1);
    c_lfstart = 1'b0;
    c_en      = 1'b0;
    c_first   = 1'b0;
    c_size    = rq_size;
    c_type    = rq_type;
    c_dir     = rq_dir;
    c_lidx    = 2'd0;
    c_src[0]  = im_rdata[rq_la_q];
    c_src[1]  = im_rdata[rq_lb_q];
    if (st == S_LF_RUN) begin
      c_type    = TR_DCT2;
      c_dir     = DIR_VERT;
      c_lidx    = lidx;
      c_lfstart = (lf_p == 4'd0);
      c_en      = (lf_p != 4'd0);
      c_src[0]  = g[zi_a[3:2]][zi_a[1:0]];
      c_src[1]  = g[zi_b[3:2]][zi_b[1:0]];
    end else begin
      c_en    = rq_v;
      c_first = rq_first;
    end
  end

  // Loading and starting are only allowed while idle.
  a_load_idle: assert property (@(posedge clk) disable iff (!rst_n) ld_valid |-> !busy)
    else $error("vvc_itr_top: load while busy");
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("vvc_itr_top: start while busy");

  always_comb begin
    busy      = (st != S_IDLE);
    ev_bypass = c_en && (st != S_LF_RUN);
  end
endmodule
