// scl_decoder: successive-cancellation list (SCL / CA-SCL) decoder with serial list
// processing.  One parameterisation serves as each of the chip's three decoders:
//   flexible decoder        N_MAX_LOG=14, L_MAX=8,  QI=6, QI0=6 (defaults)
//   ultra-reliable decoder  N_MAX_LOG=11, L_MAX=32, QI=6, QI0=7
//   SC decoder              N_MAX_LOG=15, L_MAX=1,  QI=7, QI0=7
//
// How it works.  Bits are decided one at a time from the first information bit on (leading
// frozen bits are skipped).  When a bit starts a new 32-bit block, the serial unit recomputes
// for each surviving path, one path after another, the stages from ctz(i) (all stages for the
// first bit) down to stage 5, one 32-LLR word per cycle, reading stage t+1 (or the channel
// LLRs) and writing stage t of the path's own memory slot.  Stage 5 goes into the path's
// 32-LLR register bank.  For every bit the parallel unit then gives each path's stage-0 LLR;
// the two candidate metrics (PM unchanged for the hard decision, PM + |LLR| otherwise) go to
// the metric sorter, which keeps the best L and assigns them to slots.  A path that takes
// over a slot only copies the parent's per-stage pointers into the LLR and PS memories
// (address exchange), its 32 decided bits of the current block, its PM and its CRC.  After
// the 32nd bit of a block the block's partial sums are folded into the PS memory row of the
// stage where the block is a left child.  After the last bit the path with the smallest PM
// (that also passes the CRC when crc_en) is chosen and bit_recovery rebuilds its u from its
// PS rows.
//
// Interface.  Channel LLRs (sign-magnitude, 6 bits) and frozen/good flags are written one
// 32-entry word at a time while the decoder is idle; start latches n (6..N_MAX_LOG), log2 L
// and crc_en.  When done is high the decoded u and the frozen mask are read word by word
// through rd_addr (asynchronous); release returns the decoder to idle.
// Timing, per decoded bit: (active paths) + 2 cycles, plus at each block start
// sum over recomputed stages of 2^(t-5) cycles per path, plus (ts-4) * 2^(ts-5) cycles per
// path for the partial-sum fold at each block end.
//
// Follows the paper: f/g PEs, serial list processing with memory address exchange instead
// of an LLR crossbar, good bits that do not split, PM normalisation by the minimum with
// Q_sort=7 / Q_PM=6, LN bits of PS memory, decoded-bit recovery from PS, starting from the
// first non-frozen bit.  Not built: multi-bit decision and rate-0/1 nodes, the 3-stage
// (4-stage) LLR memory reduction, double-package mode, the semi-parallel unit, SSC for the
// SC decoder and PC-SCL; each stage here is stored in full (L*Qi*(N-32) bits + 32 LLR regs).
module scl_decoder #(
  parameter int unsigned N_MAX_LOG = 14,
  parameter int unsigned L_MAX     = 8,
  parameter int unsigned QI        = 6,
  parameter int unsigned QI0       = 6,
  parameter int unsigned QSORT     = 7,
  parameter int unsigned QPM       = 6,
  localparam int unsigned QC = polar_pkg::QC,
  localparam int unsigned NW = N_MAX_LOG - 5,
  localparam int unsigned LW = (L_MAX > 1) ? $clog2(L_MAX) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // channel LLR memory write port
  input  logic                   ch_we,
  input  logic [NW-1:0]          ch_waddr,
  input  logic [31:0][QC-1:0]    ch_wdata,
  // frozen / good bit memory write port
  input  logic                   fz_we,
  input  logic [NW-1:0]          fz_waddr,
  input  logic [31:0]            fz_frozen,
  input  logic [31:0]            fz_good,
  // control
  input  logic                   start,
  input  logic [3:0]             cfg_nlog,
  input  logic [2:0]             cfg_llog,
  input  logic                   cfg_crc_en,
  output logic                   busy,
  output logic                   done,
  output logic                   crc_ok,
  output logic [3:0]             res_nlog,
  // result read port
  input  logic [NW-1:0]          rd_addr,
  output logic [31:0]            rd_u,
  output logic [31:0]            rd_frozen,
  input  logic                   release_i
);
  localparam int unsigned DEPTH_L = L_MAX << NW;
  localparam int unsigned AWL = $clog2(DEPTH_L);

  typedef enum logic [3:0] {
    S_IDLE, S_SCAN, S_BITSTART, S_SER, S_BIT, S_SORT, S_PSU, S_FINAL, S_REC, S_DONE
  } state_e;
  state_e state;

  logic [3:0]            nlog;
  logic [LW:0]           lkeep;
  logic                  crc_en;
  logic [N_MAX_LOG-1:0]  i, nmax;
  logic                  first;
  logic [LW:0]           lp;
  logic [3:0]            t, t_top, kk, ts;
  logic [NW:0]           w;
  logic [31:0]           acc;
  logic [LW-1:0]         best;

  logic [L_MAX-1:0]                         active;
  logic [L_MAX-1:0][QPM-1:0]                pm;
  logic [L_MAX-1:0][23:0]                   crc;
  logic [L_MAX-1:0][31:0]                   blk;       // decided bits of the current block
  logic [L_MAX-1:0][N_MAX_LOG-1:0][LW-1:0]  llr_ptr;   // stage row owner (address exchange)
  logic [L_MAX-1:0][N_MAX_LOG-1:0][LW-1:0]  ps_ptr;
  logic [N_MAX_LOG-1:0]                     ps_valid;
  logic [L_MAX-1:0][31:0][QI-1:0]           llr32;     // stage-5 LLR registers
  logic [2*L_MAX-1:0][QSORT-1:0]            cand_pm;
  logic [2*L_MAX-1:0]                       cand_valid;

  logic [LW-1:0] lpi;
  assign lpi = LW'(lp);
  assign nmax = N_MAX_LOG'((1 << nlog) - 1);

  // ---------------- memories ----------------
  logic [NW-1:0] ch_ra0, ch_ra1, fz_ra0;
  logic [31:0][QC-1:0] ch_rd0, ch_rd1;
  logic [63:0] fz_rd0, fz_rd1;
  logic [AWL-1:0] llr_ra0, llr_ra1, llr_wa, ps_ra0, ps_wa;
  logic [31:0][QI-1:0] llr_rd0, llr_rd1, llr_rd_unused, ser_out;
  logic llr_we, ps_we;
  logic [31:0] ps_rd0, ps_rd_unused, ps_wd, ps_masked;
  logic [3:0] ps_rstage;

  word_ram #(.WIDTH(32*QC), .DEPTH(1 << NW)) u_chmem (
    .clk(clk), .we(ch_we), .waddr(ch_waddr), .wdata(ch_wdata),
    .raddr0(ch_ra0), .rdata0(ch_rd0), .raddr1(ch_ra1), .rdata1(ch_rd1));

  word_ram #(.WIDTH(64), .DEPTH(1 << NW)) u_fzmem (
    .clk(clk), .we(fz_we), .waddr(fz_waddr), .wdata({fz_good, fz_frozen}),
    .raddr0(fz_ra0), .rdata0(fz_rd0), .raddr1(rd_addr), .rdata1(fz_rd1));

  word_ram #(.WIDTH(32*QI), .DEPTH(DEPTH_L)) u_llrmem (
    .clk(clk), .we(llr_we), .waddr(llr_wa), .wdata(ser_out),
    .raddr0(llr_ra0), .rdata0(llr_rd0), .raddr1(llr_ra1), .rdata1(llr_rd1));

  word_ram #(.WIDTH(32), .DEPTH(DEPTH_L)) u_psmem (
    .clk(clk), .we(ps_we), .waddr(ps_wa), .wdata(ps_wd),
    .raddr0(ps_ra0), .rdata0(ps_rd0), .raddr1('0), .rdata1(ps_rd_unused));

  assign llr_rd_unused = '0;
  assign rd_frozen = fz_rd1[31:0];
  assign ps_masked = ps_valid[ps_rstage] ? ps_rd0 : 32'h0;

  // recovery port
  logic [3:0] rec_stage;
  logic [NW-1:0] rec_word;
  logic rec_start, rec_busy, rec_done;

  // ---------------- serial unit ----------------
  logic [31:0][QI-1:0] ser_a, ser_b;
  logic top_is_ch;
  logic [NW:0] half_w;   // words in stage t: 2^(t-5)

  always_comb begin
    top_is_ch = (t == nlog - 4'd1);
    half_w = (NW+1)'(1) << (t - 4'd5);
    ch_ra0 = NW'(w);
    ch_ra1 = NW'(w + half_w);
    llr_ra0 = AWL'((int'(llr_ptr[lpi][t + 4'd1]) << NW) + (int'(half_w) << 1) + int'(w));
    llr_ra1 = AWL'((int'(llr_ptr[lpi][t + 4'd1]) << NW) + (int'(half_w) * 3) + int'(w));
    llr_wa  = AWL'((int'(lp) << NW) + int'(half_w) + int'(w));
    llr_we  = (state == S_SER) && active[lpi] && (t > 4'd5);
    for (int j = 0; j < 32; j++) begin
      if (top_is_ch) begin
        ser_a[j] = {ch_rd0[j][QC-1], (QI-1)'(ch_rd0[j][QC-2:0])};
        ser_b[j] = {ch_rd1[j][QC-1], (QI-1)'(ch_rd1[j][QC-2:0])};
      end else begin
        ser_a[j] = llr_rd0[j];
        ser_b[j] = llr_rd1[j];
      end
    end
  end

  serial_unit #(.QIN(QI), .QOUT(QI)) u_serial (
    .word_a(ser_a), .word_b(ser_b), .is_g(i[t]), .ps(ps_masked), .word_y(ser_out));

  // ---------------- PS memory port ----------------
  logic [31:0] psu_base, psu_x;
  always_comb begin
    ps_rstage = t;
    ps_ra0 = AWL'((int'(ps_ptr[lpi][t]) << NW) + int'(half_w) + int'(w));
    psu_base = (kk == 4'd5) ? polar_pkg::polar_enc32(blk[lpi]) : acc;
    psu_x = psu_base;
    if (state == S_PSU) begin
      ps_rstage = kk;
      ps_ra0 = AWL'((int'(ps_ptr[lpi][kk]) << NW) + (1 << (kk - 4'd5))
                    + (int'(w) & ((1 << (kk - 4'd5)) - 1)));
      if (w[kk - 4'd5] == 1'b0) psu_x = psu_base ^ ps_masked;
    end else if (state == S_REC) begin
      ps_rstage = rec_stage;
      ps_ra0 = AWL'((int'(ps_ptr[best][rec_stage]) << NW) + (1 << (rec_stage - 4'd5))
                    + int'(rec_word));
    end
    ps_we = (state == S_PSU) && active[lpi] && (kk == ts);
    ps_wa = AWL'((int'(lp) << NW) + (1 << (ts - 4'd5)) + int'(w));
    ps_wd = psu_base;
  end

  // ---------------- parallel unit and candidates ----------------
  logic [QI0-1:0] l0;
  logic           frz, good, hard;
  logic [QSORT-1:0] pm_keep, pm_flip;
  assign fz_ra0 = (state == S_SCAN) ? NW'(w) : NW'(i >> 5);
  assign frz  = fz_rd0[i[4:0]];
  assign good = fz_rd0[{1'b1, i[4:0]}];

  parallel_unit #(.QI(QI), .QI0(QI0)) u_par (
    .llr32(llr32[llr_ptr[lpi][5]]), .bits(blk[lpi]), .idx(i[4:0]), .l0(l0));

  assign hard = l0[QI0-1];
  assign pm_keep = QSORT'(pm[lpi]);
  assign pm_flip = QSORT'(pm[lpi]) + QSORT'(l0[QI0-2:0]);

  // ---------------- sorter and CRC ----------------
  logic [L_MAX-1:0]          slot_valid, slot_bit;
  logic [L_MAX-1:0][LW-1:0]  slot_parent;
  logic [L_MAX-1:0][QPM-1:0] slot_pm;
  logic [L_MAX-1:0][1:0][23:0] crc_nx;

  metric_sorter #(.L(L_MAX), .QSORT(QSORT), .QPM(QPM)) u_sort (
    .cand_pm(cand_pm), .cand_valid(cand_valid), .lkeep(lkeep),
    .slot_valid(slot_valid), .slot_parent(slot_parent), .slot_bit(slot_bit), .slot_pm(slot_pm));

  for (genvar p = 0; p < int'(L_MAX); p++) begin : g_crc
    for (genvar b = 0; b < 2; b++) begin : g_bit
      crc24_step u_crc (.crc_in(crc[p]), .bit_in(1'(b)), .crc_out(crc_nx[p][b]));
    end
  end

  // ---------------- final choice ----------------
  logic [LW-1:0] sel_best;
  logic          sel_ok;
  always_comb begin
    logic found;
    logic [QPM-1:0] bpm;
    sel_best = '0;
    sel_ok = 1'b0;
    found = 1'b0;
    bpm = '1;
    for (int s = 0; s < int'(L_MAX); s++)
      if (active[s] && (!crc_en || crc[s] == 24'h0) && (!sel_ok || pm[s] < bpm)) begin
        sel_ok = 1'b1;
        sel_best = LW'(s);
        bpm = pm[s];
      end
    if (!sel_ok)
      for (int s = 0; s < int'(L_MAX); s++)
        if (active[s] && (!found || pm[s] < bpm)) begin
          found = 1'b1;
          sel_best = LW'(s);
          bpm = pm[s];
        end
  end

  bit_recovery #(.N_MAX_LOG(N_MAX_LOG)) u_rec (
    .clk(clk), .rst_n(rst_n), .start(rec_start), .nlog(nlog), .last_bits(blk[best]),
    .ps_stage(rec_stage), .ps_word(rec_word), .ps_rdata(ps_masked),
    .busy(rec_busy), .done(rec_done), .rd_addr(rd_addr), .rd_data(rd_u));

  assign busy = state != S_IDLE;
  assign done = state == S_DONE;
  assign res_nlog = nlog;
  assign rec_start = state == S_FINAL;

  // first non-frozen position in the scanned word
  logic [4:0] scan_pos;
  logic       scan_hit;
  always_comb begin
    scan_pos = '0;
    scan_hit = 1'b0;
    for (int j = 31; j >= 0; j--)
      if (!fz_rd0[j]) begin
        scan_pos = 5'(j);
        scan_hit = 1'b1;
      end
  end

  // trailing zeros of i (i has its 5 low bits zero when used)
  logic [3:0] i_ctz, i_tz1;
  always_comb begin
    i_ctz = 4'd5;
    for (int b = int'(N_MAX_LOG) - 1; b >= 5; b--) if (i[b]) i_ctz = 4'(b);
    i_tz1 = 4'd5;
    for (int b = int'(N_MAX_LOG) - 1; b >= 5; b--) if (!i[b]) i_tz1 = 4'(b);
  end

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      nlog <= 4'd6;
      lkeep <= 1;
      crc_en <= 1'b0;
      i <= '0;
      first <= 1'b0;
      lp <= '0;
      t <= 4'd5;
      t_top <= 4'd5;
      kk <= 4'd5;
      ts <= 4'd5;
      w <= '0;
      acc <= '0;
      best <= '0;
      crc_ok <= 1'b0;
      active <= '0;
      pm <= '0;
      crc <= '0;
      blk <= '0;
      llr_ptr <= '0;
      ps_ptr <= '0;
      ps_valid <= '0;
      cand_pm <= '0;
      cand_valid <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          nlog <= cfg_nlog;
          lkeep <= ((1 << cfg_llog) > L_MAX) ? (LW+1)'(L_MAX) : (LW+1)'(1 << cfg_llog);
          crc_en <= cfg_crc_en;
          active <= L_MAX'(1);
          pm <= '0;
          crc <= '0;
          blk <= '0;
          ps_valid <= '0;
          for (int l = 0; l < int'(L_MAX); l++)
            for (int s = 0; s < int'(N_MAX_LOG); s++) begin
              llr_ptr[l][s] <= LW'(l);
              ps_ptr[l][s] <= LW'(l);
            end
          w <= '0;
          state <= S_SCAN;
        end
        S_SCAN: begin
          if (scan_hit) begin
            i <= N_MAX_LOG'({w[NW-1:0], scan_pos});
            first <= 1'b1;
            w <= '0;
            state <= S_BITSTART;
          end else if (w == ((NW+1)'(1) << (nlog - 4'd5)) - 1'b1) begin
            i <= nmax;
            state <= S_FINAL;
          end else w <= w + 1'b1;
        end
        S_BITSTART: begin
          cand_valid <= '0;
          lp <= '0;
          if (first || i[4:0] == 5'd0) begin
            t <= first ? nlog - 4'd1 : i_ctz;
            t_top <= first ? nlog - 4'd1 : i_ctz;
            w <= '0;
            state <= S_SER;
          end else state <= S_BIT;
        end
        S_SER: begin
          if (!active[lpi] || (t == 4'd5 && w == half_w - 1'b1)) begin
            if (active[lpi]) begin
              llr32[lpi] <= ser_out;
              llr_ptr[lpi][5] <= lpi;
            end
            w <= '0;
            t <= t_top;
            if (lp == lkeep - 1'b1) begin
              lp <= '0;
              first <= 1'b0;
              state <= S_BIT;
            end else lp <= lp + 1'b1;
          end else begin
            if (t == 4'd5) llr32[lpi] <= ser_out;
            if (w == half_w - 1'b1) begin
              w <= '0;
              llr_ptr[lpi][t] <= lpi;
              t <= t - 4'd1;
            end else w <= w + 1'b1;
          end
        end
        S_BIT: begin
          if (active[lpi]) begin
            cand_pm[2*lpi]      <= hard ? pm_flip : pm_keep;
            cand_pm[2*lpi + 1]  <= hard ? pm_keep : pm_flip;
            cand_valid[2*lpi]   <= frz || !good || !hard;
            cand_valid[2*lpi+1] <= !frz && (!good || hard);
          end
          if (lp == lkeep - 1'b1) state <= S_SORT;
          else lp <= lp + 1'b1;
        end
        S_SORT: begin
          for (int s = 0; s < int'(L_MAX); s++) begin
            if (slot_valid[s]) begin
              active[s] <= 1'b1;
              pm[s] <= slot_pm[s];
              blk[s] <= blk[slot_parent[s]] | (32'(slot_bit[s]) << i[4:0]);
              crc[s] <= (crc_en && !frz) ? crc_nx[slot_parent[s]][slot_bit[s]]
                                         : crc[slot_parent[s]];
              llr_ptr[s] <= llr_ptr[slot_parent[s]];
              ps_ptr[s] <= ps_ptr[slot_parent[s]];
            end else active[s] <= 1'b0;
          end
          lp <= '0;
          if (i == nmax) state <= S_FINAL;
          else if (i[4:0] == 5'd31) begin
            ts <= i_tz1;
            kk <= 4'd5;
            w <= '0;
            state <= S_PSU;
          end else begin
            i <= i + 1'b1;
            state <= S_BITSTART;
          end
        end
        S_PSU: begin
          if (!active[lpi] || (kk == ts && w == ((NW+1)'(1) << (ts - 4'd5)) - 1'b1)) begin
            if (active[lpi]) ps_ptr[lpi][ts] <= lpi;
            kk <= 4'd5;
            w <= '0;
            if (lp == lkeep - 1'b1) begin
              ps_valid[ts] <= 1'b1;
              blk <= '0;
              i <= i + 1'b1;
              state <= S_BITSTART;
            end else lp <= lp + 1'b1;
          end else if (kk == ts) begin
            kk <= 4'd5;
            w <= w + 1'b1;
          end else begin
            acc <= psu_x;
            kk <= kk + 4'd1;
          end
        end
        S_FINAL: begin
          best <= sel_best;
          crc_ok <= sel_ok;
          state <= S_REC;
        end
        S_REC: if (rec_done) state <= S_DONE;
        S_DONE: if (release_i) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
