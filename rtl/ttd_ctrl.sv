// ttd_ctrl: control unit of the TTD linear operation.
//
// Instruction registers (cfg_we/cfg_addr/cfg_wdata, 32-bit words):
//   0 d (cores, 1..MAXD)      1..4  n_1..n_4      5..8  m_1..m_4
//   9..13 log2 of r_0..r_4    14 bit0 BN enable, bit1 residual enable
//   15 HBM core address       16 HBM scale address
//   17 DDR feature address    18/19/20 DDR gamma/beta/residual address
//   21 DDR output address     22 write 1: start
// (byte addresses; register map is this design's own, the paper only says
// that serialized instructions write registers holding the operation and the
// HBM/DDR addresses).
//
// Sequence after start:
//   1. LOAD   HBM DMA: all core weight words, then all scale words; in
//             parallel DDR DMA: the input features, then gamma, beta and the
//             residual when enabled.
//   2. STAGE  k = 1..d. Stage k computes P-bar_k = G_k x P_{k-1} with summation
//             size I_k = n_k r_{k-1}, output size J_k = m_k r_k and
//             T_{k-1} = n_{k+1}..n_d m_1..m_{k-1} feature rows. Loops (paper's
//             order, innermost first): Tout rows of a tile, ceil(I_k/Tin)
//             summation blocks, ceil(J_k/Tout) output tiles, ceil(T_{k-1}/Tout)
//             feature tiles (this last nesting is this design's choice).
//             Weights run one block (Tout cycles) ahead of features: a stage
//             of B blocks issues for (B+1)*Tout cycles, then waits until the
//             datapath has written the stage's last vector. Stage 1 reads the
//             feature buffer; stage k>1 reads the ping-pong bank stage k-1
//             wrote; stage k writes bank (k-1) mod 2.
//   3. STORE  DDR DMA writes ceil(M/Tin) output words from the last bank.
//   4. done pulses for one cycle; busy is high from start to done.
// Reads of padding lanes (s >= I_k) and padding rows (t >= T_{k-1}) are
// masked to zero (f_mask_lane/f_mask_row), since those buffer words are never
// written.
module ttd_ctrl
  import ttd_pkg::*;
#(
  parameter int TIN    = 128,
  parameter int TOUT   = 32,
  parameter int MAXD   = 4,
  parameter int FDEPTH = 512,
  parameter int CDEPTH = 512,
  parameter int SDEPTH = 32,
  parameter int PDEPTH = 512,
  parameter int FPARTS = 4,   // DMA beats per feature / ping-pong word
  parameter int WPARTS = 1,   // DMA beats per weight word
  parameter int SPARTS = 1,   // DMA beats per scale word
  parameter int PBEATS_W = 10 // width of the BN/Res parameter beat index
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // instruction registers
  input  logic                         cfg_we,
  input  logic [4:0]                   cfg_addr,
  input  logic [31:0]                  cfg_wdata,
  output logic                         busy,
  output logic                         done,
  // HBM DMA command
  output logic                         hbm_start,
  output logic [1:0]                   hbm_dst,
  output logic [63:0]                  hbm_addr,
  output logic [31:0]                  hbm_beats,
  input  logic                         hbm_done,
  // DDR DMA read / write commands
  output logic                         ddr_rstart,
  output logic [1:0]                   ddr_rdst,
  output logic [63:0]                  ddr_raddr,
  output logic [31:0]                  ddr_rbeats,
  input  logic                         ddr_rdone,
  output logic                         ddr_wstart,
  output logic [63:0]                  ddr_waddr,
  output logic [31:0]                  ddr_wbeats,
  input  logic                         ddr_wdone,
  // buffer reads
  output logic                         f_src_pp,     // 1: ping-pong, 0: feature buffer
  output logic                         f_rd_en,
  output logic [$clog2(PDEPTH)-1:0]    f_rd_addr,
  output logic                         pp_rd_bank,
  output logic                         pp_wr_bank,
  output logic                         c_rd_en,
  output logic [$clog2(CDEPTH)-1:0]    c_rd_addr,
  output logic [$clog2(SDEPTH)-1:0]    c_rd_saddr,
  output logic [$clog2(TOUT)-1:0]      c_rd_srow,
  // to the GVSA, one cycle after the reads (aligned with read data)
  output logic                         f_valid,
  output vec_tag_t                     f_tag,
  output logic [TIN-1:0]               f_mask_lane,
  output logic                         w_valid,
  output logic [$clog2(TOUT)-1:0]      w_row,
  // stage shape for the write side
  output stage_cfg_t                   scfg,
  output logic                         bn_en,
  output logic                         res_en,
  output logic [15:0]                  m_last,
  input  logic                         wr_last      // datapath wrote the stage's last vector
);
  localparam int LT = $clog2(TOUT);
  localparam int LI = $clog2(TIN);
  localparam int EPB = TIN / FPARTS;  // FP16 values per DMA beat

  // ---------------- instruction registers ----------------
  logic [31:0] r_d;
  logic [15:0] r_n [1:MAXD];
  logic [15:0] r_m [1:MAXD];
  logic [3:0]  r_lr [0:MAXD];
  logic [1:0]  r_flags;
  logic [63:0] a_core, a_scale, a_feat, a_gam, a_bet, a_res, a_out;
  logic        start_req;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_d <= 32'd1; r_flags <= '0; start_req <= 1'b0;
      for (int k = 1; k <= MAXD; k++) begin r_n[k] <= 16'd1; r_m[k] <= 16'd1; end
      for (int k = 0; k <= MAXD; k++) r_lr[k] <= '0;
      a_core <= '0; a_scale <= '0; a_feat <= '0; a_gam <= '0; a_bet <= '0; a_res <= '0; a_out <= '0;
    end else begin
      start_req <= 1'b0;
      if (cfg_we) begin
        case (cfg_addr)
          5'd0:  r_d <= cfg_wdata;
          5'd14: r_flags <= cfg_wdata[1:0];
          5'd15: a_core  <= 64'(cfg_wdata);
          5'd16: a_scale <= 64'(cfg_wdata);
          5'd17: a_feat  <= 64'(cfg_wdata);
          5'd18: a_gam   <= 64'(cfg_wdata);
          5'd19: a_bet   <= 64'(cfg_wdata);
          5'd20: a_res   <= 64'(cfg_wdata);
          5'd21: a_out   <= 64'(cfg_wdata);
          5'd22: start_req <= cfg_wdata[0];
          default: begin
            if (cfg_addr >= 5'd1 && cfg_addr <= 5'(MAXD)) r_n[int'(cfg_addr)] <= cfg_wdata[15:0];
            if (cfg_addr >= 5'd5 && cfg_addr <= 5'(4 + MAXD)) r_m[int'(cfg_addr) - 4] <= cfg_wdata[15:0];
            if (cfg_addr >= 5'd9 && cfg_addr <= 5'(9 + MAXD)) r_lr[int'(cfg_addr) - 9] <= cfg_wdata[3:0];
          end
        endcase
      end
    end
  end

  // ---------------- derived stage shapes ----------------
  logic [31:0] s_I [1:MAXD], s_J [1:MAXD], s_T [1:MAXD], s_R [1:MAXD];
  logic [31:0] s_K [1:MAXD], s_MT [1:MAXD], s_TT [1:MAXD];
  logic [31:0] s_wb [1:MAXD], s_sb [1:MAXD];
  logic [31:0] w_tot, s_tot, f_words, m_tot, o_words;
  always_comb begin
    automatic logic [31:0] wacc = 0, sacc = 0;
    for (int k = 1; k <= MAXD; k++) begin
      automatic logic [31:0] t = 1, rr = 1;
      for (int l = 1; l <= MAXD; l++) begin
        if (l > k && l <= r_d) t = t * 32'(r_n[l]);
        if (l < k) t = t * 32'(r_m[l]);
        if (l > k + 1 && l <= r_d) rr = rr * 32'(r_n[l]);
        if (l < k) rr = rr * 32'(r_m[l]);
      end
      s_I[k]  = 32'(r_n[k]) << r_lr[k-1];
      s_J[k]  = 32'(r_m[k]) << r_lr[k];
      s_T[k]  = t;
      s_R[k]  = (k < r_d) ? rr : 32'd0;
      s_K[k]  = (s_I[k] + TIN - 1) >> LI;
      s_MT[k] = (s_J[k] + TOUT - 1) >> LT;
      s_TT[k] = (t + TOUT - 1) >> LT;
      s_wb[k] = wacc;
      s_sb[k] = sacc;
      if (k <= r_d) begin
        wacc = wacc + s_MT[k] * s_K[k] * TOUT;
        sacc = sacc + s_MT[k];
      end
    end
    w_tot   = wacc;
    s_tot   = sacc;
    f_words = s_TT[1] * s_K[1] * TOUT;
    m_tot   = 1;
    for (int l = 1; l <= MAXD; l++) if (l <= r_d) m_tot = m_tot * 32'(r_m[l]);
    o_words = (m_tot + TIN - 1) >> LI;
  end

  // ---------------- sequencer ----------------
  typedef enum logic [3:0] {
    S_IDLE, S_LD_CORE, S_LD_SCALE, S_LD_WAIT, S_RUN, S_DRAIN, S_NEXT, S_STORE, S_STORE_WAIT, S_DONE
  } state_t;
  state_t st;

  typedef enum logic [1:0] {R_FEAT, R_GAM, R_BET, R_RES} rphase_t;
  rphase_t rph;
  logic    ddr_rd_busy, hbm_busy;

  logic [31:0] k;              // current stage, 1-based
  logic [31:0] nblk, cnt, cnt_end;
  // weight-side and feature-side loop counters
  logic [31:0] w_kk, w_mt, f_kk, f_mt, f_tt;
  logic [LT-1:0] row;

  logic [31:0] cur_I, cur_T, cur_K, cur_MT, cur_TT;
  always_comb begin
    cur_I  = s_I[1]; cur_T = s_T[1]; cur_K = s_K[1]; cur_MT = s_MT[1]; cur_TT = s_TT[1];
    for (int q = 1; q <= MAXD; q++)
      if (k == 32'(q)) begin
        cur_I = s_I[q]; cur_T = s_T[q]; cur_K = s_K[q]; cur_MT = s_MT[q]; cur_TT = s_TT[q];
      end
  end

  always_comb begin
    scfg = '0;
    for (int q = 1; q <= MAXD; q++)
      if (k == 32'(q)) begin
        scfg.final_stage = (k == r_d);
        scfg.t_cnt  = s_T[q][15:0];
        scfg.j_cnt  = s_J[q][15:0];
        scfg.r_div  = s_R[q][15:0];
        scfg.lr_k   = r_lr[q];
        scfg.m_k    = r_m[q];
        scfg.k_next = (q < MAXD) ? s_K[(q < MAXD) ? q + 1 : q][7:0] : 8'd0;
      end
  end
  assign bn_en  = r_flags[0];
  assign res_en = r_flags[1];
  always_comb begin
    m_last = r_m[1];
    for (int q = 1; q <= MAXD; q++) if (r_d == 32'(q)) m_last = r_m[q];
  end

  logic [31:0] wbase, sbase;
  always_comb begin
    wbase = 0; sbase = 0;
    for (int q = 1; q <= MAXD; q++) if (k == 32'(q)) begin wbase = s_wb[q]; sbase = s_sb[q]; end
  end

  // issue-cycle decode
  logic issue, w_iss, f_iss, f_last;
  assign issue = (st == S_RUN);
  assign w_iss = issue && (cnt < nblk * TOUT);
  assign f_iss = issue && (cnt >= TOUT);
  assign f_last = f_iss && (cnt == cnt_end - 1);

  assign f_src_pp   = (k != 1);
  assign pp_wr_bank = ~k[0];      // stage 1 -> bank 0, stage 2 -> bank 1, ...
  assign pp_rd_bank = k[0];       // stage k reads the bank stage k-1 wrote
  assign f_rd_en    = f_iss;
  assign f_rd_addr  = ($clog2(PDEPTH))'(f_tt * cur_K * TOUT + f_kk * TOUT + 32'(row));
  assign c_rd_en    = w_iss;
  assign c_rd_addr  = ($clog2(CDEPTH))'(wbase + (w_mt * cur_K + w_kk) * TOUT + 32'(row));
  assign c_rd_saddr = ($clog2(SDEPTH))'(sbase + w_mt);
  assign c_rd_srow  = row;

  // registered side information, aligned with the 1-cycle buffer reads
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_valid <= 1'b0; w_valid <= 1'b0;
    end else begin
      f_valid <= f_iss;
      w_valid <= w_iss;
    end
  end
  always_ff @(posedge clk) begin
    automatic logic [31:0] lanes_left = cur_I - f_kk * TIN;
    automatic logic        row_ok = (f_tt * TOUT + 32'(row)) < cur_T;
    w_row <= row;
    f_tag.row    <= 5'(row);
    f_tag.swap   <= (row == '0);
    f_tag.kfirst <= (f_kk == 0);
    f_tag.klast  <= (f_kk == cur_K - 1);
    f_tag.ttile  <= f_tt[15:0];
    f_tag.mtile  <= f_mt[7:0];
    f_tag.last   <= f_last;
    for (int l = 0; l < TIN; l++) f_mask_lane[l] <= row_ok && (32'(l) < lanes_left);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; busy <= 1'b0; done <= 1'b0;
      hbm_start <= 1'b0; ddr_rstart <= 1'b0; ddr_wstart <= 1'b0;
      hbm_dst <= '0; hbm_addr <= '0; hbm_beats <= '0;
      ddr_rdst <= '0; ddr_raddr <= '0; ddr_rbeats <= '0; ddr_waddr <= '0; ddr_wbeats <= '0;
      rph <= R_FEAT; ddr_rd_busy <= 1'b0; hbm_busy <= 1'b0;
      k <= 32'd1; nblk <= '0; cnt <= '0; cnt_end <= '0;
      w_kk <= '0; w_mt <= '0; f_kk <= '0; f_mt <= '0; f_tt <= '0; row <= '0;
    end else begin
      done <= 1'b0; hbm_start <= 1'b0; ddr_rstart <= 1'b0; ddr_wstart <= 1'b0;
      case (st)
        S_IDLE: if (start_req) begin
          busy <= 1'b1;
          hbm_start <= 1'b1; hbm_dst <= 2'd0; hbm_addr <= a_core; hbm_beats <= w_tot * WPARTS;
          hbm_busy <= 1'b1;
          ddr_rstart <= 1'b1; ddr_rdst <= 2'd0; ddr_raddr <= a_feat; ddr_rbeats <= f_words * FPARTS;
          ddr_rd_busy <= 1'b1; rph <= R_FEAT;
          st <= S_LD_CORE;
        end
        S_LD_CORE: if (hbm_done) begin
          hbm_start <= 1'b1; hbm_dst <= 2'd1; hbm_addr <= a_scale; hbm_beats <= s_tot * SPARTS;
          st <= S_LD_SCALE;
        end
        S_LD_SCALE: if (hbm_done) begin
          hbm_busy <= 1'b0;
          st <= S_LD_WAIT;
        end
        S_LD_WAIT: if (!ddr_rd_busy) begin
          k <= 32'd1;
          st <= S_NEXT;
        end
        S_NEXT: begin   // set up stage k
          nblk <= cur_TT * cur_MT * cur_K;
          cnt <= '0; cnt_end <= (cur_TT * cur_MT * cur_K + 1) * TOUT;
          w_kk <= '0; w_mt <= '0; f_kk <= '0; f_mt <= '0; f_tt <= '0; row <= '0;
          st <= S_RUN;
        end
        S_RUN: begin
          cnt <= cnt + 1;
          row <= row + 1'b1;
          if (row == LT'(TOUT - 1)) begin
            // weight block advance: kk, then mt, then (next feature tile) wrap
            if (w_iss) begin
              if (w_kk == cur_K - 1) begin
                w_kk <= '0;
                w_mt <= (w_mt == cur_MT - 1) ? '0 : w_mt + 1;
              end else w_kk <= w_kk + 1;
            end
            if (f_iss) begin
              if (f_kk == cur_K - 1) begin
                f_kk <= '0;
                if (f_mt == cur_MT - 1) begin f_mt <= '0; f_tt <= f_tt + 1; end
                else f_mt <= f_mt + 1;
              end else f_kk <= f_kk + 1;
            end
          end
          if (cnt == cnt_end - 1) st <= S_DRAIN;
        end
        S_DRAIN: if (wr_last) begin
          if (k == r_d) begin
            ddr_wstart <= 1'b1; ddr_waddr <= a_out; ddr_wbeats <= o_words * FPARTS;
            st <= S_STORE_WAIT;
          end else begin
            k <= k + 1;
            st <= S_NEXT;
          end
        end
        S_STORE_WAIT: if (ddr_wdone) st <= S_DONE;
        S_DONE: begin
          done <= 1'b1; busy <= 1'b0;
          st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase

      // DDR read phases run beside the HBM loads.
      if (ddr_rd_busy && ddr_rdone) begin
        case (rph)
          R_FEAT: if (r_flags[0]) begin
            ddr_rstart <= 1'b1; ddr_rdst <= 2'd1; ddr_raddr <= a_gam;
            ddr_rbeats <= (m_tot + EPB - 1) / EPB; rph <= R_GAM;
          end else if (r_flags[1]) begin
            ddr_rstart <= 1'b1; ddr_rdst <= 2'd3; ddr_raddr <= a_res;
            ddr_rbeats <= (m_tot + EPB - 1) / EPB; rph <= R_RES;
          end else ddr_rd_busy <= 1'b0;
          R_GAM: begin
            ddr_rstart <= 1'b1; ddr_rdst <= 2'd2; ddr_raddr <= a_bet;
            ddr_rbeats <= (m_tot + EPB - 1) / EPB; rph <= R_BET;
          end
          R_BET: if (r_flags[1]) begin
            ddr_rstart <= 1'b1; ddr_rdst <= 2'd3; ddr_raddr <= a_res;
            ddr_rbeats <= (m_tot + EPB - 1) / EPB; rph <= R_RES;
          end else ddr_rd_busy <= 1'b0;
          default: ddr_rd_busy <= 1'b0;
        endcase
      end
    end
  end

  // unused in this configuration
  logic unused;
  assign unused = hbm_busy ^ (|PBEATS_W) ^ (|FDEPTH);

  assert property (@(posedge clk) (st == S_RUN) |-> (cur_K * TOUT <= PDEPTH));
endmodule
