// ttd_linear_op: the TTD linear operation of the accelerator (top level).
//
// Computes y = W x for a linear layer whose weight W is stored as d
// tensor-train cores G_1..G_d (INT4 with FP16 scales), x and y in FP16, with an
// optional fused BN (per-neuron gamma, beta) and residual add. The cores
// come from HBM and the features, parameters and result go to and from DDR,
// both over AXI4.
//
// Blocks: HBM DMA (axi_read_master) -> core_buffer; DDR DMA (ddr_dma) ->
// feature_buffer and the bn_res parameter arrays, and back from the ping-pong
// buffer; ttd_ctrl sequences loads, the d stages and the store. Per stage the
// feature vectors (from the feature buffer in stage 1, from the ping-pong
// buffer afterwards) and the weight vectors enter the gvsa, whose result
// vectors are summed over the summation blocks by the accumulator, rounded to
// FP16 (or passed through bn_res in the last stage) and scattered by
// reorder_agu into the other ping-pong bank in the order the next stage reads.
//
// Interface: a 32-bit register write port (see ttd_ctrl for the map), busy and
// a done pulse; an AXI4 read master towards HBM and an AXI4 read/write master
// towards DDR, DW bits wide. All data layouts in external memory are described
// in ttd_ctrl, core_buffer and feature_buffer.
module ttd_linear_op
  import ttd_pkg::*;
#(
  parameter int TIN    = 128,
  parameter int TOUT   = 32,
  parameter int TN     = 16,
  parameter int DW     = 512,
  parameter int FDEPTH = 512,
  parameter int CDEPTH = 512,
  parameter int SDEPTH = 32,
  parameter int PDEPTH = 512,
  parameter int MAXM   = 16384,
  parameter int MAXD   = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic [4:0]        cfg_addr,
  input  logic [31:0]       cfg_wdata,
  output logic              busy,
  output logic              done,
  // HBM (weights): AXI4 read
  output logic [63:0]       hbm_araddr,
  output logic [7:0]        hbm_arlen,
  output logic [2:0]        hbm_arsize,
  output logic [1:0]        hbm_arburst,
  output logic              hbm_arvalid,
  input  logic              hbm_arready,
  input  logic [DW-1:0]     hbm_rdata,
  input  logic [1:0]        hbm_rresp,
  input  logic              hbm_rlast,
  input  logic              hbm_rvalid,
  output logic              hbm_rready,
  // DDR (features): AXI4 read and write
  output logic [63:0]       ddr_araddr,
  output logic [7:0]        ddr_arlen,
  output logic [2:0]        ddr_arsize,
  output logic [1:0]        ddr_arburst,
  output logic              ddr_arvalid,
  input  logic              ddr_arready,
  input  logic [DW-1:0]     ddr_rdata,
  input  logic [1:0]        ddr_rresp,
  input  logic              ddr_rlast,
  input  logic              ddr_rvalid,
  output logic              ddr_rready,
  output logic [63:0]       ddr_awaddr,
  output logic [7:0]        ddr_awlen,
  output logic [2:0]        ddr_awsize,
  output logic [1:0]        ddr_awburst,
  output logic              ddr_awvalid,
  input  logic              ddr_awready,
  output logic [DW-1:0]     ddr_wdata,
  output logic [DW/8-1:0]   ddr_wstrb,
  output logic              ddr_wlast,
  output logic              ddr_wvalid,
  input  logic              ddr_wready,
  input  logic [1:0]        ddr_bresp,
  input  logic              ddr_bvalid,
  output logic              ddr_bready
);
  localparam int FPARTS = TIN * 16 / DW;
  localparam int WPARTS = TIN * 4 / DW;
  localparam int SPARTS = TOUT * 16 / DW;
  localparam int LFP = $clog2(FPARTS);
  localparam int LWP = $clog2(WPARTS);
  localparam int LSP = $clog2(SPARTS);
  localparam int PAW = $clog2(MAXM * 16 / DW);

  // ---------------- control ----------------
  logic        hbm_start, hbm_done, ddr_rstart, ddr_rdone, ddr_wstart, ddr_wdone;
  logic [1:0]  hbm_dst, ddr_rdst;
  logic [63:0] hbm_addr, ddr_raddr, ddr_waddr;
  logic [31:0] hbm_beats, ddr_rbeats, ddr_wbeats;
  logic        f_src_pp, f_rd_en, pp_rd_bank, pp_wr_bank, c_rd_en;
  logic [$clog2(PDEPTH)-1:0] f_rd_addr;
  logic [$clog2(CDEPTH)-1:0] c_rd_addr;
  logic [$clog2(SDEPTH)-1:0] c_rd_saddr;
  logic [$clog2(TOUT)-1:0]   c_rd_srow, w_row;
  logic        f_valid, w_valid, bn_en, res_en, wr_last;
  vec_tag_t    f_tag;
  logic [TIN-1:0] f_mask_lane;
  stage_cfg_t  scfg;
  logic [15:0] m_last;

  ttd_ctrl #(
    .TIN(TIN), .TOUT(TOUT), .MAXD(MAXD), .FDEPTH(FDEPTH), .CDEPTH(CDEPTH),
    .SDEPTH(SDEPTH), .PDEPTH(PDEPTH), .FPARTS(FPARTS), .WPARTS(WPARTS),
    .SPARTS(SPARTS), .PBEATS_W(PAW)
  ) u_ctrl (.*);

  // ---------------- HBM DMA -> core buffer ----------------
  logic          hb_valid;
  logic [1:0]    hb_dst;
  logic [31:0]   hb_idx;
  logic [DW-1:0] hb_data;
  axi_read_master #(.DW(DW)) u_hbm_dma (
    .clk, .rst_n, .start(hbm_start), .dst(hbm_dst), .addr(hbm_addr), .beats(hbm_beats),
    .done(hbm_done),
    .araddr(hbm_araddr), .arlen(hbm_arlen), .arsize(hbm_arsize), .arburst(hbm_arburst),
    .arvalid(hbm_arvalid), .arready(hbm_arready), .rdata(hbm_rdata), .rresp(hbm_rresp),
    .rlast(hbm_rlast), .rvalid(hbm_rvalid), .rready(hbm_rready),
    .o_valid(hb_valid), .o_dst(hb_dst), .o_idx(hb_idx), .o_data(hb_data)
  );

  int4_t [TIN-1:0] c_w;
  fp16_t           c_scale;
  core_buffer #(.TIN(TIN), .TOUT(TOUT), .DEPTH(CDEPTH), .SDEPTH(SDEPTH), .DW(DW)) u_core_buf (
    .clk,
    .wr_en   (hb_valid && hb_dst == 2'd0),
    .wr_addr ($clog2(CDEPTH)'(hb_idx >> LWP)),
    .wr_part (8'(hb_idx & 32'(WPARTS - 1))),
    .wr_data (hb_data),
    .swr_en  (hb_valid && hb_dst == 2'd1),
    .swr_addr($clog2(SDEPTH)'(hb_idx >> LSP)),
    .swr_part(8'(hb_idx & 32'(SPARTS - 1))),
    .swr_data(hb_data),
    .rd_en   (c_rd_en),
    .rd_addr (c_rd_addr),
    .rd_saddr(c_rd_saddr),
    .rd_srow (c_rd_srow),
    .rd_w    (c_w),
    .rd_scale(c_scale)
  );

  // ---------------- DDR DMA ----------------
  logic          db_valid, src_en;
  logic [1:0]    db_dst;
  logic [31:0]   db_idx, src_idx;
  logic [DW-1:0] db_data, src_data;
  ddr_dma #(.DW(DW)) u_ddr_dma (
    .clk, .rst_n,
    .rstart(ddr_rstart), .rdst(ddr_rdst), .raddr(ddr_raddr), .rbeats(ddr_rbeats), .rdone(ddr_rdone),
    .o_valid(db_valid), .o_dst(db_dst), .o_idx(db_idx), .o_data(db_data),
    .wstart(ddr_wstart), .waddr(ddr_waddr), .wbeats(ddr_wbeats), .wdone(ddr_wdone),
    .src_en, .src_idx, .src_data,
    .araddr(ddr_araddr), .arlen(ddr_arlen), .arsize(ddr_arsize), .arburst(ddr_arburst),
    .arvalid(ddr_arvalid), .arready(ddr_arready), .rdata(ddr_rdata), .rresp(ddr_rresp),
    .rlast(ddr_rlast), .rvalid(ddr_rvalid), .rready(ddr_rready),
    .awaddr(ddr_awaddr), .awlen(ddr_awlen), .awsize(ddr_awsize), .awburst(ddr_awburst),
    .awvalid(ddr_awvalid), .awready(ddr_awready), .wdata(ddr_wdata), .wstrb(ddr_wstrb),
    .wlast(ddr_wlast), .wvalid(ddr_wvalid), .wready(ddr_wready), .bresp(ddr_bresp),
    .bvalid(ddr_bvalid), .bready(ddr_bready)
  );

  fp16_t [TIN-1:0] fb_vec;
  feature_buffer #(.TIN(TIN), .DEPTH(FDEPTH), .DW(DW)) u_feat_buf (
    .clk,
    .wr_en   (db_valid && db_dst == 2'd0),
    .wr_addr ($clog2(FDEPTH)'(db_idx >> LFP)),
    .wr_part (8'(db_idx & 32'(FPARTS - 1))),
    .wr_data (db_data),
    .rd_en   (f_rd_en && !f_src_pp),
    .rd_addr ($clog2(FDEPTH)'(f_rd_addr)),
    .rd_vec  (fb_vec)
  );

  // ---------------- ping-pong buffer ----------------
  logic [TOUT-1:0]                    pw_en;
  logic [TOUT-1:0][$clog2(PDEPTH)-1:0] pw_addr;
  logic [TOUT-1:0][$clog2(TIN)-1:0]   pw_lane;
  fp16_t [TOUT-1:0]                   pw_data;
  fp16_t [TIN-1:0]                    pp_vec;
  pingpong_buffer #(.TIN(TIN), .TOUT(TOUT), .DEPTH(PDEPTH), .DW(DW)) u_pp_buf (
    .clk,
    .wr_bank (pp_wr_bank),
    .wr_en   (pw_en),
    .wr_addr (pw_addr),
    .wr_lane (pw_lane),
    .wr_data (pw_data),
    .rd_bank (pp_rd_bank),
    .rd_en   (f_rd_en && f_src_pp),
    .rd_addr (f_rd_addr),
    .rd_vec  (pp_vec),
    .dma_bank(pp_wr_bank),
    .dma_en  (src_en),
    .dma_addr($clog2(PDEPTH)'(src_idx >> LFP)),
    .dma_part(8'(src_idx & 32'(FPARTS - 1))),
    .dma_data(src_data)
  );

  // ---------------- GVSA ----------------
  fp16_t [TIN-1:0] g_feat;
  always_comb
    for (int l = 0; l < TIN; l++)
      g_feat[l] = f_mask_lane[l] ? (f_src_pp ? pp_vec[l] : fb_vec[l]) : 16'h0000;

  logic               g_valid;
  pe_res_t [TOUT-1:0] g_res;
  vec_tag_t           g_tag;
  gvsa #(.TIN(TIN), .TOUT(TOUT), .TN(TN)) u_gvsa (
    .clk, .rst_n,
    .f_valid, .f_vec(g_feat), .f_tag,
    .w_valid, .w_row, .w_vec(c_w), .w_scale(c_scale),
    .o_valid(g_valid), .o_res(g_res), .o_tag(g_tag)
  );

  // ---------------- accumulation ----------------
  logic            a_valid;
  acc_t [TOUT-1:0] a_acc;
  vec_tag_t        a_tag;
  accumulator #(.TOUT(TOUT)) u_acc (
    .clk, .rst_n,
    .i_valid(g_valid), .i_res(g_res), .i_tag(g_tag),
    .o_valid(a_valid), .o_acc(a_acc), .o_tag(a_tag)
  );

  // ---------------- FP16 rounding (inner stages) / BN & Res (last stage) ----------------
  logic             cv_valid;
  fp16_t [TOUT-1:0] cv_y;
  vec_tag_t         cv_tag;
  always_ff @(posedge clk) begin
    for (int c = 0; c < TOUT; c++) cv_y[c] <= fx_to_fp16(WIDE_W'(a_acc[c]), ACC_FRAC);
    cv_tag <= a_tag;
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) cv_valid <= 1'b0;
    else        cv_valid <= a_valid && !scfg.final_stage;

  logic             bn_valid;
  fp16_t [TOUT-1:0] bn_y;
  vec_tag_t         bn_tag;
  bn_res #(.TOUT(TOUT), .MAXM(MAXM), .DW(DW)) u_bn_res (
    .clk, .rst_n,
    .p_we   (db_valid && db_dst != 2'd0),
    .p_sel  (db_dst - 2'd1),
    .p_addr (PAW'(db_idx)),
    .p_data (db_data),
    .bn_en, .res_en, .m_d(m_last),
    .i_valid(a_valid && scfg.final_stage), .i_acc(a_acc), .i_tag(a_tag),
    .o_valid(bn_valid), .o_y(bn_y), .o_tag(bn_tag)
  );

  // ---------------- reorder and write ----------------
  logic             r_valid;
  fp16_t [TOUT-1:0] r_data;
  vec_tag_t         r_tag;
  assign r_valid = scfg.final_stage ? bn_valid : cv_valid;
  assign r_data  = scfg.final_stage ? bn_y : cv_y;
  assign r_tag   = scfg.final_stage ? bn_tag : cv_tag;
  assign wr_last = r_valid && r_tag.last;

  reorder_agu #(.TIN(TIN), .TOUT(TOUT), .AW($clog2(PDEPTH))) u_agu (
    .i_valid(r_valid), .i_tag(r_tag), .i_data(r_data), .cfg(scfg),
    .wr_en(pw_en), .wr_addr(pw_addr), .wr_lane(pw_lane), .wr_data(pw_data)
  );
endmodule
