// gvsa: group vector systolic array.
//
// TOUT logical vector PEs, each holding one stationary Tin-wide INT4 weight
// vector and its scale, are split into TOUT/TN groups of TN. Adjacent rows
// (2p, 2p+1) share one DSP-shared vector_pe. Every cycle one FP16 feature
// vector enters group 0; all PEs of a group take the same feature in the same
// cycle, and the feature moves on to the next group one cycle later. So each
// feature meets all TOUT weight vectors and yields TOUT dot products.
//
// Weight loading: one weight vector per cycle is written into the shadow
// register of row w_row. When the first feature of a new block (tag.swap)
// enters a group, all rows of that group copy their shadow registers into the
// active weights, so a block's weights stay stationary for the TOUT features of
// that block while the next block's weights are loaded one per cycle. The
// shadow registers and the swap-on-tag rule are this design's own mechanism
// for the paper's "one weight vector loaded per cycle, the others stationary
// for Tout cycles".
//
// Timing: results of all groups are realigned (earlier groups delayed), so
// o_res holds the TOUT results of one feature together, LAT = TOUT/TN + 5
// cycles after the feature entered, with the feature's tag in o_tag.
module gvsa
  import ttd_pkg::*;
#(
  parameter int TIN  = 128,
  parameter int TOUT = 32,
  parameter int TN   = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    f_valid,
  input  fp16_t [TIN-1:0]         f_vec,
  input  vec_tag_t                f_tag,
  input  logic                    w_valid,
  input  logic [$clog2(TOUT)-1:0] w_row,
  input  int4_t [TIN-1:0]         w_vec,
  input  fp16_t                   w_scale,
  output logic                    o_valid,
  output pe_res_t [TOUT-1:0]      o_res,
  output vec_tag_t                o_tag
);
  localparam int NG     = TOUT / TN;
  localparam int PE_LAT = 5;
  localparam int LAT    = NG + PE_LAT;

  // Shadow and active weights, one per logical row.
  int4_t [TIN-1:0] sh_w  [TOUT];
  fp16_t           sh_sc [TOUT];
  int4_t [TIN-1:0] ac_w  [TOUT];
  fp16_t           ac_sc [TOUT];

  // Feature stage register of each group.
  logic            g_v   [NG];
  fp16_t [TIN-1:0] g_f   [NG];
  vec_tag_t        g_tag [NG];

  always_ff @(posedge clk) begin
    if (w_valid) begin
      sh_w[w_row]  <= w_vec;
      sh_sc[w_row] <= w_scale;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < NG; g++) g_v[g] <= 1'b0;
    end else begin
      g_v[0] <= f_valid;
      for (int g = 1; g < NG; g++) g_v[g] <= g_v[g-1];
    end
  end

  always_ff @(posedge clk) begin
    g_f[0]   <= f_vec;
    g_tag[0] <= f_tag;
    for (int g = 1; g < NG; g++) begin
      g_f[g]   <= g_f[g-1];
      g_tag[g] <= g_tag[g-1];
    end
    // A group swaps in its new weights together with the block's first feature.
    if (f_valid && f_tag.swap)
      for (int r = 0; r < TN; r++) begin
        ac_w[r]  <= sh_w[r];
        ac_sc[r] <= sh_sc[r];
      end
    for (int g = 1; g < NG; g++)
      if (g_v[g-1] && g_tag[g-1].swap)
        for (int r = g * TN; r < (g + 1) * TN; r++) begin
          ac_w[r]  <= sh_w[r];
          ac_sc[r] <= sh_sc[r];
        end
  end

  // PEs and the deskew delay of each group.
  logic    pe_v   [TOUT/2];  // all PEs run in lock step; t_v below is used
  pe_res_t pe_res [TOUT];

  for (genvar p = 0; p < TOUT / 2; p++) begin : g_pe
    localparam int G = (2 * p) / TN;
    vector_pe #(.TIN(TIN)) u_pe (
      .clk, .rst_n,
      .in_valid  (g_v[G]),
      .feat      (g_f[G]),
      .w0        (ac_w[2*p]),
      .w1        (ac_w[2*p+1]),
      .scale0    (ac_sc[2*p]),
      .scale1    (ac_sc[2*p+1]),
      .out_valid (pe_v[p]),
      .res0      (pe_res[2*p]),
      .res1      (pe_res[2*p+1])
    );
  end

  for (genvar g = 0; g < NG; g++) begin : g_deskew
    localparam int D = NG - 1 - g;
    if (D == 0) begin : g_none
      for (genvar r = 0; r < TN; r++) begin : g_r
        assign o_res[g*TN + r] = pe_res[g*TN + r];
      end
    end else begin : g_dly
      pe_res_t dl [D][TN];
      always_ff @(posedge clk) begin
        for (int r = 0; r < TN; r++) dl[0][r] <= pe_res[g*TN + r];
        for (int k = 1; k < D; k++) dl[k] <= dl[k-1];
      end
      for (genvar r = 0; r < TN; r++) begin : g_r
        assign o_res[g*TN + r] = dl[D-1][r];
      end
    end
  end

  if (TOUT % TN != 0 || TN % 2 != 0) begin : g_bad_cfg
    $error("gvsa: TOUT must be a multiple of TN and TN even");
  end

  // Valid and tag follow the last group's PE output.

  logic     t_v   [LAT];
  vec_tag_t t_tag [LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) t_v[i] <= 1'b0;
    end else begin
      t_v[0] <= f_valid;
      for (int i = 1; i < LAT; i++) t_v[i] <= t_v[i-1];
    end
  end
  always_ff @(posedge clk) begin
    t_tag[0] <= f_tag;
    for (int i = 1; i < LAT; i++) t_tag[i] <= t_tag[i-1];
  end
  assign o_valid = t_v[LAT-1];
  assign o_tag   = t_tag[LAT-1];
endmodule
