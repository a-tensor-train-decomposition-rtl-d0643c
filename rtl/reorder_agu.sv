// reorder_agu: write-address generator that performs the reordering between
// TTD stages.
//
// Stage k produces P-bar_k[t, jc]: rows t = 0..T_{k-1}-1 (one result vector per
// row), columns jc = 0..J_k-1 with J_k = m_k * r_k (TOUT columns per vector).
// The next stage needs P_k[s, t'] with summation index s = (i_{k+1}, rank) and
// time index t' = (i_{k+2..d}, j_1..j_k). With the index orders used
// throughout this design
//   t  = i_{k+1} * R + rest          (R = T_{k-1} / n_{k+1})
//   jc = j * r_k + rank              (rank fastest, r_k a power of two)
//   s  = i_{k+1} * r_k + rank,   t' = rest * m_k + j
// and P_k is stored as the next stage reads it: word
//   (t' / TOUT) * (K' * TOUT) + (s / TIN) * TOUT + (t' % TOUT),  block s % TIN,
// where K' = ceil(I_{k+1} / TIN). After the last stage (final_stage) the
// output y = t * m_d + jc is stored linearly: word y / TIN, block y % TIN.
// Elements outside the real tensor (padding rows or columns of a tile) are
// not written. Combinational; one divide t / R per vector.
//
// The address formula is this design's reading of the paper's "block dimension
// = summation dimension of the next stage, address dimension = its time
// dimension"; the index orders are its own choice.
module reorder_agu
  import ttd_pkg::*;
#(
  parameter int TIN  = 128,
  parameter int TOUT = 32,
  parameter int AW   = 9
) (
  input  logic                           i_valid,
  input  vec_tag_t                       i_tag,
  input  fp16_t [TOUT-1:0]               i_data,
  input  stage_cfg_t                     cfg,
  output logic [TOUT-1:0]                wr_en,
  output logic [TOUT-1:0][AW-1:0]        wr_addr,
  output logic [TOUT-1:0][$clog2(TIN)-1:0] wr_lane,
  output fp16_t [TOUT-1:0]               wr_data
);
  localparam int LT = $clog2(TOUT);
  localparam int LI = $clog2(TIN);

  logic [31:0] t, i_nx, rest;
  always_comb begin
    t    = 32'(i_tag.ttile) * TOUT + 32'(i_tag.row);
    i_nx = (cfg.r_div == 0) ? 32'd0 : t / 32'(cfg.r_div);
    rest = t - i_nx * 32'(cfg.r_div);
    for (int c = 0; c < TOUT; c++) begin
      automatic logic [31:0] jc   = 32'(i_tag.mtile) * TOUT + 32'(c);
      automatic logic [31:0] j    = jc >> cfg.lr_k;
      automatic logic [31:0] rk   = jc & ((32'd1 << cfg.lr_k) - 1);
      automatic logic [31:0] s    = (i_nx << cfg.lr_k) + rk;
      automatic logic [31:0] tn   = rest * 32'(cfg.m_k) + j;
      automatic logic [31:0] y    = t * 32'(cfg.m_k) + jc;
      automatic logic [31:0] addr;
      automatic logic [31:0] lane;
      if (cfg.final_stage) begin
        addr = y >> LI;
        lane = y & (TIN - 1);
      end else begin
        addr = (tn >> LT) * (32'(cfg.k_next) * TOUT) + (s >> LI) * TOUT + (tn & (TOUT - 1));
        lane = s & (TIN - 1);
      end
      wr_en[c]   = i_valid && (t < 32'(cfg.t_cnt)) && (jc < 32'(cfg.j_cnt));
      wr_addr[c] = addr[AW-1:0];
      wr_lane[c] = lane[LI-1:0];
      wr_data[c] = i_data[c];
    end
  end
endmodule
