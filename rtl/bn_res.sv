// bn_res: the BN and residual step fused onto the last TTD stage.
//
// For each finished output row from the accumulator it computes, lane by lane,
//   y = acc * gamma[idx] + beta[idx] (+ res[idx] when res_en)
// where idx = t * m_d + jc is the output neuron (t the row, jc the column) and
// gamma, beta, res are FP16 values held in on-chip arrays of MAXM entries.
// With bn_en low, gamma = 1 and beta = 0. The sum is formed exactly in fixed
// point (2^-(ACC_FRAC+24) resolution) and rounded once to FP16, round to
// nearest even. Result one cycle after the input, with the input's tag.
//
// The paper only names the BN and Res operations fused after the TTD stages;
// the per-neuron affine BN, the exact fixed-point evaluation and the on-chip
// parameter arrays (loaded in DW-bit beats: p_sel 0 gamma, 1 beta, 2 residual)
// are this design's own choices.
module bn_res
  import ttd_pkg::*;
#(
  parameter int TOUT = 32,
  parameter int MAXM = 16384,
  parameter int DW   = 512
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            p_we,
  input  logic [1:0]                      p_sel,
  input  logic [$clog2(MAXM*16/DW)-1:0]   p_addr,
  input  logic [DW-1:0]                   p_data,
  input  logic                            bn_en,
  input  logic                            res_en,
  input  logic [15:0]                     m_d,
  input  logic                            i_valid,
  input  acc_t [TOUT-1:0]                 i_acc,
  input  vec_tag_t                        i_tag,
  output logic                            o_valid,
  output fp16_t [TOUT-1:0]                o_y,
  output vec_tag_t                        o_tag
);
  localparam int EPB  = DW / 16;           // elements per beat
  localparam int FRAC = ACC_FRAC + 24;     // fraction bits of the wide sum

  fp16_t gam [MAXM];
  fp16_t bet [MAXM];
  fp16_t res [MAXM];

  always_ff @(posedge clk)
    if (p_we)
      for (int e = 0; e < EPB; e++) begin
        automatic int a = int'(p_addr) * EPB + e;
        case (p_sel)
          2'd0:    gam[a] <= p_data[e*16 +: 16];
          2'd1:    bet[a] <= p_data[e*16 +: 16];
          default: res[a] <= p_data[e*16 +: 16];
        endcase
      end

  // FP16 -> wide fixed point with FRAC fraction bits (exact).
  function automatic wide_t fp16_wide(fp16_t h);
    return WIDE_W'(fp16_mant2c(h)) <<< (int'(fp16_eexp(h)) - 25 + FRAC);
  endfunction

  fp16_t y_c [TOUT];
  always_comb
    for (int c = 0; c < TOUT; c++) begin
      automatic int unsigned idx = (int'(i_tag.ttile) * TOUT + int'(i_tag.row)) * int'(m_d)
                                   + int'(i_tag.mtile) * TOUT + c;
      automatic int unsigned pidx  = (idx < MAXM) ? idx : 0;
      automatic fp16_t g   = bn_en ? gam[pidx] : 16'h3C00;
      automatic fp16_t b   = bn_en ? bet[pidx] : 16'h0000;
      automatic wide_t sum;
      // acc * gamma: acc has ACC_FRAC fraction bits, gamma's mantissa 2^(e-25).
      sum = (WIDE_W'(i_acc[c]) * WIDE_W'(fp16_mant2c(g))) <<< (int'(fp16_eexp(g)) - 1);
      sum = sum + fp16_wide(b);
      if (res_en) sum = sum + fp16_wide(res[pidx]);
      y_c[c] = fx_to_fp16(sum, FRAC);
    end

  always_ff @(posedge clk) begin
    for (int c = 0; c < TOUT; c++) o_y[c] <= y_c[c];
    o_tag <= i_tag;
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) o_valid <= 1'b0;
    else        o_valid <= i_valid;
endmodule
