// vector_pe: DSP-shared floating-point vector processing element.
//
// One FP16 feature vector (Tin lanes) is multiplied with two INT4 weight
// vectors at once, lane by lane, using one dsp_shared_mul per lane. Each of the
// two dot products is formed in block floating point: the lanes' exponents are
// compared, every product is shifted right by its distance to the largest
// exponent, the aligned products are summed in an adder tree, and the sum is
// multiplied by that weight vector's FP16 scale.
//
// Pipeline (stage names as in the paper's PE diagram), one register each:
//   Input Processing  operands captured, FP16 fields split
//   Pipeline 1        {sign,hidden,mantissa} in two's complement, exponents
//   Pipeline 2        DSP products (two per lane), shift amounts, max exponent
//   Pipeline 3        two aligned adder-tree sums
//   Output            the two sums times their scales
// so results appear 5 cycles after the operands, one operand set per cycle.
//
// Own choices: products carry GUARD fraction bits before the alignment shift
// (larger shifts truncate toward minus infinity); subnormals use exponent 1;
// Inf/NaN are not special; the scale is an FP16 value; the result stays
// unnormalised as pe_res_t {mant, exp}, value = mant * 2^(exp - PE_EXP_OFS).
module vector_pe
  import ttd_pkg::*;
#(
  parameter int TIN = 128
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  fp16_t [TIN-1:0]     feat,
  input  int4_t [TIN-1:0]     w0,
  input  int4_t [TIN-1:0]     w1,
  input  fp16_t               scale0,
  input  fp16_t               scale1,
  output logic                out_valid,
  output pe_res_t             res0,
  output pe_res_t             res1
);
  // ---- Input Processing ----
  logic            v0;
  fp16_t [TIN-1:0] s0_feat;
  int4_t [TIN-1:0] s0_w0, s0_w1;
  fp16_t           s0_sc0, s0_sc1;

  // ---- Pipeline 1 ----
  logic                    v1;
  logic signed [11:0]      s1_man [TIN];
  logic [4:0]              s1_exp [TIN];
  int4_t [TIN-1:0]         s1_w0, s1_w1;
  fp16_t                   s1_sc0, s1_sc1;

  // ---- Pipeline 2 ----
  logic                    v2;
  logic signed [15:0]      s2_p0 [TIN];
  logic signed [15:0]      s2_p1 [TIN];
  logic [4:0]              s2_sh [TIN];
  logic [4:0]              s2_emax;
  fp16_t                   s2_sc0, s2_sc1;

  // ---- Pipeline 3 ----
  logic                    v3;
  logic signed [SUM_W-1:0] s3_sum0, s3_sum1;
  logic [4:0]              s3_emax;
  fp16_t                   s3_sc0, s3_sc1;

  // Complement (between Input Processing and Pipeline 1)
  logic signed [11:0] man_c [TIN];
  logic [4:0]         exp_c [TIN];
  always_comb
    for (int i = 0; i < TIN; i++) begin
      man_c[i] = fp16_mant2c(s0_feat[i]);
      exp_c[i] = fp16_eexp(s0_feat[i]);
    end

  // Comparator and DSP x Tin (between Pipeline 1 and Pipeline 2)
  logic [4:0]         emax_c;
  logic [4:0]         sh_c  [TIN];
  logic signed [15:0] p0_c  [TIN];
  logic signed [15:0] p1_c  [TIN];
  always_comb begin
    emax_c = 5'd0;
    for (int i = 0; i < TIN; i++) if (s1_exp[i] > emax_c) emax_c = s1_exp[i];
    for (int i = 0; i < TIN; i++) sh_c[i] = emax_c - s1_exp[i];
  end

  for (genvar i = 0; i < TIN; i++) begin : g_dsp
    dsp_shared_mul u_dsp (
      .a  (s1_man[i]),
      .b  (s1_w0[i]),
      .c  (s1_w1[i]),
      .pb (p0_c[i]),
      .pc (p1_c[i])
    );
  end

  // Shift/Align and Adder Trees (between Pipeline 2 and Pipeline 3)
  logic signed [SUM_W-1:0] sum0_c, sum1_c;
  always_comb begin
    logic signed [SUM_W-1:0] al0, al1;
    sum0_c = '0;
    sum1_c = '0;
    for (int i = 0; i < TIN; i++) begin
      al0 = (SUM_W'(s2_p0[i]) <<< GUARD) >>> s2_sh[i];
      al1 = (SUM_W'(s2_p1[i]) <<< GUARD) >>> s2_sh[i];
      sum0_c = sum0_c + al0;
      sum1_c = sum1_c + al1;
    end
  end

  // Multipliers (between Pipeline 3 and Output)
  pe_res_t r0_c, r1_c;
  always_comb begin
    r0_c.mant = PM_W'(s3_sum0) * PM_W'(fp16_mant2c(s3_sc0));
    r1_c.mant = PM_W'(s3_sum1) * PM_W'(fp16_mant2c(s3_sc1));
    r0_c.exp  = 6'(s3_emax) + 6'(fp16_eexp(s3_sc0));
    r1_c.exp  = 6'(s3_emax) + 6'(fp16_eexp(s3_sc1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v0 <= 1'b0; v1 <= 1'b0; v2 <= 1'b0; v3 <= 1'b0; out_valid <= 1'b0;
    end else begin
      v0 <= in_valid; v1 <= v0; v2 <= v1; v3 <= v2; out_valid <= v3;
    end
  end

  always_ff @(posedge clk) begin
    s0_feat <= feat;   s0_w0 <= w0;         s0_w1 <= w1;
    s0_sc0  <= scale0; s0_sc1 <= scale1;
    for (int i = 0; i < TIN; i++) begin
      s1_man[i] <= man_c[i];
      s1_exp[i] <= exp_c[i];
    end
    s1_w0 <= s0_w0; s1_w1 <= s0_w1; s1_sc0 <= s0_sc0; s1_sc1 <= s0_sc1;
    for (int i = 0; i < TIN; i++) begin
      s2_p0[i] <= p0_c[i];
      s2_p1[i] <= p1_c[i];
      s2_sh[i] <= sh_c[i];
    end
    s2_emax <= emax_c; s2_sc0 <= s1_sc0; s2_sc1 <= s1_sc1;
    s3_sum0 <= sum0_c; s3_sum1 <= sum1_c; s3_emax <= s2_emax;
    s3_sc0  <= s2_sc0; s3_sc1  <= s2_sc1;
    res0 <= r0_c;
    res1 <= r1_c;
  end
endmodule
