// accumulator: sums the GVSA's result vectors over the summation blocks of a
// tile.
//
// An output tile is TOUT features x TOUT output columns. Its partial results
// arrive once per summation block (ceil(I/Tin) blocks), one feature row per
// cycle. Each incoming pe_res_t is converted to fixed point (ACC_W bits,
// ACC_FRAC fraction bits, shifting by its exponent) and added into the
// register row of its feature (tag.row); the first block (tag.kfirst) starts
// the row afresh. On the last block (tag.klast) the completed row leaves on
// o_acc one cycle later with its tag.
//
// The paper names the accumulation stage only; the fixed-point format (exact
// for every pe_res_t whose least significant bit is at or above 2^-ACC_FRAC,
// truncating below) is this design's own choice.
module accumulator
  import ttd_pkg::*;
#(
  parameter int TOUT = 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  i_valid,
  input  pe_res_t [TOUT-1:0]    i_res,
  input  vec_tag_t              i_tag,
  output logic                  o_valid,
  output acc_t [TOUT-1:0]       o_acc,
  output vec_tag_t              o_tag
);
  acc_t acc [TOUT][TOUT];

  // pe_res_t -> fixed point: shift by exp - PE_EXP_OFS + ACC_FRAC.
  function automatic acc_t to_fixed(pe_res_t r);
    int   sh;
    acc_t m;
    sh = int'(r.exp) - PE_EXP_OFS + ACC_FRAC;
    m  = ACC_W'(r.mant);
    return (sh >= 0) ? (m <<< sh) : (m >>> (-sh));
  endfunction

  acc_t sum_c [TOUT];
  always_comb
    for (int c = 0; c < TOUT; c++)
      sum_c[c] = (i_tag.kfirst ? '0 : acc[i_tag.row[$clog2(TOUT)-1:0]][c]) + to_fixed(i_res[c]);

  always_ff @(posedge clk) begin
    if (i_valid)
      for (int c = 0; c < TOUT; c++) acc[i_tag.row[$clog2(TOUT)-1:0]][c] <= sum_c[c];
    if (i_valid && i_tag.klast) begin
      for (int c = 0; c < TOUT; c++) o_acc[c] <= sum_c[c];
      o_tag <= i_tag;
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) o_valid <= 1'b0;
    else        o_valid <= i_valid && i_tag.klast;
endmodule
