// feature_buffer: on-chip store of the tensorized input X (the "Input Feature
// BUFF").
//
// DEPTH words of TIN FP16 lanes. The host lays X out in the Stage-1 order the
// paper gives for input features: by feature tile (ceil(T0/Tout)), summation
// block (ceil(n1/Tin)) and row in the tile (Tout), each word holding Tin
// consecutive values of the summation index i1. The buffer itself is a plain
// memory: the DMA writes DW-bit beats (wr_part selects the slice of the word),
// the controller reads one word per cycle, data one cycle after rd_en.
module feature_buffer
  import ttd_pkg::*;
#(
  parameter int TIN   = 128,
  parameter int DEPTH = 512,
  parameter int DW    = 512
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [7:0]               wr_part,
  input  logic [DW-1:0]            wr_data,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output fp16_t [TIN-1:0]          rd_vec
);
  localparam int NP = TIN * 16 / DW;
  logic [DW-1:0] mem [DEPTH][NP];

  always_ff @(posedge clk)
    if (wr_en) mem[wr_addr][int'(wr_part)] <= wr_data;

  always_ff @(posedge clk)
    if (rd_en)
      for (int p = 0; p < NP; p++) rd_vec[p*(DW/16) +: DW/16] <= mem[rd_addr][p];

  if (TIN * 16 % DW != 0) begin : g_bad_cfg
    $error("feature_buffer: DW must divide TIN*16");
  end
endmodule
