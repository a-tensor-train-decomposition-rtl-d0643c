// core_buffer: on-chip store of the INT4 tensor-train cores and their scales
// (the "Input Core BUFF").
//
// Weight array: DEPTH words of TIN INT4 weights, one weight vector per word,
// in the order the GVSA consumes them: core after core, and within a core by
// output tile, summation block and row (the core data mapping of the paper).
// Scale array: SDEPTH words of TOUT FP16 scales, one word per output tile of
// each core (row r of the tile uses scale r). The separate scale array is this
// design's own choice; the paper does not say where scales are kept.
//
// Write side (DMA): DW-bit beats, `wr_part` selects which DW-bit slice of the
// word is written, so a word of W bits takes W/DW beats.
// Read side (controller): rd_addr/rd_saddr/rd_srow, data one cycle later.
module core_buffer
  import ttd_pkg::*;
#(
  parameter int TIN    = 128,
  parameter int TOUT   = 32,
  parameter int DEPTH  = 512,
  parameter int SDEPTH = 32,
  parameter int DW     = 512
) (
  input  logic                      clk,
  input  logic                      wr_en,
  input  logic [$clog2(DEPTH)-1:0]  wr_addr,
  input  logic [7:0]                wr_part,
  input  logic [DW-1:0]             wr_data,
  input  logic                      swr_en,
  input  logic [$clog2(SDEPTH)-1:0] swr_addr,
  input  logic [7:0]                swr_part,
  input  logic [DW-1:0]             swr_data,
  input  logic                      rd_en,
  input  logic [$clog2(DEPTH)-1:0]  rd_addr,
  input  logic [$clog2(SDEPTH)-1:0] rd_saddr,
  input  logic [$clog2(TOUT)-1:0]   rd_srow,
  output int4_t [TIN-1:0]           rd_w,
  output fp16_t                     rd_scale
);
  localparam int WP = TIN * 4 / DW;    // beats per weight word
  localparam int SP = TOUT * 16 / DW;  // beats per scale word

  logic [DW-1:0] wmem [DEPTH][WP];
  logic [DW-1:0] smem [SDEPTH][SP];

  always_ff @(posedge clk) begin
    if (wr_en)  wmem[wr_addr][int'(wr_part)]   <= wr_data;
    if (swr_en) smem[swr_addr][int'(swr_part)] <= swr_data;
  end

  logic [TIN*4-1:0]   wword;
  logic [TOUT*16-1:0] sword;
  always_comb begin
    for (int p = 0; p < WP; p++) wword[p*DW +: DW] = wmem[rd_addr][p];
    for (int p = 0; p < SP; p++) sword[p*DW +: DW] = smem[rd_saddr][p];
  end

  always_ff @(posedge clk)
    if (rd_en) begin
      rd_w     <= wword;
      rd_scale <= sword[rd_srow*16 +: 16];
    end

  if (TIN * 4 % DW != 0 || TOUT * 16 % DW != 0) begin : g_bad_cfg
    $error("core_buffer: DW must divide both word widths");
  end
endmodule
