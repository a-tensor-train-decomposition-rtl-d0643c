// pingpong_buffer: the two intermediate-data buffers between TTD stages.
//
// Each of the two banks has TIN blocks (one per lane of the GVSA feature
// input) and DEPTH addresses. While stage k writes its output into one bank,
// stage k+1 reads its input from the other; the controller swaps them per
// stage. A read takes one address across all TIN blocks and returns a whole
// feature vector, so the reordering between stages is done entirely by where
// each element is written (see reorder_agu) - the paper's scheme.
//
// Write port: up to TOUT elements per cycle, each with its own block (lane)
// and address. How many elements a block can accept per cycle is not given in
// the paper; this design lets all TOUT go anywhere in the same cycle.
// Read port: rd_addr -> rd_vec one cycle later.
// DMA port: dma_addr/dma_part -> one DW-bit slice of a word, one cycle later,
// used to move the final output to external memory.
module pingpong_buffer
  import ttd_pkg::*;
#(
  parameter int TIN   = 128,
  parameter int TOUT  = 32,
  parameter int DEPTH = 512,
  parameter int DW    = 512
) (
  input  logic                                 clk,
  input  logic                                 wr_bank,
  input  logic [TOUT-1:0]                      wr_en,
  input  logic [TOUT-1:0][$clog2(DEPTH)-1:0]   wr_addr,
  input  logic [TOUT-1:0][$clog2(TIN)-1:0]     wr_lane,
  input  fp16_t [TOUT-1:0]                     wr_data,
  input  logic                                 rd_bank,
  input  logic                                 rd_en,
  input  logic [$clog2(DEPTH)-1:0]             rd_addr,
  output fp16_t [TIN-1:0]                      rd_vec,
  input  logic                                 dma_bank,
  input  logic                                 dma_en,
  input  logic [$clog2(DEPTH)-1:0]             dma_addr,
  input  logic [7:0]                           dma_part,
  output logic [DW-1:0]                        dma_data
);
  localparam int NP = TIN * 16 / DW;
  fp16_t mem [2][DEPTH][TIN];

  always_ff @(posedge clk)
    for (int e = 0; e < TOUT; e++)
      if (wr_en[e]) mem[wr_bank][wr_addr[e]][wr_lane[e]] <= wr_data[e];

  always_ff @(posedge clk) begin
    if (rd_en)
      for (int l = 0; l < TIN; l++) rd_vec[l] <= mem[rd_bank][rd_addr][l];
    if (dma_en)
      for (int l = 0; l < DW / 16; l++)
        dma_data[l*16 +: 16] <= mem[dma_bank][dma_addr][int'(dma_part) * (DW / 16) + l];
  end

  if (TIN * 16 % DW != 0) begin : g_bad_cfg
    $error("pingpong_buffer: DW must divide TIN*16");
  end
  // NP is the number of DMA slices per word; dma_part must stay below it.
  always @(posedge clk) if (dma_en) assert (int'(dma_part) < NP);
endmodule
