// Self-checking test of pingpong_buffer (TIN=16, TOUT=8, DW=64). Each cycle up
// to TOUT scattered elements are written into one bank while the other bank is
// read through the vector port and the DMA port; both reads are checked one
// cycle later against a software copy, and the banks must stay independent.
module tb_pingpong_buffer;
  import ttd_pkg::*;
  localparam int TIN = 16, TOUT = 8, DEPTH = 16, DW = 64, NP = TIN * 16 / DW;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_bank, rd_bank, rd_en = 0, dma_bank, dma_en = 0;
  logic [TOUT-1:0] wr_en = '0;
  logic [TOUT-1:0][$clog2(DEPTH)-1:0] wr_addr;
  logic [TOUT-1:0][$clog2(TIN)-1:0] wr_lane;
  fp16_t [TOUT-1:0] wr_data;
  logic [$clog2(DEPTH)-1:0] rd_addr, dma_addr;
  logic [7:0] dma_part;
  fp16_t [TIN-1:0] rd_vec;
  logic [DW-1:0] dma_data;
  pingpong_buffer #(.TIN(TIN), .TOUT(TOUT), .DEPTH(DEPTH), .DW(DW)) dut (.*);

  fp16_t ref_m [2][DEPTH][TIN];
  int checks = 0, failures = 0;

  initial begin
    // fill both banks completely, one word per cycle in two halves
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < DEPTH; a++)
        for (int h = 0; h < TIN / TOUT; h++) begin
          @(negedge clk);
          wr_bank = b[0];
          for (int e = 0; e < TOUT; e++) begin
            wr_en[e] = 1; wr_addr[e] = 4'(a); wr_lane[e] = 4'(h * TOUT + e); wr_data[e] = 16'($urandom);
            ref_m[b][a][h*TOUT+e] = wr_data[e];
          end
        end
    for (int i = 0; i < 400; i++) begin
      fp16_t ev [TIN];
      logic [DW-1:0] ed;
      @(negedge clk);
      wr_bank = 1'($urandom); rd_bank = ~wr_bank; dma_bank = ~wr_bank;
      // scattered writes to distinct (addr, lane) pairs: lane e and e+TOUT never collide
      for (int e = 0; e < TOUT; e++) begin
        wr_en[e] = ($urandom_range(0, 2) != 0); wr_addr[e] = 4'($urandom);
        wr_lane[e] = 4'(e + TOUT * $urandom_range(0, 1)); wr_data[e] = 16'($urandom);
      end
      rd_en = 1; rd_addr = 4'($urandom);
      dma_en = 1; dma_addr = 4'($urandom); dma_part = 8'($urandom_range(0, NP - 1));
      for (int l = 0; l < TIN; l++) ev[l] = ref_m[rd_bank][rd_addr][l];
      for (int l = 0; l < DW / 16; l++) ed[l*16 +: 16] = ref_m[dma_bank][dma_addr][dma_part*(DW/16)+l];
      for (int e = 0; e < TOUT; e++) if (wr_en[e]) ref_m[wr_bank][wr_addr[e]][wr_lane[e]] = wr_data[e];
      @(negedge clk);
      wr_en = '0; rd_en = 0; dma_en = 0;
      for (int l = 0; l < TIN; l++) begin
        checks++;
        if (rd_vec[l] !== ev[l]) begin failures++; if (failures < 10) $display("rd lane %0d mismatch", l); end
      end
      checks++;
      if (dma_data !== ed) begin failures++; if (failures < 10) $display("dma mismatch at %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
