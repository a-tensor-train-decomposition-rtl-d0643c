// Self-checking test of feature_buffer (TIN=16, DW=64: four beats per
// feature word). Words are written beat by beat in random order and read back
// at random addresses; the vector must appear one cycle after rd_en, with
// beat p holding lanes p*4 .. p*4+3.
module tb_feature_buffer;
  import ttd_pkg::*;
  localparam int TIN = 16, DEPTH = 32, DW = 64, NP = TIN * 16 / DW;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [$clog2(DEPTH)-1:0] wr_addr, rd_addr;
  logic [7:0] wr_part;
  logic [DW-1:0] wr_data;
  fp16_t [TIN-1:0] rd_vec;
  feature_buffer #(.TIN(TIN), .DEPTH(DEPTH), .DW(DW)) dut (.*);

  fp16_t ref_m [DEPTH][TIN];
  int checks = 0, failures = 0;

  initial begin
    for (int p = NP - 1; p >= 0; p--)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        wr_en = 1; wr_addr = 5'(a); wr_part = 8'(p); wr_data = {$urandom, $urandom};
        for (int e = 0; e < DW / 16; e++) ref_m[a][p*(DW/16)+e] = wr_data[e*16 +: 16];
      end
    @(negedge clk);
    wr_en = 0;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      rd_en = 1; rd_addr = 5'($urandom);
      @(negedge clk);
      rd_en = 0;
      for (int l = 0; l < TIN; l++) begin
        checks++;
        if (rd_vec[l] !== ref_m[rd_addr][l]) begin
          failures++;
          if (failures < 10) $display("addr %0d lane %0d: %h vs %h", rd_addr, l, rd_vec[l], ref_m[rd_addr][l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
