// Self-checking test of core_buffer (TIN=16, TOUT=8, DW=32: two beats per
// weight word, four per scale word). Random words are written beat by beat,
// then random weight rows and scale entries are read back; the read data must
// appear one cycle after rd_en and equal a software copy of the contents.
module tb_core_buffer;
  import ttd_pkg::*;
  localparam int TIN = 16, TOUT = 8, DEPTH = 32, SDEPTH = 8, DW = 32;
  localparam int WP = TIN * 4 / DW, SP = TOUT * 16 / DW;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, swr_en = 0, rd_en = 0;
  logic [$clog2(DEPTH)-1:0] wr_addr, rd_addr;
  logic [7:0] wr_part, swr_part;
  logic [DW-1:0] wr_data, swr_data;
  logic [$clog2(SDEPTH)-1:0] swr_addr, rd_saddr;
  logic [$clog2(TOUT)-1:0] rd_srow;
  int4_t [TIN-1:0] rd_w;
  fp16_t rd_scale;
  core_buffer #(.TIN(TIN), .TOUT(TOUT), .DEPTH(DEPTH), .SDEPTH(SDEPTH), .DW(DW)) dut (.*);

  logic [TIN*4-1:0] wref [DEPTH];
  logic [TOUT*16-1:0] sref [SDEPTH];
  int checks = 0, failures = 0;

  initial begin
    for (int a = 0; a < DEPTH; a++)
      for (int p = 0; p < WP; p++) begin
        @(negedge clk);
        wr_en = 1; wr_addr = 5'(a); wr_part = 8'(p); wr_data = $urandom;
        wref[a][p*DW +: DW] = wr_data;
      end
    for (int a = 0; a < SDEPTH; a++)
      for (int p = 0; p < SP; p++) begin
        @(negedge clk);
        wr_en = 0; swr_en = 1; swr_addr = 3'(a); swr_part = 8'(p); swr_data = $urandom;
        sref[a][p*DW +: DW] = swr_data;
      end
    @(negedge clk);
    wr_en = 0; swr_en = 0;
    for (int i = 0; i < 200; i++) begin
      logic [TIN*4-1:0] ew;
      fp16_t es;
      @(negedge clk);
      rd_en = 1; rd_addr = 5'($urandom); rd_saddr = 3'($urandom); rd_srow = 3'($urandom);
      // overwrite one beat at the same time: the read returns the old contents
      wr_en = ($urandom_range(0, 1) == 1); wr_addr = 5'($urandom); wr_part = 8'($urandom_range(0, WP - 1));
      wr_data = $urandom;
      ew = wref[rd_addr];
      es = sref[rd_saddr][rd_srow*16 +: 16];
      if (wr_en) wref[wr_addr][wr_part*DW +: DW] = wr_data;
      @(negedge clk);
      rd_en = 0; wr_en = 0;
      checks += 2;
      if (rd_w !== ew) begin failures++; $display("weight row mismatch at %0d", i); end
      if (rd_scale !== es) begin failures++; $display("scale mismatch at %0d", i); end
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
