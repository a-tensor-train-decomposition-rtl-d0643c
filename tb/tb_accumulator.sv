// Self-checking test of accumulator at TOUT=4: random pe_res_t values over
// 1 to 3 summation blocks per tile, rows in order per block; each finished row
// is compared with the real-number sum and must appear one cycle after its
// last block.
module tb_accumulator;
  import ttd_pkg::*;
  import tb_fp16_pkg::*;
  localparam int TOUT = 4, NT = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic i_valid = 0, o_valid;
  pe_res_t [TOUT-1:0] i_res;
  vec_tag_t i_tag, o_tag;
  acc_t [TOUT-1:0] o_acc;
  accumulator #(.TOUT(TOUT)) dut (.*);

  real expv [NT][TOUT][TOUT];
  int  last_cyc [NT][TOUT];
  int cyc = 0, nout = 0, checks = 0, failures = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < NT; t++) begin
      automatic int K = 1 + (t % 3);
      for (int r = 0; r < TOUT; r++) for (int c = 0; c < TOUT; c++) expv[t][r][c] = 0.0;
      for (int k = 0; k < K; k++)
        for (int r = 0; r < TOUT; r++) begin
          @(negedge clk);
          i_valid = 1;
          i_tag = '0; i_tag.row = 5'(r); i_tag.kfirst = (k == 0); i_tag.klast = (k == K - 1);
          i_tag.ttile = 16'(t);
          for (int c = 0; c < TOUT; c++) begin
            i_res[c].mant = PM_W'($signed(32'($urandom_range(0, 2000000)) - 32'sd1000000));
            i_res[c].exp  = 6'($urandom_range(40, 60));
            expv[t][r][c] += pe_to_real(i_res[c]);
          end
          last_cyc[t][r] = cyc;
          if ($urandom_range(0, 3) == 0) begin @(negedge clk); i_valid = 0; end
        end
    end
    @(negedge clk); i_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (nout != NT * TOUT) begin failures++; $display("rows out %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && o_valid) begin
    automatic int t = int'(o_tag.ttile), r = int'(o_tag.row);
    checks++;
    if (cyc - last_cyc[t][r] != 1) begin failures++; $display("latency %0d", cyc - last_cyc[t][r]); end
    for (int c = 0; c < TOUT; c++) begin
      checks++;
      if (acc_to_real(o_acc[c]) != expv[t][r][c]) begin
        failures++;
        if (failures < 10) $display("t=%0d r=%0d c=%0d got %g exp %g", t, r, c, acc_to_real(o_acc[c]), expv[t][r][c]);
      end
    end
    nout++;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
