// Self-checking test of gvsa at TIN=8, TOUT=8, TN=4 (two groups): weights of
// block b+1 are loaded one per cycle while the 8 features of block b stream;
// every output vector is compared with real-number dot products of its feature
// with the block's 8 weight vectors times their scales, and the latency
// (TOUT/TN + 5 cycles) and the output count are checked.
module tb_gvsa;
  import ttd_pkg::*;
  import tb_fp16_pkg::*;
  localparam int TIN = 8, TOUT = 8, TN = 4, NB = 5, LAT = TOUT / TN + 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic f_valid = 0, w_valid = 0;
  fp16_t [TIN-1:0] f_vec;
  vec_tag_t f_tag;
  logic [$clog2(TOUT)-1:0] w_row;
  int4_t [TIN-1:0] w_vec;
  fp16_t w_scale;
  logic o_valid;
  pe_res_t [TOUT-1:0] o_res;
  vec_tag_t o_tag;

  gvsa #(.TIN(TIN), .TOUT(TOUT), .TN(TN)) dut (.*);

  int4_t [TIN-1:0] W [NB][TOUT];
  fp16_t           S [NB][TOUT];
  fp16_t [TIN-1:0] F [NB][TOUT];
  int in_cyc [NB*TOUT];
  int cyc = 0, nout = 0, checks = 0, failures = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    for (int b = 0; b < NB; b++)
      for (int r = 0; r < TOUT; r++) begin
        for (int i = 0; i < TIN; i++) begin
          W[b][r][i] = rand_int4();
          F[b][r][i] = rand_fp16(8, 22);
        end
        S[b][r] = rand_fp16(13, 16);
      end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // prologue: block 0 weights
    for (int r = 0; r < TOUT; r++) begin
      @(negedge clk);
      w_valid = 1; w_row = r[$clog2(TOUT)-1:0]; w_vec = W[0][r]; w_scale = S[0][r];
    end
    for (int b = 0; b < NB; b++)
      for (int r = 0; r < TOUT; r++) begin
        @(negedge clk);
        w_valid = (b + 1 < NB);
        if (b + 1 < NB) begin
          w_row = r[$clog2(TOUT)-1:0]; w_vec = W[b+1][r]; w_scale = S[b+1][r];
        end
        f_valid = 1; f_vec = F[b][r];
        f_tag = '0; f_tag.row = 5'(r); f_tag.swap = (r == 0); f_tag.ttile = 16'(b);
        in_cyc[b*TOUT + r] = cyc;
      end
    @(negedge clk);
    f_valid = 0; w_valid = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (nout != NB * TOUT) begin failures++; $display("outputs %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && o_valid) begin
    automatic int b = int'(o_tag.ttile), r = int'(o_tag.row);
    checks++;
    if (b * TOUT + r != nout || cyc - in_cyc[nout] != LAT) begin
      failures++;
      $display("order/latency: b=%0d r=%0d n=%0d lat=%0d", b, r, nout, cyc - in_cyc[nout]);
    end
    for (int o = 0; o < TOUT; o++) begin
      automatic real e = 0.0;
      for (int i = 0; i < TIN; i++) e += fp16_to_real(F[b][r][i]) * real'(W[b][o][i]);
      e = e * fp16_to_real(S[b][o]);
      checks++;
      if (pe_to_real(o_res[o]) != e) begin
        failures++;
        if (failures < 10) $display("b=%0d r=%0d o=%0d got %g exp %g", b, r, o, pe_to_real(o_res[o]), e);
      end
    end
    nout++;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
