// Self-checking test of vector_pe: random FP16 feature vectors (exponent spread
// within the guard bits, so the reference is exact) and INT4 weight pairs,
// streamed one per cycle; results compared with real-number dot products and
// the 5-cycle latency checked.
module tb_vector_pe;
  import ttd_pkg::*;
  import tb_fp16_pkg::*;
  localparam int TIN = 16;
  localparam int N   = 60;
  localparam int LAT = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic            in_valid;
  fp16_t [TIN-1:0] feat;
  int4_t [TIN-1:0] w0, w1;
  fp16_t           scale0, scale1;
  logic            out_valid;
  pe_res_t         res0, res1;
  int checks = 0, failures = 0;
  real exp0 [N], exp1 [N];
  int  in_cyc [N];
  int  cyc = 0, nout = 0;

  vector_pe #(.TIN(TIN)) dut (.*);

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    in_valid = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < N; n++) begin
      automatic real s0 = 0.0, s1 = 0.0;
      for (int i = 0; i < TIN; i++) begin
        feat[i] = (n < 3) ? 16'h0000 : rand_fp16(5 + (n % 10), 20 + (n % 10));
        w0[i] = rand_int4(); w1[i] = rand_int4();
        if (n == 1) begin feat[i] = 16'h3C00; w0[i] = 4'sd7; w1[i] = -4'sd8; end
      end
      scale0 = rand_fp16(12, 17); scale1 = rand_fp16(12, 17);
      for (int i = 0; i < TIN; i++) begin
        s0 += fp16_to_real(feat[i]) * real'(w0[i]);
        s1 += fp16_to_real(feat[i]) * real'(w1[i]);
      end
      exp0[n] = s0 * fp16_to_real(scale0);
      exp1[n] = s1 * fp16_to_real(scale1);
      in_cyc[n] = cyc;
      in_valid = 1;
      @(negedge clk);
      if (n % 7 == 6) begin in_valid = 0; @(negedge clk); end
    end
    in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (nout != N) begin failures++; $display("got %0d results, expected %0d", nout, N); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    automatic real g0 = pe_to_real(res0), g1 = pe_to_real(res1);
    checks += 3;
    if (g0 != exp0[nout] || g1 != exp1[nout]) begin
      failures++;
      if (failures < 10) $display("res %0d: got %g %g expected %g %g", nout, g0, g1, exp0[nout], exp1[nout]);
    end
    if (cyc - in_cyc[nout] != LAT) begin
      failures++;
      $display("latency %0d", cyc - in_cyc[nout]);
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
