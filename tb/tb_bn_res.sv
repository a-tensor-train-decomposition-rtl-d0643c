// Self-checking test of bn_res (TOUT=8, MAXM=256, DW=64). gamma, beta and the
// residual are loaded beat by beat, then random accumulator tiles with random
// tags are applied. Output element c of a tile is y[idx] =
// acc[c] * gamma[idx] + beta[idx] (+ res[idx]) rounded once to FP16, with
// idx = (ttile*TOUT + row)*m_d + mtile*TOUT + c; with BN off gamma = 1 and
// beta = 0. The result and tag must appear exactly one cycle later.
module tb_bn_res;
  import ttd_pkg::*;
  import tb_fp16_pkg::*;
  localparam int TOUT = 8, MAXM = 256, DW = 64, EPB = DW / 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic p_we = 0;
  logic [1:0] p_sel;
  logic [$clog2(MAXM*16/DW)-1:0] p_addr;
  logic [DW-1:0] p_data;
  logic bn_en, res_en, i_valid = 0, o_valid;
  logic [15:0] m_d;
  acc_t [TOUT-1:0] i_acc;
  vec_tag_t i_tag, o_tag;
  fp16_t [TOUT-1:0] o_y;
  bn_res #(.TOUT(TOUT), .MAXM(MAXM), .DW(DW)) dut (.*);

  fp16_t tabs [3][MAXM];
  fp16_t ey [TOUT];
  int checks = 0, failures = 0;
  int nt, idx;
  real a, g, b, r;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 3; s++)
      for (int w = 0; w < MAXM / EPB; w++) begin
        @(negedge clk);
        p_we = 1; p_sel = 2'(s); p_addr = 6'(w);
        for (int e = 0; e < EPB; e++) begin
          tabs[s][w*EPB+e] = (s == 0) ? rand_fp16(12, 17) : rand_fp16(5, 16);
          p_data[e*16 +: 16] = tabs[s][w*EPB+e];
        end
      end
    @(negedge clk);
    p_we = 0;
    for (int i = 0; i < 400; i++) begin
      bn_en = ($urandom_range(0, 3) != 0); res_en = 1'($urandom); m_d = 16'(TOUT * $urandom_range(1, 4));
      nt = MAXM / int'(m_d);
      i_tag = '0;
      i_tag.row = 5'($urandom_range(0, TOUT - 1));
      i_tag.ttile = 16'($urandom_range(0, nt / TOUT - 1));
      i_tag.mtile = 8'($urandom_range(0, int'(m_d) / TOUT - 1));
      i_tag.last = 1'($urandom);
      for (int c = 0; c < TOUT; c++) begin
        // value around 2^-8 .. 2^8, about 40 significant bits
        i_acc[c] = ACC_W'($signed({$urandom, $urandom}) >>> $urandom_range(6, 22));
        idx = (int'(i_tag.ttile) * TOUT + int'(i_tag.row)) * int'(m_d) + int'(i_tag.mtile) * TOUT + c;
        a = acc_to_real(i_acc[c]);
        g = bn_en ? fp16_to_real(tabs[0][idx]) : 1.0;
        b = bn_en ? fp16_to_real(tabs[1][idx]) : 0.0;
        r = res_en ? fp16_to_real(tabs[2][idx]) : 0.0;
        ey[c] = real_to_fp16(a * g + b + r);
      end
      i_valid = 1;
      @(negedge clk);
      i_valid = 0;
      checks++;
      if (!o_valid || o_tag !== i_tag) begin failures++; $display("valid/tag wrong at %0d", i); end
      for (int c = 0; c < TOUT; c++) begin
        checks++;
        if (o_y[c] !== ey[c]) begin
          failures++;
          if (failures < 10) $display("tile %0d col %0d: %h expected %h", i, c, o_y[c], ey[c]);
        end
      end
      @(negedge clk);
      checks++;
      if (o_valid) begin failures++; $display("valid held"); end
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
