// Self-checking test of dsp_shared_mul: all 4-bit weight pairs against plain
// signed products, for corner and random 12-bit mantissas.
module tb_dsp_shared_mul;
  logic signed [11:0] a;
  logic signed [3:0]  b, c;
  logic signed [15:0] pb, pc;
  int checks = 0, failures = 0;

  dsp_shared_mul dut (.a, .b, .c, .pb, .pc);

  task automatic check_one(int av);
    for (int bi = -8; bi < 8; bi++)
      for (int ci = -8; ci < 8; ci++) begin
        a = 12'(av); b = 4'(bi); c = 4'(ci);
        #1;
        checks += 2;
        if (int'(pb) != av * bi) begin
          failures++;
          if (failures < 10) $display("pb mismatch a=%0d b=%0d got %0d", av, bi, pb);
        end
        if (int'(pc) != av * ci) begin
          failures++;
          if (failures < 10) $display("pc mismatch a=%0d c=%0d got %0d", av, ci, pc);
        end
      end
  endtask

  initial begin
    check_one(0); check_one(1); check_one(-1); check_one(2047); check_one(-2047);
    check_one(-2048); check_one(1024); check_one(-1024);
    for (int i = 0; i < 40; i++) check_one(int'($urandom_range(0, 4095)) - 2048);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
