// Self-checking test of reorder_agu (TIN=16, TOUT=8). For three stage shapes
// every tile of a stage output P-bar_k[t, jc] is presented; each element that
// is in_mat the T x J matrix must be written exactly once and to the place
// where the next stage reads P_k[s', t'] (word (t'/TOUT, s'/TIN, t'%TOUT),
// lane s'%TIN), with t = (i_{k+1}, rest), jc = (j, b), s' = i_{k+1}*r_k + b and
// t' = rest*m_k + j. Padding rows and columns must not be written. The final
// stage must write y = t*m_d + jc linearly.
module tb_reorder_agu;
  import ttd_pkg::*;
  localparam int TIN = 16, TOUT = 8, AW = 9;
  logic i_valid;
  vec_tag_t i_tag;
  fp16_t [TOUT-1:0] i_data;
  stage_cfg_t cfg;
  int c_T, c_J, c_R, c_lr, c_mk, c_Kn;
  bit c_fin;
  always_comb begin
    cfg = '0;
    cfg.final_stage = c_fin; cfg.t_cnt = 16'(c_T); cfg.j_cnt = 16'(c_J); cfg.r_div = 16'(c_R);
    cfg.lr_k = 4'(c_lr); cfg.m_k = 16'(c_mk); cfg.k_next = 8'(c_Kn);
  end
  logic [TOUT-1:0] wr_en;
  logic [TOUT-1:0][AW-1:0] wr_addr;
  logic [TOUT-1:0][$clog2(TIN)-1:0] wr_lane;
  fp16_t [TOUT-1:0] wr_data;
  reorder_agu #(.TIN(TIN), .TOUT(TOUT), .AW(AW)) dut (.*);

  int checks = 0, failures = 0;
  int hits [1 << AW][TIN];

  int cf_n [4] = '{3, 8, 4, 1};
  int cf_R [4] = '{5, 3, 7, 13};
  int cf_lr [4] = '{2, 2, 1, 0};
  int cf_mk [4] = '{3, 2, 5, 12};
  bit cf_fin [4] = '{0, 0, 0, 1};
  int n_nx, R, lr, mk, T, rk, J, Kn;
  bit fin;

  // shapes: next stage with one summation block, with two, odd sizes, final stage
  initial begin
    for (int run = 0; run < 4; run++) begin
      n_nx = cf_n[run]; R = cf_R[run]; lr = cf_lr[run]; mk = cf_mk[run]; fin = cf_fin[run];
      T = n_nx * R; rk = 1 << lr; J = mk * rk;
      Kn = (n_nx * rk + TIN - 1) / TIN;
      foreach (hits[a, l]) hits[a][l] = 0;
      c_fin = fin; c_T = T; c_J = J; c_R = R; c_lr = lr; c_mk = mk; c_Kn = Kn;
      for (int tt = 0; tt * TOUT < T + TOUT; tt++)   // includes one tile of pure padding
        for (int mt = 0; mt * TOUT < J; mt++)
          for (int row = 0; row < TOUT; row++) begin
            i_valid = ($urandom_range(0, 7) != 0);
            i_tag = '0; i_tag.ttile = 16'(tt); i_tag.mtile = 8'(mt); i_tag.row = 5'(row);
            for (int c = 0; c < TOUT; c++) i_data[c] = 16'($urandom);
            #1;
            for (int c = 0; c < TOUT; c++) begin
              int t, jc;
              bit in_mat;
              t = tt * TOUT + row; jc = mt * TOUT + c;
              in_mat = i_valid && t < T && jc < J;
              checks++;
              if (wr_en[c] !== in_mat) begin
                failures++;
                if (failures < 4) $display("t=%0d jc=%0d wr_en=%b exp %b dut.t=%0d dcfg=%h T=%0d v=%b", t, jc, wr_en[c], in_mat, dut.t, dut.cfg, c_T, dut.i_valid);
              end else if (in_mat) begin
                int ea, el;
                if (fin) begin
                  ea = (t * mk + jc) / TIN; el = (t * mk + jc) % TIN;
                end else begin
                  int inx, rest, j, b, sp, tp;
                  inx = t / R; rest = t % R; j = jc / rk; b = jc % rk;
                  sp = inx * rk + b; tp = rest * mk + j;
                  ea = (tp / TOUT) * Kn * TOUT + (sp / TIN) * TOUT + tp % TOUT; el = sp % TIN;
                end
                hits[wr_addr[c]][wr_lane[c]]++;
                checks++;
                if (wr_addr[c] != AW'(ea) || wr_lane[c] != 4'(el) || wr_data[c] !== i_data[c]) begin
                  failures++;
                  if (failures < 10) $display("t=%0d jc=%0d -> %0d/%0d expected %0d/%0d", t, jc, wr_addr[c], wr_lane[c], ea, el);
                end
              end
            end
          end
      foreach (hits[a, l]) if (hits[a][l] > 1) begin
        failures++;
        $display("word %0d lane %0d written %0d times", a, l, hits[a][l]);
      end
      checks++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
