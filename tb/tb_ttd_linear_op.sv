// End-to-end test of ttd_linear_op at reduced size (TIN=16, TOUT=8, TN=4,
// 64-bit AXI). A random 4-core tensor-train layer (n=[4,8,3,2], m=[3,2,5,2],
// ranks [1,4,4,2,1], N=192, M=60) is laid out in two AXI memory models, the
// operation is configured through the register port and run twice: with BN and
// residual, then with BN only. The output in the DDR model is compared with a
// reference computed here directly from the tensor-train contraction
// y(j) = sum_i G1[i1,j1] ... Gd[id,jd] x(i), stage by stage with the
// datapath's documented numerics (per-Tin-block exponent alignment with GUARD
// bits, exact accumulation, FP16 rounding after every stage). Also checked:
// the number of issue cycles per operation, sum over stages of (B+1)*TOUT, and
// that each mechanism occurred: weight swaps, multi-block accumulation, lane
// and row padding masks, ping-pong reads, BN/Res path, split AXI bursts and
// AXI back-pressure.
module tb_ttd_linear_op;
  import ttd_pkg::*;
  import tb_fp16_pkg::*;
  localparam int TIN = 16, TOUT = 8, TN = 4, DW = 64, BB = DW / 8;
  localparam int FPARTS = TIN * 16 / DW, SPARTS = TOUT * 16 / DW, EPB = DW / 16;
  localparam longint HB_CORE = 64'h0, HB_SCALE = 64'h10000;
  localparam longint DD_FEAT = 64'h0, DD_GAM = 64'h10000, DD_BET = 64'h20000, DD_RES = 64'h30000, DD_OUT = 64'h40000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        cfg_we = 0;
  logic [4:0]  cfg_addr;
  logic [31:0] cfg_wdata;
  logic        busy, done;
  logic [63:0] hbm_araddr, ddr_araddr, ddr_awaddr;
  logic [7:0]  hbm_arlen, ddr_arlen, ddr_awlen;
  logic [2:0]  hbm_arsize, ddr_arsize, ddr_awsize;
  logic [1:0]  hbm_arburst, ddr_arburst, ddr_awburst, hbm_rresp, ddr_rresp, ddr_bresp, hb_bresp;
  logic        hbm_arvalid, hbm_arready, hbm_rlast, hbm_rvalid, hbm_rready;
  logic        ddr_arvalid, ddr_arready, ddr_rlast, ddr_rvalid, ddr_rready;
  logic        ddr_awvalid, ddr_awready, ddr_wlast, ddr_wvalid, ddr_wready, ddr_bvalid, ddr_bready;
  logic [DW-1:0] hbm_rdata, ddr_rdata, ddr_wdata;
  logic [DW/8-1:0] ddr_wstrb;
  logic hb_awready, hb_wready, hb_bvalid;

  ttd_linear_op #(
    .TIN(TIN), .TOUT(TOUT), .TN(TN), .DW(DW), .FDEPTH(64), .CDEPTH(128), .SDEPTH(16),
    .PDEPTH(128), .MAXM(1024), .MAXD(4)
  ) dut (.*);

  axi_mem_model #(.DW(DW)) u_hbm (
    .clk, .rst_n, .araddr(hbm_araddr), .arlen(hbm_arlen), .arsize(hbm_arsize), .arburst(hbm_arburst),
    .arvalid(hbm_arvalid), .arready(hbm_arready), .rdata(hbm_rdata), .rresp(hbm_rresp),
    .rlast(hbm_rlast), .rvalid(hbm_rvalid), .rready(hbm_rready),
    .awaddr('0), .awlen('0), .awsize('0), .awburst('0), .awvalid(1'b0), .awready(hb_awready),
    .wdata('0), .wstrb('0), .wlast(1'b0), .wvalid(1'b0), .wready(hb_wready), .bresp(hb_bresp),
    .bvalid(hb_bvalid), .bready(1'b0)
  );
  axi_mem_model #(.DW(DW)) u_ddr (
    .clk, .rst_n, .araddr(ddr_araddr), .arlen(ddr_arlen), .arsize(ddr_arsize), .arburst(ddr_arburst),
    .arvalid(ddr_arvalid), .arready(ddr_arready), .rdata(ddr_rdata), .rresp(ddr_rresp),
    .rlast(ddr_rlast), .rvalid(ddr_rvalid), .rready(ddr_rready),
    .awaddr(ddr_awaddr), .awlen(ddr_awlen), .awsize(ddr_awsize), .awburst(ddr_awburst),
    .awvalid(ddr_awvalid), .awready(ddr_awready), .wdata(ddr_wdata), .wstrb(ddr_wstrb),
    .wlast(ddr_wlast), .wvalid(ddr_wvalid), .wready(ddr_wready), .bresp(ddr_bresp),
    .bvalid(ddr_bvalid), .bready(ddr_bready)
  );

  // ---------------- layer ----------------
  int d = 4;
  int n [1:4] = '{4, 8, 3, 2};
  int m [1:4] = '{3, 2, 5, 2};
  int lr [0:4] = '{0, 2, 2, 1, 0};
  int N, M;
  int    Gw [1:4][$];    // [s*J + jc]
  fp16_t Gs [1:4][$];    // [jc]
  fp16_t X [$], GAM [$], BET [$], RES [$];
  real   YREF [$];
  fp16_t YH [$];

  int checks = 0, failures = 0;

  function automatic int rk(int k); return 1 << lr[k]; endfunction
  function automatic int prod_n(int lo, int hi);
    int p;
    p = 1;
    for (int l = lo; l <= hi; l++) p *= n[l];
    return p;
  endfunction
  function automatic int prod_m(int lo, int hi);
    int p;
    p = 1;
    for (int l = lo; l <= hi; l++) p *= m[l];
    return p;
  endfunction

  // value of one Tin block: features f (FP16), weights w, aligned to the block's largest exponent
  function automatic real block_val(fp16_t f [], int w []);
    int E;
    longint acc;
    E = 1;
    acc = 0;
    foreach (f[i]) if (fp16_eexp(f[i]) > E) E = fp16_eexp(f[i]);
    foreach (f[i]) begin
      longint p;
      p = longint'(fp16_mant2c(f[i])) * longint'(w[i]);
      acc += (p <<< GUARD) >>> (E - int'(fp16_eexp(f[i])));
    end
    return real'(acc) * pow2(E - 25 - GUARD);
  endfunction

  // reference: stage-by-stage TT contraction with the datapath's numerics
  task automatic reference(bit bn, bit rs);
    fp16_t Z [$];
    Z = X;
    for (int k = 1; k <= d; k++) begin
      int NI, MP;
      int rp, rc;
      int I, J;
      fp16_t Zn [$];
      NI = prod_n(k + 1, d);
      MP = prod_m(1, k - 1);
      rp = rk(k - 1);
      rc = (k == d) ? 1 : rk(k);
      I = n[k] * rp;
      J = m[k] * rc;
      Zn = {};
      for (int q = 0; q < NI * MP * m[k] * rc; q++) Zn.push_back(16'h0);
      for (int ipr = 0; ipr < NI; ipr++)
        for (int jp = 0; jp < MP; jp++)
          for (int j = 0; j < m[k]; j++)
            for (int b = 0; b < rc; b++) begin
              int jc;
              real tot;
              jc = j * rc + b;
              tot = 0.0;
              for (int kb = 0; kb * TIN < I; kb++) begin
                fp16_t f [];
                int w [];
                f = new [TIN];
                w = new [TIN];
                for (int l = 0; l < TIN; l++) begin
                  int s;
                  s = kb * TIN + l;
                  f[l] = 16'h0; w[l] = 0;
                  if (s < I) begin
                    int ik, a;
                    ik = s / rp;
                    a = s % rp;
                    f[l] = Z[((ik * NI + ipr) * MP + jp) * rp + a];
                    w[l] = Gw[k][s * J + jc];
                  end
                end
                tot += block_val(f, w) * fp16_to_real(Gs[k][jc]);
              end
              if (k < d) Zn[(ipr * MP * m[k] + jp * m[k] + j) * rc + b] = real_to_fp16(tot);
              else begin
                int yi;
                real g;
                real be;
                real v;
                yi = jp * m[k] + j;
                g = bn ? fp16_to_real(GAM[yi]) : 1.0;
                be = bn ? fp16_to_real(BET[yi]) : 0.0;
                v = tot * g + be + (rs ? fp16_to_real(RES[yi]) : 0.0);
                YREF[yi] = v;
                YH[yi] = real_to_fp16(v);
              end
            end
      Z = Zn;
    end
  endtask

  // ---------------- memory images (the host's data mapping) ----------------
  task automatic build_images();
    longint wa, sa;
    wa = 0;
    sa = 0;
    for (int k = 1; k <= d; k++) begin
      int rp, rc;
      int I, J;
      int K, MT;
      rp = rk(k - 1);
      rc = (k == d) ? 1 : rk(k);
      I = n[k] * rp;
      J = m[k] * rc;
      K = (I + TIN - 1) / TIN;
      MT = (J + TOUT - 1) / TOUT;
      for (int mt = 0; mt < MT; mt++) begin
        for (int kb = 0; kb < K; kb++)
          for (int row = 0; row < TOUT; row++) begin
            logic [DW-1:0] wd;
            wd = '0;
            for (int l = 0; l < TIN; l++) begin
              int s, jc;
              s = kb * TIN + l;
              jc = mt * TOUT + row;
              if (s < I && jc < J) wd[l*4 +: 4] = 4'(Gw[k][s * J + jc]);
            end
            u_hbm.mem[(HB_CORE / BB) + wa] = wd;
            wa++;
          end
        for (int p = 0; p < SPARTS; p++) begin
          logic [DW-1:0] sd;
          sd = '0;
          for (int e = 0; e < DW / 16; e++) begin
            int jc;
            jc = mt * TOUT + p * (DW / 16) + e;
            if (jc < J) sd[e*16 +: 16] = Gs[k][jc];
          end
          u_hbm.mem[(HB_SCALE / BB) + sa] = sd;
          sa++;
        end
      end
    end
    begin
      int T0, K1, TT;
      longint fa;
      T0 = prod_n(2, d);
      K1 = (n[1] + TIN - 1) / TIN;
      TT = (T0 + TOUT - 1) / TOUT;
      fa = 0;
      for (int tt = 0; tt < TT; tt++)
        for (int kb = 0; kb < K1; kb++)
          for (int row = 0; row < TOUT; row++)
            for (int p = 0; p < FPARTS; p++) begin
              logic [DW-1:0] fd;
              fd = '0;
              for (int e = 0; e < DW / 16; e++) begin
                int i1, t0;
                i1 = kb * TIN + p * (DW / 16) + e;
                t0 = tt * TOUT + row;
                if (i1 < n[1] && t0 < T0) fd[e*16 +: 16] = X[i1 * T0 + t0];
              end
              u_ddr.mem[(DD_FEAT / BB) + fa] = fd;
              fa++;
            end
    end
    for (int b = 0; b * EPB < M; b++) begin
      logic [DW-1:0] g, be, rr;
      g = '0;
      be = '0;
      rr = '0;
      for (int e = 0; e < EPB; e++)
        if (b * EPB + e < M) begin
          g[e*16 +: 16] = GAM[b*EPB+e]; be[e*16 +: 16] = BET[b*EPB+e]; rr[e*16 +: 16] = RES[b*EPB+e];
        end
      u_ddr.mem[(DD_GAM / BB) + b] = g;
      u_ddr.mem[(DD_BET / BB) + b] = be;
      u_ddr.mem[(DD_RES / BB) + b] = rr;
    end
  endtask

  task automatic cfg(int a, longint v);
    @(negedge clk);
    cfg_we = 1; cfg_addr = 5'(a); cfg_wdata = 32'(v);
    @(negedge clk);
    cfg_we = 0;
  endtask

  // ---------------- mechanism counters ----------------
  int n_swap = 0, n_kacc = 0, n_lanemask = 0, n_rowmask = 0, n_ppread = 0, n_bn = 0, n_issue = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_gvsa.f_valid && dut.u_gvsa.f_tag.swap) n_swap++;
    if (dut.u_acc.i_valid && !dut.u_acc.i_tag.kfirst) n_kacc++;
    if (dut.f_valid && !(&dut.f_mask_lane) && (|dut.f_mask_lane)) n_lanemask++;
    if (dut.f_valid && !(|dut.f_mask_lane)) n_rowmask++;
    if (dut.f_valid && dut.f_src_pp) n_ppread++;
    if (dut.u_bn_res.i_valid) n_bn++;
    if (dut.u_ctrl.issue) n_issue++;
  end

  task automatic run_op(bit bn, bit rs);
    int exp_issue;
    int cyc0;
    exp_issue = 0;
    reference(bn, rs);
    build_images();
    cfg(0, d);
    for (int k = 1; k <= 4; k++) begin cfg(k, n[k]); cfg(4 + k, m[k]); end
    for (int k = 0; k <= 4; k++) cfg(9 + k, lr[k]);
    cfg(14, {rs, bn});
    cfg(15, HB_CORE); cfg(16, HB_SCALE); cfg(17, DD_FEAT);
    cfg(18, DD_GAM); cfg(19, DD_BET); cfg(20, DD_RES); cfg(21, DD_OUT);
    for (int k = 1; k <= d; k++) begin
      int rp, rc;
      int T;
      int B;
      rp = rk(k - 1);
      rc = (k == d) ? 1 : rk(k);
      T = prod_n(k + 1, d) * prod_m(1, k - 1);
      B = ((T + TOUT - 1) / TOUT) * ((m[k] * rc + TOUT - 1) / TOUT) * ((n[k] * rp + TIN - 1) / TIN);
      exp_issue += (B + 1) * TOUT;
    end
    cyc0 = n_issue;
    cfg(22, 1);
    wait (done);
    @(negedge clk);
    checks++;
    if (n_issue - cyc0 != exp_issue) begin
      failures++;
      $display("issue cycles %0d, expected %0d", n_issue - cyc0, exp_issue);
    end
    for (int yi = 0; yi < M; yi++) begin
      logic [DW-1:0] bt;
      fp16_t got;
      bt = u_ddr.mem.exists(DD_OUT / BB + yi / EPB) ? u_ddr.mem[DD_OUT / BB + yi / EPB] : '0;
      got = bt[(yi % EPB) * 16 +: 16];
      checks++;
      if (got !== YH[yi]) begin
        failures++;
        if (failures < 12) $display("y[%0d] got %h (%g) expected %h (%g)", yi, got, fp16_to_real(got), YH[yi], YREF[yi]);
      end
    end
  endtask

  initial begin
    N = prod_n(1, 4); M = prod_m(1, 4);
    for (int k = 1; k <= 4; k++) begin
      int I, J;
      I = n[k] * rk(k - 1);
      J = m[k] * ((k == 4) ? 1 : rk(k));
      for (int q = 0; q < I * J; q++) Gw[k].push_back(int'($signed(rand_int4())));
      for (int q = 0; q < J; q++) Gs[k].push_back({1'b0, 5'($urandom_range(12, 14)), 10'($urandom)});
    end
    for (int q = 0; q < N; q++) X.push_back(rand_fp16(11, 17));
    for (int q = 0; q < M; q++) begin
      GAM.push_back(rand_fp16(13, 15)); BET.push_back(rand_fp16(8, 12)); RES.push_back(rand_fp16(8, 12));
      YREF.push_back(0.0); YH.push_back(16'h0);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_op(1'b1, 1'b1);
    run_op(1'b1, 1'b0);
    // every mechanism must have happened
    checks += 9;
    if (n_swap == 0)     begin failures++; $display("no weight swap"); end
    if (n_kacc == 0)     begin failures++; $display("no multi-block accumulation"); end
    if (n_lanemask == 0) begin failures++; $display("no lane padding"); end
    if (n_rowmask == 0)  begin failures++; $display("no row padding"); end
    if (n_ppread == 0)   begin failures++; $display("no ping-pong read"); end
    if (n_bn == 0)       begin failures++; $display("no BN/Res"); end
    if (u_ddr.rd_bursts <= 2 || u_hbm.rd_bursts <= 2) begin failures++; $display("no split bursts"); end
    if (u_ddr.stall_cnt + u_hbm.stall_cnt == 0) begin failures++; $display("no back-pressure"); end
    if (u_ddr.burst_errors + u_hbm.burst_errors != 0) begin failures++; $display("AXI burst rule broken"); end
    $display("mechanisms: swaps=%0d kacc=%0d lanemask=%0d rowmask=%0d ppread=%0d bn=%0d hbm_bursts=%0d ddr_bursts=%0d stalls=%0d",
             n_swap, n_kacc, n_lanemask, n_rowmask, n_ppread, n_bn, u_hbm.rd_bursts, u_ddr.rd_bursts + u_ddr.wr_bursts,
             u_ddr.stall_cnt + u_hbm.stall_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
