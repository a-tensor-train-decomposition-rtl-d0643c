// tb_fp16_pkg: reference arithmetic for the testbenches, written with real
// numbers and independently of the RTL's integer datapath.
//   fp16_to_real / real_to_fp16 (round to nearest even, overflow to infinity)
//   pe_to_real   value of a pe_res_t
//   acc_to_real  value of an acc_t
//   rand_fp16    random normal FP16 with exponent field in [elo, ehi], or zero
package tb_fp16_pkg;
  import ttd_pkg::*;

  function automatic real pow2(int e);
    real r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real fp16_to_real(logic [15:0] h);
    int  e = int'(h[14:10]);
    real m = real'(h[9:0]);
    real v;
    if (e == 0) v = m * pow2(-24);
    else v = (1024.0 + m) * pow2(e - 25);
    return h[15] ? -v : v;
  endfunction

  function automatic real rne(real x);  // x >= 0
    real f = $floor(x);
    real d = x - f;
    if (d > 0.5) return f + 1.0;
    if (d < 0.5) return f;
    return ($rtoi(f) % 2 == 0) ? f : f + 1.0;
  endfunction

  function automatic logic [15:0] real_to_fp16(real v);
    logic s = (v < 0.0);
    real  a = s ? -v : v;
    int   e;
    real  q;
    if (a == 0.0) return 16'h0000;
    e = 0;
    while (a >= pow2(e + 1)) e++;
    while (a < pow2(e)) e--;
    if (e < -14) begin
      q = rne(a * pow2(24));
      return {s, 15'($rtoi(q))};
    end
    q = rne(a * pow2(10 - e));
    if (q >= 2048.0) begin q = q / 2.0; e++; end
    if (e > 15) return {s, 15'h7C00};
    return {s, 5'(e + 15), 10'($rtoi(q - 1024.0))};
  endfunction

  function automatic real pe_to_real(pe_res_t r);
    real m = 0.0;
    logic [PM_W-1:0] a = r.mant[PM_W-1] ? -r.mant : r.mant;
    for (int i = PM_W - 1; i >= 0; i--) m = m * 2.0 + (a[i] ? 1.0 : 0.0);
    if (r.mant[PM_W-1]) m = -m;
    return m * pow2(int'(r.exp) - PE_EXP_OFS);
  endfunction

  function automatic real acc_to_real(acc_t a);
    real m = 0.0;
    logic [ACC_W-1:0] u = a[ACC_W-1] ? -a : a;
    for (int i = ACC_W - 1; i >= 0; i--) m = m * 2.0 + (u[i] ? 1.0 : 0.0);
    if (a[ACC_W-1]) m = -m;
    return m * pow2(-ACC_FRAC);
  endfunction

  function automatic logic [15:0] rand_fp16(int elo, int ehi);
    if ($urandom_range(0, 7) == 0) return 16'h0000;
    return {1'($urandom), 5'($urandom_range(elo, ehi)), 10'($urandom)};
  endfunction

  function automatic logic [3:0] rand_int4();
    return 4'($urandom);
  endfunction
endpackage
