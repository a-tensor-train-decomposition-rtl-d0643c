// ttd_pkg: types, widths and number-format helpers shared by the TTD linear
// operation datapath.
//
// Number formats
//   fp16_t     IEEE half precision: 1 sign, 5 exponent, 10 mantissa bits.
//   int4       signed 4-bit weight (two's complement).
//   pe_res_t   unnormalised vector-PE result: value = mant * 2^(exp - PE_EXP_OFS).
//              exp is the sum of the block's largest feature exponent and the
//              scale's exponent; PE_EXP_OFS absorbs the two FP16 biases, the two
//              10-bit mantissa fractions and the GUARD bits added before the
//              alignment shift.
//   acc_t      two's-complement fixed point, ACC_W bits, ACC_FRAC fraction bits.
//
// FP16 activations and INT4 weights follow the paper; the fixed-point
// accumulation format, the guard bits and the round-to-nearest-even FP16
// conversion are this design's own choices.
package ttd_pkg;

  typedef logic [15:0] fp16_t;
  typedef logic signed [3:0] int4_t;

  // Guard bits appended below an aligned product before the right shift.
  localparam int GUARD = 16;
  // Adder-tree sum: 16-bit product + GUARD fraction + log2(256) growth.
  localparam int SUM_W = 16 + GUARD + 8;
  // After the scale multiply (12-bit two's-complement scale mantissa).
  localparam int PM_W = SUM_W + 12;
  // value = mant * 2^(exp - PE_EXP_OFS); 25 = 15 bias + 10 fraction bits, twice.
  localparam int PE_EXP_OFS = 50 + GUARD;

  typedef struct packed {
    logic signed [PM_W-1:0] mant;
    logic [5:0]             exp;
  } pe_res_t;

  localparam int ACC_W    = 112;
  localparam int ACC_FRAC = 48;
  typedef logic signed [ACC_W-1:0] acc_t;

  // Width of the intermediate used by BN & Res and the FP16 rounding function.
  localparam int WIDE_W = 160;
  typedef logic signed [WIDE_W-1:0] wide_t;

  // Tag carried with each feature vector through the array.
  typedef struct packed {
    logic [4:0]  row;     // position of the feature inside its Tout tile
    logic        swap;    // first feature of a weight block: groups take the new weights
    logic        kfirst;  // first summation block of the tile
    logic        klast;   // last summation block of the tile
    logic [15:0] ttile;   // feature (time) tile index
    logic [7:0]  mtile;   // output-column tile index
    logic        last;    // last vector of the stage
  } vec_tag_t;

  // Shape of one TTD stage as seen by the reorder address generator.
  typedef struct packed {
    logic        final_stage; // write the linear output layout instead of P_k
    logic [15:0] t_cnt;       // T_{k-1}: rows of P-bar_k
    logic [15:0] j_cnt;       // J_k = m_k * r_k: columns of P-bar_k
    logic [15:0] r_div;       // R = T_{k-1} / n_{k+1}
    logic [3:0]  lr_k;        // log2(r_k)
    logic [15:0] m_k;         // m_k
    logic [7:0]  k_next;      // ceil(I_{k+1} / Tin): summation blocks of the next stage
  } stage_cfg_t;

  // Split an FP16 value into a 12-bit two's-complement {sign, hidden, mantissa}
  // and its effective exponent (1 for zero and subnormals).
  function automatic logic signed [11:0] fp16_mant2c(fp16_t a);
    logic [11:0] mag;
    mag = {1'b0, (a[14:10] != 5'd0), a[9:0]};
    return a[15] ? -$signed(mag) : $signed(mag);
  endfunction

  function automatic logic [4:0] fp16_eexp(fp16_t a);
    return (a[14:10] == 5'd0) ? 5'd1 : a[14:10];
  endfunction

  // Round a fixed-point number with `frac` fraction bits (frac >= 24) to FP16,
  // round to nearest even, overflow to infinity, subnormals produced.
  function automatic fp16_t fx_to_fp16(wide_t v, int frac);
    logic        s;
    logic [WIDE_W-1:0] mag;
    int          p;
    int          e;
    int          sh;
    logic [WIDE_W-1:0] q;
    logic        g;
    logic        st;
    logic [WIDE_W-1:0] mask;
    s   = v[WIDE_W-1];
    mag = s ? -v : v;
    if (mag == '0) return 16'h0000;
    // leading-one position by binary search (WIDE_W < 256)
    p = 0;
    q = mag;
    for (int b = 7; b >= 0; b--)
      if ((q >> (1 << b)) != '0) begin
        q = q >> (1 << b);
        p = p + (1 << b);
      end
    e  = p - frac;
    sh = (e >= -14) ? p - 10 : frac - 24;
    q    = mag >> sh;
    g    = (sh > 0) ? mag[sh-1] : 1'b0;
    mask = (sh > 1) ? ((({{(WIDE_W-1){1'b0}}, 1'b1}) << (sh - 1)) - 1) : '0;
    st   = |(mag & mask);
    if (g && (st || q[0])) q = q + 1;
    if (e >= -14) begin
      if (q[11]) begin  // mantissa rounded up to 2.0
        q = q >> 1;
        e = e + 1;
      end
      if (e > 15) return {s, 15'h7C00};
      return {s, 5'(e + 15), q[9:0]};
    end
    // subnormal: q counts units of 2^-24; 1024 becomes the smallest normal
    return {s, 15'(q[10:0])};
  endfunction

endpackage
