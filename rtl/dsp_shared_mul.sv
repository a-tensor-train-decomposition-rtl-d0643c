// dsp_shared_mul: two FP16-mantissa x INT4 products from one 27x18 DSP multiply.
//
// The 12-bit two's-complement {sign, hidden bit, mantissa} of an FP16 feature
// (a) sits sign-extended on the 18-bit multiplier port. The two INT4 weights
// are packed by the DSP pre-adder into the 27-bit port: weight b sign-extended
// over all 27 bits, plus weight c placed at bits 25..22 with its sign repeated
// at bit 26. The 45-bit product then holds a*b in its low field and a*c from
// bit 22 upward. This bit arrangement follows the paper's DSP-sharing scheme.
//
// Extracting the two 16-bit products is this design's own detail: a*b is
// P[15:0]; a*c is P[37:22] plus P[21], which cancels the borrow that a negative
// a*b leaves in the upper field.
//
// Interface: purely combinational; the enclosing vector PE registers the
// operands before (Pipeline 1) and the products after (Pipeline 2).
module dsp_shared_mul (
  input  logic signed [11:0] a,
  input  logic signed [3:0]  b,
  input  logic signed [3:0]  c,
  output logic signed [15:0] pb,
  output logic signed [15:0] pc
);
  logic signed [17:0] port_a;   // 18-bit multiplier input
  logic signed [26:0] port_b;   // pre-adder input B
  logic signed [26:0] port_c;   // pre-adder input C
  logic signed [26:0] pre_sum;  // pre-adder output
  logic signed [44:0] prod;     // 27x18 product

  always_comb begin
    port_a  = 18'(a);
    port_b  = 27'(b);
    port_c  = {c[3], c, 22'd0};
    pre_sum = port_b + port_c;
    prod    = pre_sum * port_a;
    pb      = prod[15:0];
    pc      = prod[37:22] + 16'(prod[21]);
  end
endmodule
