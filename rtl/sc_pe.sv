// sc_pe -- processing element (PE) of the SC decoder, log-likelihood domain.
//
// A PE is the configurable node processor of the decoder tree. The control bit
// b_l (port `op`) selects one of the two SC update rules on the LLR pair (a, b):
//   f(a,b) = sign(a) * sign(b) * min(|a|, |b|)   (min-sum approximation of the
//                                                  2*atanh(tanh*tanh) rule)
//   g(a,b) = b + a   if us = 0
//          = b - a   if us = 1                    (adder/subtractor)
// `a` is the upper (even-indexed) input of the node and `b` the lower one,
// which is the input that g never negates.
//
// Purely combinational; the result is taken into a tree register by the
// caller. Both rules and the min-sum approximation follow the published
// decoder. Fixed-point details are this design's own: LLRs are W-bit two's
// complement, and every result is saturated to the symmetric range
// [-(2^(W-1)-1), 2^(W-1)-1] so that magnitudes never overflow in later stages.
// In f the sign of a zero input counts as positive.
module sc_pe #(
  parameter int W = 8
) (
  input  sc_pkg::sc_op_e       op,   // b_l: OP_F or OP_G
  input  logic                 us,   // partial sum u_s (used by g only)
  input  logic signed [W-1:0]  a,
  input  logic signed [W-1:0]  b,
  output logic signed [W-1:0]  y
);
  localparam logic signed [W+1:0] MAXV = (W+2)'((1 << (W - 1)) - 1);

  logic        [W:0]   mag_a, mag_b, mag_min;
  logic signed [W+1:0] f_val, g_val, res;

  always_comb begin
    // f: magnitudes in W+1 bits so that |-2^(W-1)| is representable.
    mag_a   = a[W-1] ? (W+1)'(-(W+1)'(a)) : (W+1)'(a);
    mag_b   = b[W-1] ? (W+1)'(-(W+1)'(b)) : (W+1)'(b);
    mag_min = (mag_a < mag_b) ? mag_a : mag_b;
    f_val   = (a[W-1] ^ b[W-1]) ? -$signed({1'b0, mag_min}) : $signed({1'b0, mag_min});
    // g: b +/- a in W+2 bits, never overflows.
    g_val   = us ? ((W+2)'(b) - (W+2)'(a)) : ((W+2)'(b) + (W+2)'(a));
    res     = (op == sc_pkg::OP_G) ? g_val : f_val;
    if (res > MAXV)       y = MAXV[W-1:0];
    else if (res < -MAXV) y = W'(-MAXV);
    else                  y = res[W-1:0];
  end

endmodule
