// sc_dec -- decision unit of the SC decoder.
//
// Turns the LLR of bit u_i produced by stage 0 into the estimated bit:
// u_hat = 0 when the likelihood ratio Pr(y|u_i=0)/Pr(y|u_i=1) exceeds 1, that
// is when the LLR is strictly positive, and 1 otherwise (an LLR of exactly 0
// therefore decides 1). A frozen position is known to be 0 in both the
// encoder and the decoder, so its decision is forced to 0.
// Combinational; the caller registers the bit.
module sc_dec #(
  parameter int W = 8
) (
  input  logic signed [W-1:0] llr,
  input  logic                frozen,
  output logic                u_hat
);
  assign u_hat = !frozen && (llr <= 0);
endmodule
