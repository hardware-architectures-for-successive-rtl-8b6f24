// sc_psum -- partial-sum (u_s) computation block attached to one tree register.
//
// Each tree register R_{l,j} has one of these next to it. It keeps the
// modulo-2 sum u_s of the already decided bits that the g rule of node N_{l,j}
// needs: whenever a bit u_i is decided and the control bit b_{l,j} is 1, the
// flip-flop is XORed with u_i (a 2-input multiplexer chooses between u_i and 0,
// as in the published PE drawing). The value is read by the PE that computes
// N_{l,j} when it applies g.
//
// Addition of this design: `clr` restarts the sum. The controller raises it
// with the first bit of every new group of bits the node's sum covers, so the
// flip-flop then loads (b_{l,j} & u_i) instead of XORing. Reset clears it.
// Timing: one clock; `us` changes on the edge after `upd`.
module sc_psum (
  input  logic clk,
  input  logic rst_n,
  input  logic upd,    // a bit u_hat was decided in this cycle
  input  logic clr,    // it is the first bit of a new group: restart the sum
  input  logic sel,    // control bit b_{l,j}: this bit belongs to the sum
  input  logic u_hat,  // the decided bit
  output logic us      // partial sum u_s
);
  logic term;
  assign term = sel & u_hat;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   us <= 1'b0;
    else if (upd) us <= (clr ? 1'b0 : us) ^ term;
  end

endmodule
