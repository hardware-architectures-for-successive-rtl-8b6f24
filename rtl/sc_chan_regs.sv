// sc_chan_regs -- channel LLR registers of the SC decoder.
//
// Holds the n channel LLRs lambda_0..lambda_{n-1} of one codeword, plus the
// codeword's frozen-bit mask. A codeword is written all at once through a
// valid/ready handshake (in_valid && in_ready on a rising edge). The register
// bank is then `full` until the controller raises `release`, which it does in
// the cycle of the last operation that reads the channel LLRs (the g operation
// of stage m-1, halfway through a codeword). From then on the next codeword may
// be loaded while the current one is still being decoded, which lets the
// decoder start it right after the last bit of the current one.
//
// The frozen mask is needed until the last bit, so it is copied into a second
// register (`frozen_act`) when the controller raises `take` as it starts a
// codeword; `frozen_act` is what the decision unit reads.
//
// The published decoder only says that n registers store the channel values;
// the handshake, the early release and the mask copy are this design's own.
module sc_chan_regs #(
  parameter int N = 8,
  parameter int W = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  // load side
  input  logic                in_valid,
  output logic                in_ready,
  input  logic signed [W-1:0] in_llr    [N],
  input  logic        [N-1:0] in_frozen,
  // decoder side
  output logic                full,        // a codeword waits or is in use
  input  logic                take,        // controller starts this codeword
  input  logic                release_i,   // channel LLRs no longer needed
  output logic signed [W-1:0] llr         [N],
  output logic        [N-1:0] frozen_act   // mask of the codeword being decoded
);
  logic [N-1:0] frozen_q;

  assign in_ready = !full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full       <= 1'b0;
      frozen_q   <= '0;
      frozen_act <= '0;
      for (int k = 0; k < N; k++) llr[k] <= '0;
    end else begin
      if (in_valid && in_ready) begin
        full     <= 1'b1;
        frozen_q <= in_frozen;
        for (int k = 0; k < N; k++) llr[k] <= in_llr[k];
      end else if (release_i) begin
        full <= 1'b0;
      end
      if (take) frozen_act <= frozen_q;
    end
  end

  // release is only legal for a bank that holds a codeword
  a_release_full: assert property (@(posedge clk) disable iff (!rst_n) release_i |-> full);
  a_take_full:    assert property (@(posedge clk) disable iff (!rst_n) take |-> full);

endmodule
