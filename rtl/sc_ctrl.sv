// sc_ctrl -- schedule generator (controller) of the line SC decoder.
//
// Successive cancellation with right-to-left scheduling activates exactly one
// stage per clock cycle. For a code of length n = 2^m it takes 2n-2 cycles per
// codeword: bit u_0 needs f at stages m-1, m-2, ..., 0; every later bit u_i
// (i > 0) needs g at stage k = (number of trailing zeros of i) followed by f
// at stages k-1, ..., 0. For n = 8 this is the sequence
//   S2f S1f S0f(u0) S0g(u1) S1g S0f(u2) S0g(u3) S2g S1f S0f(u4) S0g(u5) S1g S0f(u6) S0g(u7).
// The controller walks this sequence with a bit counter i, a stage register
// and the function bit b_l (`op`); a bit is decided in every stage-0 cycle.
//
// Outputs per cycle: the active stage and function, `chan_sel` (stage m-1 is
// active: PEs read the channel registers), `dec_en` (stage 0 is active: the
// decision unit's bit is valid) with the bit index, and the partial-sum
// controls. Node N_{l,j}'s sum covers the first half of every group of 2^(l+1)
// consecutive bits; within it, bit t (t = i mod 2^l) enters the sum when
// (t & rev_l(j)) == rev_l(j), rev_l being l-bit reversal (control bit
// b_{l,j}). `psum_clr` marks the first bit of such a group.
//
// Codeword flow: when idle and the channel registers are full, the controller
// raises `take` and starts in the next cycle. `release_o` is raised during the
// g cycle of stage m-1, the last one that reads the channel registers. If the
// next codeword is already loaded when the last bit is decided, it starts in
// the very next cycle, so back-to-back codewords take exactly 2n-2 cycles
// each. Some control bits are constant by construction (psum_clr of stage 0,
// and b_{l,0} of every stage, since node j = 0 sums every bit of its group);
// they are kept as ports so that all nodes are driven alike.
// The stage order follows the published schedule; the counter-based
// generation and the codeword flow are this design's own.
module sc_ctrl #(
  parameter int N  = 8,
  parameter int M  = $clog2(N),
  parameter int SW = (M > 1) ? $clog2(M) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           avail,       // channel registers hold a new codeword
  output logic           take,        // codeword accepted; starts next cycle
  output logic           release_o,   // last read of the channel registers
  output logic           busy,        // an operation is executed this cycle
  output logic [SW-1:0]  stage,       // active stage l
  output sc_pkg::sc_op_e op,          // b_l
  output logic           chan_sel,    // stage m-1 active
  output logic           dec_en,      // stage 0 active: bit `bit_idx` decided
  output logic [M-1:0]   bit_idx,     // i
  output logic           last,        // dec_en for bit n-1
  output logic [M-1:0]   psum_upd,    // per stage: bit enters that stage's sums
  output logic [M-1:0]   psum_clr,    // per stage: first bit of a new sum
  output logic [N-2:0]   psum_sel     // per node: b_{l,j}
);
  import sc_pkg::*;

  logic [M-1:0]  i_next;
  logic [SW-1:0] tz_next;

  assign chan_sel  = busy && (stage == SW'(M - 1));
  assign dec_en    = busy && (stage == '0);
  assign last      = dec_en && (bit_idx == M'(N - 1));
  assign release_o = chan_sel && (op == OP_G);
  assign take      = avail && (!busy || last);
  assign i_next    = bit_idx + 1'b1;

  // stage of the g operation that opens bit i+1
  always_comb begin
    tz_next = '0;
    for (int k = M - 1; k >= 0; k--)
      if (i_next[k]) tz_next = SW'(k);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      stage   <= '0;
      op      <= OP_F;
      bit_idx <= '0;
    end else if (take) begin
      busy    <= 1'b1;
      stage   <= SW'(M - 1);
      op      <= OP_F;
      bit_idx <= '0;
    end else if (busy) begin
      if (stage != '0) begin
        stage <= stage - 1'b1;
        op    <= OP_F;
      end else if (last) begin
        busy  <= 1'b0;
      end else begin
        bit_idx <= i_next;
        stage   <= tz_next;
        op      <= OP_G;
      end
    end
  end

  // partial-sum control bits
  for (genvar l = 0; l < M; l++) begin : g_stage
    localparam logic [M-1:0] LMASK = M'((1 << l) - 1);
    assign psum_upd[l] = dec_en && !bit_idx[l];
    assign psum_clr[l] = (bit_idx & LMASK) == '0;
    for (genvar j = 0; j < (1 << l); j++) begin : g_node
      localparam logic [M-1:0] REV = M'(bitrev(j, l));
      assign psum_sel[node_idx(l, j)] = (bit_idx & REV) == REV;
    end
  end

  a_stage_range: assert property (@(posedge clk) disable iff (!rst_n) busy |-> int'(stage) < M);

endmodule
