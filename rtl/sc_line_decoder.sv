// sc_line_decoder -- line successive cancellation decoder for polar codes of
// length N = 2^m (top level).
//
// A codeword's N channel LLRs and its frozen-bit mask are loaded in one
// transfer (in_valid/in_ready). The decoder then estimates u_0, u_1, ...,
// u_{N-1} in order, one stage of the SC tree per clock cycle, using N/2 PEs in
// a line, N-1 tree registers and a partial-sum flip-flop per register. Every
// stage-0 cycle emits one decided bit (u_valid, u_bit, u_idx, u_last) together
// with its LLR (u_llr, the content of R_{0,0}); these outputs are registered,
// so bit u_i appears on the cycle after the one in which it was decided.
//
// Timing: 2N-2 cycles per codeword. From idle, the first operation runs one
// cycle after the load, and u_0 is decided m cycles later. The channel
// registers are released halfway through a codeword (after the g operation of
// stage m-1), so a next codeword can be loaded early and is started right
// after the current one's last bit: back-to-back codewords come out every
// 2N-2 cycles, a throughput of N/(2N-2) bits per cycle.
//
// Bit order: u_i is the decoder's i-th estimated bit; in the encoder it enters
// at row bitrev(i) of the butterfly, and codeword pairs (c_{2k}, c_{2k+1}) are
// combined by the first stage (stage m-1). Frozen bits are decided as 0.
//
// Structure (line architecture, min-sum PEs) follows the published design;
// widths, handshakes, reset values and output registering are this design's.
module sc_line_decoder #(
  parameter int N = 8,
  parameter int W = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic signed [W-1:0] in_llr    [N],
  input  logic        [N-1:0] in_frozen,      // bit i = 1: u_i is frozen
  output logic                u_valid,
  output logic                u_bit,
  output logic [$clog2(N)-1:0] u_idx,
  output logic                u_last,
  output logic signed [W-1:0] u_llr,
  output logic                busy
);
  import sc_pkg::*;

  localparam int M  = $clog2(N);
  localparam int SW = (M > 1) ? $clog2(M) : 1;

  logic                full, take, release_s;
  logic signed [W-1:0] lambda [N];
  logic [N-1:0]        frozen_act;
  logic [SW-1:0]       stage;
  sc_op_e              op;
  logic                chan_sel, dec_en, last;
  logic [M-1:0]        bit_idx, psum_upd, psum_clr;
  logic [N-2:0]        psum_sel;
  logic signed [W-1:0] stage0_llr;
  logic                u_hat;

  sc_chan_regs #(.N(N), .W(W)) u_chan (
    .clk(clk), .rst_n(rst_n),
    .in_valid(in_valid), .in_ready(in_ready), .in_llr(in_llr), .in_frozen(in_frozen),
    .full(full), .take(take), .release_i(release_s), .llr(lambda), .frozen_act(frozen_act)
  );

  sc_ctrl #(.N(N)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .avail(full), .take(take), .release_o(release_s),
    .busy(busy), .stage(stage), .op(op), .chan_sel(chan_sel), .dec_en(dec_en),
    .bit_idx(bit_idx), .last(last), .psum_upd(psum_upd), .psum_clr(psum_clr),
    .psum_sel(psum_sel)
  );

  sc_line_array #(.N(N), .W(W)) u_array (
    .clk(clk), .rst_n(rst_n), .en(busy), .stage(stage), .op(op), .chan_sel(chan_sel),
    .lambda(lambda), .psum_upd(psum_upd), .psum_clr(psum_clr), .psum_sel(psum_sel),
    .u_hat(u_hat), .stage0_llr(stage0_llr), .r00(u_llr)
  );

  sc_dec #(.W(W)) u_dec (
    .llr(stage0_llr), .frozen(frozen_act[bit_idx]), .u_hat(u_hat)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u_valid <= 1'b0;
      u_bit   <= 1'b0;
      u_idx   <= '0;
      u_last  <= 1'b0;
    end else begin
      u_valid <= dec_en;
      u_last  <= last;
      if (dec_en) begin
        u_bit <= u_hat;
        u_idx <= bit_idx;
      end
    end
  end

endmodule
