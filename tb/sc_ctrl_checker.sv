// sc_ctrl_checker -- drives one sc_ctrl instance of length N and checks it:
// the stage/function sequence against the recursive SC schedule (and, for
// N = 8, against the published schedule table), the 2N-2 cycle length of a
// codeword, back-to-back operation without idle cycles, take/release timing,
// bit indices, and every partial-sum control bit against the polar encoding
// of a unit vector (node (l,j) sums bit t of its group iff encoding e_t with
// length 2^l sets position j).
module sc_ctrl_checker #(
  parameter int N = 8
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic done
);
  import sc_ref_pkg::*;
  localparam int M  = $clog2(N);
  localparam int SW = (M > 1) ? $clog2(M) : 1;

  logic avail, take, release_o, busy, chan_sel, dec_en, last;
  logic [SW-1:0] stage;
  sc_pkg::sc_op_e op;
  logic [M-1:0] bit_idx, psum_upd, psum_clr;
  logic [N-2:0] psum_sel;

  sc_ctrl #(.N(N)) dut (
    .clk(clk), .rst_n(rst_n), .avail(avail), .take(take), .release_o(release_o), .busy(busy),
    .stage(stage), .op(op), .chan_sel(chan_sel), .dec_en(dec_en), .bit_idx(bit_idx),
    .last(last), .psum_upd(psum_upd), .psum_clr(psum_clr), .psum_sel(psum_sel));

  // expected op sequence: seq(l) = F_l, seq(l-1), G_l, seq(l-1); entry = 2*stage + (g ? 1 : 0)
  int exp_seq[$];
  int pending;
  int pos;        // position within the current codeword
  int bitcnt;
  int cw_done;
  int cyc_in_cw;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("N=%0d FAIL: %s (pos %0d)", N, what, pos);
    end
  endtask

  function automatic bit sel_exp(int l, int j, int t);
    bit v[];
    bit c[];
    v = new[1 << l];
    v[t] = 1'b1;
    encode(v, c);
    return c[j];
  endfunction

  initial begin
    int tmp[$];
    checks = 0; failures = 0; done = 0;
    for (int l = 0; l < M; l++) begin
      tmp = exp_seq;
      exp_seq = {2*l};
      foreach (tmp[k]) exp_seq.push_back(tmp[k]);
      exp_seq.push_back(2*l + 1);
      foreach (tmp[k]) exp_seq.push_back(tmp[k]);
    end
    if (N == 8) begin
      // published schedule, n = 8: S2f S1f S0f S0g S1g S0f S0g S2g S1f S0f S0g S1g S0f S0g
      static int table1[14] = '{4, 2, 0, 1, 3, 0, 1, 5, 2, 0, 1, 3, 0, 1};
      checks++;
      if (exp_seq.size() != 14) failures++;
      foreach (table1[k]) begin
        checks++;
        if (exp_seq[k] != table1[k]) failures++;
      end
    end
  end

  // stimulus: one codeword from idle, a pause, then three back-to-back codewords
  initial begin
    pending = 0;
    wait (rst_n);
    repeat (3) @(posedge clk);
    pending = 1;
    wait (cw_done == 1);
    repeat (5) @(posedge clk);
    pending = 3;
    wait (cw_done == 4);
    repeat (3) @(posedge clk);
    done = 1;
  end
  always_comb avail = pending > 0;

  logic started;
  always @(posedge clk) begin
    if (rst_n) begin
      if (take) pending <= pending - 1;
      if (busy) begin
        check(pos < exp_seq.size(), "too many operations");
        if (pos < exp_seq.size()) begin
          check(int'(stage) == exp_seq[pos] / 2, "stage");
          check((op == sc_pkg::OP_G) == (exp_seq[pos] % 2 == 1), "function b_l");
        end
        check(chan_sel == (int'(stage) == M - 1), "chan_sel");
        check(release_o == (int'(stage) == M - 1 && op == sc_pkg::OP_G), "release");
        check(dec_en == (stage == 0), "dec_en");
        if (dec_en) begin
          check(int'(bit_idx) == bitcnt, "bit index");
          check(last == (bitcnt == N - 1), "last");
          for (int l = 0; l < M; l++) begin
            int t;
            bit first;
            t = bitcnt % (1 << l);
            first = ((bitcnt >> l) & 1) == 0;
            check(psum_upd[l] == first, "psum_upd");
            if (first) begin
              check(psum_clr[l] == (t == 0), "psum_clr");
              for (int j = 0; j < (1 << l); j++)
                check(psum_sel[(1 << l) - 1 + j] == sel_exp(l, j, t), "psum_sel b_{l,j}");
            end
          end
          bitcnt <= bitcnt + 1;
        end
        pos <= pos + 1;
        cyc_in_cw <= cyc_in_cw + 1;
        if (last) begin
          check(pos == 2 * N - 3, "codeword takes 2N-2 operations");
          check(cyc_in_cw == 2 * N - 3, "no idle cycle inside a codeword");
          check(take == (pending > 0), "back-to-back take at last bit");
          cw_done <= cw_done + 1;
          pos <= 0;
          bitcnt <= 0;
          cyc_in_cw <= 0;
        end
      end else begin
        check(!dec_en && !release_o && !chan_sel, "quiet when idle");
        check(take == (pending > 0), "take from idle");
      end
    end else begin
      pos <= 0; bitcnt <= 0; cw_done <= 0; cyc_in_cw <= 0;
    end
  end
endmodule
