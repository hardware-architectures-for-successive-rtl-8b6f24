// tb_sc_line_decoder -- end-to-end test of the line SC decoder at its default
// size (N = 8, W = 8).
//
// Codewords of three kinds are sent: noiseless BPSK images of random
// information words (the decoder must return exactly the information bits),
// moderate random LLRs and full-scale random LLRs (the decoder must match the
// software SC reference bit for bit and LLR for LLR). The first codewords are
// sent with idle gaps, the rest as a continuous stream, so the test covers
// start from idle, loading the next codeword while one is decoded, load
// back-pressure and back-to-back decoding. It checks the first-bit latency
// (m+2 cycles after the load), the 2N-2 cycle codeword period of a stream,
// the bit order and `last`, and counts each mechanism; one never seen fails.
module tb_sc_line_decoder;
  import sc_ref_pkg::*;
  localparam int N   = 8;
  localparam int W   = 8;
  localparam int M   = $clog2(N);
  localparam int NCW = 400;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, u_valid, u_bit, u_last, busy;
  logic signed [W-1:0] in_llr [N];
  logic [N-1:0] in_frozen;
  logic [M-1:0] u_idx;
  logic signed [W-1:0] u_llr;

  sc_line_decoder dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .in_llr(in_llr),
    .in_frozen(in_frozen), .u_valid(u_valid), .u_bit(u_bit), .u_idx(u_idx), .u_last(u_last),
    .u_llr(u_llr), .busy(busy));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // expected results, one entry per codeword in load order
  typedef struct {
    bit u[];
    int llr[];
    bit info[];     // transmitted bits (noiseless codewords only)
    bit noiseless;
    bit frz[];
  } exp_t;
  exp_t exp_q[$];

  // mechanism counters
  int n_idle_start = 0, n_early_load = 0, n_backpressure = 0, n_b2b = 0;
  int n_frozen_forced = 0, n_saturated = 0, n_noiseless = 0;

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- driver ----------------
  int load_cyc[$];
  initial begin
    int lam[];
    bit frz[];
    bit info[];
    bit c[];
    exp_t e;
    in_valid = 0;
    in_frozen = '0;
    for (int k = 0; k < N; k++) in_llr[k] = '0;
    lam = new[N];
    frz = new[N];
    info = new[N];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cw = 0; cw < NCW; cw++) begin
      int kind;
      kind = cw % 3;
      for (int k = 0; k < N; k++) begin
        frz[k]  = ($urandom_range(0, 2) == 0);
        info[k] = frz[k] ? 1'b0 : 1'($urandom_range(0, 1));
      end
      encode(info, c);
      for (int k = 0; k < N; k++)
        case (kind)
          0:       lam[k] = c[k] ? -int'($urandom_range(8, 40)) : int'($urandom_range(8, 40));
          1:       lam[k] = int'($urandom_range(0, 60)) - 30;
          default: lam[k] = int'($urandom_range(0, 255)) - 128;
        endcase
      e.noiseless = (kind == 0);
      e.info = info;
      e.frz  = frz;
      sc_decode(lam, frz, W, e.u, e.llr);
      // gaps: long ones at first (idle starts), then a stream
      if (cw < 6) repeat (3 * N) @(posedge clk);
      else if (cw % 50 == 0) repeat ($urandom_range(1, 2 * N)) @(posedge clk);
      @(negedge clk);
      for (int k = 0; k < N; k++) in_llr[k] = W'(lam[k]);
      for (int k = 0; k < N; k++) in_frozen[k] = frz[k];
      in_valid = 1;
      exp_q.push_back(e);
      @(posedge clk);
      while (!in_ready) begin
        n_backpressure++;
        @(posedge clk);
      end
      load_cyc.push_back(cyc);
      if (busy) n_early_load++;
      @(negedge clk);
      in_valid = 0;
    end
  end

  // ---------------- monitor ----------------
  int cw_out = 0;
  int bit_out = 0;
  int prev_u0_cyc = -1;
  bit prev_was_b2b_candidate = 0;
  int last_cyc = -1;
  always @(posedge clk) begin
    if (rst_n && u_valid) begin
      exp_t e;
      if (exp_q.size() == 0) begin
        check(0, "output without a codeword");
      end else begin
        e = exp_q[0];
        check(int'(u_idx) == bit_out, "bit index order");
        check(u_last == (bit_out == N - 1), "u_last");
        check(u_bit == e.u[bit_out], $sformatf("cw %0d bit %0d", cw_out, bit_out));
        check(int'(u_llr) == e.llr[bit_out], $sformatf("cw %0d llr %0d", cw_out, bit_out));
        if (e.noiseless) check(u_bit == e.info[bit_out], "noiseless codeword decodes to its info bits");
        if (e.frz[bit_out] && e.llr[bit_out] <= 0) n_frozen_forced++;
        if (u_llr == W'((1 << (W-1)) - 1) || u_llr == W'(-((1 << (W-1)) - 1))) n_saturated++;
        if (bit_out == 0) begin
          int lc;
          lc = load_cyc.pop_front();
          // loaded no earlier than the previous codeword's last operation:
          // the decoder starts from idle and u_0 follows m+2 cycles after the load
          if (lc >= last_cyc - 1) begin
            check(cyc - lc == M + 2, "first-bit latency from idle is m+2 cycles");
            n_idle_start++;
          end
          // stream: u_0 arrives exactly 2N-2 cycles after the previous u_0
          if (prev_u0_cyc >= 0 && cyc - prev_u0_cyc == 2 * N - 2) n_b2b++;
          check(cyc - lc >= M + 2, "first bit not earlier than m+2 cycles after load");
          if (prev_u0_cyc >= 0) check(cyc - prev_u0_cyc >= 2 * N - 2, "codeword period at least 2N-2");
          // loaded while the previous one was still decoding: no gap at all
          if (prev_u0_cyc >= 0 && lc < last_cyc - 1)
            check(cyc - prev_u0_cyc == 2 * N - 2, "back-to-back period is exactly 2N-2");
          prev_u0_cyc = cyc;
        end
        bit_out++;
        if (bit_out == N) begin
          void'(exp_q.pop_front());
          if (e.noiseless) n_noiseless++;
          bit_out = 0;
          cw_out++;
          last_cyc = cyc;
        end
      end
    end
  end

  initial begin
    wait (cw_out == NCW);
    repeat (5) @(posedge clk);
    check(!busy && !u_valid, "idle after the last codeword");
    $display("mechanisms: idle_start=%0d early_load=%0d backpressure=%0d back_to_back=%0d frozen_forced=%0d saturated=%0d noiseless=%0d",
             n_idle_start, n_early_load, n_backpressure, n_b2b, n_frozen_forced, n_saturated, n_noiseless);
    check(n_idle_start > 0, "start from idle seen");
    check(n_early_load > 0, "load during decoding seen");
    check(n_backpressure > 0, "load back-pressure seen");
    check(n_b2b > 0, "back-to-back decoding at 2N-2 cycles seen");
    check(n_frozen_forced > 0, "frozen bit forced to 0 seen");
    check(n_saturated > 0, "saturated LLR seen");
    check(n_noiseless > 0, "noiseless codewords seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
