// sc_awgn_runner -- decodes rate-1/2 polar codes of length N sent with BPSK
// over an AWGN channel, on one sc_line_decoder instance.
//
// Code construction: the Bhattacharyya parameter of every synthetic channel is
// obtained from z = exp(-R*Eb/N0) at a design SNR of DESIGN_DB, with the
// recursion "first half of a block: 2z - z^2, second half: z^2" following the
// bits of the index from the most significant one; the N/2 indices with the
// smallest z carry information, the others are frozen to 0.
// Channel: y = (1 - 2c) + n, n ~ N(0, sigma^2) (Box-Muller), LLR = 2y/sigma^2,
// quantized as round(LLR * SCALE) and clipped to the W-bit range.
// Checks: the decoder output equals the bit-exact software reference for
// every bit and LLR, and at the highest SNR the bit error rate is below 1e-2.
// Also reported, not checked: frame and bit errors of the hardware (min-sum)
// and of a floating-point SC decoder with the exact f rule.
module sc_awgn_runner #(
  parameter int  N        = 256,
  parameter int  W        = 8,
  parameter int  NCW      = 10,     // codewords per SNR point
  parameter real SCALE    = 4.0,
  parameter real DESIGN_DB = 2.0
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic done
);
  import sc_ref_pkg::*;
  localparam int M = $clog2(N);
  localparam int K = N / 2;

  logic in_valid, in_ready, u_valid, u_bit, u_last, busy;
  logic signed [W-1:0] in_llr [N];
  logic [N-1:0] in_frozen;
  logic [M-1:0] u_idx;
  logic signed [W-1:0] u_llr;

  sc_line_decoder #(.N(N), .W(W)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .in_llr(in_llr),
    .in_frozen(in_frozen), .u_valid(u_valid), .u_bit(u_bit), .u_idx(u_idx), .u_last(u_last),
    .u_llr(u_llr), .busy(busy));

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967296.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  function automatic real f_exact(real a, real b);
    real t;
    t = $tanh(a / 2.0) * $tanh(b / 2.0);
    if (t > 0.999999999999) t = 0.999999999999;
    if (t < -0.999999999999) t = -0.999999999999;
    return 2.0 * $atanh(t);
  endfunction

  // floating-point SC with the exact rules (same recursion as sc_ref_pkg)
  function automatic void sc_float(input real lam[], input bit frz[], output bit u[]);
    int n, L, half, base, li;
    real cur[];
    real nxt[];
    bit part[];
    bit p[];
    n = lam.size();
    u = new[n];
    for (int i = 0; i < n; i++) begin
      cur = lam; L = n; base = 0; li = i;
      while (L > 1) begin
        half = L / 2;
        nxt = new[half];
        if (li < half) begin
          for (int k = 0; k < half; k++) nxt[k] = f_exact(cur[2*k], cur[2*k+1]);
        end else begin
          part = new[half];
          for (int k = 0; k < half; k++) part[k] = u[base + k];
          encode(part, p);
          for (int k = 0; k < half; k++) nxt[k] = (p[k] ? -cur[2*k] : cur[2*k]) + cur[2*k+1];
          base += half; li -= half;
        end
        cur = nxt; L = half;
      end
      u[i] = frz[i] ? 1'b0 : (cur[0] <= 0.0);
    end
  endfunction

  initial begin
    real z[];
    bit  frz[];
    bit  info[];
    bit  c[];
    bit  u_ref[];
    bit  u_flt[];
    int  llr_ref[];
    int  lam[];
    real lamf[];
    static real snr_db[3] = '{1.0, 2.5, 4.0};
    real rate, ebn0, sigma, y, lr;
    int  hw_be, hw_fe, fl_be, fl_fe, fe_cw;
    bit  rx[];
    checks = 0; failures = 0; done = 0;
    in_valid = 0;
    in_frozen = '0;
    for (int k = 0; k < N; k++) in_llr[k] = '0;
    rate = real'(K) / real'(N);
    // ---- code construction ----
    z = new[N];
    frz = new[N];
    for (int i = 0; i < N; i++) begin
      z[i] = $exp(-rate * (10.0 ** (DESIGN_DB / 10.0)));
      for (int b = M - 1; b >= 0; b--)
        z[i] = (((i >> b) & 1) != 0) ? z[i] * z[i] : 2.0 * z[i] - z[i] * z[i];
      frz[i] = 1'b1;
    end
    for (int sel = 0; sel < K; sel++) begin
      int best;
      best = -1;
      for (int i = 0; i < N; i++)
        if (frz[i] && (best < 0 || z[i] < z[best])) best = i;
      frz[best] = 1'b0;
    end
    for (int i = 0; i < N; i++) in_frozen[i] = frz[i];
    wait (rst_n);
    lam = new[N]; lamf = new[N]; info = new[N]; rx = new[N];
    foreach (snr_db[s]) begin
      hw_be = 0; hw_fe = 0; fl_be = 0; fl_fe = 0;
      ebn0  = 10.0 ** (snr_db[s] / 10.0);
      sigma = $sqrt(1.0 / (2.0 * rate * ebn0));
      for (int cw = 0; cw < NCW; cw++) begin
        for (int i = 0; i < N; i++) info[i] = frz[i] ? 1'b0 : 1'($urandom_range(0, 1));
        encode(info, c);
        for (int k = 0; k < N; k++) begin
          y  = (c[k] ? -1.0 : 1.0) + sigma * gauss();
          lr = 2.0 * y / (sigma * sigma);
          lamf[k] = lr;
          lr = lr * SCALE;
          lam[k] = (lr > 127.0) ? 127 : (lr < -128.0) ? -128 : int'(lr);
          if (W < 8) lam[k] = sat(lam[k], W);
        end
        sc_decode(lam, frz, W, u_ref, llr_ref);
        sc_float(lamf, frz, u_flt);
        @(negedge clk);
        for (int k = 0; k < N; k++) in_llr[k] = W'(lam[k]);
        in_valid = 1;
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        @(negedge clk);
        in_valid = 0;
        // collect the N decided bits
        for (int i = 0; i < N; i++) begin
          @(posedge clk);
          while (!u_valid) @(posedge clk);
          checks++;
          if (u_bit != u_ref[i] || int'(u_llr) != llr_ref[i] || int'(u_idx) != i) begin
            failures++;
            if (failures < 10) $display("N=%0d mismatch at bit %0d", N, i);
          end
          rx[i] = u_bit;
        end
        fe_cw = 0;
        for (int i = 0; i < N; i++) if (rx[i] != info[i]) begin hw_be++; fe_cw = 1; end
        hw_fe += fe_cw;
        fe_cw = 0;
        for (int i = 0; i < N; i++) if (u_flt[i] != info[i]) begin fl_be++; fe_cw = 1; end
        fl_fe += fe_cw;
      end
      $display("N=%0d K=%0d Eb/N0=%0.1f dB: min-sum hardware %0d/%0d frames, %0d/%0d bits in error; exact floating SC %0d/%0d frames, %0d bits",
               N, K, snr_db[s], hw_fe, NCW, hw_be, NCW * K, fl_fe, NCW, fl_be);
      if (s == 2) begin
        checks++;
        if (real'(hw_be) / real'(NCW * K) > 0.01) begin
          failures++;
          $display("N=%0d: bit error rate too high at %0.1f dB", N, snr_db[s]);
        end
      end
    end
    done = 1;
  end
endmodule
