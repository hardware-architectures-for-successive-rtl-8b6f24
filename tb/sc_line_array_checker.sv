// sc_line_array_checker -- drives one sc_line_array of length N as the
// controller would, with the schedule, partial-sum controls and decisions
// all worked out in the testbench, and compares the LLR of every decided bit
// (the stage-0 PE result, then register R_{0,0}) with the software SC
// reference, over several random codewords with random frozen masks.
module sc_line_array_checker #(
  parameter int N  = 8,
  parameter int W  = 8,
  parameter int CW = 20
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

  logic en, chan_sel, u_hat;
  logic [SW-1:0] stage;
  sc_pkg::sc_op_e op;
  logic signed [W-1:0] lambda [N];
  logic [M-1:0] psum_upd, psum_clr;
  logic [N-2:0] psum_sel;
  logic signed [W-1:0] stage0_llr, r00;

  sc_line_array #(.N(N), .W(W)) dut (
    .clk(clk), .rst_n(rst_n), .en(en), .stage(stage), .op(op), .chan_sel(chan_sel),
    .lambda(lambda), .psum_upd(psum_upd), .psum_clr(psum_clr), .psum_sel(psum_sel),
    .u_hat(u_hat), .stage0_llr(stage0_llr), .r00(r00));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("N=%0d FAIL: %s", N, what);
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
    int seq[$];
    int tmp[$];
    int lam[];
    bit frz[];
    bit u_ref[];
    int llr_ref[];
    int bitcnt;
    checks = 0; failures = 0; done = 0;
    en = 0; chan_sel = 0; u_hat = 0; stage = '0; op = sc_pkg::OP_F;
    psum_upd = '0; psum_clr = '0; psum_sel = '0;
    for (int k = 0; k < N; k++) lambda[k] = '0;
    for (int l = 0; l < M; l++) begin
      tmp = seq;
      seq = {2*l};
      foreach (tmp[k]) seq.push_back(tmp[k]);
      seq.push_back(2*l + 1);
      foreach (tmp[k]) seq.push_back(tmp[k]);
    end
    lam = new[N];
    frz = new[N];
    wait (rst_n);
    for (int cw = 0; cw < CW; cw++) begin
      for (int k = 0; k < N; k++) begin
        // mostly moderate LLRs, sometimes full-scale to exercise saturation
        lam[k] = (cw % 4 == 3) ? int'($urandom_range(0, 255)) - 128 : int'($urandom_range(0, 60)) - 30;
        frz[k] = ($urandom_range(0, 2) == 0);
      end
      sc_decode(lam, frz, W, u_ref, llr_ref);
      @(negedge clk);
      for (int k = 0; k < N; k++) lambda[k] = W'(lam[k]);
      bitcnt = 0;
      foreach (seq[p]) begin
        en       = 1;
        stage    = SW'(seq[p] / 2);
        op       = (seq[p] % 2 != 0) ? sc_pkg::OP_G : sc_pkg::OP_F;
        chan_sel = (seq[p] / 2 == M - 1);
        psum_upd = '0; psum_clr = '0; psum_sel = '0; u_hat = 0;
        if (seq[p] / 2 == 0) begin
          for (int l = 0; l < M; l++) begin
            int t;
            t = bitcnt % (1 << l);
            psum_upd[l] = ((bitcnt >> l) & 1) == 0;
            psum_clr[l] = (t == 0);
            for (int j = 0; j < (1 << l); j++) psum_sel[(1 << l) - 1 + j] = sel_exp(l, j, t);
          end
          #1;
          check(int'(stage0_llr) == llr_ref[bitcnt], $sformatf("LLR of bit %0d", bitcnt));
          // decision made by the testbench on the reference LLR
          u_hat = u_ref[bitcnt];
          @(negedge clk);
          check(int'(r00) == llr_ref[bitcnt], "R00 holds the decided LLR");
          bitcnt++;
        end else begin
          @(negedge clk);
        end
      end
      en = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    done = 1;
  end
endmodule
