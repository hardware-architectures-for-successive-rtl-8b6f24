// tb_sc_chan_regs -- channel register bank: load handshake, back-pressure
// while full, early release, and the frozen mask copied on take (so a second
// codeword loaded after release does not disturb the active mask).
module tb_sc_chan_regs;
  localparam int N = 8, W = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, full, take, release_i;
  logic signed [W-1:0] in_llr [N];
  logic signed [W-1:0] llr [N];
  logic [N-1:0] in_frozen, frozen_act;
  int checks = 0, failures = 0;

  sc_chan_regs #(.N(N), .W(W)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .in_llr(in_llr),
    .in_frozen(in_frozen), .full(full), .take(take), .release_i(release_i), .llr(llr),
    .frozen_act(frozen_act));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int a_vals [N];
  int b_vals [N];

  initial begin
    in_valid = 0; take = 0; release_i = 0; in_frozen = '0;
    for (int k = 0; k < N; k++) in_llr[k] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 20; rep++) begin
      @(negedge clk);
      check(in_ready && !full, "empty bank must be ready");
      for (int k = 0; k < N; k++) begin a_vals[k] = $urandom_range(0, 255) - 128; in_llr[k] = W'(a_vals[k]); end
      in_frozen = N'($urandom);
      in_valid  = 1;
      @(negedge clk);
      check(full && !in_ready, "bank full after load");
      for (int k = 0; k < N; k++) check(int'(llr[k]) == a_vals[k], "LLR stored");
      // a second codeword is held off while full
      for (int k = 0; k < N; k++) in_llr[k] = W'(k);
      @(negedge clk);
      for (int k = 0; k < N; k++) check(int'(llr[k]) == a_vals[k], "LLR kept while full");
      // take copies the mask
      in_valid = 0;
      begin
        logic [N-1:0] m0;
        m0 = in_frozen;
        take = 1;
        in_frozen = ~m0;
        @(negedge clk);
        take = 0;
        check(frozen_act == m0, "frozen mask copied on take");
        // release frees the bank, next load does not change the active mask
        release_i = 1;
        @(negedge clk);
        release_i = 0;
        check(in_ready && !full, "ready after release");
        for (int k = 0; k < N; k++) begin b_vals[k] = $urandom_range(0, 255) - 128; in_llr[k] = W'(b_vals[k]); end
        in_valid = 1;
        @(negedge clk);
        in_valid = 0;
        check(frozen_act == m0, "active mask kept over next load");
        for (int k = 0; k < N; k++) check(int'(llr[k]) == b_vals[k], "next LLRs stored");
        release_i = 1;
        @(negedge clk);
        release_i = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
