// tb_sc_dec -- exhaustive check of the decision unit: u = 1 exactly when the
// bit is not frozen and its LLR is not positive.
module tb_sc_dec;
  localparam int W = 8;
  logic signed [W-1:0] llr;
  logic frozen, u_hat;
  int checks = 0, failures = 0;

  sc_dec #(.W(W)) dut (.llr(llr), .frozen(frozen), .u_hat(u_hat));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit exp;
    for (int v = -(1 << (W-1)); v < (1 << (W-1)); v++)
      for (int fr = 0; fr < 2; fr++) begin
        llr = W'(v);
        frozen = fr[0];
        #1;
        exp = (fr == 0) && !(v > 0);
        checks++;
        if (u_hat !== exp) begin
          failures++;
          $display("mismatch llr=%0d frozen=%0d u=%0d", v, fr, u_hat);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
