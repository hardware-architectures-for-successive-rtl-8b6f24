// tb_sc_psum -- random stimulus on the partial-sum block against a model:
// on upd the sum restarts when clr is high and takes in u when sel is high.
module tb_sc_psum;
  logic clk = 0, rst_n = 0;
  logic upd, clr, sel, u_hat, us;
  bit   model;
  int checks = 0, failures = 0;

  sc_psum dut (.clk(clk), .rst_n(rst_n), .upd(upd), .clr(clr), .sel(sel), .u_hat(u_hat), .us(us));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    {upd, clr, sel, u_hat} = '0;
    model = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      upd   = $urandom_range(0, 3) != 0;
      clr   = $urandom_range(0, 4) == 0;
      sel   = 1'($urandom_range(0, 1));
      u_hat = 1'($urandom_range(0, 1));
      @(posedge clk);
      if (upd) model = (clr ? 1'b0 : model) ^ (sel & u_hat);
      #1;
      checks++;
      if (us !== model) begin
        failures++;
        if (failures < 10) $display("t=%0d us=%0d model=%0d", t, us, model);
      end
    end
    // asynchronous reset clears the sum
    @(negedge clk);
    {upd, clr, sel, u_hat} = 4'b1011;
    @(posedge clk); #1;
    rst_n = 0; #1;
    checks++;
    if (us !== 1'b0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
