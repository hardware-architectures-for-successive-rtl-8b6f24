// tb_sc_ctrl -- controller test at N = 8 (including the published schedule
// table) and N = 64.
module tb_sc_ctrl;
  logic clk = 0, rst_n = 0;
  int c8, f8, c64, f64;
  logic d8, d64;
  int checks, failures;

  always #5 clk = ~clk;

  sc_ctrl_checker #(.N(8))  u8  (.clk(clk), .rst_n(rst_n), .checks(c8),  .failures(f8),  .done(d8));
  sc_ctrl_checker #(.N(64)) u64 (.clk(clk), .rst_n(rst_n), .checks(c64), .failures(f64), .done(d64));

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c8 + c64, f8 + f64 + 1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (d8 && d64);
    checks = c8 + c64;
    failures = f8 + f64;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
