// tb_sc_awgn -- BPSK/AWGN decoding of rate-1/2 polar codes of length 256 and
// 1024 on the line SC decoder, checked bit-exactly against the software
// reference; prints error counts of the min-sum hardware next to those of a
// floating-point SC decoder with the exact f rule.
module tb_sc_awgn;
  logic clk = 0, rst_n = 0;
  int c1, f1, c2, f2;
  logic d1, d2;

  always #5 clk = ~clk;

  sc_awgn_runner #(.N(256),  .NCW(20)) u256  (.clk(clk), .rst_n(rst_n), .checks(c1), .failures(f1), .done(d1));
  sc_awgn_runner #(.N(1024), .NCW(8))  u1024 (.clk(clk), .rst_n(rst_n), .checks(c2), .failures(f2), .done(d2));

  initial begin
    repeat (2000000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c1 + c2, f1 + f2 + 1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (d1 && d2);
    $display("TB_RESULT checks=%0d failures=%0d", c1 + c2, f1 + f2);
    $finish;
  end
endmodule
