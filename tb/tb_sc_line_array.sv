// tb_sc_line_array -- line datapath test at N = 8 and N = 32 against the
// software SC reference.
module tb_sc_line_array;
  logic clk = 0, rst_n = 0;
  int c8, f8, c32, f32;
  logic d8, d32;

  always #5 clk = ~clk;

  sc_line_array_checker #(.N(8))  u8  (.clk(clk), .rst_n(rst_n), .checks(c8),  .failures(f8),  .done(d8));
  sc_line_array_checker #(.N(32)) u32 (.clk(clk), .rst_n(rst_n), .checks(c32), .failures(f32), .done(d32));

  initial begin
    repeat (50000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c8 + c32, f8 + f32 + 1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (d8 && d32);
    $display("TB_RESULT checks=%0d failures=%0d", c8 + c32, f8 + f32);
    $finish;
  end
endmodule
