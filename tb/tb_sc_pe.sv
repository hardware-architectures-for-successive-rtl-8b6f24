// tb_sc_pe -- exhaustive check of the processing element: every pair of W-bit
// LLRs under f, g with u_s = 0 and g with u_s = 1, against the reference
// min-sum / add-subtract rules with symmetric saturation.
module tb_sc_pe;
  import sc_ref_pkg::*;
  localparam int W = 8;

  sc_pkg::sc_op_e      op;
  logic                us;
  logic signed [W-1:0] a, b, y;
  int checks = 0, failures = 0;

  sc_pe #(.W(W)) dut (.op(op), .us(us), .a(a), .b(b), .y(y));

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp;
    for (int ia = -(1 << (W-1)); ia < (1 << (W-1)); ia++)
      for (int ib = -(1 << (W-1)); ib < (1 << (W-1)); ib++)
        for (int mode = 0; mode < 3; mode++) begin
          a  = W'(ia);
          b  = W'(ib);
          op = (mode == 0) ? sc_pkg::OP_F : sc_pkg::OP_G;
          us = (mode == 2);
          #1;
          exp = (mode == 0) ? f_ref(ia, ib, W) : g_ref(ia, ib, us, W);
          checks++;
          if (int'(y) != exp) begin
            failures++;
            if (failures < 10)
              $display("mismatch mode=%0d a=%0d b=%0d y=%0d exp=%0d", mode, ia, ib, y, exp);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
