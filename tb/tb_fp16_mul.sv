// tb_fp16_mul: checks fp16_mul against the double-precision reference on
// random operands (wide exponent range, so overflow and flush-to-zero occur)
// and on special values (zero, infinity, NaN, subnormal).
module tb_fp16_mul;
  import fp16_ref_pkg::*;
  logic [15:0] a, b, y;
  int checks = 0, failures = 0;

  fp16_mul dut (.a(a), .b(b), .y(y));

  task automatic check(input logic [15:0] exp_y, input string what);
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL %s: %h * %h = %h, expected %h", what, a, b, y, exp_y);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 20000; n++) begin
      a = rand_h(n < 10000 ? 4 : 15);
      b = rand_h(n < 10000 ? 4 : 15);
      #1;
      check(ref_mul(a, b), "random");
    end
    a = 16'h3C00; b = 16'h3C00; #1; check(16'h3C00, "1*1");
    a = 16'h4000; b = 16'hC200; #1; check(16'hC600, "2*-3");
    a = 16'h0000; b = 16'h5555; #1; check(16'h0000, "0*x");
    a = 16'h8000; b = 16'h5555; #1; check(16'h8000, "-0*x");
    a = 16'h0123; b = 16'h3C00; #1; check(16'h0000, "subnormal flushed");
    a = 16'h7C00; b = 16'h4000; #1; check(16'h7C00, "inf*2");
    a = 16'h7C00; b = 16'h0000; #1; check(16'h7E00, "inf*0");
    a = 16'h7E01; b = 16'h3C00; #1; check(16'h7E00, "nan");
    a = 16'h7BFF; b = 16'h7BFF; #1; check(16'h7C00, "overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
