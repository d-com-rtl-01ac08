// tb_fp16_add: checks fp16_add against the double-precision reference on
// random operands with close and distant exponents, cancellation, and on
// special values.
module tb_fp16_add;
  import fp16_ref_pkg::*;
  logic [15:0] a, b, y;
  int checks = 0, failures = 0;

  fp16_add dut (.a(a), .b(b), .y(y));

  task automatic check(input logic [15:0] exp_y, input string what);
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL %s: %h + %h = %h, expected %h", what, a, b, y, exp_y);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 30000; n++) begin
      a = rand_h(n < 10000 ? 2 : (n < 20000 ? 8 : 15));
      b = rand_h(n < 10000 ? 2 : (n < 20000 ? 8 : 15));
      if (n % 7 == 0) b = {~a[15], a[14:3], 3'($urandom)};  // near cancellation
      #1;
      check(ref_add(a, b), "random");
    end
    a = 16'h3C00; b = 16'h3C00; #1; check(16'h4000, "1+1");
    a = 16'h3C00; b = 16'hBC00; #1; check(16'h0000, "1-1");
    a = 16'h8000; b = 16'h8000; #1; check(16'h8000, "-0+-0");
    a = 16'h0000; b = 16'hC500; #1; check(16'hC500, "0+x");
    a = 16'h7C00; b = 16'hFC00; #1; check(16'h7E00, "inf-inf");
    a = 16'h7BFF; b = 16'h7BFF; #1; check(16'h7C00, "overflow");
    a = 16'h0401; b = 16'h8400; #1; check(16'h0000, "underflow flushed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
