// tb_dcom_pe: drives random LOAD / MUL / MAC / DOT / NOP sequences into one
// PE and compares the product and accumulator registers, cycle by cycle,
// with a model built on the reference FP16 arithmetic.
module tb_dcom_pe;
  import dcom_pkg::*;
  import fp16_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  cop_e op;
  logic neg;
  fp16_t a, b, prod, acc;
  fp16_t m_acc, m_prod;
  int checks = 0, failures = 0;

  dcom_pe dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op = C_NOP; neg = 0; a = 0; b = 0;
    m_acc = 0; m_prod = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      case ($urandom_range(4))
        0: op = C_LOAD;
        1: op = C_MUL;
        2: op = C_MAC;
        3: op = C_DOT;
        default: op = C_NOP;
      endcase
      neg = 1'($urandom);
      a = rand_h(3);
      b = rand_h(3);
      @(posedge clk);
      case (op)
        C_LOAD: m_acc = a;
        C_MUL:  m_acc = ref_mul(a, b);
        C_MAC:  m_acc = ref_add(m_acc, neg ? ref_mul({~a[15], a[14:0]}, b) : ref_mul(a, b));
        C_DOT:  m_prod = ref_mul(a, b);
        default: ;
      endcase
      #1;
      checks++;
      if (acc !== m_acc || prod !== m_prod) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d op=%s acc=%h/%h prod=%h/%h", n, op.name(), acc, m_acc, prod, m_prod);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
