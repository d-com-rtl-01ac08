// tb_reduction_tree: streams a new random input set into an 8-input and a
// 32-input tree every cycle and checks each sum (in the tree's pairing
// order, with the reference FP16 adder), its tag, and that it appears
// exactly log2(N) cycles after its inputs.
module tb_reduction_tree;
  import dcom_pkg::*;
  import fp16_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  logic        v8, v32, ov8, ov32;
  logic [3:0]  t8, t32, ot8, ot32;
  fp16_t       d8 [8];
  fp16_t       d32 [32];
  fp16_t       s8, s32;

  reduction_tree #(.N(8), .TAGW(4)) u8 (
    .clk(clk), .rst_n(rst_n), .in_valid(v8), .in_tag(t8), .in_data(d8),
    .out_valid(ov8), .out_tag(ot8), .out_sum(s8));
  reduction_tree #(.N(32), .TAGW(4)) u32 (
    .clk(clk), .rst_n(rst_n), .in_valid(v32), .in_tag(t32), .in_data(d32),
    .out_valid(ov32), .out_tag(ot32), .out_sum(s32));

  function automatic fp16_t tree_sum(input fp16_t x [32], input int n);
    fp16_t w [32];
    w = x;
    for (int m = n; m > 1; m = m / 2)
      for (int k = 0; k < m / 2; k++) w[k] = ref_add(w[2*k], w[2*k+1]);
    return w[0];
  endfunction

  // expected results indexed by the cycle they must appear in
  fp16_t   e8 [int], e32 [int];
  logic [3:0] et8 [int], et32 [int];
  int cyc = 0;
  int seen8 = 0, seen32 = 0, sent8 = 0, sent32 = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp16_t x [32];
    v8 = 0; v32 = 0; t8 = 0; t32 = 0;
    foreach (d8[i]) d8[i] = 0;
    foreach (d32[i]) d32[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      v8  = 1'($urandom);
      v32 = 1'($urandom);
      t8  = 4'($urandom);
      t32 = 4'($urandom);
      for (int i = 0; i < 32; i++) begin
        x[i] = rand_h(2);
        d32[i] = x[i];
        if (i < 8) d8[i] = x[i];
      end
      // cyc counts the rising edges so far; these inputs are taken at edge cyc+1
      if (v8)  begin e8[cyc + 3] = tree_sum(x, 8);  et8[cyc + 3] = t8;  sent8++;  end
      if (v32) begin e32[cyc + 5] = tree_sum(x, 32); et32[cyc + 5] = t32; sent32++; end
    end
    @(negedge clk);
    v8 = 0; v32 = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (seen8 != sent8 || seen32 != sent32) begin
      failures++;
      $display("FAIL counts %0d/%0d %0d/%0d", seen8, sent8, seen32, sent32);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // outputs are sampled just after the edge at which they appear
  always @(posedge clk) begin
    #1;
    if (rst_n) begin
      checks++;
      if (ov8 != e8.exists(cyc) || (ov8 && (s8 !== e8[cyc] || ot8 !== et8[cyc]))) begin
        failures++;
        if (failures < 10) $display("FAIL N=8 cyc=%0d valid=%b sum=%h", cyc, ov8, s8);
      end
      if (ov8) seen8++;
      checks++;
      if (ov32 != e32.exists(cyc) || (ov32 && (s32 !== e32[cyc] || ot32 !== et32[cyc]))) begin
        failures++;
        if (failures < 10) $display("FAIL N=32 cyc=%0d valid=%b sum=%h", cyc, ov32, s32);
      end
      if (ov32) seen32++;
    end
  end
endmodule
