// tb_dcom_cluster: exercises one cluster through its bank fill/drain ports
// and every command: row, column and full (RED_ALL, accumulated over two
// tiles) reductions, scatter of row sums, column sums, a scalar and the PE
// accumulators, LOAD / MUL / MAC / STORE. Each result is compared lane by
// lane with a model that uses the reference FP16 arithmetic in the same
// order as the trees, and the reduction latencies (5 cycles for row and
// column sums, 9 for the full dot product) are checked.
module tb_dcom_cluster;
  import dcom_pkg::*;
  import fp16_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  ccmd_t cmd;
  logic fill_en, drain_en;
  logic [5:0] fill_addr, drain_addr;
  tile_t fill_data, drain_data;
  logic dot_valid, row_valid, col_valid;
  fp16_t dot_sum;
  rowvec_t row_sum;
  colvec_t col_sum;
  int checks = 0, failures = 0;

  dcom_cluster #(.BUF_DEPTH(64)) dut (.*);
  always #5 clk = ~clk;

  tile_t w [16];

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fp16_t tree8(input fp16_t x [8]);
    fp16_t a0, a1, a2, a3;
    a0 = ref_add(x[0], x[1]); a1 = ref_add(x[2], x[3]);
    a2 = ref_add(x[4], x[5]); a3 = ref_add(x[6], x[7]);
    return ref_add(ref_add(a0, a1), ref_add(a2, a3));
  endfunction

  function automatic fp16_t row_of(input tile_t a, input tile_t b, input int i);
    fp16_t x [8];
    for (int j = 0; j < 8; j++) x[j] = ref_mul(a[i*8+j], b[i*8+j]);
    return tree8(x);
  endfunction

  function automatic fp16_t col_of(input tile_t a, input tile_t b, input int j);
    fp16_t x [8];
    for (int i = 0; i < 8; i++) x[i] = ref_mul(a[i*8+j], b[i*8+j]);
    return tree8(x);
  endfunction

  function automatic fp16_t full_of(input tile_t a, input tile_t b);
    fp16_t x [8];
    for (int i = 0; i < 8; i++) x[i] = row_of(a, b, i);
    return tree8(x);
  endfunction

  function automatic ccmd_t mk(input cop_e op, input int addr, input scat_e sc = SC_SCALAR,
                               input red_e red = RED_ALL, input fp16_t s = 0, input logic neg = 0,
                               input logic first = 0, input logic last = 0);
    ccmd_t c;
    c = '0;
    c.op = op; c.addr = 16'(addr); c.scat = sc; c.red = red; c.scalar = s; c.neg = neg;
    c.dot_first = first; c.dot_last = last;
    return c;
  endfunction

  task automatic issue(input ccmd_t c);
    @(negedge clk);
    cmd = c;
    @(posedge clk);
    #1 cmd = '0;
  endtask

  task automatic drain_check(input int addr, input tile_t expv, input string what);
    @(negedge clk);  // the STORE is written at this edge
    @(negedge clk);
    drain_en = 1; drain_addr = 6'(addr);
    @(negedge clk);
    drain_en = 0;
    for (int l = 0; l < 64; l++) begin
      checks++;
      if (drain_data[l] !== expv[l]) begin
        failures++;
        if (failures < 10) $display("FAIL %s lane %0d: %h expected %h", what, l, drain_data[l], expv[l]);
      end
    end
  endtask

  task automatic wait_valid(ref logic v, input int cycles, input string what);
    int n;
    n = 0;
    while (!v && n < 50) begin @(posedge clk); #1; n++; end
    checks++;
    if (n != cycles) begin
      failures++;
      $display("FAIL %s latency %0d expected %0d", what, n, cycles);
    end
  endtask

  initial begin
    tile_t e;
    rowvec_t rs;
    colvec_t cs;
    fp16_t s1v, s2v, dexp;
    cmd = '0; fill_en = 0; drain_en = 0; fill_addr = 0; drain_addr = 0; fill_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 8; k++) begin
      for (int l = 0; l < 64; l++) w[k][l] = rand_h(2);
      @(negedge clk);
      fill_en = 1; fill_addr = 6'(k); fill_data = w[k];
    end
    @(negedge clk);
    fill_en = 0;

    // row reduction of squares
    issue(mk(C_DOT, 0, SC_SELF, RED_ROW));
    wait_valid(row_valid, 4, "row");   // issue() already consumed one edge
    for (int i = 0; i < 8; i++) begin
      rs[i] = row_of(w[0], w[0], i);
      checks++;
      if (row_sum[i] !== rs[i]) begin failures++; $display("FAIL row %0d %h %h", i, row_sum[i], rs[i]); end
    end
    // column reduction of squares
    issue(mk(C_DOT, 1, SC_SELF, RED_COL));
    wait_valid(col_valid, 4, "col");
    for (int j = 0; j < 8; j++) begin
      cs[j] = col_of(w[1], w[1], j);
      checks++;
      if (col_sum[j] !== cs[j]) begin failures++; $display("FAIL col %0d %h %h", j, col_sum[j], cs[j]); end
    end
    repeat (2) @(posedge clk);
    // scatter the row sums along the rows
    issue(mk(C_MUL, 2, SC_ROW));
    issue(mk(C_STORE, 10));
    for (int l = 0; l < 64; l++) e[l] = ref_mul(w[2][l], rs[l/8]);
    drain_check(10, e, "SC_ROW");
    // scatter the column sums down the columns
    issue(mk(C_MUL, 3, SC_COL));
    issue(mk(C_STORE, 11));
    for (int l = 0; l < 64; l++) e[l] = ref_mul(w[3][l], cs[l%8]);
    drain_check(11, e, "SC_COL");
    // full dot product over two tiles, second operand from the accumulators
    issue(mk(C_LOAD, 4));
    issue(mk(C_DOT, 5, SC_ACC, RED_ALL, 0, 0, 1, 0));
    issue(mk(C_LOAD, 6));
    issue(mk(C_DOT, 7, SC_ACC, RED_ALL, 0, 0, 0, 1));
    wait_valid(dot_valid, 8, "dot");
    dexp = ref_add(full_of(w[5], w[4]), full_of(w[7], w[6]));
    checks++;
    if (dot_sum !== dexp) begin failures++; $display("FAIL dot %h expected %h", dot_sum, dexp); end
    // multiply-subtract / multiply-add with broadcast scalars
    s1v = rand_h(1); s2v = rand_h(1);
    issue(mk(C_LOAD, 0));
    issue(mk(C_MAC, 1, SC_SCALAR, RED_ALL, s1v, 1));
    issue(mk(C_MAC, 2, SC_SCALAR, RED_ALL, s2v, 0));
    issue(mk(C_STORE, 12));
    for (int l = 0; l < 64; l++)
      e[l] = ref_add(ref_add(w[0][l], ref_mul({~w[1][l][15], w[1][l][14:0]}, s1v)), ref_mul(w[2][l], s2v));
    drain_check(12, e, "MAC");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
