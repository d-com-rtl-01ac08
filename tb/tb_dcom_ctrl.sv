// tb_dcom_ctrl: runs the sequencer alone (2 cluster rows, expansion 4,
// 16-word buffers) with a model of the broadcast memory, and compares the
// cluster command stream, the bank transfer signals and the OP_NORM2 result
// with the sequences each host command must produce: for OP_REORTH the
// LOAD/DOT pairs of the dot phase, then per tile LOAD, four multiply-
// subtract passes with the four broadcast values, STORE.
module tb_dcom_ctrl;
  import dcom_pkg::*;
  import fp16_ref_pkg::*;
  localparam int NR = 2, EXP = 4, BD = 16;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, done, result_valid;
  hcmd_t cmd;
  fp16_t result;
  ccmd_t ccmd;
  logic gbm_clear, gbm_full;
  logic [1:0] gbm_raddr;
  fp16_t gbm_rdata;
  logic bank_en, bank_we, fill_en, drain_en;
  logic [4:0] bank_addr;
  logic [0:0] fill_row, drain_row_q;
  logic [3:0] fill_addr, drain_addr;
  int checks = 0, failures = 0;

  dcom_ctrl #(.NR(NR), .EXPANSION(EXP), .BUF_DEPTH(BD)) dut (.*);
  always #5 clk = ~clk;

  fp16_t gv [EXP];
  assign gbm_rdata = gv[gbm_raddr];

  // broadcast memory model: full 12 cycles after the last dot tile
  int full_timer = -1;
  always @(posedge clk) begin
    if (gbm_clear) gbm_full <= 0;
    if (ccmd.op == C_DOT && ccmd.dot_last) full_timer <= 12;
    else if (full_timer > 0) full_timer <= full_timer - 1;
    else if (full_timer == 0) begin gbm_full <= 1; full_timer <= -1; end
  end

  // recorded streams
  ccmd_t got [$];
  int    xfer [$];   // bank reads (+0x1000), fills (+0x2000), drains (+0x3000), bank writes (+0x4000)
  always @(posedge clk) if (rst_n) begin
    if (ccmd.op != C_NOP) got.push_back(ccmd);
    if (bank_en && !bank_we) xfer.push_back(32'h1000 + int'(bank_addr));
    if (fill_en)  xfer.push_back(32'h2000 + int'(fill_row) * 256 + int'(fill_addr));
    if (drain_en) xfer.push_back(32'h3000 + int'(drain_addr));
    if (bank_we)  xfer.push_back(32'h4000 + int'(bank_addr) * 16 + int'(drain_row_q));
  end

  task automatic run(input hcmd_t h);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = h; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    while (!done) @(negedge clk);
  endtask

  function automatic ccmd_t mk(input cop_e op, input int addr, input scat_e sc = SC_SCALAR,
                               input red_e red = RED_ALL, input fp16_t s = 0, input logic neg = 0,
                               input logic first = 0, input logic last = 0);
    ccmd_t c;
    c = '0;
    c.op = op; c.addr = 16'(addr); c.scat = sc; c.red = red; c.scalar = s; c.neg = neg;
    c.dot_first = first; c.dot_last = last;
    return c;
  endfunction

  task automatic compare(input ccmd_t expq [$], input string what);
    checks++;
    if (got.size() != expq.size()) begin
      failures++;
      $display("FAIL %s: %0d commands, expected %0d", what, got.size(), expq.size());
    end
    for (int i = 0; i < expq.size() && i < got.size(); i++) begin
      checks++;
      if (got[i] !== expq[i]) begin
        failures++;
        if (failures < 10) $display("FAIL %s cmd %0d: %p expected %p", what, i, got[i], expq[i]);
      end
    end
    got.delete();
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ccmd_t e [$];
    int    ex [$];
    hcmd_t h;
    fp16_t acc;
    const int T = 2, K = 2, ZV = 2, DV = 3;
    cmd_valid = 0; cmd = '0; gbm_full = 0;
    for (int g = 0; g < EXP; g++) gv[g] = rand_h(2);
    repeat (2) @(posedge clk);
    rst_n = 1;

    // OP_REORTH
    h = '0; h.op = OP_REORTH; h.k = 8'(K); h.tiles = 8'(T); h.zvec = 8'(ZV);
    run(h);
    for (int j = 0; j < K; j++) begin
      for (int t = 0; t < T; t++) begin
        e.push_back(mk(C_LOAD, ZV*T + t));
        e.push_back(mk(C_DOT, j*T + t, SC_ACC, RED_ALL, 0, 0, t == 0, t == T-1));
      end
      for (int t = 0; t < T; t++) begin
        e.push_back(mk(C_LOAD, ZV*T + t));
        for (int g = 0; g < EXP; g++) e.push_back(mk(C_MAC, j*T + t, SC_SCALAR, RED_ALL, gv[g], 1));
        e.push_back(mk(C_STORE, ZV*T + t));
      end
    end
    compare(e, "OP_REORTH");
    e.delete();

    // OP_NORM2
    h.op = OP_NORM2;
    run(h);
    for (int t = 0; t < T; t++) e.push_back(mk(C_DOT, ZV*T + t, SC_SELF, RED_ALL, 0, 0, t == 0, t == T-1));
    compare(e, "OP_NORM2");
    e.delete();
    acc = gv[0];
    for (int g = 1; g < EXP; g++) acc = ref_add(acc, gv[g]);
    checks++;
    if (!result_valid || result !== acc) begin failures++; $display("FAIL norm result %h expected %h", result, acc); end

    // OP_SCALE
    h.op = OP_SCALE; h.dstvec = 8'(DV); h.scalar = 16'h3555;
    run(h);
    for (int t = 0; t < T; t++) begin
      e.push_back(mk(C_MUL, ZV*T + t, SC_SCALAR, RED_ALL, 16'h3555));
      e.push_back(mk(C_STORE, DV*T + t));
    end
    compare(e, "OP_SCALE");
    e.delete();

    // OP_LOAD and OP_STORE of 3 slots
    xfer.delete();
    h.op = OP_LOAD; h.nslots = 3;
    run(h);
    h.op = OP_STORE;
    run(h);
    for (int n = 0; n < NR * 3; n++) begin
      ex.push_back(32'h1000 + (n % NR) * BD + n / NR);
      if (n > 0) ex.push_back(32'h2000 + ((n-1) % NR) * 256 + (n-1) / NR);
    end
    ex.push_back(32'h2000 + ((NR*3-1) % NR) * 256 + (NR*3-1) / NR);
    for (int n = 0; n < NR * 3; n++) begin
      ex.push_back(32'h3000 + n / NR);
      if (n > 0) ex.push_back(32'h4000 + (((n-1) % NR) * BD + (n-1) / NR) * 16 + (n-1) % NR);
    end
    ex.push_back(32'h4000 + (((NR*3-1) % NR) * BD + (NR*3-1) / NR) * 16 + (NR*3-1) % NR);
    checks++;
    if (xfer.size() != ex.size()) begin failures++; $display("FAIL transfers %0d expected %0d", xfer.size(), ex.size()); end
    for (int i = 0; i < ex.size() && i < xfer.size(); i++) begin
      checks++;
      if (xfer[i] != ex[i]) begin failures++; if (failures < 10) $display("FAIL transfer %0d: %h expected %h", i, xfer[i], ex[i]); end
    end
    checks++;
    if (got.size() != 0) begin failures++; $display("FAIL bank transfers issued cluster commands"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
