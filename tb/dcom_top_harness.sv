// dcom_top_harness: driver and checker for dcom_top, used by the end-to-end
// testbenches at any array size.
//
// It fills the memory banks with K basis vectors V_0..V_{K-1} (entries of
// magnitude about 2^-6, like unit vectors of length 4096) and a vector z
// (entries about 1), then runs one Lanczos re-orthogonalisation step as the
// array would inside Alg. 1: OP_LOAD, OP_NORM2 of z, OP_REORTH against all K
// basis vectors, OP_NORM2 again, OP_SCALE of z into a new basis vector and
// OP_STORE, and reads every bank word back. A bit-exact model, built on the
// reference FP16 arithmetic in the array's reduction order, predicts both
// norms and every stored word. It also checks, in double precision, that
// the re-orthogonalised z is nearly orthogonal to every V_j and counts each
// mechanism (tile loads, full dot reductions, group reductions into the
// broadcast memory, duplicated multiply-subtract passes, scaling, bank
// fill and drain); one that never happened is a failure, and so is a
// count that differs from the one the command sequence implies.
module dcom_top_harness
  import dcom_pkg::*;
  import fp16_ref_pkg::*;
#(
  parameter int NR = 16, parameter int NC = 16, parameter int EXP = 8,
  parameter int BD = 64, parameter int K = 4, parameter int T = 1,
  parameter int BAW = 10, parameter int CW = 4
) (
  input  logic           clk,
  output logic           rst_n,
  output logic           cmd_valid,
  output hcmd_t          cmd,
  input  logic           cmd_ready,
  input  logic           done,
  input  fp16_t          result,
  input  logic           result_valid,
  output logic           host_en,
  output logic           host_we,
  output logic [CW-1:0]  host_col,
  output logic [BAW-1:0] host_addr,
  output tile_t          host_wdata,
  input  tile_t          host_rdata,
  // probes
  input  ccmd_t          p_ccmd,
  input  logic           p_gbm_full,
  input  logic           p_fill_en,
  input  logic           p_bank_we
);
  localparam int NCL = NR * NC;
  localparam int GS  = NCL / EXP;
  localparam int NV  = K + 2;          // V_0..V_{K-1}, z, new vector
  localparam int ZV  = K;
  localparam int DV  = K + 1;
  localparam int NSLOTS = NV * T;

  int checks = 0, failures = 0;
  // model: m[v][cluster][t] one tile
  tile_t m [NV][NCL][T];

  // ---------------- mechanism counters ----------------
  int n_load = 0, n_dot_all = 0, n_mac = 0, n_mul = 0, n_store = 0;
  int n_gbm = 0, n_fill = 0, n_bankwr = 0;
  logic gbm_full_q = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (p_ccmd.op == C_LOAD)  n_load++;
      if (p_ccmd.op == C_DOT && p_ccmd.red == RED_ALL) n_dot_all++;
      if (p_ccmd.op == C_MAC)   n_mac++;
      if (p_ccmd.op == C_MUL)   n_mul++;
      if (p_ccmd.op == C_STORE) n_store++;
      if (p_gbm_full && !gbm_full_q) n_gbm++;
      if (p_fill_en) n_fill++;
      if (p_bank_we) n_bankwr++;
      gbm_full_q <= p_gbm_full;
    end
  end

  // ---------------- reference helpers ----------------
  function automatic fp16_t tree(input fp16_t x [], input int n);
    fp16_t w [];
    w = new[n];
    for (int i = 0; i < n; i++) w[i] = x[i];
    for (int s = n; s > 1; s = s / 2)
      for (int k = 0; k < s / 2; k++) w[k] = ref_add(w[2*k], w[2*k+1]);
    return w[0];
  endfunction

  function automatic fp16_t full_dot(input tile_t a, input tile_t b);
    fp16_t rows [], x [];
    rows = new[8];
    x    = new[8];
    for (int i = 0; i < 8; i++) begin
      for (int j = 0; j < 8; j++) x[j] = ref_mul(a[i*8+j], b[i*8+j]);
      rows[i] = tree(x, 8);
    end
    return tree(rows, 8);
  endfunction

  // per-group partial dot products of vectors va and vb
  function automatic void group_dots(input int va, input int vb, output fp16_t gsum [EXP]);
    fp16_t part [];
    fp16_t d, f;
    part = new[GS];
    for (int g = 0; g < EXP; g++) begin
      for (int k = 0; k < GS; k++) begin
        for (int t = 0; t < T; t++) begin
          f = full_dot(m[va][g*GS+k][t], m[vb][g*GS+k][t]);
          d = (t == 0) ? f : ref_add(d, f);
        end
        part[k] = d;
      end
      gsum[g] = (GS == 1) ? part[0] : tree(part, GS);
    end
  endfunction

  function automatic fp16_t model_norm2(input int v);
    fp16_t gs [EXP];
    fp16_t acc;
    group_dots(v, v, gs);
    acc = gs[0];
    for (int g = 1; g < EXP; g++) acc = ref_add(acc, gs[g]);
    return acc;
  endfunction

  task automatic model_reorth();
    fp16_t c [EXP];
    for (int j = 0; j < K; j++) begin
      group_dots(j, ZV, c);
      for (int cl = 0; cl < NCL; cl++)
        for (int t = 0; t < T; t++)
          for (int l = 0; l < 64; l++) begin
            fp16_t a, v;
            a = m[ZV][cl][t][l];
            v = m[j][cl][t][l];
            for (int g = 0; g < EXP; g++) a = ref_add(a, ref_mul({~v[15], v[14:0]}, c[g]));
            m[ZV][cl][t][l] = a;
          end
    end
  endtask

  function automatic fp16_t rnd(input int center, input int spread);
    return {1'($urandom), 5'(center + int'($urandom_range(2 * spread)) - spread), 10'($urandom)};
  endfunction

  // ---------------- host-side tasks ----------------
  task automatic host_write(input int c, input int addr, input tile_t d);
    @(negedge clk);
    host_en = 1; host_we = 1; host_col = CW'(c); host_addr = BAW'(addr); host_wdata = d;
    @(negedge clk);
    host_en = 0; host_we = 0;
  endtask

  task automatic host_read(input int c, input int addr, output tile_t d);
    @(negedge clk);
    host_en = 1; host_we = 0; host_col = CW'(c); host_addr = BAW'(addr);
    @(negedge clk);
    host_en = 0;
    d = host_rdata;
  endtask

  task automatic run(input hcmd_t hc, input string what);
    int cyc;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = hc; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    cyc = 0;
    while (!done && cyc < 200000) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (!done) begin failures++; $display("FAIL %s never finished", what); end
    $display("  %s: %0d cycles", what, cyc);
  endtask

  function automatic hcmd_t mkcmd(input hop_e op);
    hcmd_t h;
    h = '0;
    h.op = op; h.k = 8'(K); h.tiles = 8'(T); h.zvec = 8'(ZV); h.dstvec = 8'(DV);
    h.nslots = 16'(NSLOTS);
    return h;
  endfunction

  task automatic check_norm(input fp16_t expv, input string what);
    checks++;
    if (!result_valid || result !== expv) begin
      failures++;
      $display("FAIL %s: result %h (valid %b) expected %h", what, result, result_valid, expv);
    end else $display("  %s = %h (%f)", what, result, h2r(result));
  endtask

  task automatic expect_count(input int got, input int want, input string what);
    checks++;
    if (got != want || got == 0) begin
      failures++;
      $display("FAIL mechanism %s happened %0d times, expected %0d", what, got, want);
    end else $display("  mechanism %s: %0d", what, got);
  endtask

  initial begin
    tile_t d;
    hcmd_t h;
    fp16_t s, nz;
    real maxdot, dotv, nrm;
    int n_load0;
    rst_n = 0; cmd_valid = 0; cmd = '0;
    host_en = 0; host_we = 0; host_col = '0; host_addr = '0; host_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // random basis and vector; the new-vector slots start at zero
    for (int v = 0; v < NV; v++)
      for (int cl = 0; cl < NCL; cl++)
        for (int t = 0; t < T; t++)
          for (int l = 0; l < 64; l++)
            m[v][cl][t][l] = (v < K) ? rnd(9, 1) : ((v == ZV) ? rnd(15, 1) : 16'h0000);
    for (int c = 0; c < NC; c++)
      for (int r = 0; r < NR; r++)
        for (int sl = 0; sl < NSLOTS; sl++)
          host_write(c, r * BD + sl, m[sl / T][c*NR + r][sl % T]);

    run(mkcmd(OP_LOAD), "OP_LOAD");
    run(mkcmd(OP_NORM2), "OP_NORM2 before");
    check_norm(model_norm2(ZV), "|z|^2 before");
    n_load0 = n_load;
    run(mkcmd(OP_REORTH), "OP_REORTH");
    model_reorth();
    run(mkcmd(OP_NORM2), "OP_NORM2 after");
    nz = model_norm2(ZV);
    check_norm(nz, "|z|^2 after");
    // host: s = 1/|z|, as Alg. 1 normalises the new basis vector
    s = r2h(1.0 / $sqrt(h2r(nz)));
    h = mkcmd(OP_SCALE);
    h.scalar = s;
    run(h, "OP_SCALE");
    for (int cl = 0; cl < NCL; cl++)
      for (int t = 0; t < T; t++)
        for (int l = 0; l < 64; l++) m[DV][cl][t][l] = ref_mul(m[ZV][cl][t][l], s);
    run(mkcmd(OP_STORE), "OP_STORE");

    // read back every word and compare
    for (int c = 0; c < NC; c++)
      for (int r = 0; r < NR; r++)
        for (int sl = 0; sl < NSLOTS; sl++) begin
          host_read(c, r * BD + sl, d);
          for (int l = 0; l < 64; l++) begin
            checks++;
            if (d[l] !== m[sl / T][c*NR + r][sl % T][l]) begin
              failures++;
              if (failures < 10) $display("FAIL word col %0d row %0d slot %0d lane %0d: %h expected %h",
                                          c, r, sl, l, d[l], m[sl / T][c*NR + r][sl % T][l]);
            end
          end
        end

    // the new basis vector is unit length and nearly orthogonal to V_j
    maxdot = 0.0;
    for (int j = 0; j < K; j++) begin
      real vn;
      dotv = 0.0; vn = 0.0;
      for (int cl = 0; cl < NCL; cl++)
        for (int t = 0; t < T; t++)
          for (int l = 0; l < 64; l++) begin
            dotv += h2r(m[j][cl][t][l]) * h2r(m[DV][cl][t][l]);
            vn   += h2r(m[j][cl][t][l]) * h2r(m[j][cl][t][l]);
          end
      dotv = dotv / $sqrt(vn);
      if (dotv < 0) dotv = -dotv;
      if (dotv > maxdot) maxdot = dotv;
    end
    nrm = 0.0;
    for (int cl = 0; cl < NCL; cl++)
      for (int t = 0; t < T; t++)
        for (int l = 0; l < 64; l++) nrm += h2r(m[DV][cl][t][l]) ** 2;
    $display("  new vector: |v| = %f, max |cos(v, V_j)| = %f", $sqrt(nrm), maxdot);
    checks++;
    if (nrm < 0.9 || nrm > 1.1) begin failures++; $display("FAIL new vector not unit length"); end

    // mechanisms
    expect_count(n_fill, NR * NSLOTS, "bank-to-buffer fill");
    expect_count(n_bankwr, NR * NSLOTS, "buffer-to-bank drain");
    expect_count(n_dot_all, 2 * T + K * T, "full dot reduction (row trees + column tree 0)");
    expect_count(n_gbm, 2 + K, "group reduction into broadcast memory");
    expect_count(n_mac, K * T * EXP, "duplicated multiply-subtract passes");
    expect_count(n_load - n_load0, 2 * K * T, "accumulator loads");
    expect_count(n_mul, T, "scaling");
    expect_count(n_store, K * T + T, "accumulator stores");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
