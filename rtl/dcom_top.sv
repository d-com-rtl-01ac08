// dcom_top: the decomposer array, NR x NC clusters with per-column banks.
//
// This is the co-accelerator that runs the vector work of Lanczos
// bidiagonalisation next to a GEMM engine: the GEMM side computes A*v and
// A^T*u and writes them into the memory banks through the host port, this
// array re-orthogonalises them against the basis held in the cluster
// buffers, forms their squared norms and scales them into new basis vectors.
// Following the paper, the default is 16x16 clusters of 8x8 FP16 MACs, each
// column of clusters paired with its own memory bank, and an expansion
// factor of 8. Around this the design adds its own choices: clusters are
// numbered column-major (id = c*NR + r) and split into EXPANSION groups of
// NR*NC/EXPANSION consecutive clusters, each with a pipelined reduction
// tree whose result goes into one entry of the global broadcast memory.
// Every cluster executes the same command each cycle (SIMD); lane l of
// slot s of cluster (r,c) is element ((c*NR + r)*tiles + t)*64 + l of a
// vector when s = v*tiles + t, a layout the host follows when it fills the
// banks.
// Host interface: cmd/cmd_valid/cmd_ready/done as in dcom_ctrl; result is
// the last OP_NORM2 value. The bank port (host_en, host_we, host_col,
// host_addr, host_wdata) reads and writes one 64-lane word of the bank of
// column host_col at address r*BUF_DEPTH + s; host_rdata follows a read by
// one cycle. The host must not use the port while OP_LOAD/OP_STORE run on
// the same words.
module dcom_top
  import dcom_pkg::*;
#(
  parameter int unsigned NR        = 16,
  parameter int unsigned NC        = 16,
  parameter int unsigned EXPANSION = 8,
  parameter int unsigned BUF_DEPTH = 64,
  localparam int unsigned BAW = $clog2(NR * BUF_DEPTH),
  localparam int unsigned CW  = (NC > 1) ? $clog2(NC) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           cmd_valid,
  input  hcmd_t          cmd,
  output logic           cmd_ready,
  output logic           done,
  output fp16_t          result,
  output logic           result_valid,
  input  logic           host_en,
  input  logic           host_we,
  input  logic [CW-1:0]  host_col,
  input  logic [BAW-1:0] host_addr,
  input  tile_t          host_wdata,
  output tile_t          host_rdata
);
  localparam int unsigned NCL = NR * NC;
  localparam int unsigned GS  = NCL / EXPANSION;  // clusters per group
  localparam int unsigned CAW = $clog2(BUF_DEPTH);
  localparam int unsigned RW  = (NR > 1) ? $clog2(NR) : 1;
  localparam int unsigned GW  = (EXPANSION > 1) ? $clog2(EXPANSION) : 1;

  ccmd_t          ccmd;
  logic           gbm_clear, gbm_full;
  logic [GW-1:0]  gbm_raddr;
  fp16_t          gbm_rdata;
  logic           bank_en, bank_we;
  logic [BAW-1:0] bank_addr;
  logic           fill_en, drain_en;
  logic [RW-1:0]  fill_row, drain_row_q;
  logic [CAW-1:0] fill_addr, drain_addr;

  dcom_ctrl #(.NR(NR), .EXPANSION(EXPANSION), .BUF_DEPTH(BUF_DEPTH)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd, .cmd_ready, .done, .result, .result_valid,
    .ccmd, .gbm_clear, .gbm_raddr, .gbm_rdata, .gbm_full,
    .bank_en, .bank_we, .bank_addr,
    .fill_en, .fill_row, .fill_addr, .drain_en, .drain_addr, .drain_row_q
  );

  // ---------------- cluster array and memory banks ----------------
  logic  dot_valid [NCL];
  fp16_t dot_sum   [NCL];
  tile_t bank_rdata [NC];
  tile_t host_rd    [NC];
  tile_t drain_data [NC][NR];
  logic [CW-1:0] host_col_q;

  for (genvar cc = 0; cc < NC; cc++) begin : g_col
    memory_bank #(.DEPTH(NR * BUF_DEPTH)) u_bank (
      .clk     (clk),
      .a_en    (host_en && (host_col == CW'(cc))),
      .a_we    (host_we),
      .a_addr  (host_addr),
      .a_wdata (host_wdata),
      .a_rdata (host_rd[cc]),
      .b_en    (bank_en),
      .b_we    (bank_we),
      .b_addr  (bank_addr),
      .b_wdata (drain_data[cc][drain_row_q]),
      .b_rdata (bank_rdata[cc])
    );
    for (genvar rr = 0; rr < NR; rr++) begin : g_row
      dcom_cluster #(.BUF_DEPTH(BUF_DEPTH)) u_cl (
        .clk        (clk),
        .rst_n      (rst_n),
        .cmd        (ccmd),
        .fill_en    (fill_en && (fill_row == RW'(rr))),
        .fill_addr  (fill_addr),
        .fill_data  (bank_rdata[cc]),
        .drain_en   (drain_en),
        .drain_addr (drain_addr),
        .drain_data (drain_data[cc][rr]),
        .dot_valid  (dot_valid[cc*NR+rr]),
        .dot_sum    (dot_sum[cc*NR+rr]),
        .row_valid  (),
        .row_sum    (),
        .col_valid  (),
        .col_sum    ()
      );
    end
  end

  always_ff @(posedge clk) if (host_en) host_col_q <= host_col;
  assign host_rdata = host_rd[host_col_q];

  // ---------------- group reduction and broadcast memory ----------------
  logic  g_wen [EXPANSION];
  fp16_t g_sum [EXPANSION];

  for (genvar gg = 0; gg < EXPANSION; gg++) begin : g_grp
    if (GS == 1) begin : g_single
      assign g_wen[gg] = dot_valid[gg];
      assign g_sum[gg] = dot_sum[gg];
    end else begin : g_tree
      fp16_t in_d [GS];
      for (genvar k = 0; k < GS; k++) begin : g_in
        assign in_d[k] = dot_sum[gg*GS+k];
      end
      reduction_tree #(.N(GS), .TAGW(1)) u_tree (
        .clk (clk), .rst_n (rst_n),
        .in_valid (dot_valid[gg*GS]), .in_tag (1'b0), .in_data (in_d),
        .out_valid(g_wen[gg]), .out_tag (), .out_sum (g_sum[gg])
      );
    end
  end

  global_bcast_mem #(.ENTRIES(EXPANSION)) u_gbm (
    .clk, .rst_n, .clear (gbm_clear),
    .wr_en (g_wen), .wr_data (g_sum),
    .rd_addr (gbm_raddr), .rd_data (gbm_rdata), .full (gbm_full)
  );

  initial assert (NCL % EXPANSION == 0) else $error("dcom_top: EXPANSION must divide NR*NC");
endmodule
