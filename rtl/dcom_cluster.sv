// dcom_cluster: one compute cluster, 8x8 FP16 MAC PEs around a shared buffer.
//
// Follows the paper's cluster: an 8x8 array of FP16 multipliers, a shared
// buffer with the cluster's data partition, and a reduce/scatter network in
// which every multiplier feeds one row-wise and one column-wise binary
// reduction tree. The command encoding, the pipeline and the way a full
// 64-lane dot product is formed (the eight row sums are fed into column
// tree 0) are this design's choices.
//
// Interface: one ccmd_t per cycle (C_NOP when idle), the same command goes
// to every cluster of the array. A command reads buffer word cmd.addr in the
// cycle it is given (stage 0); the PEs act on it in the next cycle (stage 1):
//   C_LOAD  acc <= word          C_MUL acc <= word * b
//   C_MAC   acc <= acc -/+ word * b
//   C_DOT   prod <= word * b, then reduced according to cmd.red
//   C_STORE buffer[addr] <= acc (written at the end of stage 1)
// b comes from the scatter unit (cmd.scat). A command given right after a
// C_STORE to the same word reads the old contents, so the sequencer leaves
// one idle cycle there.
// Reductions: RED_ROW gives row_sum (8 values) 5 cycles after the command,
// RED_COL gives col_sum 5 cycles after; both are also kept as the
// rowvec/colvec that SC_ROW / SC_COL scatter back. RED_ALL adds the row sums
// in column tree 0 and accumulates the result over the tiles between
// dot_first and dot_last; dot_sum/dot_valid appear 9 cycles after the
// dot_last command. A RED_COL command must not have its products in column
// tree 0's input stage in the same cycle as RED_ALL row sums (the sequencer
// does not mix them).
// fill_* and drain_* move buffer words to and from the column's memory bank;
// drain_data follows drain_en by one cycle. They must not coincide with
// commands that use the same buffer port.
module dcom_cluster
  import dcom_pkg::*;
#(
  parameter int unsigned BUF_DEPTH = 64,
  localparam int unsigned AW = $clog2(BUF_DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  ccmd_t         cmd,
  // bank -> buffer
  input  logic          fill_en,
  input  logic [AW-1:0] fill_addr,
  input  tile_t         fill_data,
  // buffer -> bank
  input  logic          drain_en,
  input  logic [AW-1:0] drain_addr,
  output tile_t         drain_data,
  // reduction results
  output logic          dot_valid,
  output fp16_t         dot_sum,
  output logic          row_valid,
  output rowvec_t       row_sum,
  output logic          col_valid,
  output colvec_t       col_sum
);
  // tag carried through the trees: {red, dot_first, dot_last}
  typedef struct packed {
    red_e red;
    logic first;
    logic last;
  } rtag_t;

  // ---------------- stage 0: buffer read ----------------
  ccmd_t s1;
  tile_t rd_data, acc_t, prod_t, b_t;
  logic  uses_buf;

  assign uses_buf = (cmd.op == C_LOAD) || (cmd.op == C_DOT) ||
                    (cmd.op == C_MAC)  || (cmd.op == C_MUL);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1 <= '0;
    else        s1 <= cmd;
  end

  cluster_buffer #(.DEPTH(BUF_DEPTH)) u_buf (
    .clk     (clk),
    .rd_en   (uses_buf || drain_en),
    .rd_addr (drain_en ? drain_addr : cmd.addr[AW-1:0]),
    .rd_data (rd_data),
    .wr_en   ((s1.op == C_STORE) || fill_en),
    .wr_addr ((s1.op == C_STORE) ? s1.addr[AW-1:0] : fill_addr),
    .wr_data ((s1.op == C_STORE) ? acc_t : fill_data)
  );
  assign drain_data = rd_data;

  // ---------------- stage 1: scatter and PEs ----------------
  rowvec_t rowvec_q;
  colvec_t colvec_q;

  scatter_unit u_scat (
    .mode      (s1.scat),
    .scalar    (s1.scalar),
    .rowvec    (rowvec_q),
    .colvec    (colvec_q),
    .acc       (acc_t),
    .self_tile (rd_data),
    .b         (b_t)
  );

  for (genvar l = 0; l < LANES; l++) begin : g_pe
    dcom_pe u_pe (
      .clk (clk), .rst_n (rst_n),
      .op  (s1.op), .neg (s1.neg),
      .a   (rd_data[l]), .b (b_t[l]),
      .prod(prod_t[l]), .acc (acc_t[l])
    );
  end

  // ---------------- stage 2..: reduction network ----------------
  logic  s2_dot;
  rtag_t s2_tag;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_dot <= 1'b0;
      s2_tag <= '0;
    end else begin
      s2_dot <= (s1.op == C_DOT);
      s2_tag <= '{red: s1.red, first: s1.dot_first, last: s1.dot_last};
    end
  end

  logic  rt_v   [PE_ROWS];
  rtag_t rt_tag [PE_ROWS];
  fp16_t rt_sum [PE_ROWS];
  logic  ct_v   [PE_COLS];
  rtag_t ct_tag [PE_COLS];
  fp16_t ct_sum [PE_COLS];

  for (genvar i = 0; i < PE_ROWS; i++) begin : g_row
    fp16_t in_d [PE_COLS];
    for (genvar j = 0; j < PE_COLS; j++) begin : g_in
      assign in_d[j] = prod_t[i*PE_COLS+j];
    end
    reduction_tree #(.N(PE_COLS), .TAGW($bits(rtag_t))) u_tree (
      .clk (clk), .rst_n (rst_n),
      .in_valid (s2_dot && (s2_tag.red != RED_COL)),
      .in_tag   (s2_tag),
      .in_data  (in_d),
      .out_valid(rt_v[i]), .out_tag (rt_tag[i]), .out_sum (rt_sum[i])
    );
  end

  // column tree 0 takes the row sums of a RED_ALL reduction
  logic  all_in;
  assign all_in = rt_v[0] && (rt_tag[0].red == RED_ALL);

  for (genvar j = 0; j < PE_COLS; j++) begin : g_col
    fp16_t in_d [PE_ROWS];
    logic  v_in;
    rtag_t t_in;
    for (genvar i = 0; i < PE_ROWS; i++) begin : g_in
      if (j == 0) begin : g_mux
        assign in_d[i] = all_in ? rt_sum[i] : prod_t[i*PE_COLS+j];
      end else begin : g_dir
        assign in_d[i] = prod_t[i*PE_COLS+j];
      end
    end
    if (j == 0) begin : g_v0
      assign v_in = all_in || (s2_dot && (s2_tag.red == RED_COL));
      assign t_in = all_in ? rt_tag[0] : s2_tag;
    end else begin : g_vn
      assign v_in = s2_dot && (s2_tag.red == RED_COL);
      assign t_in = s2_tag;
    end
    reduction_tree #(.N(PE_ROWS), .TAGW($bits(rtag_t))) u_tree (
      .clk (clk), .rst_n (rst_n),
      .in_valid (v_in), .in_tag (t_in), .in_data (in_d),
      .out_valid(ct_v[j]), .out_tag (ct_tag[j]), .out_sum (ct_sum[j])
    );
  end

  // row / column results, kept for the scatter unit
  always_comb begin
    for (int i = 0; i < PE_ROWS; i++) row_sum[i] = rt_sum[i];
    for (int j = 0; j < PE_COLS; j++) col_sum[j] = ct_sum[j];
  end
  assign row_valid = rt_v[0] && (rt_tag[0].red == RED_ROW);
  assign col_valid = ct_v[0] && (ct_tag[0].red == RED_COL);

  always_ff @(posedge clk) begin
    if (row_valid) rowvec_q <= row_sum;
    if (col_valid) colvec_q <= col_sum;
  end

  // cluster dot-product accumulator over tiles
  fp16_t dacc_q, dacc_sum;
  logic  full_v;
  assign full_v = ct_v[0] && (ct_tag[0].red == RED_ALL);
  fp16_add u_dacc (.a(dacc_q), .b(ct_sum[0]), .y(dacc_sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dacc_q    <= FP16_ZERO;
      dot_valid <= 1'b0;
      dot_sum   <= FP16_ZERO;
    end else begin
      dot_valid <= full_v && ct_tag[0].last;
      if (full_v) begin
        dacc_q <= ct_tag[0].first ? ct_sum[0] : dacc_sum;
        if (ct_tag[0].last) dot_sum <= ct_tag[0].first ? ct_sum[0] : dacc_sum;
      end
    end
  end

  // the sequencer never lets a RED_COL reduction meet RED_ALL row sums
  assert property (@(posedge clk) disable iff (!rst_n)
    !(all_in && s2_dot && (s2_tag.red == RED_COL)));
  // bank transfers and buffer-using commands do not share a cycle
  assert property (@(posedge clk) disable iff (!rst_n)
    !(drain_en && uses_buf) && !(fill_en && (s1.op == C_STORE)));
endmodule
