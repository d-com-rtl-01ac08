// reduction_tree: pipelined binary tree of FP16 adders.
//
// The paper builds each cluster's row-wise and column-wise reduction paths
// as binary trees, so a reduction of N values takes log2(N) adder levels.
// Here every level is followed by a register, so a new set of N inputs may
// enter every cycle and its sum leaves log2(N) cycles later, together with
// the input's valid bit and a user tag (TAGW bits carried alongside, used to
// route the result). Inputs are paired in order: level 0 adds in[2k] and
// in[2k+1], and so on, which fixes the rounding order. The same module, with
// N = clusters per group, reduces the partial sums of a group of clusters.
// N must be a power of two, at least 2.
module reduction_tree
  import dcom_pkg::*;
#(
  parameter int unsigned N    = 8,
  parameter int unsigned TAGW = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [TAGW-1:0]  in_tag,
  input  fp16_t            in_data [N],
  output logic             out_valid,
  output logic [TAGW-1:0]  out_tag,
  output fp16_t            out_sum
);
  localparam int unsigned L = $clog2(N);

  logic            v_q [L];
  logic [TAGW-1:0] t_q [L];

  for (genvar l = 0; l < L; l++) begin : g_lvl
    localparam int unsigned W = N >> (l + 1);
    fp16_t c [W];
    fp16_t s [W];
    for (genvar k = 0; k < W; k++) begin : g_node
      if (l == 0) begin : g_first
        fp16_add u_add (.a(in_data[2*k]), .b(in_data[2*k+1]), .y(c[k]));
      end else begin : g_next
        fp16_add u_add (.a(g_lvl[l-1].s[2*k]), .b(g_lvl[l-1].s[2*k+1]), .y(c[k]));
      end
    end
    always_ff @(posedge clk) s <= c;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        v_q[l] <= 1'b0;
        t_q[l] <= '0;
      end else if (l == 0) begin
        v_q[l] <= in_valid;
        t_q[l] <= in_tag;
      end else begin
        v_q[l] <= v_q[l-1];
        t_q[l] <= t_q[l-1];
      end
    end
  end

  assign out_valid = v_q[L-1];
  assign out_tag   = t_q[L-1];
  assign out_sum   = g_lvl[L-1].s[0];

  initial assert (N >= 2 && (1 << L) == N) else $error("reduction_tree: N must be a power of two >= 2");
endmodule
