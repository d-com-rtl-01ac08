// memory_bank: the memory bank paired with one column of clusters.
//
// The paper pairs each column of the 16x16 cluster array with a dedicated
// memory bank that stores that column's partition of the vector data and
// streams it to the clusters. Here the bank is a two-port memory of
// 64-lane FP16 words: port A faces the host (the GEMM accelerator or
// processor that produces A*v and A^T*u and reads results back), port B
// faces the cluster column. Word r*BUF_DEPTH + s holds slot s of the
// cluster in row r of the column. Both ports read synchronously (data one
// cycle after en) and return old data on a same-cycle write to the same
// word; if both ports write the same word, port B wins. Sizes and port
// structure are this design's choices; the paper gives neither.
module memory_bank
  import dcom_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          a_en,
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  tile_t         a_wdata,
  output tile_t         a_rdata,
  input  logic          b_en,
  input  logic          b_we,
  input  logic [AW-1:0] b_addr,
  input  tile_t         b_wdata,
  output tile_t         b_rdata
);
  tile_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en && !a_we) a_rdata <= mem[a_addr];
    if (b_en && !b_we) b_rdata <= mem[b_addr];
    if (a_en && a_we && !(b_en && b_we && b_addr == a_addr)) mem[a_addr] <= a_wdata;
    if (b_en && b_we) mem[b_addr] <= b_wdata;
  end
endmodule
