// cluster_buffer: the shared buffer of one cluster.
//
// Holds the cluster's partition of the Lanczos basis vectors and of the
// vector being processed, one 64-lane FP16 tile per word. The paper gives
// the buffer's role but not its size or ports; here it is a simple dual-port
// memory (one synchronous read port, one write port) of DEPTH words. A read
// returns data one cycle after rd_en; a read and a write to the same word in
// the same cycle return the old contents.
module cluster_buffer
  import dcom_pkg::*;
#(
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output tile_t         rd_data,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  tile_t         wr_data
);
  tile_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
