// global_bcast_mem: the small global memory used to broadcast partial sums.
//
// With computation expansion the dot product V_j . z is not reduced over the
// whole array: each of the ENTRIES cluster groups reduces its own share and
// the ENTRIES group partials are exchanged, as the paper puts it, by one
// write and one read of a small global memory. Every group has its own
// write port (all groups write in the same cycle), and one combinational
// read port drives the scalar that is broadcast to all clusters. full is
// set once every entry has been written since the last clear; clear wins
// over a write in the same cycle. Register-file implementation.
module global_bcast_mem
  import dcom_pkg::*;
#(
  parameter int unsigned ENTRIES = 8,
  localparam int unsigned AW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          wr_en   [ENTRIES],
  input  fp16_t         wr_data [ENTRIES],
  input  logic [AW-1:0] rd_addr,
  output fp16_t         rd_data,
  output logic          full
);
  fp16_t mem [ENTRIES];
  logic [ENTRIES-1:0] written;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      written <= '0;
    end else begin
      for (int e = 0; e < ENTRIES; e++) begin
        if (clear)          written[e] <= 1'b0;
        else if (wr_en[e])  written[e] <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int e = 0; e < ENTRIES; e++)
      if (wr_en[e] && !clear) mem[e] <= wr_data[e];
  end

  assign rd_data = mem[rd_addr];
  assign full    = &written;
endmodule
