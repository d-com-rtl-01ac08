// tb_dcom_top: end-to-end test of the decomposer array at a reduced size
// (2x4 clusters, expansion factor 4, buffers of 16 words) with two tiles per
// vector per cluster, so that the tile loops, the group trees and the
// duplicated update passes all run more than once. See dcom_top_harness
// for what is driven and checked.
module tb_dcom_top;
  import dcom_pkg::*;
  localparam int NR = 2, NC = 4, EXP = 4, BD = 16, K = 3, T = 2;
  localparam int BAW = $clog2(NR * BD), CW = $clog2(NC);
  logic clk = 0;
  logic rst_n, cmd_valid, cmd_ready, done, result_valid, host_en, host_we;
  hcmd_t cmd;
  fp16_t result;
  logic [CW-1:0] host_col;
  logic [BAW-1:0] host_addr;
  tile_t host_wdata, host_rdata;

  always #5 clk = ~clk;

  dcom_top #(.NR(NR), .NC(NC), .EXPANSION(EXP), .BUF_DEPTH(BD)) u_dut (.*);

  dcom_top_harness #(.NR(NR), .NC(NC), .EXP(EXP), .BD(BD), .K(K), .T(T), .BAW(BAW), .CW(CW)) u_h (
    .*, .p_ccmd(u_dut.ccmd), .p_gbm_full(u_dut.gbm_full),
    .p_fill_en(u_dut.fill_en), .p_bank_we(u_dut.bank_we));

  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", u_h.checks, u_h.failures + 1);
    $finish;
  end
endmodule
