// tb_dcom_top_mid: the end-to-end Lanczos step of tb_dcom_top on a larger
// array: 8x8 clusters with the default expansion factor of 8 (eight groups
// of eight clusters) and 64-word buffers. One tile per cluster gives
// vectors of 64*64 = 4096 elements, the embedding size of the evaluated
// model, and z is re-orthogonalised against K = 10 basis vectors, the
// number of Lanczos iterations used in the evaluation. See
// dcom_top_harness.
module tb_dcom_top_mid;
  import dcom_pkg::*;
  localparam int NR = 8, NC = 8, EXP = 8, BD = 64, K = 10, T = 1;
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
