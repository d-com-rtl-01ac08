// tb_memory_bank: random traffic on both ports of a bank against an array
// model: one-cycle read latency on each port, old data on a read/write
// collision, port B winning a write/write collision.
module tb_memory_bank;
  import dcom_pkg::*;
  localparam int D = 64;
  logic clk = 0;
  logic a_en, a_we, b_en, b_we;
  logic [5:0] a_addr, b_addr;
  tile_t a_wdata, a_rdata, b_wdata, b_rdata;
  tile_t model [D];
  int checks = 0, failures = 0;

  memory_bank #(.DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic tile_t rt();
    tile_t x;
    for (int l = 0; l < 64; l++) x[l] = 16'($urandom);
    return x;
  endfunction

  initial begin
    tile_t ea, eb;
    logic ca, cb;
    a_en = 0; b_en = 0; a_we = 0; b_we = 0; a_addr = 0; b_addr = 0; a_wdata = '0; b_wdata = '0;
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      a_en = 1; a_we = 1; a_addr = 6'(i); a_wdata = rt(); model[i] = a_wdata;
    end
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      a_en = 1'($urandom); b_en = 1'($urandom);
      a_we = 1'($urandom); b_we = 1'($urandom);
      a_addr = 6'($urandom); b_addr = (n % 4 == 0) ? a_addr : 6'($urandom);
      a_wdata = rt(); b_wdata = rt();
      ca = a_en && !a_we; cb = b_en && !b_we;
      ea = model[a_addr]; eb = model[b_addr];
      if (a_en && a_we) model[a_addr] = a_wdata;
      if (b_en && b_we) model[b_addr] = b_wdata;
      @(posedge clk); #1;
      if (ca) begin checks++; if (a_rdata !== ea) begin failures++; if (failures < 10) $display("FAIL port A read %0d", a_addr); end end
      if (cb) begin checks++; if (b_rdata !== eb) begin failures++; if (failures < 10) $display("FAIL port B read %0d", b_addr); end end
    end
    // final sweep of the contents through port B
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      a_en = 0; b_en = 1; b_we = 0; b_addr = 6'(i);
      @(posedge clk); #1;
      checks++;
      if (b_rdata !== model[i]) begin failures++; if (failures < 10) $display("FAIL sweep %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
