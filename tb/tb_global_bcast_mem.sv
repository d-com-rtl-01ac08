// tb_global_bcast_mem: random per-entry writes and clears; checks every
// entry through the read port and the full flag against a model.
module tb_global_bcast_mem;
  import dcom_pkg::*;
  localparam int E = 8;
  logic clk = 0, rst_n = 0, clear, full;
  logic wr_en [E];
  fp16_t wr_data [E];
  logic [2:0] rd_addr;
  fp16_t rd_data;
  fp16_t model [E];
  logic [E-1:0] wr_model;
  int checks = 0, failures = 0;
  int fulls = 0;

  global_bcast_mem #(.ENTRIES(E)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; rd_addr = 0;
    foreach (wr_en[e]) begin wr_en[e] = 0; wr_data[e] = 0; end
    wr_model = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      clear = ($urandom_range(15) == 0);
      for (int e = 0; e < E; e++) begin
        wr_en[e] = ($urandom_range(3) == 0);
        wr_data[e] = 16'($urandom);
        if (!clear && wr_en[e]) begin model[e] = wr_data[e]; wr_model[e] = 1; end
      end
      if (clear) wr_model = '0;
      @(posedge clk); #1;
      foreach (wr_en[e]) wr_en[e] = 0;
      clear = 0;
      checks++;
      if (full !== (&wr_model)) begin failures++; if (failures < 10) $display("FAIL full %b", full); end
      if (full) fulls++;
      for (int e = 0; e < E; e++) begin
        rd_addr = 3'(e);
        #1;
        if (wr_model[e]) begin
          checks++;
          if (rd_data !== model[e]) begin failures++; if (failures < 10) $display("FAIL entry %0d", e); end
        end
      end
    end
    checks++;
    if (fulls == 0) begin failures++; $display("FAIL full never set"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
