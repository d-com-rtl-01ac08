// tb_cluster_buffer: random reads and writes against an array model,
// checking one-cycle read latency and read-old-data on a same-word collision.
module tb_cluster_buffer;
  import dcom_pkg::*;
  localparam int D = 64;
  logic clk = 0;
  logic rd_en, wr_en;
  logic [5:0] rd_addr, wr_addr;
  tile_t rd_data, wr_data;
  tile_t model [D];
  logic  known [D];
  int checks = 0, failures = 0;

  cluster_buffer #(.DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tile_t expv;
    logic  chk;
    foreach (known[i]) known[i] = 0;
    rd_en = 0; wr_en = 0; rd_addr = 0; wr_addr = 0; wr_data = '0;
    // fill every word first
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 6'(i);
      for (int l = 0; l < 64; l++) wr_data[l] = 16'($urandom);
      model[i] = wr_data; known[i] = 1;
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      rd_en = 1'($urandom); wr_en = 1'($urandom);
      rd_addr = 6'($urandom); wr_addr = (n % 5 == 0) ? rd_addr : 6'($urandom);
      for (int l = 0; l < 64; l++) wr_data[l] = 16'($urandom);
      chk  = rd_en;
      expv = model[rd_addr];
      if (wr_en) model[wr_addr] = wr_data;
      @(posedge clk); #1;
      if (chk) begin
        checks++;
        if (rd_data !== expv) begin
          failures++;
          if (failures < 10) $display("FAIL read %0d", rd_addr);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
