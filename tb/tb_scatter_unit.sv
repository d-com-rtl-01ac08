// tb_scatter_unit: for every scatter mode, random inputs are applied and
// each of the 64 outputs is compared with the value that PE must receive.
module tb_scatter_unit;
  import dcom_pkg::*;
  scat_e   mode;
  fp16_t   scalar;
  rowvec_t rowvec;
  colvec_t colvec;
  tile_t   acc, self_tile, b;
  int checks = 0, failures = 0;

  scatter_unit dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    scat_e modes [5] = '{SC_SCALAR, SC_ROW, SC_COL, SC_ACC, SC_SELF};
    fp16_t expv;
    for (int n = 0; n < 200; n++) begin
      mode   = modes[n % 5];
      scalar = 16'($urandom);
      for (int i = 0; i < 8; i++) begin rowvec[i] = 16'($urandom); colvec[i] = 16'($urandom); end
      for (int l = 0; l < 64; l++) begin acc[l] = 16'($urandom); self_tile[l] = 16'($urandom); end
      #1;
      for (int i = 0; i < 8; i++)
        for (int j = 0; j < 8; j++) begin
          case (mode)
            SC_SCALAR: expv = scalar;
            SC_ROW:    expv = rowvec[i];
            SC_COL:    expv = colvec[j];
            SC_ACC:    expv = acc[i*8+j];
            default:   expv = self_tile[i*8+j];
          endcase
          checks++;
          if (b[i*8+j] !== expv) begin
            failures++;
            if (failures < 10) $display("FAIL mode=%s pe(%0d,%0d) %h expected %h", mode.name(), i, j, b[i*8+j], expv);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
