// scatter_unit: distributes the second operand b to the 8x8 PEs of a cluster.
//
// The paper gives each cluster a network of reduction and scatter units, so
// that a value reduced along a row or a column, or a value broadcast from
// outside, can be sent back to the multipliers. This unit is that scatter
// side, a set of multiplexers: SC_SCALAR sends one scalar to all 64 PEs
// (the broadcast of a projection coefficient), SC_ROW sends rowvec[i] along
// PE row i, SC_COL sends colvec[j] down PE column j, SC_ACC gives each PE
// its own accumulator and SC_SELF gives each PE the buffer word it also gets
// as operand a. Combinational.
module scatter_unit
  import dcom_pkg::*;
(
  input  scat_e   mode,
  input  fp16_t   scalar,
  input  rowvec_t rowvec,
  input  colvec_t colvec,
  input  tile_t   acc,
  input  tile_t   self_tile,
  output tile_t   b
);
  always_comb begin
    for (int i = 0; i < PE_ROWS; i++) begin
      for (int j = 0; j < PE_COLS; j++) begin
        unique case (mode)
          SC_SCALAR: b[i*PE_COLS+j] = scalar;
          SC_ROW:    b[i*PE_COLS+j] = rowvec[i];
          SC_COL:    b[i*PE_COLS+j] = colvec[j];
          SC_ACC:    b[i*PE_COLS+j] = acc[i*PE_COLS+j];
          SC_SELF:   b[i*PE_COLS+j] = self_tile[i*PE_COLS+j];
          default:   b[i*PE_COLS+j] = FP16_ZERO;
        endcase
      end
    end
  end
endmodule
