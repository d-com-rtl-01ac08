// dcom_pe: one processing element of a cluster, an FP16 multiply-accumulate.
//
// The paper places 8x8 FP16 multipliers (8x8 MACs) in each cluster, each
// feeding a row and a column reduction tree. This PE multiplies the buffer
// operand a with the scattered operand b and, depending on the command,
// either registers the product for the reduction trees (C_DOT), or updates
// its accumulator: acc <= a (C_LOAD), acc <= a*b (C_MUL), acc <= acc -/+ a*b
// (C_MAC, neg selects subtraction). The accumulator is where a tile of the
// vector being re-orthogonalised is held while corrections are subtracted
// from it; that use of the accumulator is this design's mapping. The product
// and the accumulator sum are each rounded to FP16 (no fused rounding).
// Timing: op, a, b are sampled at a rising edge; prod and acc change there.
module dcom_pe
  import dcom_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  cop_e  op,
  input  logic  neg,
  input  fp16_t a,
  input  fp16_t b,
  output fp16_t prod,
  output fp16_t acc
);
  fp16_t p, p_signed, sum;

  fp16_mul u_mul (.a(a), .b(b), .y(p));
  assign p_signed = neg ? {~p[15], p[14:0]} : p;
  fp16_add u_add (.a(acc), .b(p_signed), .y(sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prod <= FP16_ZERO;
      acc  <= FP16_ZERO;
    end else begin
      unique case (op)
        C_LOAD:  acc  <= a;
        C_DOT:   prod <= p;
        C_MAC:   acc  <= sum;
        C_MUL:   acc  <= p;
        default: ;
      endcase
    end
  end
endmodule
