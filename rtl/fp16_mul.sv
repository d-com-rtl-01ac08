// fp16_mul: combinational IEEE-754 binary16 multiplier.
//
// One of these sits in every processing element; the paper specifies FP16
// multipliers but not their internals. This design rounds to nearest even
// and flushes subnormal inputs and results to signed zero (FTZ/DAZ), a
// common simplification in ML datapaths. Overflow gives infinity, NaN or
// inf*0 gives the quiet NaN 0x7E00. Purely combinational: y is valid in the
// same cycle as a and b.
module fp16_mul
  import dcom_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  output fp16_t y
);
  logic        sa, sb, sy;
  logic [4:0]  ea, eb;
  logic [9:0]  ma, mb;
  logic [21:0] p;
  logic [10:0] sig;
  logic        g, st, rup;
  logic [11:0] sig_r;
  logic signed [7:0] e;
  logic a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;

  always_comb begin
    {sa, ea, ma} = a;
    {sb, eb, mb} = b;
    sy     = sa ^ sb;
    a_nan  = (ea == 5'h1F) && (ma != 0);
    b_nan  = (eb == 5'h1F) && (mb != 0);
    a_inf  = (ea == 5'h1F) && (ma == 0);
    b_inf  = (eb == 5'h1F) && (mb == 0);
    a_zero = (ea == 5'h00);            // zero or subnormal (flushed)
    b_zero = (eb == 5'h00);
    p      = {1'b1, ma} * {1'b1, mb};  // [1,4) scaled by 2^20
    e      = 8'(signed'({3'b000, ea})) + 8'(signed'({3'b000, eb})) - 8'sd15;
    if (p[21]) begin
      sig = p[21:11];
      g   = p[10];
      st  = |p[9:0];
      e   = e + 8'sd1;
    end else begin
      sig = p[20:10];
      g   = p[9];
      st  = |p[8:0];
    end
    rup   = g & (st | sig[0]);
    sig_r = {1'b0, sig} + {11'd0, rup};
    if (sig_r[11]) begin
      sig_r = sig_r >> 1;
      e     = e + 8'sd1;
    end
    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero))
      y = FP16_QNAN;
    else if (a_inf || b_inf)
      y = {sy, 5'h1F, 10'h000};
    else if (a_zero || b_zero)
      y = {sy, 15'h0000};
    else if (e >= 8'sd31)
      y = {sy, 5'h1F, 10'h000};
    else if (e <= 8'sd0)
      y = {sy, 15'h0000};
    else
      y = {sy, e[4:0], sig_r[9:0]};
  end
endmodule
