// fp16_add: combinational IEEE-754 binary16 adder.
//
// Used by every node of the reduction trees, by the PE accumulators and by
// the cluster-level dot-product accumulator. The paper names FP16 datapaths
// but not the adder; this one aligns the smaller operand with guard, round
// and sticky bits and rounds to nearest even, which gives the correctly
// rounded sum. Subnormal inputs and results are flushed to zero, overflow
// gives infinity, inf + -inf and NaN inputs give the quiet NaN 0x7E00.
// An exact zero sum is +0 unless both operands are -0.
module fp16_add
  import dcom_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  output fp16_t y
);
  logic        sx, sy_, eff_sub;
  logic [4:0]  ex, ey;
  logic [9:0]  mx, my;
  logic [4:0]  d;
  logic [13:0] xs, ys, ymask;
  logic        sticky;
  logic [14:0] s;
  logic [3:0]  lz;
  logic signed [7:0] e;
  logic [10:0] sig;
  logic        rup;
  logic [11:0] sig_r;
  logic a_nan, b_nan, a_inf, b_inf, a_zero, b_zero, swap;

  always_comb begin
    a_nan  = (a[14:10] == 5'h1F) && (a[9:0] != 0);
    b_nan  = (b[14:10] == 5'h1F) && (b[9:0] != 0);
    a_inf  = (a[14:10] == 5'h1F) && (a[9:0] == 0);
    b_inf  = (b[14:10] == 5'h1F) && (b[9:0] == 0);
    a_zero = (a[14:10] == 5'h00);
    b_zero = (b[14:10] == 5'h00);
    swap   = (b[14:0] > a[14:0]);
    {sx, ex, mx} = swap ? b : a;   // larger magnitude
    {sy_, ey, my} = swap ? a : b;
    eff_sub = sx ^ sy_;
    d       = ex - ey;
    xs      = {1'b1, mx, 3'b000};
    ys      = {1'b1, my, 3'b000};
    ymask = (d >= 5'd14) ? 14'h3FFF : ((14'd1 << d) - 14'd1);
    sticky = |(ys & ymask);
    ys     = (d >= 5'd14) ? 14'd0 : (ys >> d);
    ys[0] = ys[0] | sticky;
    e     = 8'(signed'({3'b000, ex}));
    lz    = '0;
    if (!eff_sub) begin
      s = {1'b0, xs} + {1'b0, ys};
      if (s[14]) begin
        s = {1'b0, s[14:2], s[1] | s[0]};
        e = e + 8'sd1;
      end
    end else begin
      s = {1'b0, xs} - {1'b0, ys};
      for (int i = 0; i <= 13; i++)
        if (s[i]) lz = 4'(13 - i);
      s = s << lz;
      e = e - 8'(signed'({4'b0000, lz}));
    end
    sig   = s[13:3];
    rup   = s[2] & (s[1] | s[0] | sig[0]);
    sig_r = {1'b0, sig} + {11'd0, rup};
    if (sig_r[11]) begin
      sig_r = sig_r >> 1;
      e     = e + 8'sd1;
    end
    if (a_nan || b_nan || (a_inf && b_inf && (a[15] != b[15])))
      y = FP16_QNAN;
    else if (a_inf)
      y = a;
    else if (b_inf)
      y = b;
    else if (a_zero && b_zero)
      y = {a[15] & b[15], 15'h0000};
    else if (a_zero)
      y = b;
    else if (b_zero)
      y = a;
    else if (eff_sub && (s[13:0] == 14'd0))
      y = FP16_ZERO;
    else if (e >= 8'sd31)
      y = {sx, 5'h1F, 10'h000};
    else if (e <= 8'sd0)
      y = {sx, 15'h0000};
    else
      y = {sx, e[4:0], sig_r[9:0]};
  end
endmodule
