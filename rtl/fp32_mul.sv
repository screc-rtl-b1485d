// fp32_mul: combinational IEEE-754 single-precision multiplier.
// The published accelerator builds its PEs from vendor floating-point IP;
// this module is a self-contained replacement with the same function.
// The 24x24-bit significand product is normalised by at most one place and
// rounded to nearest, ties to even. Subnormal inputs and results are
// flushed to zero (a choice of this design); Inf and NaN follow IEEE-754
// (Inf * 0 = NaN, canonical quiet NaN 0x7fc00000).
// Interface: a, b in; y out, same cycle.
module fp32_mul
  import screc_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic [23:0] ma, mb;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic [47:0] prod;
  logic signed [10:0] e;
  logic [24:0] mant;
  logic        g, s;

  always_comb begin
    sa = a[31];
    sb = b[31];
    ea = a[30:23];
    eb = b[30:23];
    sy = sa ^ sb;
    a_zero = (ea == 8'd0);
    b_zero = (eb == 8'd0);
    a_inf  = (ea == 8'hff) && (a[22:0] == 0);
    b_inf  = (eb == 8'hff) && (b[22:0] == 0);
    a_nan  = (ea == 8'hff) && (a[22:0] != 0);
    b_nan  = (eb == 8'hff) && (b[22:0] != 0);
    ma = {1'b1, a[22:0]};
    mb = {1'b1, b[22:0]};
    prod = ma * mb;
    e = 11'(signed'({3'b0, ea})) + 11'(signed'({3'b0, eb})) - 11'sd127;
    if (prod[47]) begin
      mant = {1'b0, prod[47:24]};
      g    = prod[23];
      s    = |prod[22:0];
      e    = e + 11'sd1;
    end else begin
      mant = {1'b0, prod[46:23]};
      g    = prod[22];
      s    = |prod[21:0];
    end
    if (g && (s || mant[0])) mant = mant + 25'd1;
    if (mant[24]) begin
      mant = mant >> 1;
      e    = e + 11'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero))
      y = 32'h7fc0_0000;
    else if (a_inf || b_inf)
      y = {sy, 8'hff, 23'd0};
    else if (a_zero || b_zero)
      y = {sy, 31'd0};
    else if (e >= 11'sd255)
      y = {sy, 8'hff, 23'd0};
    else if (e <= 11'sd0)
      y = {sy, 31'd0};
    else
      y = {sy, e[7:0], mant[22:0]};
  end
endmodule
