// fp32_add: combinational IEEE-754 single-precision adder.
// Used as the accumulator of every PE, in the vector pooling unit and in
// the bias adder. The published design uses vendor floating-point IP; this
// is a self-contained replacement. The smaller operand is aligned to the
// larger one in a 50-bit frame (26 extra bits, bits shifted out beyond that
// folded into a sticky bit), added or subtracted, renormalised and rounded
// to nearest, ties to even. Subnormals are flushed to zero (design choice);
// Inf - Inf gives the canonical quiet NaN 0x7fc00000.
// Interface: a, b in; y out, same cycle.
module fp32_add
  import screc_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  fp32_t       x, z;          // |x| >= |z|
  logic        xs, zs, sub;
  logic [7:0]  xe, ze, d;
  logic [49:0] xm, zm, zsh;
  logic [50:0] sum;
  logic [49:0] n;
  logic signed [10:0] e;
  logic [24:0] mant;
  logic        g, s, x_nan, z_nan, x_inf, z_inf;
  int unsigned lz;

  always_comb begin
    // flush subnormals to signed zero
    x = (a[30:23] == 0) ? {a[31], 31'd0} : a;
    z = (b[30:23] == 0) ? {b[31], 31'd0} : b;
    if (z[30:0] > x[30:0]) begin
      x = z;
      z = (a[30:23] == 0) ? {a[31], 31'd0} : a;
    end
    xs = x[31];
    zs = z[31];
    xe = x[30:23];
    ze = z[30:23];
    sub = xs ^ zs;
    x_nan = (xe == 8'hff) && (x[22:0] != 0);
    z_nan = (ze == 8'hff) && (z[22:0] != 0);
    x_inf = (xe == 8'hff) && (x[22:0] == 0);
    z_inf = (ze == 8'hff) && (z[22:0] == 0);
    xm = (xe == 0) ? 50'd0 : {1'b1, x[22:0], 26'd0};
    zm = (ze == 0) ? 50'd0 : {1'b1, z[22:0], 26'd0};
    d  = xe - ze;
    if (ze == 0) begin
      zsh = 50'd0;
    end else if (d >= 8'd50) begin
      zsh = 50'd1;                                   // pure sticky
    end else begin
      zsh = zm >> d;
      if ((zm & ((50'd1 << d) - 50'd1)) != 0) zsh[0] = 1'b1;
    end
    sum = sub ? ({1'b0, xm} - {1'b0, zsh}) : ({1'b0, xm} + {1'b0, zsh});
    e = 11'(signed'({3'b0, xe}));
    lz = 0;
    if (sum[50]) begin
      n = sum[50:1];
      n[0] = n[0] | sum[0];
      e = e + 11'sd1;
    end else begin
      for (int i = 49; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      n = sum[49:0] << lz;
      e = e - 11'(signed'(lz));
    end
    mant = {1'b0, n[49:26]};
    g = n[25];
    s = |n[24:0];
    if (g && (s || mant[0])) mant = mant + 25'd1;
    if (mant[24]) begin
      mant = mant >> 1;
      e = e + 11'sd1;
    end

    if (x_nan || z_nan || (x_inf && z_inf && sub))
      y = 32'h7fc0_0000;
    else if (x_inf)
      y = x;
    else if (xe == 0)                                  // both zero
      y = {xs & zs, 31'd0};
    else if (sum == 0)
      y = 32'd0;
    else if (e >= 11'sd255)
      y = {xs, 8'hff, 23'd0};
    else if (e <= 11'sd0)
      y = {xs, 31'd0};
    else
      y = {xs, e[7:0], mant[22:0]};
  end
endmodule
