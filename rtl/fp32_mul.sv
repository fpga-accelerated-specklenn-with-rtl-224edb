// fp32_mul -- combinational IEEE-754 single-precision multiplier.
//
// y = a * b, rounded to nearest, ties to even. The network runs in 32-bit
// floating point throughout; the rounding mode matches the usual software
// reference. This design's own simplifications: subnormal inputs are read as
// zero and results below the smallest normal number flush to a signed zero
// (as with flush-to-zero DSP floating-point cores); overflow gives infinity;
// NaN or 0*inf gives the quiet NaN 7fc00000. Purely combinational, no latency.
module fp32_mul
  import snl_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  logic        sy;
  logic [7:0]  ea, eb;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic [47:0] prod;
  logic [22:0] mant;
  logic        g, st, rup;
  logic [23:0] mant_r;
  logic signed [10:0] e;

  always_comb begin
    sy     = a[31] ^ b[31];
    ea     = a[30:23];
    eb     = b[30:23];
    a_zero = (ea == 8'd0);
    b_zero = (eb == 8'd0);
    a_inf  = (ea == 8'hff) && (a[22:0] == '0);
    b_inf  = (eb == 8'hff) && (b[22:0] == '0);
    a_nan  = (ea == 8'hff) && (a[22:0] != '0);
    b_nan  = (eb == 8'hff) && (b[22:0] != '0);
    prod   = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e      = $signed({3'b0, ea}) + $signed({3'b0, eb}) - 11'sd127;
    if (prod[47]) begin
      mant = prod[46:24];
      g    = prod[23];
      st   = |prod[22:0];
      e    = e + 11'sd1;
    end else begin
      mant = prod[45:23];
      g    = prod[22];
      st   = |prod[21:0];
    end
    rup    = g && (st || mant[0]);
    mant_r = {1'b0, mant} + {23'd0, rup};
    if (mant_r[23]) e = e + 11'sd1;          // rounding carried into the exponent

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero))
      y = FP_QNAN;
    else if (a_inf || b_inf)
      y = {sy, FP_INF[30:0]};
    else if (a_zero || b_zero)
      y = {sy, 31'd0};
    else if (e >= 11'sd255)
      y = {sy, FP_INF[30:0]};
    else if (e <= 11'sd0)
      y = {sy, 31'd0};
    else
      y = {sy, e[7:0], mant_r[22:0]};
  end
endmodule
