// fp32_add -- combinational IEEE-754 single-precision adder.
//
// y = a + b, rounded to nearest, ties to even. The operands are ordered by
// magnitude, the smaller is aligned with guard, round and sticky bits, the
// sum or difference is normalised with a leading-zero count and rounded.
// This design's own simplifications, as in fp32_mul: subnormal inputs count
// as zero, results below the smallest normal flush to zero, overflow gives
// infinity, NaN and inf-inf give the quiet NaN 7fc00000, and an exact
// cancellation gives +0. Purely combinational, no latency.
module fp32_add
  import snl_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  fp32_t       x, z;                 // |x| >= |z|
  logic        x_zero, z_zero, x_inf, z_inf, x_nan, z_nan;
  logic [7:0]  d;
  logic [23:0] mx, mz;
  logic [26:0] ax, az;               // 24-bit mantissa + guard, round, sticky
  logic [49:0] zw;
  logic [27:0] sum;
  logic [26:0] s;
  logic [4:0]  lz;
  logic signed [10:0] e;
  logic        rup;
  logic [24:0] mr;

  always_comb begin
    if (a[30:0] >= b[30:0]) begin x = a; z = b; end
    else                    begin x = b; z = a; end
    x_zero = (x[30:23] == 8'd0);
    z_zero = (z[30:23] == 8'd0);
    x_inf  = (x[30:23] == 8'hff) && (x[22:0] == '0);
    z_inf  = (z[30:23] == 8'hff) && (z[22:0] == '0);
    x_nan  = (x[30:23] == 8'hff) && (x[22:0] != '0);
    z_nan  = (z[30:23] == 8'hff) && (z[22:0] != '0);
    mx     = {~x_zero, x[22:0]};
    mz     = {~z_zero, z[22:0]};
    d      = x[30:23] - z[30:23];
    ax     = {mx, 3'b000};
    zw     = (d > 8'd49) ? 50'd0 : ({mz, 26'd0} >> d);
    az     = {zw[49:24], |zw[23:0] | ((d > 8'd49) && (mz != '0))};
    e      = $signed({3'b0, x[30:23]});
    lz     = '0;
    if (x[31] == z[31]) begin
      sum = {1'b0, ax} + {1'b0, az};
      if (sum[27]) begin
        s = {sum[27:2], sum[1] | sum[0]};
        e = e + 11'sd1;
      end else begin
        s = sum[26:0];
      end
    end else begin
      sum = {1'b0, ax} - {1'b0, az};
      s   = sum[26:0];
      for (int i = 26; i >= 0; i--) begin
        if (s[i]) begin
          lz = 5'(26 - i);
          break;
        end
      end
      s = s << lz;
      e = e - $signed({6'd0, lz});
    end
    rup = s[2] && (s[1] || s[0] || s[3]);
    mr  = {1'b0, s[26:3]} + {24'd0, rup};
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 11'sd1;
    end

    if (x_nan || z_nan || (x_inf && z_inf && (x[31] != z[31])))
      y = FP_QNAN;
    else if (x_inf)
      y = x;
    else if (x_zero)                                  // both operands zero
      y = {x[31] & z[31], 31'd0};
    else if (s == '0)
      y = FP_ZERO;                                    // exact cancellation
    else if (e >= 11'sd255)
      y = {x[31], FP_INF[30:0]};
    else if (e <= 11'sd0)
      y = {x[31], 31'd0};
    else
      y = {x[31], e[7:0], mr[22:0]};
  end
endmodule
