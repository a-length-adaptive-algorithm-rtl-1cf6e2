// gelu_unit: GELU activation of the feed-forward stage on int8 values with four
// fraction bits.
//
// GELU(x) = x/2 * (1 + erf(x/sqrt 2)), with erf(t) approximated by the
// second-order polynomial L(t) = sign(t) * (a*(min(|t|, 1.769) - 1.769)^2 + 1),
// a = -0.2888, evaluated in integers with 14 fraction bits. The approximation is
// this design's choice. Result rounded to nearest and saturated. Combinational.
module gelu_unit (
  input  logic signed [7:0] x,
  output logic signed [7:0] y
);
  localparam int B   = 28983;   // round(1.769 * 2^14)
  localparam int A   = 4732;    // round(0.2888 * 2^14)
  localparam int RS2 = 11585;   // round(2^14 / sqrt 2)

  int t, at, d, l, prod;

  always_comb begin
    t  = (int'(x) * RS2) >>> 4;          // x/sqrt2, 14 fraction bits
    at = (t < 0) ? -t : t;
    if (at > B) at = B;
    d  = at - B;                          // <= 0
    l  = (1 << 14) - ((A * ((d * d) >>> 14)) >>> 14);
    if (t < 0) l = -l;                    // erf(x/sqrt2), 14 fraction bits
    prod = int'(x) * ((1 << 14) + l);     // x*(1+erf), 4+14 fraction bits
    prod = (prod + (1 << 14)) >>> 15;     // /2, back to 4 fraction bits, rounded
    y = lat_pkg::sat8(64'(prod));
  end
endmodule
