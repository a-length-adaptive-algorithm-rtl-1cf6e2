// exp_unit: fixed-point exponential used by the fused attention loop (the
// exponent half of the softmax; the normalization half is attn_normalize).
//
// e^x = 2^(x*log2(e)). The product y = x*log2(e) is split into an integer part,
// applied as a shift, and a fraction f, for which 2^f = 1 + f*(0.6565 + 0.3435*f)
// (relative error below 0.3 %). The polynomial is this design's choice.
// Input: signed, 8 fraction bits, clamped to [-16, 8). Output: unsigned, 12
// fraction bits (e^8 < 2^12, so 24 bits suffice). Combinational.
module exp_unit (
  input  logic signed [23:0] x,
  output logic [23:0]        y
);
  localparam logic [15:0] LOG2E = 16'd5909;   // round(log2(e) * 2^12)
  localparam logic [15:0] C1    = 16'd2689;   // round(0.6565 * 2^12)
  localparam logic [15:0] C2    = 16'd1407;   // round(0.3435 * 2^12)

  logic signed [23:0] xc;
  logic signed [47:0] t;
  logic signed [15:0] yi;      // integer part of x*log2(e)
  logic [11:0]        f;       // fraction, 12 bits
  logic [31:0]        poly;    // 2^f, 12 fraction bits
  logic [47:0]        shifted;

  always_comb begin
    xc = x;
    if (xc < -24'sd4096)      xc = -24'sd4096;   // -16.0
    else if (xc > 24'sd2047)  xc = 24'sd2047;    // just below 8.0
    t    = 48'(xc) * $signed({32'd0, LOG2E});     // 20 fraction bits
    t    = t >>> 8;                               // 12 fraction bits
    yi   = 16'(t >>> 12);
    f    = t[11:0];
    poly = 32'd4096 + ((32'(f) * (32'(C1) + ((32'(C2) * 32'(f)) >> 12))) >> 12);
    if (yi >= 0) shifted = 48'(poly) << yi;
    else         shifted = 48'(poly) >> (-yi);
    y = (shifted > 48'hFF_FFFF) ? 24'hFF_FFFF : shifted[23:0];
  end
endmodule
