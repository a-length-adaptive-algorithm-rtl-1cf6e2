// bits_selector: quantizes one word of int8 Q or K values into QBITS-bit codes for
// the approximate attention pass (Stage 1, At-Sel).
//
// With QBITS = 1 (the configuration evaluated in the source) the code is the sign
// bit: 1 for a negative value, 0 otherwise, standing for -1 and +1. With more bits
// each value is multiplied by scale = (2^(QBITS-1)-1)/|M| (unsigned, 12 fraction
// bits, M being the tensor's scaling factor), rounded to nearest and saturated to
// +/-(2^(QBITS-1)-1), as in x' = round((2^3-1)/|M| * x) for 4 bits. The host
// provides the scale; how M is found is this design's choice.
// Purely combinational; LANES values side by side. At the default QBITS = 1 each
// code bit is just the sign bit of its input, so the block reduces to wiring.
module bits_selector #(
  parameter int unsigned LANES = lat_pkg::LANES_DEF,
  parameter int unsigned QBITS = lat_pkg::QBITS_DEF
) (
  input  logic [LANES*8-1:0]     x,
  input  logic [15:0]            scale,
  output logic [LANES*QBITS-1:0] code
);
  localparam int QMAX = (1 << (QBITS - 1)) - 1;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [7:0]  v;
      logic signed [31:0] prod, r;
      v = x[l*8 +: 8];
      if (QBITS == 1) begin
        code[l*QBITS +: QBITS] = QBITS'(v[7]);
      end else begin
        prod = 32'(v) * $signed({16'd0, scale});
        r    = (prod + 32'sd2048) >>> 12;      // round half up
        if (r > QMAX)       r = QMAX;
        else if (r < -QMAX) r = -QMAX;
        code[l*QBITS +: QBITS] = r[QBITS-1:0];
      end
    end
  end
endmodule
