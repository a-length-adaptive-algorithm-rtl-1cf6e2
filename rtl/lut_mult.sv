// lut_mult: multiplies two QBITS-bit quantized codes by table look-up, as the
// approximate score pass does instead of using DSP multipliers.
//
// The table has 2^(2*QBITS) entries (4 for 1-bit codes, 256 for 4-bit codes) and
// is filled at elaboration from the code decoding in lat_pkg::qdecode, so changing
// QBITS regenerates it. Combinational: p = decode(a) * decode(b).
module lut_mult #(
  parameter int unsigned QBITS = lat_pkg::QBITS_DEF
) (
  input  logic [QBITS-1:0]          a,
  input  logic [QBITS-1:0]          b,
  output logic signed [2*QBITS:0]   p
);
  localparam int unsigned N = 1 << (2 * QBITS);

  typedef logic signed [2*QBITS:0] entry_t;
  typedef entry_t table_t [N];

  function automatic table_t build();
    table_t t;
    for (int i = 0; i < int'(N); i++)
      t[i] = entry_t'(lat_pkg::qdecode(QBITS, 8'(i >> QBITS)) *
                      lat_pkg::qdecode(QBITS, 8'(i & ((1 << QBITS) - 1))));
    return t;
  endfunction

  localparam table_t TABLE = build();

  assign p = TABLE[{a, b}];
endmodule
