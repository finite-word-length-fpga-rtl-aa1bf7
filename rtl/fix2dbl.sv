// fix2dbl -- signed fixed point ap_fixed<W, W-F> to IEEE-754 double, exactly.
//
// The magnitude of the W-bit word (W <= 53) fits the double's significand, so
// the conversion is exact: find the leading one, left-align the magnitude in
// the 52-bit fraction field and set the exponent to (leading-one position - F
// + 1023). Zero maps to +0.0.
// Combinational; the paper states only that the conversion happens inside the
// kernel, so this circuit is this design's own.
module fix2dbl #(
  parameter int unsigned W = 27,
  parameter int unsigned F = 25
) (
  input  logic signed [W-1:0] q,
  output logic [63:0]         d
);

  logic         sgn;
  logic [W-1:0] mag;
  int unsigned  p;
  logic [51:0]  sig;   // fraction field, hidden one dropped

  always_comb begin
    sgn = q[W-1];
    mag = sgn ? W'(-q) : W'(q);   // -2^(W-1) gives 2^(W-1), still correct unsigned
    p   = 0;
    for (int unsigned k = 0; k < W; k++) if (mag[k]) p = k;
    sig = 52'(53'(mag) << (52 - p));
    if (mag == '0) d = 64'd0;
    else           d = {sgn, 11'(p + 1023 - F), sig};
  end

endmodule
