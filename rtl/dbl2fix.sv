// dbl2fix -- IEEE-754 double to signed fixed point, ap_fixed<W, W-F>.
//
// The kernel's host interface carries doubles; the solver computes in 27-bit
// fixed point. The double's significand (with its hidden one) is given its
// sign and shifted right so that F fractional bits remain; the dropped bits are
// rounded half toward +infinity (AP_RND) and the result is clamped to the
// W-bit range (AP_SAT). Zero and subnormal inputs give 0, infinities saturate
// to the extreme of their sign, and NaN gives 0.
// Combinational; the paper states only that the conversion happens inside
// the kernel, so this circuit is this design's own.
module dbl2fix #(
  parameter int unsigned W = 27,
  parameter int unsigned F = 25
) (
  input  logic [63:0]         d,
  output logic signed [W-1:0] q
);

  localparam logic signed [W-1:0] QMAX = {1'b0, {(W-1){1'b1}}};
  localparam logic signed [W-1:0] QMIN = {1'b1, {(W-1){1'b0}}};

  logic               sgn;
  logic [10:0]        e;
  logic [51:0]        m;
  logic signed [12:0] sh;       // right shift that leaves F fractional bits
  logic signed [63:0] sig;      // signed significand, 54 bits used
  logic signed [63:0] r;

  always_comb begin
    sgn = d[63];
    e   = d[62:52];
    m   = d[51:0];
    sig = {11'b0, 1'b1, m};
    if (sgn) sig = -sig;
    // value = sig * 2^(e - 1075); scaled by 2^F: shift right by 1075 - F - e
    sh = 13'(1075 - F) - 13'(signed'({2'b0, e}));
    r  = '0;
    if (e == 11'd0) begin
      q = '0;
    end else if (e == 11'h7ff) begin
      q = (m != 0) ? '0 : (sgn ? QMIN : QMAX);
    end else if (sh <= 0) begin
      q = sgn ? QMIN : QMAX;   // |value| >= 2^(52-F), far beyond the range
    end else if (sh > 60) begin
      q = '0;
    end else begin
      r = (sig + (64'sd1 <<< (sh - 1))) >>> sh;
      if (r > 64'(QMAX))      q = QMAX;
      else if (r < 64'(QMIN)) q = QMIN;
      else                    q = r[W-1:0];
    end
  end

endmodule
