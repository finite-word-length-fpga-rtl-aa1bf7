// fgm_elem -- per-element gradient step, projection and restart term of the
// primal fast gradient method.
//
// For one element r of the optimisation vector, with hv = (Hcp*v)_r from the
// adder tree and f = fcp_r, the linear term already multiplied by the inverse
// preconditioner:
//   chi   = v - (hv + f)                 gradient step, saturated to ap_fixed<27,2>
//   u     = min(max(chi, umin), umax)     projection onto the box constraints
//   dot   = (v - u) * (u - uprev)         one term of the adaptive-restart test
// The gradient step uses the preconditioned Hessian directly, so v, chi and u
// stay unscaled and no multiplication by the inverse preconditioner is needed
// per iteration, as the paper's fixed-point variant does. The restart term is
// kept exact (56 bits, 50 fractional bits) in a 64-bit word; the paper used
// 64 bits for the restart test. `clipped` reports that the bound was active.
//
// Purely combinational; the caller registers the results.
module fgm_elem
  import fgm_pkg::*;
(
  input  fx_t  v,
  input  fx_t  hv,
  input  fx_t  f,
  input  fx_t  umin,
  input  fx_t  umax,
  input  fx_t  uprev,
  output fx_t  u,
  output dot_t dot,
  output logic clipped
);

  fx_t chi;
  logic signed [BW:0] d_vu, d_uu;

  always_comb begin
    chi = sat_bw(128'(v) - 128'(hv) - 128'(f));
    if (chi < umin) begin
      u       = umin;
      clipped = 1'b1;
    end else if (chi > umax) begin
      u       = umax;
      clipped = 1'b1;
    end else begin
      u       = chi;
      clipped = 1'b0;
    end
    d_vu = (BW+1)'(v) - (BW+1)'(u);
    d_uu = (BW+1)'(u) - (BW+1)'(uprev);
    dot  = DOT_W'(d_vu) * DOT_W'(d_uu);
  end

endmodule
