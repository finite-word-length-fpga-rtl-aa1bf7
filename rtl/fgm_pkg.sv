// fgm_pkg -- fixed-point formats, sizes and rounding helpers shared by the
// finite-word-length fast-gradient-method (FGM) MPC kernel.
//
// Every number in the datapath is a signed two's-complement fixed-point word.
// A format ap_fixed<W,I> (W bits, I integer bits including the sign) has
// F = W - I fractional bits. The kernel uses 27-bit words throughout, the width
// that fits one operand port of a DSP multiplier:
//   Hcp element          ap_fixed<27,-1>   F = 28, range [-0.25, 0.25)
//   v, chi, u, tvn, f    ap_fixed<27, 2>   F = 25, range [-2, 2)
//   product H*v          ap_fixed<27, 1>   F = 26, range [-1, 1)
//   beta (acceleration)  ap_fixed<27, 1>   F = 26 (this design's choice)
// Conversions use AP_RND (round half toward +infinity) and AP_SAT (clamp to
// the most positive / most negative code). The formats of H, v, tvn and the
// product follow the published HLS source; the format of beta, of the
// bounds and of the linear-term matrix are this design's choice.
package fgm_pkg;

  // Problem sizes of the ITER resistive-wall-mode controller.
  localparam int unsigned N_OPT_DEF  = 81;  // 27 coils x 3 move-blocking intervals
  localparam int unsigned N_X_DEF    = 50;  // order of the control model
  localparam int unsigned N_U_DEF    = 27;  // ELM coil power-supply inputs
  localparam int unsigned N_ITER_DEF = 20;  // FGM iterations per sample

  localparam int unsigned BW     = 27;  // base word width
  localparam int unsigned H_FRAC = 28;  // ap_fixed<27,-1>
  localparam int unsigned V_FRAC = 25;  // ap_fixed<27,2>
  localparam int unsigned P_FRAC = 26;  // ap_fixed<27,1>
  localparam int unsigned B_FRAC = 26;  // beta, ap_fixed<27,1>
  localparam int unsigned DOT_W  = 64;  // restart test accumulator

  typedef logic signed [BW-1:0]    fx_t;   // any 27-bit fixed-point word
  typedef logic signed [DOT_W-1:0] dot_t;

  // Coefficient memories that the control interface can write.
  typedef enum logic [3:0] {
    SEL_NONE = 4'd0,
    SEL_H    = 4'd1,   // preconditioned Hessian Hcp, N_OPT x N_OPT, ap_fixed<27,-1>
    SEL_F    = 4'd2,   // linear-term matrix Fp,     N_OPT x N_X,   ap_fixed<27,-1>
    SEL_BETA = 4'd3,   // beta sequence,             N_ITER,        ap_fixed<27,1>
    SEL_UMIN = 4'd4,   // lower bounds,              N_OPT,         ap_fixed<27,2>
    SEL_UMAX = 4'd5    // upper bounds,              N_OPT,         ap_fixed<27,2>
  } coef_sel_e;

  typedef struct packed {
    logic      we;
    coef_sel_e sel;
    logic [6:0] row;
    logic [6:0] col;
    fx_t       data;
  } coef_wr_t;

  // Saturate a wide signed value to a BW-bit word.
  function automatic fx_t sat_bw(input logic signed [127:0] a);
    localparam logic signed [127:0] MAXV = (128'sd1 <<< (BW - 1)) - 1;
    localparam logic signed [127:0] MINV = -(128'sd1 <<< (BW - 1));
    if (a > MAXV)      return fx_t'(MAXV);
    else if (a < MINV) return fx_t'(MINV);
    else               return fx_t'(a);
  endfunction

  // Drop `sh` fractional bits of a wide signed value with AP_RND rounding
  // (add half an output LSB, then floor), then saturate to BW bits.
  function automatic fx_t rnd_sat(input logic signed [127:0] a, input int unsigned sh);
    logic signed [127:0] r;
    if (sh == 0) r = a;
    else         r = (a + (128'sd1 <<< (sh - 1))) >>> sh;
    return sat_bw(r);
  endfunction

endpackage
