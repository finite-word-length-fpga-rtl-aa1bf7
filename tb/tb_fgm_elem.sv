// tb_fgm_elem -- self-checking test of the per-element gradient, projection
// and restart-term logic.
//
// Applies random operands (including extremes that saturate the gradient step)
// and compares u, the restart product and the clip flag with an integer model.
// Makes sure lower clipping, upper clipping, no clipping, gradient saturation
// and positive and negative restart terms all occur.
module tb_fgm_elem;
  import fgm_pkg::*;
  import fgm_ref_pkg::*;

  fx_t v, hv, f, umin, umax, uprev, u;
  dot_t dot;
  logic clipped;
  int checks = 0, failures = 0;
  int n_lo = 0, n_hi = 0, n_in = 0, n_sat = 0, n_pos = 0, n_neg = 0;

  fgm_elem dut (.*);

  function automatic longint r27();
    case ($urandom_range(5))
      0: return QMAX;
      1: return QMIN;
      default: return longint'($urandom_range(32'h7ffffff)) + QMIN;
    endcase
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint a_v, a_hv, a_f, a_lo, a_hi, a_up, chi, eu, ed, s;
    bit ec;
    for (int k = 0; k < 20000; k++) begin
      a_v = r27(); a_hv = r27(); a_f = r27(); a_up = r27();
      a_lo = longint'($urandom_range(32'h3ffffff)) + QMIN;   // lower bound negative
      a_hi = longint'($urandom_range(32'h3ffffff));          // upper bound positive
      v = fx_t'(a_v); hv = fx_t'(a_hv); f = fx_t'(a_f); umin = fx_t'(a_lo); umax = fx_t'(a_hi); uprev = fx_t'(a_up);
      #1;
      s   = a_v - a_hv - a_f;
      chi = sat27(s);
      if (chi != s) n_sat++;
      if (chi < a_lo) begin eu = a_lo; ec = 1; n_lo++; end
      else if (chi > a_hi) begin eu = a_hi; ec = 1; n_hi++; end
      else begin eu = chi; ec = 0; n_in++; end
      ed = (a_v - eu) * (eu - a_up);
      if (ed > 0) n_pos++;
      if (ed < 0) n_neg++;
      checks++;
      if (longint'(u) != eu || longint'(dot) != ed || clipped != ec) begin
        failures++;
        if (failures < 10) $display("v=%0d hv=%0d f=%0d: u=%0d/%0d dot=%0d/%0d clip=%0d/%0d",
                                    a_v, a_hv, a_f, u, eu, dot, ed, clipped, ec);
      end
      #1;
    end
    checks++;
    if (n_lo == 0 || n_hi == 0 || n_in == 0 || n_sat == 0 || n_pos == 0 || n_neg == 0) begin
      failures++;
      $display("case not covered: lo %0d hi %0d in %0d sat %0d pos %0d neg %0d", n_lo, n_hi, n_in, n_sat, n_pos, n_neg);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
