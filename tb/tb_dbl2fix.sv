// tb_dbl2fix -- self-checking test of the double to ap_fixed<27,2> converter.
//
// Converts random doubles spread over many binades (tiny, in range, out of
// range), exact ties that test round-half-up, zeros, infinities and NaN, and
// compares with floor(x * 2^25 + 0.5) clamped to 27 bits, computed with reals.
module tb_dbl2fix;
  import fgm_ref_pkg::*;

  logic [63:0] d;
  logic signed [26:0] q;
  int checks = 0, failures = 0;
  int n_sat = 0, n_tie = 0;

  dbl2fix #(.W(27), .F(25)) dut (.d(d), .q(q));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(real r, longint e);
    d = $realtobits(r);
    #1;
    checks++;
    if (longint'(q) != e) begin
      failures++;
      if (failures < 10) $display("x=%g: got %0d expected %0d", r, q, e);
    end
  endtask

  initial begin
    real r;
    for (int k = 0; k < 20000; k++) begin
      int ex;
      real sc;
      ex = int'($urandom_range(40)) - 34;
      sc = 1.0;
      if (ex > 0) for (int i = 0; i < ex; i++) sc = sc * 2.0;
      else        for (int i = 0; i < -ex; i++) sc = sc / 2.0;
      r = ($urandom_range(1000000) / 1000000.0) * sc;
      if ($urandom_range(1)) r = -r;
      if (r >= 2.0 || r < -2.0) n_sat++;
      check(r, real2fx(r));
    end
    // exact ties: (n + 0.5) * 2^-25 rounds up (towards +infinity)
    for (int k = 0; k < 200; k++) begin
      longint n;
      n = longint'($urandom_range(32'h3ffffff)) - (64'sd1 <<< 25);
      r = (real'(n) + 0.5) / 33554432.0;
      n_tie++;
      check(r, n + 1);
    end
    check(0.0, 0);
    check(-0.0, 0);
    check(1.0, 64'sd1 <<< 25);
    check(-2.0, QMIN);
    check(2.0, QMAX);
    check(1.0e300, QMAX);
    check(-1.0e300, QMIN);
    d = 64'h7ff0000000000000; #1; checks++; if (longint'(q) != QMAX) failures++;   // +inf
    d = 64'hfff0000000000000; #1; checks++; if (longint'(q) != QMIN) failures++;   // -inf
    d = 64'h7ff8000000000000; #1; checks++; if (q != 0) failures++;                // NaN
    checks++;
    if (n_sat == 0 || n_tie == 0) begin failures++; $display("saturation or ties not covered"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
