// tb_fgm_accuracy -- accuracy of the fixed-point solver against the same
// algorithm in double precision, at full size.
//
// Workload: 12 initial states, as in the convergence study of the original
// work, on a random 81-variable test QP, 20 iterations each. For every state
// the fixed-point fgm_core result (all 81 values of the final u, read from the
// solver's vector register) is compared with a double-precision run of the
// same FGM iteration with the exact beta sequence and the unrounded state. The
// figure of merit is the normalised error
//   MSE = sqrt( 1/81 * sum_k ((u_k - u*_k) / (umax_k - umin_k))^2 )
// which must stay below 1e-4, the accuracy the original design targets (its
// 27-bit kernel reached 5.2e-5 on the real ITER problem). Also reports the
// difference in the preconditioned cost 1/2 u'Hcp u + fcp'u. Each result is
// also checked bit-exactly against the integer model.
module tb_fgm_accuracy;
  import fgm_pkg::*;
  import fgm_ref_pkg::*;

  localparam int N_OPT = N_OPT_DEF, N_X = N_X_DEF, N_U = N_U_DEF, N_ITER = N_ITER_DEF;
  localparam int N_STATES = 12;
  localparam real MSE_LIMIT = 1.0e-4;

  logic clk = 0, rst_n = 0;
  coef_wr_t coef_wr;
  logic start = 0;
  fx_t x [N_X];
  logic busy, done;
  fx_t u_out [N_U];
  logic [15:0] restarts, clips;

  int checks = 0, failures = 0;
  real worst_mse = 0.0, worst_dj = 0.0;

  fgm_core #(.N_OPT(N_OPT), .N_X(N_X), .N_U(N_U), .N_ITER(N_ITER)) dut (.*);
  fgm_model m;

  real Hr [N_OPT][N_OPT];
  real Fr [N_OPT][N_X];
  real br [N_ITER];
  real lo [N_OPT], hi [N_OPT];

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wcoef(coef_sel_e sel, int r, int c, longint d);
    @(negedge clk);
    coef_wr.we = 1; coef_wr.sel = sel; coef_wr.row = 7'(r); coef_wr.col = 7'(c); coef_wr.data = fx_t'(d);
    @(posedge clk); #1 coef_wr.we = 0;
  endtask

  function automatic real cost(real u [N_OPT], real f [N_OPT]);
    real j;
    j = 0.0;
    for (int a = 0; a < N_OPT; a++) begin
      real hu;
      hu = 0.0;
      for (int b = 0; b < N_OPT; b++) hu += Hr[a][b] * u[b];
      j += 0.5 * u[a] * hu + f[a] * u[a];
    end
    return j;
  endfunction

  // double-precision FGM with adaptive restart, cold start
  task automatic fgm_double(real xr [N_X], output real u [N_OPT], output real f [N_OPT]);
    real v [N_OPT], up [N_OPT], uc [N_OPT];
    for (int a = 0; a < N_OPT; a++) begin
      f[a] = 0.0;
      for (int b = 0; b < N_X; b++) f[a] += Fr[a][b] * xr[b];
      v[a] = 0.0; up[a] = 0.0;
    end
    for (int it = 0; it < N_ITER; it++) begin
      real dot;
      dot = 0.0;
      for (int a = 0; a < N_OPT; a++) begin
        real hv, chi;
        hv = 0.0;
        for (int b = 0; b < N_OPT; b++) hv += Hr[a][b] * v[b];
        chi = v[a] - hv - f[a];
        uc[a] = (chi < lo[a]) ? lo[a] : (chi > hi[a]) ? hi[a] : chi;
        dot += (v[a] - uc[a]) * (uc[a] - up[a]);
      end
      if (dot > 0.0) for (int a = 0; a < N_OPT; a++) v[a] = up[a];
      else for (int a = 0; a < N_OPT; a++) begin
        v[a] = uc[a] + br[it] * (uc[a] - up[a]);
        up[a] = uc[a];
      end
    end
    for (int a = 0; a < N_OPT; a++) u[a] = up[a];
  endtask

  initial begin
    longint xs [MAXN];
    real xr [N_X], ud [N_OPT], uf [N_OPT], fd [N_OPT];
    real t, tn;
    coef_wr = '0;
    for (int j = 0; j < N_X; j++) x[j] = '0;
    m = new(N_OPT, N_X, N_U, N_ITER);
    m.make_problem(0.0015, 0.5);
    for (int a = 0; a < N_OPT; a++) begin
      for (int b = 0; b < N_OPT; b++) Hr[a][b] = real'(m.H[a][b]) / 268435456.0;
      for (int b = 0; b < N_X; b++)   Fr[a][b] = real'(m.F[a][b]) / 268435456.0;
      lo[a] = fx2real(m.umin[a]); hi[a] = fx2real(m.umax[a]);
    end
    t = 1.0;
    for (int k = 0; k < N_ITER; k++) begin
      tn = (1.0 + $sqrt(1.0 + 4.0 * t * t)) / 2.0;
      br[k] = (t - 1.0) / tn;
      t = tn;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N_OPT; i++) begin
      for (int j = 0; j < N_OPT; j++) wcoef(SEL_H, i, j, m.H[i][j]);
      for (int j = 0; j < N_X; j++) wcoef(SEL_F, i, j, m.F[i][j]);
      wcoef(SEL_UMIN, 0, i, m.umin[i]);
      wcoef(SEL_UMAX, 0, i, m.umax[i]);
    end
    for (int k = 0; k < N_ITER; k++) wcoef(SEL_BETA, 0, k, m.beta[k]);

    for (int s = 0; s < N_STATES; s++) begin
      real amp, se, mse, dj;
      amp = 0.1 + 0.9 * s / (N_STATES - 1);     // from small to full-range states
      for (int j = 0; j < N_X; j++) begin
        xr[j] = amp * (($urandom_range(2000000) / 1000000.0) - 1.0);
        xs[j] = real2fx(xr[j]);
        x[j] = fx_t'(xs[j]);
      end
      m.run_solver(xs);
      fgm_double(xr, ud, fd);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      while (!done) @(posedge clk);
      #1;
      se = 0.0;
      for (int a = 0; a < N_OPT; a++) begin
        real e;
        uf[a] = fx2real(longint'(dut.uprev[a]));
        checks++;
        if (longint'(dut.uprev[a]) != m.u[a]) begin failures++; $display("state %0d u[%0d] differs from the integer model", s, a); end
        e = (uf[a] - ud[a]) / (hi[a] - lo[a]);
        se += e * e;
      end
      mse = $sqrt(se / N_OPT);
      dj = cost(uf, fd) - cost(ud, fd);
      if (mse > worst_mse) worst_mse = mse;
      if ((dj < 0 ? -dj : dj) > worst_dj) worst_dj = (dj < 0 ? -dj : dj);
      $display("state %0d: restarts %0d, active bounds %0d, MSE %e, cost difference %e", s, restarts, clips, mse, dj);
      checks++;
      if (mse > MSE_LIMIT) begin failures++; $display("state %0d: MSE above %e", s, MSE_LIMIT); end
    end
    $display("worst MSE %e, worst |cost difference| %e", worst_mse, worst_dj);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
