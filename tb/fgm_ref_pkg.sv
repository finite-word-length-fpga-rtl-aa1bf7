// fgm_ref_pkg -- bit-exact software model of the fixed-point FGM solver, for
// the testbenches.
//
// Written independently of the RTL with 64-bit integer arithmetic: values are
// integers scaled by 2^25 (vectors), 2^28 (Hcp, Fp) and 2^26 (beta). Rounding
// is half toward +infinity, saturation to 27 bits, exactly as the fixed-point
// formats of the kernel prescribe. The class also builds random test problems:
// a diagonally dominant symmetric Hcp, a random Fp, the classic Nesterov beta
// sequence, box bounds and random states.
package fgm_ref_pkg;

  localparam int MAXN = 128;
  localparam longint QMAX = (64'sd1 <<< 26) - 1;
  localparam longint QMIN = -(64'sd1 <<< 26);

  function automatic longint rnd(longint a, int sh);
    if (sh == 0) return a;
    return (a + (64'sd1 <<< (sh - 1))) >>> sh;
  endfunction

  function automatic longint sat27(longint a);
    if (a > QMAX) return QMAX;
    if (a < QMIN) return QMIN;
    return a;
  endfunction

  // real -> ap_fixed<27,2>, AP_RND + AP_SAT
  function automatic longint real2fx(real r);
    real s;
    s = r * 33554432.0 + 0.5;   // 2^25
    if (s >= 67108864.0) return QMAX;
    if (s < -67108864.0) return QMIN;
    return sat27(longint'($floor(s)));
  endfunction

  function automatic real fx2real(longint q);
    return real'(q) / 33554432.0;
  endfunction

  class fgm_model;
    int n_opt, n_x, n_u, n_iter;
    longint H    [MAXN][MAXN];
    longint F    [MAXN][MAXN];
    longint beta [MAXN];
    longint umin [MAXN];
    longint umax [MAXN];
    longint u    [MAXN];   // result (n_opt elements; first n_u are the output)
    int     restarts, clips;

    function new(int n_opt_i, int n_x_i, int n_u_i, int n_iter_i);
      n_opt = n_opt_i; n_x = n_x_i; n_u = n_u_i; n_iter = n_iter_i;
    endfunction

    // sum_j sat27(rnd(row[j]*vec[j], 27)) rounded to F25
    function automatic longint row_dot(int r, bit use_f, longint vec [MAXN], int n);
      longint acc, p;
      acc = 0;
      for (int j = 0; j < n; j++) begin
        p = (use_f ? F[r][j] : H[r][j]) * vec[j];
        acc += sat27(rnd(p, 27));
      end
      return sat27(rnd(acc, 1));
    endfunction

    function automatic void make_problem(real offd, real bound);
      real t, tn;
      for (int i = 0; i < n_opt; i++) begin
        H[i][i] = 40000000 + longint'($urandom_range(25000000));   // 0.149..0.242 in F28
        for (int j = i + 1; j < n_opt; j++) begin
          H[i][j] = longint'($urandom_range(2 * int'(offd * 268435456.0))) - longint'(offd * 268435456.0);
          H[j][i] = H[i][j];
        end
        for (int j = 0; j < n_x; j++)
          F[i][j] = longint'($urandom_range(64000000)) - 32000000;         // about +-0.12
        umin[i] = real2fx(-bound);
        umax[i] = real2fx(bound);
      end
      t = 1.0;
      for (int k = 0; k < n_iter; k++) begin
        tn = (1.0 + $sqrt(1.0 + 4.0 * t * t)) / 2.0;
        beta[k] = longint'($floor((t - 1.0) / tn * 67108864.0 + 0.5));  // F26
        t = tn;
      end
    endfunction

    function automatic void run_solver(longint x [MAXN]);
      longint f [MAXN], v [MAXN], up [MAXN], uc [MAXN];
      longint hv, chi, dot, a, b;
      for (int i = 0; i < n_opt; i++) f[i] = row_dot(i, 1'b1, x, n_x);
      for (int i = 0; i < n_opt; i++) begin v[i] = 0; up[i] = 0; end
      restarts = 0; clips = 0;
      for (int it = 0; it < n_iter; it++) begin
        dot = 0;
        for (int i = 0; i < n_opt; i++) begin
          hv  = row_dot(i, 1'b0, v, n_opt);
          chi = sat27(v[i] - hv - f[i]);
          if (chi < umin[i]) begin uc[i] = umin[i]; clips++; end
          else if (chi > umax[i]) begin uc[i] = umax[i]; clips++; end
          else uc[i] = chi;
          a = v[i] - uc[i];
          b = uc[i] - up[i];
          dot += a * b;
        end
        if (dot > 0) begin
          restarts++;
          for (int i = 0; i < n_opt; i++) v[i] = up[i];
        end else begin
          for (int i = 0; i < n_opt; i++) begin
            v[i]  = sat27(rnd((uc[i] <<< 26) + beta[it] * (uc[i] - up[i]), 26));
            up[i] = uc[i];
          end
        end
      end
      for (int i = 0; i < n_opt; i++) u[i] = up[i];
    endfunction
  endclass

endpackage
