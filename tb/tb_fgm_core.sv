// tb_fgm_core -- self-checking test of the FGM solver at full size.
//
// Builds a random 81-variable test QP (diagonally dominant symmetric Hcp,
// random 81 x 50 Fp, Nesterov beta sequence, bounds +-0.5), loads it through
// the coefficient port, then solves for several random states. Each result
// (27 outputs), the number of adaptive restarts and of active bounds are
// compared with the bit-exact integer model in fgm_ref_pkg. Checks the solve
// time against the schedule: one pass for Fp x and 20 iterations of
// 81 rows + tree latency + 2 clocks, well below the 3136-clock kernel latency
// reported for the published kernel. Requires restarts and clipping to occur.
// One solve also receives coefficient writes while busy, which the core must
// ignore.
module tb_fgm_core;
  import fgm_pkg::*;
  import fgm_ref_pkg::*;

  localparam int N_OPT = 81, N_X = 50, N_U = 27, N_ITER = 20;
  localparam int LAT = 9;   // mvm_tree latency for 81 columns
  localparam int EXP_CYC = (N_OPT + LAT + 1) + N_ITER * (N_OPT + LAT + 2) + 2;
  localparam int N_SOLVES = 6;

  logic clk = 0, rst_n = 0;
  coef_wr_t coef_wr;
  logic start = 0;
  fx_t x [N_X];
  logic busy, done;
  fx_t u_out [N_U];
  logic [15:0] restarts, clips;

  int checks = 0, failures = 0;
  int tot_restarts = 0, tot_clips = 0;
  int cyc = 0;

  fgm_core #(.N_OPT(N_OPT), .N_X(N_X), .N_U(N_U), .N_ITER(N_ITER)) dut (.*);
  fgm_model m;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (200000) @(posedge clk);
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

  initial begin
    longint xs [MAXN];
    int t0;
    coef_wr = '0;
    for (int j = 0; j < N_X; j++) x[j] = '0;
    m = new(N_OPT, N_X, N_U, N_ITER);
    m.make_problem(0.0015, 0.5);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N_OPT; i++) begin
      for (int j = 0; j < N_OPT; j++) wcoef(SEL_H, i, j, m.H[i][j]);
      for (int j = 0; j < N_X; j++) wcoef(SEL_F, i, j, m.F[i][j]);
      wcoef(SEL_UMIN, 0, i, m.umin[i]);
      wcoef(SEL_UMAX, 0, i, m.umax[i]);
    end
    for (int k = 0; k < N_ITER; k++) wcoef(SEL_BETA, 0, k, m.beta[k]);

    for (int s = 0; s < N_SOLVES; s++) begin
      real amp;
      amp = (s == 0) ? 0.05 : 1.0;   // first sample: small state, bounds inactive
      for (int j = 0; j < N_X; j++) begin
        xs[j] = real2fx(amp * (($urandom_range(2000000) / 1000000.0) - 1.0));
        x[j] = fx_t'(xs[j]);
      end
      m.run_solver(xs);
      @(negedge clk); start = 1;
      @(posedge clk); t0 = cyc;
      @(negedge clk); start = 0;
      if (s == 2) begin
        // writes while busy must be ignored: the result must still match
        checks++;
        if (!busy) begin failures++; $display("busy low during a solve"); end
        wcoef(SEL_H, 0, 0, -1);
        wcoef(SEL_F, 0, 0, 12345);
        wcoef(SEL_UMIN, 0, 0, 0);
        wcoef(SEL_UMAX, 0, 1, 0);
        wcoef(SEL_BETA, 0, 0, 1 <<< 25);
      end
      while (!done) @(posedge clk);
      checks++;
      if (cyc - t0 != EXP_CYC) begin
        failures++; $display("solve %0d took %0d clocks, expected %0d", s, cyc - t0, EXP_CYC);
      end
      checks++;
      if (cyc - t0 > 3136) begin failures++; $display("slower than 3136 clocks"); end
      for (int i = 0; i < N_U; i++) begin
        checks++;
        if (longint'(u_out[i]) != m.u[i]) begin
          failures++;
          if (failures < 20) $display("solve %0d u[%0d] = %0d expected %0d", s, i, u_out[i], m.u[i]);
        end
      end
      checks++;
      if (int'(restarts) != m.restarts || int'(clips) != m.clips) begin
        failures++; $display("solve %0d restarts %0d/%0d clips %0d/%0d", s, restarts, m.restarts, clips, m.clips);
      end
      $display("solve %0d: %0d clocks, restarts %0d, clips %0d, u[0] = %f", s, cyc - t0, restarts, clips, fx2real(m.u[0]));
      tot_restarts += m.restarts;
      tot_clips += m.clips;
    end
    checks++;
    if (tot_restarts == 0) begin failures++; $display("adaptive restart never happened"); end
    checks++;
    if (tot_clips == 0) begin failures++; $display("projection never clipped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
