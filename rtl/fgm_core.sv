// fgm_core -- primal fast gradient method (FGM) QP solver of the MPC kernel.
//
// Solves, once per sample, the box-constrained condensed MPC problem
//   min 1/2 u'Hc u + fc'u   s.t.  umin <= u <= umax
// with N_ITER iterations of the accelerated projected gradient method with
// adaptive restart, cold-started from u = 0:
//   chi_i  = v_i - (Hcp v_i + fcp)            gradient step
//   u_i    = clip(chi_i, umin, umax)          projection
//   v_i+1  = u_i + beta_i (u_i - u_i-1)       acceleration
//   if (v_i - u_i)'(u_i - u_i-1) > 0:         adaptive restart
//       v_i+1 = u_i-1,  u_i = u_i-1
// Hcp = L^-1 Hc is the preconditioned Hessian and fcp = L^-1 fc. The linear
// term is not an input: it is formed from the scaled state estimate x as
// fcp = Fp x, with the N_OPT x N_X matrix Fp = L^-1 Fc prepared off line
// (fc = Fc x in the condensed formulation). The first N_U elements of the
// final u, the first move-blocked control interval, are the result.
//
// Micro-architecture. Both Fp x and Hcp v run on the same mvm_tree, one
// matrix row per clock, the rows read from column-partitioned memories
// (coef_mem). Fp is zero-padded to N_OPT columns. As each element of Hcp v
// leaves the tree, fgm_elem forms u_r and its restart term, which is summed
// exactly into a 64-bit accumulator. After the last row the restart decision
// is taken and the acceleration updates all N_OPT elements of v in parallel in
// one clock. One iteration therefore takes N_OPT + mvm latency + 2 clocks
// (92 for N_OPT = 81), a solve N_ITER iterations plus one pass for Fp x
// (1933 clocks at the default sizes).
//
// Interface: coefficients (Hcp, Fp, beta, umin, umax) are written through
// coef_wr at any time the core is idle. `start` (one clock, while idle) latches
// x and begins a solve; `done` pulses for one clock when u_out is valid, and
// u_out holds until the next solve ends. `restarts` and `clips` count the
// adaptive restarts and active bounds of the last solve.
// Following the paper: the algorithm, its fixed-point formats for H, v, tvn,
// 20 iterations, cold start. This design's choice: forming fcp on chip from x,
// the format of Fp, beta and the bounds, the schedule above, the reset values
// of the bounds (+-1, the scaled range) and of beta (0).
module fgm_core
  import fgm_pkg::*;
#(
  parameter int unsigned N_OPT  = N_OPT_DEF,
  parameter int unsigned N_X    = N_X_DEF,
  parameter int unsigned N_U    = N_U_DEF,
  parameter int unsigned N_ITER = N_ITER_DEF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  coef_wr_t    coef_wr,
  input  logic        start,
  input  fx_t         x [N_X],
  output logic        busy,
  output logic        done,
  output fx_t         u_out [N_U],
  output logic [15:0] restarts,
  output logic [15:0] clips
);

  localparam fx_t ONE = fx_t'(1 <<< V_FRAC);
  localparam int unsigned IT_W = (N_ITER > 1) ? $clog2(N_ITER) : 1;

  initial begin
    assert (N_X <= N_OPT && N_U <= N_OPT && N_OPT <= 128 && N_ITER >= 1)
      else $error("fgm_core: unsupported sizes");
  end

  typedef enum logic [2:0] {S_IDLE, S_FISSUE, S_FWAIT, S_HISSUE, S_HWAIT, S_ACCEL, S_DONE} state_e;
  state_e state;

  // ---------------- coefficient storage ----------------
  fx_t h_rd [N_OPT];
  fx_t f_rd [N_X];
  logic [6:0] rrow;

  coef_mem #(.ROWS(N_OPT), .COLS(N_OPT), .W(BW)) u_hmem (
    .clk, .we(coef_wr.we && coef_wr.sel == SEL_H && !busy), .wrow(coef_wr.row), .wcol(coef_wr.col),
    .wdata(coef_wr.data), .rrow(rrow), .rdata(h_rd));

  coef_mem #(.ROWS(N_OPT), .COLS(N_X), .W(BW)) u_fmem (
    .clk, .we(coef_wr.we && coef_wr.sel == SEL_F && !busy), .wrow(coef_wr.row), .wcol(coef_wr.col),
    .wdata(coef_wr.data), .rrow(rrow), .rdata(f_rd));

  fx_t beta [N_ITER];
  fx_t umin [N_OPT];
  fx_t umax [N_OPT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N_ITER; k++) beta[k] <= '0;
      for (int k = 0; k < N_OPT; k++) begin
        umin[k] <= -ONE;
        umax[k] <= ONE;
      end
    end else if (coef_wr.we && !busy) begin
      unique case (coef_wr.sel)
        SEL_BETA: if (32'(coef_wr.col) < N_ITER) beta[IT_W'(coef_wr.col)] <= coef_wr.data;
        SEL_UMIN: if (32'(coef_wr.col) < N_OPT)  umin[coef_wr.col] <= coef_wr.data;
        SEL_UMAX: if (32'(coef_wr.col) < N_OPT)  umax[coef_wr.col] <= coef_wr.data;
        default: ;
      endcase
    end
  end

  // ---------------- vectors ----------------
  fx_t xr    [N_X];    // latched state
  fx_t v     [N_OPT];  // v^i
  fx_t ucur  [N_OPT];  // u~^i (being formed)
  fx_t uprev [N_OPT];  // u~^(i-1)
  fx_t fvec  [N_OPT];  // fcp = Fp x

  // ---------------- row issue and tree ----------------
  logic       rd_valid_d, phase_f_d;
  logic [6:0] tag_d;
  fx_t        row_in [N_OPT];
  fx_t        vec_in [N_OPT];
  logic       t_valid;
  logic [6:0] t_tag;
  fx_t        t_out;

  always_comb begin
    for (int c = 0; c < N_OPT; c++) begin
      if (phase_f_d) begin
        row_in[c] = (c < N_X) ? f_rd[c] : '0;
        vec_in[c] = (c < N_X) ? xr[c]   : '0;
      end else begin
        row_in[c] = h_rd[c];
        vec_in[c] = v[c];
      end
    end
  end

  mvm_tree #(.N(N_OPT), .TAG_W(7)) u_tree (
    .clk, .rst_n, .in_valid(rd_valid_d), .in_tag(tag_d), .h_row(row_in), .vec(vec_in),
    .out_valid(t_valid), .out_tag(t_tag), .out(t_out));

  // ---------------- per-element update ----------------
  fx_t  e_u;
  dot_t e_dot;
  logic e_clip;
  fgm_elem u_elem (
    .v(v[t_tag]), .hv(t_out), .f(fvec[t_tag]), .umin(umin[t_tag]), .umax(umax[t_tag]),
    .uprev(uprev[t_tag]), .u(e_u), .dot(e_dot), .clipped(e_clip));

  // ---------------- sequencing ----------------
  logic [6:0]  row;      // next row to issue
  logic [7:0]  nres;     // results received in this pass
  logic [7:0]  iter;     // current iteration, 0-based
  dot_t        dot_acc;
  logic        restart;

  assign restart = (dot_acc > 0);
  assign busy    = (state != S_IDLE);
  assign rrow    = row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      row        <= '0;
      nres       <= '0;
      iter       <= '0;
      dot_acc    <= '0;
      rd_valid_d <= 1'b0;
      phase_f_d  <= 1'b0;
      tag_d      <= '0;
      done       <= 1'b0;
      restarts   <= '0;
      clips      <= '0;
      for (int k = 0; k < N_X; k++) xr[k] <= '0;
      for (int k = 0; k < N_OPT; k++) begin
        v[k] <= '0; ucur[k] <= '0; uprev[k] <= '0; fvec[k] <= '0;
      end
      for (int k = 0; k < N_U; k++) u_out[k] <= '0;
    end else begin
      done       <= 1'b0;
      rd_valid_d <= (state == S_FISSUE) || (state == S_HISSUE);
      phase_f_d  <= (state == S_FISSUE);
      tag_d      <= row;

      // results from the tree
      if (t_valid) begin
        nres <= nres + 8'd1;
        if (state == S_FWAIT || state == S_FISSUE) begin
          fvec[t_tag] <= t_out;
        end else begin
          ucur[t_tag] <= e_u;
          dot_acc     <= dot_acc + e_dot;
          if (e_clip) clips <= clips + 16'd1;
        end
      end

      unique case (state)
        S_IDLE: begin
          if (start) begin
            for (int k = 0; k < N_X; k++) xr[k] <= x[k];
            for (int k = 0; k < N_OPT; k++) begin
              v[k] <= '0; uprev[k] <= '0; ucur[k] <= '0;   // cold start u~0 = v1 = 0
            end
            restarts <= '0;
            clips    <= '0;
            iter     <= '0;
            row      <= '0;
            nres     <= '0;
            state    <= S_FISSUE;
          end
        end
        S_FISSUE, S_HISSUE: begin
          if (32'(row) == N_OPT - 1) begin
            row   <= '0;
            state <= (state == S_FISSUE) ? S_FWAIT : S_HWAIT;
          end else begin
            row <= row + 7'd1;
          end
        end
        S_FWAIT: begin
          if (t_valid && 32'(nres) == N_OPT - 1) begin
            nres    <= '0;
            dot_acc <= '0;
            state   <= S_HISSUE;
          end
        end
        S_HWAIT: begin
          if (t_valid && 32'(nres) == N_OPT - 1) begin
            nres  <= '0;
            state <= S_ACCEL;
          end
        end
        S_ACCEL: begin
          // ucur and dot_acc are complete here
          if (restart) begin
            for (int k = 0; k < N_OPT; k++) v[k] <= uprev[k];
            restarts <= restarts + 16'd1;
          end else begin
            for (int k = 0; k < N_OPT; k++) begin
              v[k] <= rnd_sat((128'(ucur[k]) <<< B_FRAC)
                              + 128'(beta[IT_W'(iter)]) * (128'(ucur[k]) - 128'(uprev[k])), B_FRAC);
              uprev[k] <= ucur[k];
            end
          end
          dot_acc <= '0;
          if (32'(iter) == N_ITER - 1) begin
            state <= S_DONE;
          end else begin
            iter  <= iter + 8'd1;
            state <= S_HISSUE;
          end
        end
        S_DONE: begin
          // uprev now holds u~ of the last iteration (after a possible restart)
          for (int k = 0; k < N_U; k++) u_out[k] <= uprev[k];
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
