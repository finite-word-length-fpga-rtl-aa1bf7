// tb_rwm_ap -- end-to-end test of the MPC kernel at its full size
// (81 optimisation variables, 50 states, 27 outputs, 20 iterations).
//
// Acts as the host: loads a random test QP through AXI4-Lite, then streams
// state vectors as doubles and reads the control vectors back, comparing each
// of the 27 doubles bit-exactly with the fixed-point model in fgm_ref_pkg.
// Sample 0 runs in single-shot mode (ap_start, then the kernel must go idle);
// samples 1..5 run back to back in auto-restart mode while the receiver
// stalls TREADY at random. Checks the RESTARTS, CLIPS and LATENCY registers:
// an unstalled sample must take exactly 50 + 1933 + 27 + 1 = 2011 clocks from
// first input beat to last output beat, and every sample must stay within the
// 3136 clocks reported for the published kernel. Counts how often each mechanism happened and fails if one never did:
// adaptive restart, bound clipping, input back-pressure, output stall,
// auto-restart, return to idle, TLAST error and input saturation.
module tb_rwm_ap;
  import fgm_pkg::*;
  import fgm_ref_pkg::*;

  localparam int N_OPT = N_OPT_DEF, N_X = N_X_DEF, N_U = N_U_DEF, N_ITER = N_ITER_DEF;
  localparam int AW = 20;
  localparam int N_SAMPLES = 6;
  localparam int PAPER_LATENCY = 3136;
  // solve: Fp x pass (N_OPT + 10) and N_ITER iterations of (N_OPT + 11), plus start and done
  localparam int SOLVE_CYC = 2 + (N_OPT + 10) + N_ITER * (N_OPT + 11);

  logic ap_clk = 0, ap_rst_n = 0;
  logic [AW-1:0] s_axi_control_awaddr = 0, s_axi_control_araddr = 0;
  logic s_axi_control_awvalid = 0, s_axi_control_awready, s_axi_control_wvalid = 0, s_axi_control_wready;
  logic [31:0] s_axi_control_wdata = 0, s_axi_control_rdata;
  logic [3:0] s_axi_control_wstrb = 4'hf;
  logic [1:0] s_axi_control_bresp, s_axi_control_rresp;
  logic s_axi_control_bvalid, s_axi_control_bready = 1, s_axi_control_arvalid = 0, s_axi_control_arready;
  logic s_axi_control_rvalid, s_axi_control_rready = 1;
  logic [63:0] s_axis_x_tdata = 0;
  logic s_axis_x_tvalid = 0, s_axis_x_tready, s_axis_x_tlast = 0;
  logic [63:0] m_axis_u_tdata;
  logic m_axis_u_tvalid, m_axis_u_tready = 0, m_axis_u_tlast;
  logic tlast_err;

  rwm_ap dut (.*);

  fgm_model m;
  longint exp_u [N_SAMPLES][MAXN];
  int exp_r [N_SAMPLES], exp_c [N_SAMPLES];
  int checks = 0, failures = 0;
  int n_restart = 0, n_clip = 0, n_in_stall = 0, n_out_stall = 0, n_auto = 0, n_idle = 0, n_tlast = 0, n_insat = 0;
  int rx_sample = 0, rx_beat = 0;
  bit out_stalls_on = 0;

  always #5 ap_clk = ~ap_clk;

  initial begin
    repeat (400000) @(posedge ap_clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: got %0d expected %0d", what, got, exp); end
  endtask

  task automatic axi_write(int addr, int data);
    @(negedge ap_clk);
    s_axi_control_awaddr = AW'(addr); s_axi_control_awvalid = 1;
    s_axi_control_wdata = data; s_axi_control_wvalid = 1;
    #1;
    while (!s_axi_control_awready) begin @(negedge ap_clk); #1; end
    @(posedge ap_clk); #1;
    s_axi_control_awvalid = 0; s_axi_control_wvalid = 0;
  endtask

  task automatic axi_read(int addr, output int data);
    @(negedge ap_clk);
    s_axi_control_araddr = AW'(addr); s_axi_control_arvalid = 1;
    #1;
    while (!s_axi_control_arready) begin @(negedge ap_clk); #1; end
    @(posedge ap_clk); #1 s_axi_control_arvalid = 0;
    while (!s_axi_control_rvalid) begin @(posedge ap_clk); #1; end
    data = s_axi_control_rdata;
  endtask

  // stream one state vector; element `sat_at` gets an out-of-range value,
  // `bad_last` puts TLAST one beat early
  task automatic send_state(int s, bit bad_last);
    longint xs [MAXN];
    real r [N_X];
    for (int j = 0; j < N_X; j++) begin
      r[j] = (s == 0 ? 0.05 : 1.0) * (($urandom_range(2000000) / 1000000.0) - 1.0);
      if (s == 3 && j == 5) begin r[j] = 7.5; n_insat++; end      // saturates to +2
      xs[j] = real2fx(r[j]);
    end
    m.run_solver(xs);
    for (int i = 0; i < N_U; i++) exp_u[s][i] = m.u[i];
    exp_r[s] = m.restarts; exp_c[s] = m.clips;
    for (int j = 0; j < N_X; j++) begin
      @(negedge ap_clk);
      s_axis_x_tvalid = 1;
      s_axis_x_tdata  = $realtobits(r[j]);
      s_axis_x_tlast  = bad_last ? (j == N_X - 2) : (j == N_X - 1);
      while (!s_axis_x_tready) begin n_in_stall++; @(negedge ap_clk); end
      @(posedge ap_clk);
    end
    @(negedge ap_clk); s_axis_x_tvalid = 0; s_axis_x_tlast = 0;
  endtask

  // receiver
  always @(negedge ap_clk) m_axis_u_tready <= out_stalls_on ? ($urandom_range(3) != 0) : 1'b1;
  always @(posedge ap_clk) begin
    if (ap_rst_n && tlast_err) n_tlast++;
    if (ap_rst_n && m_axis_u_tvalid) begin
      if (!m_axis_u_tready) n_out_stall++;
      else begin
        checks++;
        if (rx_sample >= N_SAMPLES) begin failures++; $display("extra output beat"); end
        else if (m_axis_u_tdata != $realtobits(fx2real(exp_u[rx_sample][rx_beat]))
                 || m_axis_u_tlast != (rx_beat == N_U - 1)) begin
          failures++;
          if (failures < 20) $display("sample %0d u[%0d] = %g expected %g", rx_sample, rx_beat,
                                      $bitstoreal(m_axis_u_tdata), fx2real(exp_u[rx_sample][rx_beat]));
        end
        if (rx_beat == N_U - 1) begin rx_beat = 0; rx_sample++; end
        else rx_beat++;
      end
    end
  end

  task automatic wait_samples(int n);
    while (rx_sample < n) @(posedge ap_clk);
  endtask

  task automatic check_status(int s, int exp_lat);
    int d;
    axi_read(32'h14, d); chk("RESTARTS", d, exp_r[s]);
    axi_read(32'h18, d); chk("CLIPS", d, exp_c[s]);
    axi_read(32'h1C, d);
    checks++;
    if (d <= 0 || d > PAPER_LATENCY) begin failures++; $display("latency %0d clocks", d); end
    if (exp_lat > 0) chk("LATENCY without stalls", d, exp_lat);
    $display("sample %0d: latency %0d clocks, restarts %0d, clips %0d", s, d, exp_r[s], exp_c[s]);
    n_restart += exp_r[s];
    n_clip += exp_c[s];
  endtask

  initial begin
    int d;
    m = new(N_OPT, N_X, N_U, N_ITER);
    m.make_problem(0.0015, 0.5);
    repeat (3) @(posedge ap_clk);
    ap_rst_n = 1;
    // coefficients
    for (int i = 0; i < N_OPT; i++) begin
      for (int j = 0; j < N_OPT; j++) axi_write((1 << 16) | (i << 9) | (j << 2), int'(m.H[i][j]));
      for (int j = 0; j < N_X; j++)   axi_write((2 << 16) | (i << 9) | (j << 2), int'(m.F[i][j]));
      axi_write((4 << 16) | (i << 2), int'(m.umin[i]));
      axi_write((5 << 16) | (i << 2), int'(m.umax[i]));
    end
    for (int k = 0; k < N_ITER; k++) axi_write((3 << 16) | (k << 2), int'(m.beta[k]));

    // sample 0: single shot
    axi_read(32'h00, d); chk("idle before start", d & 7, 4);
    axi_write(32'h00, 1);
    send_state(0, 0);
    wait_samples(1);
    repeat (3) @(posedge ap_clk);
    axi_read(32'h00, d); chk("single shot: done and idle", d & 7, 6);
    if ((d & 4) != 0) n_idle++;
    check_status(0, N_X + SOLVE_CYC + N_U + 1);

    // samples 1..5: auto-restart, back to back, with output stalls
    out_stalls_on = 1;
    axi_write(32'h00, 32'h81);
    for (int s = 1; s < N_SAMPLES; s++) send_state(s, s == 2);
    wait_samples(N_SAMPLES);
    n_auto = N_SAMPLES - 1;
    check_status(N_SAMPLES - 1, 0);
    axi_read(32'h10, d); chk("SAMPLES", d, N_SAMPLES);
    axi_write(32'h00, 0);
    repeat (5) @(posedge ap_clk);

    $display("mechanisms: restart %0d clip %0d in_stall %0d out_stall %0d auto %0d idle %0d tlast_err %0d in_sat %0d",
             n_restart, n_clip, n_in_stall, n_out_stall, n_auto, n_idle, n_tlast, n_insat);
    checks++; if (n_restart == 0)   begin failures++; $display("no adaptive restart"); end
    checks++; if (n_clip == 0)      begin failures++; $display("no clipping"); end
    checks++; if (n_in_stall == 0)  begin failures++; $display("no input back-pressure"); end
    checks++; if (n_out_stall == 0) begin failures++; $display("no output stall"); end
    checks++; if (n_auto == 0)      begin failures++; $display("no auto-restart"); end
    checks++; if (n_idle == 0)      begin failures++; $display("never idle after single shot"); end
    checks++; if (n_tlast != 2)     begin failures++; $display("tlast_err %0d times, expected 2", n_tlast); end
    checks++; if (n_insat == 0)     begin failures++; $display("no input saturation"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
