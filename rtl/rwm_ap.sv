// rwm_ap -- finite-word-length MPC kernel for resistive-wall-mode control.
//
// Each sample, the host streams the scaled state estimate x (N_X = 50
// doubles) in; the kernel solves the box-constrained MPC quadratic program
// with N_ITER = 20 iterations of the primal fast gradient method in 27-bit
// fixed point (fgm_core) and streams the first control move u (N_U = 27
// doubles, one per ELM coil power supply) back. Coefficients of the QP are
// loaded once through the AXI4-Lite control port, which also starts the kernel.
//
//   s_axis_x --> axis_vec_rx (double->fixed) --> fgm_core --> axis_vec_tx
//                                                   ^        (fixed->double) --> m_axis_u
//   s_axi_control --> axil_ctrl --coefficients------+
//
// Sample sequence (this design's choice): once ap_start is set, the kernel
// waits for a complete input vector, starts the solver (ap_ready: ap_start is
// cleared unless auto_restart is set), sends the result and pulses ap_done,
// then serves the next sample while ap_start remains set. The next input vector
// may stream in while the current one is being solved. LATENCY counts the
// clocks from the first input beat of a sample (or, if that vector was
// already waiting, from the moment the kernel became free) to its last output
// beat; the published kernel needed at most 3136 clocks (300 MHz, 10.45 us).
// Ports are plain AXI4-Lite and AXI4-Stream signals as in an HLS kernel;
// tlast_err flags an input beat whose TLAST does not match its position.
module rwm_ap
  import fgm_pkg::*;
#(
  parameter int unsigned N_OPT  = N_OPT_DEF,
  parameter int unsigned N_X    = N_X_DEF,
  parameter int unsigned N_U    = N_U_DEF,
  parameter int unsigned N_ITER = N_ITER_DEF,
  parameter int unsigned AW     = 20
) (
  input  logic          ap_clk,
  input  logic          ap_rst_n,
  // AXI4-Lite control
  input  logic [AW-1:0] s_axi_control_awaddr,
  input  logic          s_axi_control_awvalid,
  output logic          s_axi_control_awready,
  input  logic [31:0]   s_axi_control_wdata,
  input  logic [3:0]    s_axi_control_wstrb,
  input  logic          s_axi_control_wvalid,
  output logic          s_axi_control_wready,
  output logic [1:0]    s_axi_control_bresp,
  output logic          s_axi_control_bvalid,
  input  logic          s_axi_control_bready,
  input  logic [AW-1:0] s_axi_control_araddr,
  input  logic          s_axi_control_arvalid,
  output logic          s_axi_control_arready,
  output logic [31:0]   s_axi_control_rdata,
  output logic [1:0]    s_axi_control_rresp,
  output logic          s_axi_control_rvalid,
  input  logic          s_axi_control_rready,
  // host to kernel: state vector
  input  logic [63:0]   s_axis_x_tdata,
  input  logic          s_axis_x_tvalid,
  output logic          s_axis_x_tready,
  input  logic          s_axis_x_tlast,
  // kernel to host: control vector
  output logic [63:0]   m_axis_u_tdata,
  output logic          m_axis_u_tvalid,
  input  logic          m_axis_u_tready,
  output logic          m_axis_u_tlast,
  output logic          tlast_err
);

  typedef enum logic [1:0] {K_IDLE, K_WAIT_IN, K_SOLVE, K_SEND} kstate_e;
  kstate_e kst;

  logic        ap_start, auto_restart, ap_ready, ap_done, ap_idle;
  logic [15:0] restarts, clips;
  logic [31:0] latency, now, ts_pending, ts_cur, ts_wait;
  coef_wr_t    coef_wr;

  fx_t  xvec [N_X];
  logic x_valid, x_ack, first_beat;
  logic core_start, core_busy, core_done;
  fx_t  uvec [N_U];
  logic tx_load, tx_busy, tx_sent;

  axil_ctrl #(.AW(AW)) u_ctrl (
    .clk(ap_clk), .rst_n(ap_rst_n),
    .s_axi_awaddr(s_axi_control_awaddr), .s_axi_awvalid(s_axi_control_awvalid), .s_axi_awready(s_axi_control_awready),
    .s_axi_wdata(s_axi_control_wdata), .s_axi_wstrb(s_axi_control_wstrb), .s_axi_wvalid(s_axi_control_wvalid),
    .s_axi_wready(s_axi_control_wready), .s_axi_bresp(s_axi_control_bresp), .s_axi_bvalid(s_axi_control_bvalid),
    .s_axi_bready(s_axi_control_bready), .s_axi_araddr(s_axi_control_araddr), .s_axi_arvalid(s_axi_control_arvalid),
    .s_axi_arready(s_axi_control_arready), .s_axi_rdata(s_axi_control_rdata), .s_axi_rresp(s_axi_control_rresp),
    .s_axi_rvalid(s_axi_control_rvalid), .s_axi_rready(s_axi_control_rready),
    .ap_start, .auto_restart, .ap_ready, .ap_done, .ap_idle, .restarts, .clips, .latency, .coef_wr);

  axis_vec_rx #(.N(N_X)) u_rx (
    .clk(ap_clk), .rst_n(ap_rst_n), .s_axis_tdata(s_axis_x_tdata), .s_axis_tvalid(s_axis_x_tvalid),
    .s_axis_tready(s_axis_x_tready), .s_axis_tlast(s_axis_x_tlast), .vec(xvec), .vec_valid(x_valid),
    .vec_ack(x_ack), .tlast_err, .first_beat);

  fgm_core #(.N_OPT(N_OPT), .N_X(N_X), .N_U(N_U), .N_ITER(N_ITER)) u_core (
    .clk(ap_clk), .rst_n(ap_rst_n), .coef_wr, .start(core_start), .x(xvec), .busy(core_busy),
    .done(core_done), .u_out(uvec), .restarts, .clips);

  axis_vec_tx #(.N(N_U)) u_tx (
    .clk(ap_clk), .rst_n(ap_rst_n), .vec(uvec), .load(tx_load), .busy(tx_busy),
    .m_axis_tdata(m_axis_u_tdata), .m_axis_tvalid(m_axis_u_tvalid), .m_axis_tready(m_axis_u_tready),
    .m_axis_tlast(m_axis_u_tlast));

  assign core_start = (kst == K_WAIT_IN) && x_valid && !core_busy;
  assign x_ack      = core_start;
  assign ap_ready   = core_start;
  assign tx_load    = (kst == K_SOLVE) && core_done;
  assign tx_sent    = m_axis_u_tvalid && m_axis_u_tready && m_axis_u_tlast;
  assign ap_done    = (kst == K_SEND) && tx_sent;
  assign ap_idle    = (kst == K_IDLE);

  always_ff @(posedge ap_clk or negedge ap_rst_n) begin
    if (!ap_rst_n) begin
      kst        <= K_IDLE;
      now        <= '0;
      ts_pending <= '0;
      ts_cur     <= '0;
      ts_wait    <= '0;
      latency    <= '0;
    end else begin
      now <= now + 32'd1;
      if (first_beat) ts_pending <= now;
      unique case (kst)
        K_IDLE:    if (ap_start) begin
                     kst     <= K_WAIT_IN;
                     ts_wait <= now;
                   end
        K_WAIT_IN: if (core_start) begin
                     kst    <= K_SOLVE;
                     // a vector that arrived while the previous sample was
                     // still busy counts from when the kernel became free
                     ts_cur <= (ts_pending > ts_wait) ? ts_pending : ts_wait;
                   end
        K_SOLVE:   if (core_done) kst <= K_SEND;   // tx is idle: previous sample was sent
        K_SEND:    if (tx_sent) begin
                     latency <= now - ts_cur + 32'd1;
                     ts_wait <= now + 32'd1;
                     kst     <= (ap_start || auto_restart) ? K_WAIT_IN : K_IDLE;
                   end
        default:   kst <= K_IDLE;
      endcase
    end
  end

  // The output buffer is always free when a solve ends.
  a_tx_free : assert property (@(posedge ap_clk) disable iff (!ap_rst_n) tx_load |-> !tx_busy);

endmodule
