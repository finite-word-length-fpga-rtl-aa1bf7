// axis_vec_tx -- AXI4-Stream master that sends one control vector per sample.
//
// `load` (while not busy) captures N ap_fixed<27,2> values. They are then sent
// as N beats of 64-bit IEEE-754 doubles (fix2dbl), element 0 first, TLAST on
// element N-1. TVALID stays high and TDATA stable until the receiver takes each
// beat with TREADY, as AXI4-Stream requires (checked by an assertion).
// Timing: first beat the clock after `load`, then one beat per clock while
// TREADY is high; busy falls after the last handshake. Sending doubles over
// AXI4-Stream follows the paper; the rest is this design's choice.
module axis_vec_tx
  import fgm_pkg::*;
#(
  parameter int unsigned N = N_U_DEF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  fx_t         vec [N],
  input  logic        load,
  output logic        busy,
  output logic [63:0] m_axis_tdata,
  output logic        m_axis_tvalid,
  input  logic        m_axis_tready,
  output logic        m_axis_tlast
);

  fx_t buf_q [N];
  logic [$clog2(N+1)-1:0] cnt;

  fix2dbl #(.W(BW), .F(V_FRAC)) u_conv (.q(buf_q[cnt]), .d(m_axis_tdata));

  assign busy          = m_axis_tvalid;
  assign m_axis_tlast  = m_axis_tvalid && (32'(cnt) == N - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt           <= '0;
      m_axis_tvalid <= 1'b0;
      for (int k = 0; k < N; k++) buf_q[k] <= '0;
    end else if (!m_axis_tvalid) begin
      if (load) begin
        for (int k = 0; k < N; k++) buf_q[k] <= vec[k];
        cnt           <= '0;
        m_axis_tvalid <= 1'b1;
      end
    end else if (m_axis_tready) begin
      if (32'(cnt) == N - 1) begin
        m_axis_tvalid <= 1'b0;
        cnt           <= '0;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

  // AXI4-Stream: once TVALID is high it stays high, with TDATA and TLAST
  // unchanged, until the handshake.
  a_hold : assert property (@(posedge clk) disable iff (!rst_n)
      (m_axis_tvalid && !m_axis_tready) |=> (m_axis_tvalid && $stable(m_axis_tdata) && $stable(m_axis_tlast)));

endmodule
