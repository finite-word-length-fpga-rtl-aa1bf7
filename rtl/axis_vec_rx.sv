// axis_vec_rx -- AXI4-Stream slave that collects one state vector per sample.
//
// The host streams the scaled state estimate as N consecutive 64-bit beats,
// each an IEEE-754 double, with TLAST on the last element. Every accepted beat
// is converted to ap_fixed<27,2> (dbl2fix) and stored. When element N-1 has
// arrived, vec_valid rises and TREADY falls until the consumer takes the vector
// with vec_ack, so a new sample can be streamed in while nothing is computing
// but is never overwritten. A beat whose TLAST disagrees with its position in
// the vector sets tlast_err for one clock; the element count, not TLAST,
// delimits vectors.
// Timing: one beat per clock while TREADY is high; vec_valid the clock after
// the last beat. The streaming protocol follows the paper (AXI4-Stream input
// of doubles); framing, back-pressure and the error flag are this design's
// choice.
module axis_vec_rx
  import fgm_pkg::*;
#(
  parameter int unsigned N = N_X_DEF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [63:0] s_axis_tdata,
  input  logic        s_axis_tvalid,
  output logic        s_axis_tready,
  input  logic        s_axis_tlast,
  output fx_t         vec [N],
  output logic        vec_valid,
  input  logic        vec_ack,
  output logic        tlast_err,
  output logic        first_beat    // element 0 is being accepted this clock
);

  logic [$clog2(N+1)-1:0] cnt;
  fx_t conv;

  dbl2fix #(.W(BW), .F(V_FRAC)) u_conv (.d(s_axis_tdata), .q(conv));

  assign s_axis_tready = !vec_valid;
  assign first_beat    = s_axis_tvalid && s_axis_tready && (cnt == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      vec_valid <= 1'b0;
      tlast_err <= 1'b0;
      for (int k = 0; k < N; k++) vec[k] <= '0;
    end else begin
      tlast_err <= 1'b0;
      if (vec_valid && vec_ack) vec_valid <= 1'b0;
      if (s_axis_tvalid && s_axis_tready) begin
        vec[cnt]  <= conv;
        tlast_err <= (s_axis_tlast != (32'(cnt) == N - 1));
        if (32'(cnt) == N - 1) begin
          cnt       <= '0;
          vec_valid <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

endmodule
