// tb_axis_vec_tx -- self-checking test of the AXI4-Stream control-vector output.
//
// Loads 4 vectors of 27 fixed-point values and receives them with a randomly
// stalling TREADY. Checks each beat's double against q / 2^25, TLAST on the
// last element only, the beat count, and that nothing is sent without a load.
module tb_axis_vec_tx;
  import fgm_pkg::*;

  localparam int N = 27;
  logic clk = 0, rst_n = 0;
  fx_t vec [N];
  logic load = 0, busy;
  logic [63:0] m_axis_tdata;
  logic m_axis_tvalid, m_axis_tready = 0, m_axis_tlast;
  int checks = 0, failures = 0, n_stall = 0;
  longint vals [4][N];
  int vi = 0, ki = 0;

  axis_vec_tx #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) m_axis_tready <= ($urandom_range(2) != 0);

  always @(posedge clk) if (rst_n && m_axis_tvalid) begin
    if (!m_axis_tready) n_stall++;
    else begin
      checks++;
      if (vi >= 4) begin failures++; $display("extra beat"); end
      else if ($bitstoreal(m_axis_tdata) != real'(vals[vi][ki]) / 33554432.0 || m_axis_tlast != (ki == N - 1)) begin
        failures++;
        if (failures < 10) $display("vec %0d beat %0d: got %g last %0d", vi, ki, $bitstoreal(m_axis_tdata), m_axis_tlast);
      end
      if (ki == N - 1) begin ki = 0; vi++; end else ki++;
    end
  end

  initial begin
    for (int k = 0; k < N; k++) vec[k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    checks++; if (m_axis_tvalid) begin failures++; $display("TVALID without load"); end
    for (int v = 0; v < 4; v++) begin
      @(negedge clk);
      for (int k = 0; k < N; k++) begin
        vals[v][k] = longint'($urandom_range(32'h7ffffff)) - (64'sd1 <<< 26);
        vec[k] = fx_t'(vals[v][k]);
      end
      load = 1;
      @(negedge clk); load = 0;
      for (int k = 0; k < N; k++) vec[k] = '0;   // the captured copy must be sent
      @(posedge clk);
      while (busy) @(posedge clk);
    end
    repeat (5) @(posedge clk);
    checks++; if (vi != 4) begin failures++; $display("only %0d vectors received", vi); end
    checks++; if (n_stall == 0) begin failures++; $display("stall never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
