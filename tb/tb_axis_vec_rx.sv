// tb_axis_vec_rx -- self-checking test of the AXI4-Stream state-vector input.
//
// Streams 4 vectors of 50 doubles with random TVALID gaps, acknowledges each
// vector after a random delay and checks: every element converted correctly,
// TREADY low while a vector waits (no beat lost or overwritten), first_beat on
// element 0 only, and tlast_err raised exactly for a misplaced TLAST.
module tb_axis_vec_rx;
  import fgm_pkg::*;
  import fgm_ref_pkg::*;

  localparam int N = 50;
  logic clk = 0, rst_n = 0;
  logic [63:0] s_axis_tdata = 0;
  logic s_axis_tvalid = 0, s_axis_tlast = 0, s_axis_tready;
  fx_t vec [N];
  logic vec_valid, vec_ack = 0, tlast_err, first_beat;
  int checks = 0, failures = 0;
  int n_err = 0, n_first = 0, n_stall = 0;
  real data [4][N];

  axis_vec_rx #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && tlast_err) n_err++;
    if (rst_n && first_beat) n_first++;
    if (s_axis_tvalid && !s_axis_tready) n_stall++;
  end

  // producer
  initial begin
    for (int v = 0; v < 4; v++) for (int k = 0; k < N; k++)
      data[v][k] = ($urandom_range(4000000) / 1000000.0) - 2.0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < 4; v++) begin
      for (int k = 0; k < N; k++) begin
        @(negedge clk);
        while ($urandom_range(2) == 0) begin s_axis_tvalid = 0; @(negedge clk); end
        s_axis_tvalid = 1;
        s_axis_tdata  = $realtobits(data[v][k]);
        s_axis_tlast  = (v == 2) ? (k == N - 2) : (k == N - 1);   // vector 2: misplaced TLAST
        while (!s_axis_tready) @(negedge clk);   // TREADY is stable between edges
        @(posedge clk);                           // handshake at this edge
      end
      @(negedge clk); s_axis_tvalid = 0;
    end
  end

  // consumer
  initial begin
    @(posedge rst_n);
    for (int v = 0; v < 4; v++) begin
      @(posedge clk);
      while (!vec_valid) @(posedge clk);
      repeat ($urandom_range(30)) @(posedge clk);
      #1;
      for (int k = 0; k < N; k++) begin
        checks++;
        if (longint'(vec[k]) != real2fx(data[v][k])) begin
          failures++;
          if (failures < 10) $display("vector %0d elem %0d: got %0d exp %0d", v, k, vec[k], real2fx(data[v][k]));
        end
      end
      @(negedge clk); vec_ack = 1;
      @(negedge clk); vec_ack = 0;
    end
    repeat (5) @(posedge clk);
    checks++; if (n_err != 2) begin failures++; $display("tlast_err seen %0d times, expected 2", n_err); end
    checks++; if (n_first != 4) begin failures++; $display("first_beat seen %0d times", n_first); end
    checks++; if (n_stall == 0) begin failures++; $display("back-pressure never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
