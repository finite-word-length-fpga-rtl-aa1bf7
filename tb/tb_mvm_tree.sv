// tb_mvm_tree -- self-checking test of the row-times-vector adder tree.
//
// Streams 200 random rows (one per clock, with random gaps) through an
// 81-wide mvm_tree, including extreme operand values that make products and
// the final sum saturate, and compares every result with a 64-bit integer
// model. Also checks that each result leaves exactly 9 clocks (7 tree levels +
// product and output registers) after its row entered, in order.
module tb_mvm_tree;
  import fgm_pkg::*;
  import fgm_ref_pkg::*;

  localparam int N = 81;
  localparam int LAT = 9;
  localparam int NROWS = 200;

  logic clk = 0, rst_n = 0;
  logic in_valid;
  logic [6:0] in_tag;
  fx_t h_row [N], vec [N];
  logic out_valid;
  logic [6:0] out_tag;
  fx_t out;

  int checks = 0, failures = 0;
  longint exp_q [$];
  int     exp_t [$];
  int     exp_tag [$];
  int     cyc = 0;
  int     nsat = 0;

  mvm_tree #(.N(N)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint rand27(int mode);
    if (mode == 0) return longint'($urandom_range(32'h3ffffff)) - (64'sd1 <<< 26) + longint'($urandom_range(32'h3ffffff)) + 1;
    if (mode == 1) return QMAX;
    return QMIN;
  endfunction

  // checker
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected output");
      end else begin
        longint e; int t, tg;
        e = exp_q.pop_front(); t = exp_t.pop_front(); tg = exp_tag.pop_front();
        if (longint'(out) != e || int'(out_tag) != tg || cyc - t != LAT) begin
          failures++;
          $display("row %0d: got %0d tag %0d after %0d clk, expected %0d tag %0d after %0d",
                   tg, out, out_tag, cyc - t, e, tg, LAT);
        end
      end
    end
  end

  initial begin
    longint hv [MAXN], vv [MAXN], acc, p, e;
    in_valid = 0; in_tag = 0;
    for (int j = 0; j < N; j++) begin h_row[j] = '0; vec[j] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int r = 0; r < NROWS; r++) begin
      while ($urandom_range(3) == 0) begin
        @(negedge clk); in_valid = 0;
        @(posedge clk);
      end
      @(negedge clk);
      for (int j = 0; j < N; j++) begin
        int mode;
        mode = (r % 10 == 3) ? ($urandom_range(1) + 1) : 0;     // extremes now and then
        if (r % 10 == 7) begin
          hv[j] = (j % 2) ? QMIN : QMAX; vv[j] = (j % 2) ? QMIN : QMAX;  // large positive sum
        end else begin
          hv[j] = rand27(mode); vv[j] = rand27(mode);
        end
        h_row[j] = fx_t'(hv[j]); vec[j] = fx_t'(vv[j]);
      end
      acc = 0;
      for (int j = 0; j < N; j++) begin
        p = hv[j] * vv[j];
        acc += sat27(rnd(p, 27));
      end
      e = sat27(rnd(acc, 1));
      if (e == QMAX || e == QMIN) nsat++;
      in_valid = 1; in_tag = 7'(r);
      exp_q.push_back(e); exp_t.push_back(cyc + 1); exp_tag.push_back(r % 128);
      @(posedge clk);
    end
    @(negedge clk); in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d results missing", exp_q.size()); end
    checks++;
    if (nsat == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
