// tb_coef_mem -- self-checking test of the column-partitioned matrix memory.
//
// Fills an 81 x 81 memory element by element in random order, then reads
// every row and compares all 81 columns with a shadow copy, checking the one
// clock read latency. Finally overwrites single elements and checks that only
// they changed.
module tb_coef_mem;
  import fgm_pkg::*;

  localparam int R = 81, C = 81;
  logic clk = 0;
  logic we = 0;
  logic [6:0] wrow = 0, wcol = 0, rrow = 0;
  logic signed [BW-1:0] wdata = 0;
  logic signed [BW-1:0] rdata [C];
  int shadow [R][C];
  int checks = 0, failures = 0;

  coef_mem #(.ROWS(R), .COLS(C), .W(BW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int r, int c, int d);
    @(negedge clk); we = 1; wrow = 7'(r); wcol = 7'(c); wdata = BW'(d); shadow[r][c] = d;
    @(posedge clk); #1 we = 0;
  endtask

  task automatic check_row(int r);
    @(negedge clk); rrow = 7'(r);
    @(posedge clk); #1;
    for (int c = 0; c < C; c++) begin
      checks++;
      if (int'(rdata[c]) != shadow[r][c]) begin
        failures++;
        if (failures < 10) $display("row %0d col %0d: got %0d exp %0d", r, c, rdata[c], shadow[r][c]);
      end
    end
  endtask

  initial begin
    int order [R*C];
    for (int k = 0; k < R*C; k++) order[k] = k;
    for (int k = R*C - 1; k > 0; k--) begin
      int j, t; j = $urandom_range(k); t = order[k]; order[k] = order[j]; order[j] = t;
    end
    for (int k = 0; k < R*C; k++) begin
      int d;
      d = int'($urandom_range(32'h7ffffff)) - (1 << 26);
      wr(order[k] / C, order[k] % C, d);
    end
    for (int r = 0; r < R; r++) check_row(r);
    for (int k = 0; k < 20; k++) wr($urandom_range(R-1), $urandom_range(C-1), int'($urandom_range(1000)) - 500);
    for (int r = R - 1; r >= 0; r--) check_row(r);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
