// tb_axil_ctrl -- self-checking test of the AXI4-Lite control slave.
//
// Drives AXI4-Lite reads and writes (with slow BREADY / RREADY so that
// responses must be held) and checks: ap_start set by a write and cleared by
// ap_ready, kept by auto_restart; ap_done latched and cleared by reading CTRL;
// the sample counter; the status registers; and the decoding of the
// coefficient window into select, row, column and data of coef_wr.
module tb_axil_ctrl;
  import fgm_pkg::*;

  localparam int AW = 20;
  logic clk = 0, rst_n = 0;
  logic [AW-1:0] s_axi_awaddr = 0, s_axi_araddr = 0;
  logic s_axi_awvalid = 0, s_axi_awready, s_axi_wvalid = 0, s_axi_wready;
  logic [31:0] s_axi_wdata = 0, s_axi_rdata;
  logic [3:0] s_axi_wstrb = 4'hf;
  logic [1:0] s_axi_bresp, s_axi_rresp;
  logic s_axi_bvalid, s_axi_bready = 0, s_axi_arvalid = 0, s_axi_arready, s_axi_rvalid, s_axi_rready = 0;
  logic ap_start, auto_restart, ap_ready = 0, ap_done = 0, ap_idle = 1;
  logic [15:0] restarts = 16'd7, clips = 16'd300;
  logic [31:0] latency = 32'd1933;
  coef_wr_t coef_wr;
  int checks = 0, failures = 0;
  coef_wr_t seen [$];

  axil_ctrl #(.AW(AW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && coef_wr.we) seen.push_back(coef_wr);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: got %0h expected %0h", what, got, exp); end
  endtask

  task automatic axi_write(int addr, int data);
    @(negedge clk);
    s_axi_awaddr = AW'(addr); s_axi_awvalid = 1; s_axi_wdata = data; s_axi_wvalid = 1;
    #1;
    while (!s_axi_awready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    s_axi_awvalid = 0; s_axi_wvalid = 0;
    repeat (2) @(posedge clk);                  // hold BREADY low for a while
    #1 chk("bvalid held", s_axi_bvalid, 1);
    s_axi_bready = 1;
    @(posedge clk); #1 s_axi_bready = 0;
  endtask

  task automatic axi_read(int addr, output int data);
    @(negedge clk);
    s_axi_araddr = AW'(addr); s_axi_arvalid = 1;
    #1;
    while (!s_axi_arready) begin @(negedge clk); #1; end
    @(posedge clk); #1 s_axi_arvalid = 0;
    repeat (2) @(posedge clk);
    #1 chk("rvalid held", s_axi_rvalid, 1);
    data = s_axi_rdata;
    s_axi_rready = 1;
    @(posedge clk); #1 s_axi_rready = 0;
  endtask

  task automatic pulse(ref logic sig);
    @(negedge clk); sig = 1; @(negedge clk); sig = 0;
  endtask

  initial begin
    int d;
    repeat (3) @(posedge clk);
    rst_n = 1;
    axi_read(32'h00, d);  chk("CTRL after reset", d, 32'h4);
    axi_write(32'h00, 1); chk("ap_start set", ap_start, 1);
    pulse(ap_ready);      #1 chk("ap_start cleared by ap_ready", ap_start, 0);
    axi_write(32'h00, 32'h81); chk("auto_restart", auto_restart, 1);
    pulse(ap_ready);      #1 chk("ap_start kept with auto_restart", ap_start, 1);
    ap_idle = 0;
    pulse(ap_done);
    pulse(ap_done);
    axi_read(32'h00, d);  chk("CTRL done, running", d, 32'h83);
    axi_read(32'h00, d);  chk("done cleared by read", d, 32'h81);
    axi_read(32'h10, d);  chk("SAMPLES", d, 2);
    axi_read(32'h14, d);  chk("RESTARTS", d, 7);
    axi_read(32'h18, d);  chk("CLIPS", d, 300);
    axi_read(32'h1C, d);  chk("LATENCY", d, 1933);
    axi_write(32'h00, 0); chk("auto_restart off", auto_restart, 0);
    chk("no coefficient write yet", seen.size(), 0);
    for (int k = 0; k < 20; k++) begin
      int sel, r, c, v;
      sel = $urandom_range(1, 5); r = $urandom_range(80); c = $urandom_range(80);
      v = int'($urandom_range(32'h7ffffff)) - (1 << 26);
      axi_write((sel << 16) | (r << 9) | (c << 2), v);
      chk("coef write count", seen.size(), 1);
      if (seen.size() == 1) begin
        coef_wr_t w;
        w = seen.pop_front();
        chk("coef sel", w.sel, sel); chk("coef row", w.row, r); chk("coef col", w.col, c);
        chk("coef data", longint'(w.data), v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
