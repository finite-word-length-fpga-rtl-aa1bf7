// axil_ctrl -- AXI4-Lite slave: kernel control register, status counters and
// the write window for the pre-computed solver coefficients.
//
// Register map (byte addresses, 32-bit registers):
//   0x00 CTRL      bit0 ap_start (write 1 to start; cleared when the kernel
//                  takes a sample, unless auto_restart), bit1 ap_done (read
//                  only, cleared by reading CTRL), bit2 ap_idle (read only),
//                  bit7 auto_restart (read/write: keep serving samples)
//   0x10 SAMPLES   samples completed since reset (read only)
//   0x14 RESTARTS  adaptive restarts in the last sample (read only)
//   0x18 CLIPS     active-bound projections in the last sample (read only)
//   0x1C LATENCY   clocks from the first input beat to the last output beat
//                  of the last sample (read only)
//   coefficient window, write only, bits [26:0] of the data word:
//   addr[19:16] = select (1 Hcp, 2 Fp, 3 beta, 4 umin, 5 umax),
//   addr[15:9] = row, addr[8:2] = column (the index, for vectors).
// The control bits mimic the usual HLS block-level handshake. The paper says
// only that control signals travel over AXI4-Lite; the map is this design's.
// Timing: a write is accepted when AWVALID and WVALID are both high and no
// response is pending (AWREADY = WREADY in that clock), BVALID follows the next
// clock. A read is accepted when no read data is pending; RVALID follows the
// next clock. coef_wr is a one-clock pulse in the clock after the write.
module axil_ctrl
  import fgm_pkg::*;
#(
  parameter int unsigned AW = 20
) (
  input  logic          clk,
  input  logic          rst_n,
  // AXI4-Lite slave
  input  logic [AW-1:0] s_axi_awaddr,
  input  logic          s_axi_awvalid,
  output logic          s_axi_awready,
  input  logic [31:0]   s_axi_wdata,
  input  logic [3:0]    s_axi_wstrb,
  input  logic          s_axi_wvalid,
  output logic          s_axi_wready,
  output logic [1:0]    s_axi_bresp,
  output logic          s_axi_bvalid,
  input  logic          s_axi_bready,
  input  logic [AW-1:0] s_axi_araddr,
  input  logic          s_axi_arvalid,
  output logic          s_axi_arready,
  output logic [31:0]   s_axi_rdata,
  output logic [1:0]    s_axi_rresp,
  output logic          s_axi_rvalid,
  input  logic          s_axi_rready,
  // kernel side
  output logic          ap_start,
  output logic          auto_restart,
  input  logic          ap_ready,     // kernel took a sample
  input  logic          ap_done,      // one-clock pulse per finished sample
  input  logic          ap_idle,
  input  logic [15:0]   restarts,
  input  logic [15:0]   clips,
  input  logic [31:0]   latency,
  output coef_wr_t      coef_wr
);

  logic        wr_go, rd_go;
  logic        done_flag;
  logic [31:0] samples;

  assign wr_go         = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
  assign s_axi_awready = wr_go;
  assign s_axi_wready  = wr_go;
  assign rd_go         = s_axi_arvalid && !s_axi_rvalid;
  assign s_axi_arready = rd_go;
  assign s_axi_bresp   = 2'b00;
  assign s_axi_rresp   = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axi_bvalid <= 1'b0;
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
      ap_start     <= 1'b0;
      auto_restart <= 1'b0;
      done_flag    <= 1'b0;
      samples      <= '0;
      coef_wr      <= '0;
    end else begin
      coef_wr.we <= 1'b0;
      if (s_axi_bvalid && s_axi_bready) s_axi_bvalid <= 1'b0;
      if (s_axi_rvalid && s_axi_rready) s_axi_rvalid <= 1'b0;

      if (ap_ready && !auto_restart) ap_start <= 1'b0;
      if (ap_done) begin
        done_flag <= 1'b1;
        samples   <= samples + 32'd1;
      end

      if (wr_go) begin
        s_axi_bvalid <= 1'b1;
        if (s_axi_awaddr[AW-1:16] == '0) begin
          if (s_axi_awaddr[15:0] == 16'h0000 && s_axi_wstrb[0]) begin
            if (s_axi_wdata[0]) ap_start <= 1'b1;
            auto_restart <= s_axi_wdata[7];
          end
        end else begin
          coef_wr.we   <= 1'b1;
          coef_wr.sel  <= coef_sel_e'(s_axi_awaddr[19:16]);
          coef_wr.row  <= s_axi_awaddr[15:9];
          coef_wr.col  <= s_axi_awaddr[8:2];
          coef_wr.data <= fx_t'(s_axi_wdata[BW-1:0]);
        end
      end

      if (rd_go) begin
        s_axi_rvalid <= 1'b1;
        unique case (s_axi_araddr)
          AW'('h00): begin
            s_axi_rdata <= {24'd0, auto_restart, 4'd0, ap_idle, done_flag, ap_start};
            if (!ap_done) done_flag <= 1'b0;   // clear on read
          end
          AW'('h10): s_axi_rdata <= samples;
          AW'('h14): s_axi_rdata <= {16'd0, restarts};
          AW'('h18): s_axi_rdata <= {16'd0, clips};
          AW'('h1C): s_axi_rdata <= latency;
          default:   s_axi_rdata <= '0;
        endcase
      end
    end
  end

  // AXI4-Lite: a response stays valid until it is taken.
  a_bhold : assert property (@(posedge clk) disable iff (!rst_n)
      (s_axi_bvalid && !s_axi_bready) |=> s_axi_bvalid);
  a_rhold : assert property (@(posedge clk) disable iff (!rst_n)
      (s_axi_rvalid && !s_axi_rready) |=> (s_axi_rvalid && $stable(s_axi_rdata)));

endmodule
