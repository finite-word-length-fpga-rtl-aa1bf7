// coef_mem -- matrix memory partitioned by column, so that one whole row can be
// read in a single clock.
//
// The gradient step multiplies a full row of the matrix with the vector every
// clock, which needs all COLS elements of a row at once. As in the published
// HLS code (ARRAY_PARTITION of H along its second dimension), every column is
// a memory of its own, ROWS words deep; all column memories share one read
// address. On an FPGA each column maps to a small block or distributed RAM.
//
// Interface: one element is written per clock (we, wrow, wcol, wdata).
// Reading: rrow is sampled at a clock edge and the whole row appears on rdata
// after that edge (one clock of read latency, like a block RAM). The contents
// are not reset; they are loaded through the write port before use.
// How the memory is loaded is this design's choice: the published kernel
// compiles its matrices in as constants whose values are not given.
module coef_mem
  import fgm_pkg::*;
#(
  parameter int unsigned ROWS = N_OPT_DEF,
  parameter int unsigned COLS = N_OPT_DEF,
  parameter int unsigned W    = BW
) (
  input  logic                    clk,
  input  logic                    we,
  input  logic [6:0]              wrow,
  input  logic [6:0]              wcol,
  input  logic signed [W-1:0]     wdata,
  input  logic [6:0]              rrow,
  output logic signed [W-1:0]     rdata [COLS]
);

  for (genvar c = 0; c < COLS; c++) begin : g_col
    logic signed [W-1:0] mem [ROWS];

    always_ff @(posedge clk) begin
      if (we && (32'(wcol) == c) && (32'(wrow) < ROWS)) mem[wrow] <= wdata;
      rdata[c] <= (32'(rrow) < ROWS) ? mem[rrow] : '0;
    end
  end

endmodule
