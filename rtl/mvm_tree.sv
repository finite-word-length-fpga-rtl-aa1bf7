// mvm_tree -- one row of a matrix times a vector per clock, with a pipelined
// binary adder tree.
//
// This is the workhorse of the gradient step Hcp*v. All N products of a row
// with the vector are formed in parallel; each H*v product (ap_fixed<27,-1>
// times ap_fixed<27,2>, 53 fractional bits) is rounded (AP_RND) and saturated
// to ap_fixed<27,1>. The products are then summed by a binary tree of
// LEVELS = ceil(log2 N) adder stages (7 for N = 81). Each tree level is one bit
// wider than the one before, so the sum is exact; only the final conversion to
// tvn, ap_fixed<27,2>, rounds and saturates. This matches the published HLS
// code, whose tree types keep every bit of the 27-bit products.
//
// Pairing differs from the HLS loops (element j with j+N/2 there, adjacent
// pairs here); the sums are exact, so the result is the same. The tree is
// padded with zeros to 2^LEVELS leaves. The HLS code casts one of the last two
// partial sums to tvn before the final addition, which rounds twice; here the
// exact sum is rounded once, which can differ from it by one LSB of tvn.
//
// Timing: a new row may enter every clock (in_valid). The result leaves
// LATENCY = LEVELS + 2 clocks later with out_valid, carrying in_tag along
// (register stages: products, LEVELS adder levels, output rounding).
// One register stage per tree level is this design's choice.
module mvm_tree
  import fgm_pkg::*;
#(
  parameter int unsigned N     = N_OPT_DEF,
  parameter int unsigned TAG_W = 7
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [TAG_W-1:0] in_tag,
  input  fx_t              h_row [N],   // ap_fixed<27,-1>
  input  fx_t              vec   [N],   // ap_fixed<27,2>
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output fx_t              out          // tvn, ap_fixed<27,2>
);

  localparam int unsigned LEVELS  = (N <= 1) ? 1 : $clog2(N);
  localparam int unsigned P2      = 1 << LEVELS;
  localparam int unsigned TW      = BW + LEVELS;
  localparam int unsigned LATENCY = LEVELS + 2;

  typedef logic signed [TW-1:0] tw_t;

  tw_t lvl [LEVELS+1][P2];

  always_ff @(posedge clk) begin
    for (int j = 0; j < P2; j++) begin
      if (j < N) begin
        lvl[0][j] <= TW'(rnd_sat(128'(h_row[j]) * 128'(vec[j]), H_FRAC + V_FRAC - P_FRAC));
      end else begin
        lvl[0][j] <= '0;
      end
    end
    for (int l = 1; l <= LEVELS; l++) begin
      for (int j = 0; j < (P2 >> l); j++) begin
        lvl[l][j] <= lvl[l-1][2*j] + lvl[l-1][2*j+1];
      end
    end
    out <= rnd_sat(128'(lvl[LEVELS][0]), P_FRAC - V_FRAC);
  end

  logic [LATENCY-1:0] vpipe;
  logic [TAG_W-1:0]   tpipe [LATENCY];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vpipe <= '0;
      for (int k = 0; k < LATENCY; k++) tpipe[k] <= '0;
    end else begin
      vpipe <= {vpipe[LATENCY-2:0], in_valid};
      tpipe[0] <= in_tag;
      for (int k = 1; k < LATENCY; k++) tpipe[k] <= tpipe[k-1];
    end
  end

  assign out_valid = vpipe[LATENCY-1];
  assign out_tag   = tpipe[LATENCY-1];

endmodule
