// compute_engine: the computational engine of one CLP.
//
// TM MAC tree tiles side by side. All tiles receive the same TN input
// features (one from each IF_BUF bank); tile mt receives its own TN weights
// (W_BUF banks mt*TN .. mt*TN+TN-1), its own bias and its own old partial
// result from OF_BUF bank mt. Every cycle the engine therefore performs
// TN*TM multiply-accumulates: the innermost two loops of the tiled
// convolution (over the TM output maps and TN input maps of a tile) are fully
// unrolled, as in the paper. Timing is that of mac_tree_tile: with
// LV = ceil(log2 TN), acc_in is due LV+1 cycles after valid_in and acc_out is
// valid LV+2 cycles after it.
module compute_engine
  import clp_pkg::*;
#(
  parameter int unsigned TN = 3,
  parameter int unsigned TM = 24
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          valid_in,
  input  word_t         feat [TN],
  input  word_t         wgt  [TM][TN],
  input  logic [TN-1:0] lane_en,
  input  word_t         bias [TM],
  input  logic          use_bias,
  input  word_t         acc_in  [TM],
  output logic          valid_out,
  output word_t         acc_out [TM]
);
  logic [TM-1:0] v;

  for (genvar mt = 0; mt < TM; mt++) begin : g_tile
    mac_tree_tile #(.TN(TN)) u_tile (
      .clk, .rst_n, .valid_in, .feat, .wgt(wgt[mt]), .lane_en,
      .bias(bias[mt]), .use_bias, .acc_in(acc_in[mt]),
      .valid_out(v[mt]), .acc_out(acc_out[mt]));
  end
  assign valid_out = v[0];

  // All tiles see the same valid, so their valid pipelines agree.
  a_valid_agree: assert property (@(posedge clk) disable iff (!rst_n) v == {TM{v[0]}});
endmodule
