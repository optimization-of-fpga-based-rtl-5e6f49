// mac_tree_tile: one MAC tree tile of the CLP compute engine.
//
// TN FP32 multipliers form the products of TN input features with TN weights;
// a balanced binary tree of FP32 adders sums the products; a last FP32 adder
// accumulates the sum onto the previous partial result of the output feature.
// Lanes whose input map lies beyond the layer's N (lane_en low, a partial
// input-map tile) contribute +0. This is the structure the paper gives
// (multipliers, adder tree, accumulator with feedback through OF_BUF).
//
// Timing (this design's pipelining): registers after the multipliers, after
// every tree level and after the accumulator. With LV = ceil(log2(TN)):
//   cycle t         : valid_in, feat, wgt, lane_en, bias, use_bias
//   cycle t+LV+1    : acc_in, the old partial result, must be presented
//                     (it is ignored when use_bias was set: the bias is
//                     accumulated instead, which starts a new output feature)
//   cycle t+LV+2    : valid_out, acc_out (registered)
// A new operation can be issued every cycle.
module mac_tree_tile
  import clp_pkg::*;
#(
  parameter int unsigned TN = 3,
  localparam int unsigned LV = (TN > 1) ? $clog2(TN) : 0,
  localparam int unsigned NP = 1 << LV
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          valid_in,
  input  word_t         feat [TN],
  input  word_t         wgt  [TN],
  input  logic [TN-1:0] lane_en,
  input  word_t         bias,
  input  logic          use_bias,
  input  word_t         acc_in,
  output logic          valid_out,
  output word_t         acc_out
);
  // tree[0] holds the registered products; tree[k] the k-th level sums.
  word_t tree [LV+1][NP];
  word_t prod [TN];
  logic  vld  [LV+1];
  word_t bias_d [LV+1];
  logic  ub_d   [LV+1];
  word_t acc_sum;
  word_t acc_op;

  for (genvar i = 0; i < TN; i++) begin : g_mul
    fp32_mul u_mul (.a(feat[i]), .b(wgt[i]), .y(prod[i]));
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < NP; i++)
      tree[0][i] <= (i < TN && lane_en[i]) ? prod[i] : '0;
    bias_d[0] <= bias;
    ub_d[0]   <= use_bias;
  end

  for (genvar k = 1; k <= LV; k++) begin : g_lvl
    for (genvar i = 0; i < (NP >> k); i++) begin : g_add
      word_t s;
      fp32_add u_add (.a(tree[k-1][2*i]), .b(tree[k-1][2*i+1]), .y(s));
      always_ff @(posedge clk) tree[k][i] <= s;
    end
    always_ff @(posedge clk) begin
      bias_d[k] <= bias_d[k-1];
      ub_d[k]   <= ub_d[k-1];
    end
  end

  assign acc_op = ub_d[LV] ? bias_d[LV] : acc_in;
  fp32_add u_acc (.a(tree[LV][0]), .b(acc_op), .y(acc_sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k <= LV; k++) vld[k] <= 1'b0;
      valid_out <= 1'b0;
    end else begin
      vld[0] <= valid_in;
      for (int k = 1; k <= LV; k++) vld[k] <= vld[k-1];
      valid_out <= vld[LV];
    end
  end

  always_ff @(posedge clk) acc_out <= acc_sum;
endmodule
