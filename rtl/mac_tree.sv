// mac_tree: fully parallel multiplication-addition tree for one K x K
// convolution window of one channel, y = sum_{i,j} x_ij * w_ij.
//
// K*K signed multipliers work in parallel; their K*K full-width products are
// the operands of an adder_tree with ETA = K*K (odd operands passed through,
// no zero padding). This follows the specification's three steps: operands
// from the input and weight buffers, K*K parallel multiplications, then the
// improved addition tree.
//
// Interface: win and wgt are indexed i*K + j, row i and column j of the window
// and of the kernel. Timing: the products are formed combinationally and
// captured by the tree's input register layer, so y appears
// 1 + ceil(log2(K*K)) clocks after win/wgt are presented (5 clocks for K = 3),
// with a new window accepted every clock; in_valid travels along as out_valid.
module mac_tree #(
  parameter int unsigned K      = 3,
  parameter int unsigned DATA_W = 16,
  parameter int unsigned OUT_W  = 48
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] win [K*K],
  input  logic signed [DATA_W-1:0] wgt [K*K],
  output logic                     out_valid,
  output logic signed [OUT_W-1:0]  out_data
);
  localparam int unsigned KK = K * K;

  logic signed [2*DATA_W-1:0] prod [KK];

  always_comb begin
    for (int i = 0; i < KK; i++) prod[i] = win[i] * wgt[i];
  end

  adder_tree #(.ETA(KK), .IN_W(2 * DATA_W), .OUT_W(OUT_W)) u_tree (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (in_valid),
    .in_data  (prod),
    .out_valid(out_valid),
    .out_data (out_data)
  );

endmodule
