// adder_tree: pipelined addition tree for ETA operands that needs no zero
// padding.
//
// Layer 1 registers the ETA operands. Every following layer adds the operands
// of the layer before it in pairs; when that layer holds an odd number of
// operands, the last one is not paired but registered unchanged into the next
// layer. Layer l therefore holds ceil(ETA / 2^(l-1)) registers, the tree uses
// exactly ETA-1 adders, and it has ceil(log2(ETA)) adder layers, the same depth
// as a tree padded up to a power of two. For ETA = 9 this is 8 adders, 20
// registers (9+5+3+2+1) and 4 adder layers, as in the specification's example.
// This structure, including the choice of the last operand as the one passed
// through, follows the specification.
//
// Interface and timing: in_data is sampled on every clock; out_data is the sum
// of the in_data sampled 1 + ceil(log2(ETA)) clocks earlier (5 clocks for
// ETA = 9: the input register layer plus 4 adder layers). The tree is fully
// pipelined, so a new operand set can enter every clock. in_valid travels with
// the data as out_valid. Operands are signed and sign-extended to OUT_W; the
// data registers have no reset, only the valid pipeline is reset
// (rst_n, active low, synchronous), which is this design's choice.
module adder_tree #(
  parameter int unsigned ETA   = 9,
  parameter int unsigned IN_W  = 32,
  parameter int unsigned OUT_W = 48
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_data [ETA],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_data
);
  import cnn_pkg::*;

  localparam int unsigned STAGES = tree_stages(ETA);

  // node[l][i]: register i of layer l. Layer l uses only its first
  // tree_width(ETA, l) entries; the rest are tied to zero and never read.
  logic signed [OUT_W-1:0] node  [STAGES+1][ETA];
  logic                    valid [STAGES+1];

  always_ff @(posedge clk) begin
    for (int i = 0; i < ETA; i++) node[0][i] <= OUT_W'(in_data[i]);
  end

  for (genvar l = 1; l <= STAGES; l++) begin : g_lvl
    localparam int unsigned PREV  = tree_width(ETA, l - 1);
    localparam int unsigned NODES = tree_width(ETA, l);
    for (genvar i = 0; i < ETA; i++) begin : g_node
      if (i >= NODES) begin : g_unused
        always_comb node[l][i] = '0;
      end else if (2 * i + 1 < PREV) begin : g_pair
        always_ff @(posedge clk) node[l][i] <= node[l-1][2*i] + node[l-1][2*i+1];
      end else begin : g_pass
        // odd operand out: carried to the next layer without an adder
        always_ff @(posedge clk) node[l][i] <= node[l-1][2*i];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int l = 0; l <= STAGES; l++) valid[l] <= 1'b0;
    end else begin
      valid[0] <= in_valid;
      for (int l = 1; l <= STAGES; l++) valid[l] <= valid[l-1];
    end
  end

  assign out_data  = node[STAGES][0];
  assign out_valid = valid[STAGES];

endmodule
