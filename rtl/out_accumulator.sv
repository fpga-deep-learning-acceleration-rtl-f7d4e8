// out_accumulator: PM output-channel accumulators with bias addition.
//
// When a layer's N input channels are processed PN at a time, output O_m of a
// window is the sum of NG = N/PN components (one per input-channel group) plus
// the bias b_m. Each of the PM lanes follows the specification's accumulator:
// the first component of a window is stored, later ones are added to it, and
// after the last one the bias is added and O_m leaves the block. Because the
// window pipeline delivers all Ho*Wo windows of one channel group before the
// next group starts, a single register per lane would be overwritten; each
// lane therefore keeps one accumulator word per window position, G = Ho*Wo
// words, addressed by the window index. That partial-sum memory is this
// design's generalisation of the one register per lane shown in the
// specification (with NG = 1 it is never written and disappears).
//
// Interface and timing: on in_valid, in_data[m] is the component for window
// in_idx; in_first marks the first group (accumulator starts from zero),
// in_last the final group (result is emitted). out_valid/out_data/out_idx
// follow one clock after an in_last input. A window index is revisited only a
// full pass later, so read-modify-write needs no forwarding.
module out_accumulator #(
  parameter int unsigned PM     = 15,
  parameter int unsigned G      = 676,
  parameter int unsigned ACC_W  = 48,
  parameter int unsigned BIAS_W = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     in_first,
  input  logic                     in_last,
  input  logic [$clog2(G)-1:0]     in_idx,
  input  logic signed [ACC_W-1:0]  in_data [PM],
  input  logic signed [BIAS_W-1:0] bias [PM],
  output logic                     out_valid,
  output logic [$clog2(G)-1:0]     out_idx,
  output logic signed [ACC_W-1:0]  out_data [PM]
);
  logic signed [ACC_W-1:0] sum [PM];

  // One partial-sum memory per lane: one read and one write port each.
  for (genvar m = 0; m < PM; m++) begin : g_lane
    logic signed [ACC_W-1:0] psum [G];

    always_comb sum[m] = (in_first ? '0 : psum[in_idx]) + in_data[m];

    always_ff @(posedge clk) begin
      if (in_valid && !in_last) psum[in_idx] <= sum[m];
      out_data[m] <= sum[m] + ACC_W'(bias[m]);
    end
  end

  always_ff @(posedge clk) out_idx <= in_idx;

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid && in_last;
  end

endmodule
