// pe_array: the parallel compute core, PM output channels by PN input channels.
//
// For one window position it computes, for each of PM output channels m,
// the partial output s_m = sum over the PN input channels n of a_mn, where
// a_mn = sum_{i,j} X_nij * W_mnij is produced by one mac_tree (K*K multipliers
// and an odd-pass-through addition tree). The PN values a_m1..a_mPN of one
// output channel are then summed by a second adder_tree with ETA = PN. This is
// the input-channel parallelism (PN channels convolved at once and summed) and
// the output-channel parallelism (the same PN windows convolved with PM
// kernels at once) of the specification; the window pipelining comes from the
// window buffers in front of this block. PM = M and PN = N gives the fully
// parallel structure; smaller PM/PN fold the layer into passes. Using the same
// odd-pass-through adder tree for the channel sum is this design's choice.
//
// Interface and timing: win[n] is the K x K window of input channel n
// (indexed i*K + j), wgt[m][n] the matching kernel slice. One window set is
// accepted every clock. out_data[m] appears
// LATENCY = (1 + ceil(log2(K*K))) + (1 + ceil(log2(PN))) clocks later, with
// in_valid delayed to out_valid.
module pe_array #(
  parameter int unsigned K      = 3,
  parameter int unsigned PM     = 15,
  parameter int unsigned PN     = 1,
  parameter int unsigned DATA_W = 16,
  parameter int unsigned ACC_W  = 48
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] win [PN][K*K],
  input  logic signed [DATA_W-1:0] wgt [PM][PN][K*K],
  output logic                     out_valid,
  output logic signed [ACC_W-1:0]  out_data [PM]
);
  logic signed [ACC_W-1:0] a     [PM][PN];   // a_mn of the current window
  logic                    a_v   [PM][PN];
  logic                    sum_v [PM];

  for (genvar m = 0; m < PM; m++) begin : g_m
    for (genvar n = 0; n < PN; n++) begin : g_n
      mac_tree #(.K(K), .DATA_W(DATA_W), .OUT_W(ACC_W)) u_mac (
        .clk      (clk),
        .rst_n    (rst_n),
        .in_valid (in_valid),
        .win      (win[n]),
        .wgt      (wgt[m][n]),
        .out_valid(a_v[m][n]),
        .out_data (a[m][n])
      );
    end

    adder_tree #(.ETA(PN), .IN_W(ACC_W), .OUT_W(ACC_W)) u_chan_sum (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (a_v[m][0]),
      .in_data  (a[m]),
      .out_valid(sum_v[m]),
      .out_data (out_data[m])
    );
  end

  assign out_valid = sum_v[0];

endmodule
