// weight_buffer: the accelerator's on-chip weight buffer, holding the M x N
// kernels of K x K weights and the M biases of one convolution layer.
//
// The specification stores the kernel weights in an on-chip weight buffer and
// feeds them, together with the bias b_m, to the multiplication-addition trees.
// Since PM x PN trees of K*K multipliers each need a distinct weight on every
// clock, this design keeps the weights in registers and presents all
// PM*PN*K*K weights of one (output group, input group) pair at once: output
// channels sel_mg*PM .. +PM-1, input channels sel_ng*PN .. +PN-1. Weights stay
// in place for the whole layer; only the selection changes between passes.
// The register-file organisation is this design's choice.
//
// Interface and timing: w_wr_en writes w_wr_data as weight (w_wr_m, w_wr_n,
// w_wr_k) where w_wr_k = i*K + j; b_wr_en writes bias b_wr_m. Biases are
// PROD_W (32-bit) words in the format of a product, so they add directly to
// the sums. wgt and bias are combinational functions of sel_mg/sel_ng and of
// the stored words; writes take effect on the next clock.
module weight_buffer #(
  parameter int unsigned M      = 15,
  parameter int unsigned N      = 1,
  parameter int unsigned K      = 3,
  parameter int unsigned PM     = 15,
  parameter int unsigned PN     = 1,
  parameter int unsigned DATA_W = 16,
  parameter int unsigned BIAS_W = 32
) (
  input  logic                      clk,
  input  logic                      w_wr_en,
  input  logic [$clog2(M+1)-1:0]    w_wr_m,
  input  logic [$clog2(N+1)-1:0]    w_wr_n,
  input  logic [$clog2(K*K+1)-1:0]  w_wr_k,
  input  logic signed [DATA_W-1:0]  w_wr_data,
  input  logic                      b_wr_en,
  input  logic [$clog2(M+1)-1:0]    b_wr_m,
  input  logic signed [BIAS_W-1:0]  b_wr_data,
  input  logic [$clog2(M/PM+1)-1:0] sel_mg,
  input  logic [$clog2(N/PN+1)-1:0] sel_ng,
  output logic signed [DATA_W-1:0]  wgt  [PM][PN][K*K],
  output logic signed [BIAS_W-1:0]  bias [PM]
);
  localparam int unsigned KK  = K * K;
  // index widths of the storage arrays
  localparam int unsigned MIW = (M > 1) ? $clog2(M) : 1;
  localparam int unsigned NIW = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned KIW = (KK > 1) ? $clog2(KK) : 1;

  if (M % PM != 0 || N % PN != 0) begin : g_bad
    $error("weight_buffer: M must be a multiple of PM and N of PN");
  end

  logic signed [DATA_W-1:0] wmem [M][N][KK];
  logic signed [BIAS_W-1:0] bmem [M];

  always_ff @(posedge clk) begin
    if (w_wr_en) wmem[MIW'(w_wr_m)][NIW'(w_wr_n)][KIW'(w_wr_k)] <= w_wr_data;
    if (b_wr_en) bmem[MIW'(b_wr_m)] <= b_wr_data;
  end

  always_comb begin
    for (int m = 0; m < PM; m++) begin
      bias[m] = bmem[int'(sel_mg) * PM + m];
      for (int n = 0; n < PN; n++)
        for (int k = 0; k < KK; k++)
          wgt[m][n][k] = wmem[int'(sel_mg) * PM + m][int'(sel_ng) * PN + n][k];
    end
  end

endmodule
