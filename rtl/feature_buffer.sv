// feature_buffer: the accelerator's on-chip input buffer, holding N input
// feature-map channels of H*W words each.
//
// The specification keeps the input feature map in an on-chip input buffer and
// streams it into the window buffers one word per clock. To feed PN window
// buffers at once (input-channel parallelism), this design splits the buffer
// into PN banks: channel c lives in bank c mod PN at word (c / PN)*H*W + pixel.
// Each bank is a simple dual-port memory (one write, one read port), the shape
// of an FPGA block RAM. The banking is this design's choice.
//
// Interface and timing: wr_en writes wr_data to channel wr_ch at pixel wr_addr
// (raster order, row*W + col). rd_en reads, for channel group rd_grp, channels
// rd_grp*PN .. rd_grp*PN+PN-1 at pixel rd_addr; rd_data[p] holds channel
// rd_grp*PN+p one clock later (registered read, like a block RAM), with
// rd_valid marking it. N must be a multiple of PN.
module feature_buffer #(
  parameter int unsigned N      = 1,
  parameter int unsigned PN     = 1,
  parameter int unsigned H      = 28,
  parameter int unsigned W      = 28,
  parameter int unsigned DATA_W = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          wr_en,
  input  logic [$clog2(N+1)-1:0]        wr_ch,
  input  logic [$clog2(H*W)-1:0]        wr_addr,
  input  logic signed [DATA_W-1:0]      wr_data,
  input  logic                          rd_en,
  input  logic [$clog2(N/PN+1)-1:0]     rd_grp,
  input  logic [$clog2(H*W)-1:0]        rd_addr,
  output logic                          rd_valid,
  output logic signed [DATA_W-1:0]      rd_data [PN]
);
  localparam int unsigned PIX   = H * W;
  localparam int unsigned NG    = N / PN;
  localparam int unsigned DEPTH = NG * PIX;
  localparam int unsigned AW    = $clog2(DEPTH);

  if (N % PN != 0) begin : g_bad
    $error("feature_buffer: N must be a multiple of PN");
  end

  logic [AW-1:0] wr_word, rd_word;
  int unsigned   wr_bank;

  always_comb begin
    wr_bank = int'(wr_ch) % PN;
    wr_word = AW'((int'(wr_ch) / PN) * PIX + int'(wr_addr));
    rd_word = AW'(int'(rd_grp) * PIX + int'(rd_addr));
  end

  for (genvar p = 0; p < PN; p++) begin : g_bank
    logic signed [DATA_W-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en && wr_bank == p) mem[wr_word] <= wr_data;
      if (rd_en) rd_data[p] <= mem[rd_word];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_en;
  end

endmodule
