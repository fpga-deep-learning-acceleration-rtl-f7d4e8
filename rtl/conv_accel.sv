// conv_accel: convolutional-layer accelerator with input-channel parallelism,
// output-channel parallelism and a deeply pipelined convolution window.
//
// Datapath, in stream order:
//   feature_buffer  input buffer, N channels of H x W words, PN banks
//   window_buffer   PN of them, one per parallel input channel: one K x K
//                   window per clock from one pixel per clock
//   weight_buffer   M x N x K x K weights and M biases, presenting the
//                   PM x PN kernels of the current pass
//   pe_array        PM x PN multiplication-addition trees and PM channel sums
//   out_accumulator sums the N/PN input-group components of each output and
//                   adds the bias
// A layer is computed in MG = M/PM by NG = N/PN passes (output group outer,
// input group inner). Each pass streams the H*W pixels of PN channels, one
// pixel per clock, so every pass takes exactly H*W clocks and passes follow
// back to back: the window buffers flag the first (K-1)*W + K-1 pixels of each
// pass invalid, so no flushing is needed between passes. Result O_m of window
// (i', j') leaves on out_data after the last input group of its output group.
// With the default parameters (layer 1 of the evaluated network: 28 x 28
// single-channel input, 15 kernels of 3 x 3, stride 1) PM = M and PN = N, so
// the whole layer is one pass of 784 clocks and 135 multipliers.
// The stream order, the pass schedule, the controller and the load ports are
// this design's choices; the specification describes the parallel structure
// and the blocks but not how they are sequenced.
//
// Interface: load the feature map through fm_wr_* (channel, pixel = row*W +
// col) and weights/biases through w_wr_* / b_wr_* while idle. A one-clock
// start runs the layer; busy stays high until done pulses with the last
// result. Results stream out as out_valid with out_data[p] = O of output
// channel out_ch_base + p at output position out_idx = i'*Wo + j' (0-based).
// Timing: with the first pixel read on the clock after start, the window whose
// newest pixel is number t of pass q (0-based) leaves on out_data
// 3 + LATENCY_PE + q*H*W + t clocks after that read, where
// LATENCY_PE = 2 + ceil(log2(K*K)) + ceil(log2(PN)); results of the last input
// group therefore arrive one per clock wherever a valid window is formed.
module conv_accel
  import cnn_pkg::*;
#(
  parameter int unsigned K  = 3,    // kernel height = width
  parameter int unsigned H  = 28,   // input feature map height
  parameter int unsigned W  = 28,   // input feature map width
  parameter int unsigned S  = 1,    // stride, both directions
  parameter int unsigned N  = 1,    // input channels
  parameter int unsigned M  = 15,   // output channels (kernels)
  parameter int unsigned PN = 1,    // input channels computed in parallel
  parameter int unsigned PM = 15,   // output channels computed in parallel
  localparam int unsigned HO = (H - K) / S + 1,
  localparam int unsigned WO = (W - K) / S + 1,
  localparam int unsigned G  = HO * WO
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // input feature map load
  input  logic                     fm_wr_en,
  input  logic [$clog2(N+1)-1:0]   fm_wr_ch,
  input  logic [$clog2(H*W)-1:0]   fm_wr_addr,
  input  logic signed [DATA_W-1:0] fm_wr_data,
  // weight and bias load
  input  logic                     w_wr_en,
  input  logic [$clog2(M+1)-1:0]   w_wr_m,
  input  logic [$clog2(N+1)-1:0]   w_wr_n,
  input  logic [$clog2(K*K+1)-1:0] w_wr_k,
  input  logic signed [DATA_W-1:0] w_wr_data,
  input  logic                     b_wr_en,
  input  logic [$clog2(M+1)-1:0]   b_wr_m,
  input  logic signed [PROD_W-1:0] b_wr_data,
  // control
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  // result stream
  output logic                     out_valid,
  output logic [$clog2(M+1)-1:0]   out_ch_base,
  output logic [$clog2(G)-1:0]     out_idx,
  output logic signed [ACC_W-1:0]  out_data [PM]
);
  localparam int unsigned PIX = H * W;
  localparam int unsigned NG  = N / PN;
  localparam int unsigned MG  = M / PM;
  localparam int unsigned KK  = K * K;
  localparam int unsigned LATENCY_PE = 2 + tree_stages(KK) + tree_stages(PN);
  localparam int unsigned PXW = $clog2(PIX);
  localparam int unsigned NGW = $clog2(NG + 1);
  localparam int unsigned MGW = $clog2(MG + 1);
  localparam int unsigned IW  = $clog2(G);

  if (N % PN != 0 || M % PM != 0) begin : g_bad
    $error("conv_accel: N must be a multiple of PN and M of PM");
  end

  // ---------------------------------------------------------------- control
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_t;

  typedef struct packed {
    logic           first;   // first input-channel group of the window
    logic           last;    // last input-channel group
    logic [MGW-1:0] mg;      // output-channel group
  } pass_t;

  state_t         state;
  logic [PXW-1:0] pix;
  logic [NGW-1:0] ng;
  logic [MGW-1:0] mg;
  logic           rd_en;
  logic           pass_end;

  assign rd_en    = (state == S_RUN);
  assign busy     = (state != S_IDLE);
  assign pass_end = (pix == PXW'(PIX - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      pix   <= '0;
      ng    <= '0;
      mg    <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_RUN;
          pix   <= '0;
          ng    <= '0;
          mg    <= '0;
        end
        S_RUN: begin
          pix <= pass_end ? '0 : pix + 1'b1;
          if (pass_end) begin
            if (ng == NGW'(NG - 1)) begin
              ng <= '0;
              if (mg == MGW'(MG - 1)) state <= S_DRAIN;
              else                    mg    <= mg + 1'b1;
            end else begin
              ng <= ng + 1'b1;
            end
          end
        end
        S_DRAIN: if (done) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // --------------------------------------------------------- input buffer
  logic                     fb_valid;
  logic signed [DATA_W-1:0] fb_data [PN];

  feature_buffer #(.N(N), .PN(PN), .H(H), .W(W), .DATA_W(DATA_W)) u_fbuf (
    .clk     (clk),
    .rst_n   (rst_n),
    .wr_en   (fm_wr_en),
    .wr_ch   (fm_wr_ch),
    .wr_addr (fm_wr_addr),
    .wr_data (fm_wr_data),
    .rd_en   (rd_en),
    .rd_grp  ($clog2(N/PN+1)'(ng)),
    .rd_addr (pix),
    .rd_valid(fb_valid),
    .rd_data (fb_data)
  );

  // Pass tags follow the data: one stage for the buffer read, one for the
  // window register.
  pass_t tag_rd, tag_win;

  always_ff @(posedge clk) begin
    tag_rd.first <= (ng == '0);
    tag_rd.last  <= (ng == NGW'(NG - 1));
    tag_rd.mg    <= mg;
    tag_win      <= tag_rd;
  end

  // Which input group the window set belongs to, for the weight selection.
  logic [NGW-1:0] ng_rd, ng_win;
  always_ff @(posedge clk) begin
    ng_rd  <= ng;
    ng_win <= ng_rd;
  end

  // --------------------------------------------------------- window buffers
  logic                     clear;
  logic                     wb_valid [PN];
  logic                     wb_last  [PN];
  logic [IW-1:0]            wb_idx   [PN];
  logic signed [DATA_W-1:0] wins     [PN][KK];

  assign clear = (state == S_IDLE) && start;

  for (genvar p = 0; p < PN; p++) begin : g_win
    window_buffer #(.K(K), .H(H), .W(W), .S(S), .DATA_W(DATA_W)) u_wbuf (
      .clk      (clk),
      .rst_n    (rst_n),
      .clear    (clear),
      .in_valid (fb_valid),
      .in_data  (fb_data[p]),
      .win_valid(wb_valid[p]),
      .win      (wins[p]),
      .win_idx  (wb_idx[p]),
      .win_last (wb_last[p])
    );
  end

  // --------------------------------------------------------- weight buffer
  logic signed [DATA_W-1:0] wgt  [PM][PN][KK];
  logic signed [PROD_W-1:0] bias [PM];

  weight_buffer #(.M(M), .N(N), .K(K), .PM(PM), .PN(PN), .DATA_W(DATA_W), .BIAS_W(PROD_W)) u_wgt (
    .clk      (clk),
    .w_wr_en  (w_wr_en),
    .w_wr_m   (w_wr_m),
    .w_wr_n   (w_wr_n),
    .w_wr_k   (w_wr_k),
    .w_wr_data(w_wr_data),
    .b_wr_en  (b_wr_en),
    .b_wr_m   (b_wr_m),
    .b_wr_data(b_wr_data),
    .sel_mg   ($clog2(M/PM+1)'(tag_win.mg)),
    .sel_ng   ($clog2(N/PN+1)'(ng_win)),
    .wgt      (wgt),
    .bias     (bias)
  );

  // --------------------------------------------------------- compute array
  logic                    pe_valid;
  logic signed [ACC_W-1:0] pe_data [PM];

  pe_array #(.K(K), .PM(PM), .PN(PN), .DATA_W(DATA_W), .ACC_W(ACC_W)) u_pe (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (wb_valid[0]),
    .win      (wins),
    .wgt      (wgt),
    .out_valid(pe_valid),
    .out_data (pe_data)
  );

  // Tags delayed by the compute array's latency.
  pass_t         tag_pe [LATENCY_PE];
  logic [IW-1:0] idx_pe [LATENCY_PE];

  always_ff @(posedge clk) begin
    tag_pe[0] <= tag_win;
    idx_pe[0] <= wb_idx[0];
    for (int i = 1; i < LATENCY_PE; i++) begin
      tag_pe[i] <= tag_pe[i-1];
      idx_pe[i] <= idx_pe[i-1];
    end
  end

  // The bias of the output group leaving the compute array.
  logic signed [PROD_W-1:0] bias_sel [PM];
  logic signed [PROD_W-1:0] bias_q   [LATENCY_PE][PM];

  always_ff @(posedge clk) begin
    bias_q[0] <= bias;
    for (int i = 1; i < LATENCY_PE; i++) bias_q[i] <= bias_q[i-1];
  end
  assign bias_sel = bias_q[LATENCY_PE-1];

  // --------------------------------------------------------- accumulators
  logic          acc_valid;
  logic [IW-1:0] acc_idx;
  logic [MGW-1:0] acc_mg;

  out_accumulator #(.PM(PM), .G(G), .ACC_W(ACC_W), .BIAS_W(PROD_W)) u_acc (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (pe_valid),
    .in_first (tag_pe[LATENCY_PE-1].first),
    .in_last  (tag_pe[LATENCY_PE-1].last),
    .in_idx   (idx_pe[LATENCY_PE-1]),
    .in_data  (pe_data),
    .bias     (bias_sel),
    .out_valid(acc_valid),
    .out_idx  (acc_idx),
    .out_data (out_data)
  );

  always_ff @(posedge clk) acc_mg <= tag_pe[LATENCY_PE-1].mg;

  assign out_valid   = acc_valid;
  assign out_idx     = acc_idx;
  assign out_ch_base = $clog2(M+1)'(acc_mg * PM);
  assign done        = acc_valid && (acc_idx == IW'(G - 1)) && (acc_mg == MGW'(MG - 1));

  // --------------------------------------------------------- protocol rules
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("conv_accel: start while busy");
  a_no_load_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                   busy |-> !(fm_wr_en || w_wr_en || b_wr_en))
    else $error("conv_accel: buffer write while busy");
  a_win_aligned: assert property (@(posedge clk) disable iff (!rst_n)
                                  wb_valid[0] |-> wb_idx[0] == wb_idx[PN-1])
    else $error("conv_accel: window buffers out of step");
  a_last_window: assert property (@(posedge clk) disable iff (!rst_n)
                                  wb_last[0] |-> wb_valid[0] && wb_idx[0] == IW'(G - 1))
    else $error("conv_accel: last-window flag out of step");

endmodule
