// tb_conv_accel_full: runs the accelerator with its default parameters (layer 1
// of the evaluated MNIST network: one 28 x 28 input channel, fifteen 3 x 3
// kernels, stride 1, all 15 output channels in parallel) through one complete
// layer and compares all 15 x 26 x 26 results with a direct convolution. It
// also checks the clock count (one pass of 28*28 clocks plus the pipeline
// latency) and that the 676 windows of the pass leave one per clock except at
// row boundaries, from pixel Tu+1 to pixel H*W.
module tb_conv_accel_full;
  localparam int unsigned K = 3, H = 28, W = 28, S = 1, N = 1, M = 15, PN = 1, PM = 15;
  localparam int unsigned SEED = 5;
  logic clk = 0, rst_n = 0;
  logic finished;
  int   checks, failures, n_accum, n_group_switch, n_row_gap, n_stride_skip;
  always #5 clk = ~clk;

  import cnn_pkg::*;

  localparam int unsigned HO  = (H - K) / S + 1;
  localparam int unsigned WO  = (W - K) / S + 1;
  localparam int unsigned G   = HO * WO;
  localparam int unsigned KK  = K * K;
  localparam int unsigned PIX = H * W;
  localparam int unsigned NG  = N / PN;
  localparam int unsigned MG  = M / PM;
  localparam int unsigned LPE = 2 + tree_stages(KK) + tree_stages(PN);
  localparam int unsigned TU  = (K - 1) * W + K - 1;
  localparam int unsigned T_LAST = ((HO - 1) * S + K - 1) * W + (WO - 1) * S + K - 1;

  logic                     fm_wr_en, w_wr_en, b_wr_en, start, busy, done;
  logic [$clog2(N+1)-1:0]   fm_wr_ch, w_wr_n;
  logic [$clog2(H*W)-1:0]   fm_wr_addr;
  logic signed [DATA_W-1:0] fm_wr_data, w_wr_data;
  logic [$clog2(M+1)-1:0]   w_wr_m, b_wr_m, out_ch_base;
  logic [$clog2(K*K+1)-1:0] w_wr_k;
  logic signed [PROD_W-1:0] b_wr_data;
  logic                     out_valid;
  logic [$clog2(G)-1:0]     out_idx;
  logic signed [ACC_W-1:0]  out_data [PM];

  // default parameters: layer 1 of the evaluated network
  conv_accel u_dut (.*);

  // Reference data and results.
  logic signed [DATA_W-1:0] X  [N][H][W];
  logic signed [DATA_W-1:0] Wt [M][N][K][K];
  logic signed [PROD_W-1:0] B  [M];
  longint                   O  [M][G];
  int                       seen [M][G];

  int unsigned rnd;
  longint cyc, t_start, t_done, t_first, t_last_out;
  int  n_out;
  logic prev_valid;
  logic [$clog2(M+1)-1:0] prev_base;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    cyc = 0; finished = 0; checks = 0; failures = 0; n_out = 0;
    n_accum = 0; n_group_switch = 0; n_row_gap = 0; n_stride_skip = 0;
    prev_valid = 0; prev_base = 0; t_first = -1; t_last_out = -1; t_done = -1;
    fm_wr_en = 0; w_wr_en = 0; b_wr_en = 0; start = 0;
    fm_wr_ch = '0; fm_wr_addr = '0; fm_wr_data = '0;
    w_wr_m = '0; w_wr_n = '0; w_wr_k = '0; w_wr_data = '0; b_wr_m = '0; b_wr_data = '0;
    rnd = $urandom(SEED);
    for (int n = 0; n < N; n++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) X[n][r][c] = DATA_W'($urandom);
    for (int m = 0; m < M; m++) begin
      B[m] = PROD_W'($signed($urandom) >>> 4);
      for (int n = 0; n < N; n++)
        for (int i = 0; i < K; i++)
          for (int j = 0; j < K; j++) Wt[m][n][i][j] = DATA_W'($urandom);
    end
    for (int m = 0; m < M; m++)
      for (int oi = 0; oi < HO; oi++)
        for (int oj = 0; oj < WO; oj++) begin
          longint acc;
          acc = longint'(B[m]);
          for (int n = 0; n < N; n++)
            for (int i = 0; i < K; i++)
              for (int j = 0; j < K; j++)
                acc += longint'(X[n][oi*S+i][oj*S+j]) * longint'(Wt[m][n][i][j]);
          O[m][oi*WO+oj] = acc;
          seen[m][oi*WO+oj] = 0;
        end

    wait (rst_n);
    @(negedge clk);
    // load feature map, weights, biases: one word per clock
    for (int n = 0; n < N; n++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          fm_wr_en = 1; fm_wr_ch = ($bits(fm_wr_ch))'(n);
          fm_wr_addr = ($bits(fm_wr_addr))'(r*W + c); fm_wr_data = X[n][r][c];
          @(negedge clk);
        end
    fm_wr_en = 0;
    for (int m = 0; m < M; m++)
      for (int n = 0; n < N; n++)
        for (int k = 0; k < KK; k++) begin
          w_wr_en = 1; w_wr_m = ($bits(w_wr_m))'(m); w_wr_n = ($bits(w_wr_n))'(n);
          w_wr_k = ($bits(w_wr_k))'(k); w_wr_data = Wt[m][n][k/K][k%K];
          @(negedge clk);
        end
    w_wr_en = 0;
    for (int m = 0; m < M; m++) begin
      b_wr_en = 1; b_wr_m = ($bits(b_wr_m))'(m); b_wr_data = B[m];
      @(negedge clk);
    end
    b_wr_en = 0;
    start = 1;
    t_start = cyc + 1;          // number of the posedge that samples start
    @(negedge clk);
    start = 0;
    wait (done);
    @(negedge clk);
    repeat (4) @(negedge clk);

    // every result arrived exactly once
    checks++;
    if (n_out != M * G) begin
      failures++;
      $display("harness K%0d S%0d: %0d results, expected %0d", K, S, n_out, M * G);
    end
    for (int m = 0; m < M; m++)
      for (int g = 0; g < G; g++) begin
        checks++;
        if (seen[m][g] != 1) begin
          failures++;
          $display("harness: result m=%0d idx=%0d seen %0d times", m, g, seen[m][g]);
        end
      end
    // done arrives at the cycle given by the pipeline timing
    checks++;
    if (t_done - t_start != longint'(3 + LPE + (MG * NG - 1) * PIX + T_LAST)) begin
      failures++;
      $display("harness: start-to-done %0d clocks, expected %0d", t_done - t_start,
               3 + LPE + (MG * NG - 1) * PIX + T_LAST);
    end
    checks++;
    if (busy) begin failures++; $display("harness: still busy after done"); end
    finished = 1;
  end

  // result stream checks, sampled between clock edges
  int unsigned pass_out;
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      for (int p = 0; p < PM; p++) begin
        int m;
        m = int'(out_ch_base) + p;
        checks++;
        if (longint'(out_data[p]) != O[m][out_idx]) begin
          failures++;
          $display("harness: O[%0d][%0d] = %0d, expected %0d", m, out_idx, out_data[p], O[m][out_idx]);
        end
        seen[m][out_idx]++;
        n_out++;
      end
      if (prev_valid == 0 && pass_out != 0) n_row_gap++;
      if (out_idx == '0) begin
        t_first = cyc;
        pass_out = 0;
        if (n_out != PM && out_ch_base != prev_base) n_group_switch++;
        prev_base = out_ch_base;
      end
      pass_out++;
      if (out_idx == ($bits(out_idx))'(G - 1)) begin
        t_last_out = cyc;
        pass_out = 0;
        if (S == 1) begin
          checks++;
          if (t_last_out - t_first != longint'(PIX - 1 - TU)) begin
            failures++;
            $display("harness: pass results span %0d clocks, expected %0d",
                     t_last_out - t_first, PIX - 1 - TU);
          end
        end
      end
    end
    if (rst_n && done) t_done = cyc;
    prev_valid = out_valid;
    if (u_dut.u_acc.in_valid && !u_dut.u_acc.in_first) n_accum++;
    if (u_dut.g_win[0].u_wbuf.in_valid
        && u_dut.g_win[0].u_wbuf.row >= ($bits(u_dut.g_win[0].u_wbuf.row))'(K - 1)
        && u_dut.g_win[0].u_wbuf.col >= ($bits(u_dut.g_win[0].u_wbuf.col))'(K - 1)
        && !u_dut.g_win[0].u_wbuf.completes) n_stride_skip++;
  end

  initial pass_out = 0;


  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (finished);
    checks++;
    if (n_row_gap == 0) begin failures++; $display("FAIL: no row-boundary gap seen"); end
    $display("row-boundary invalid gaps: %0d", n_row_gap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
