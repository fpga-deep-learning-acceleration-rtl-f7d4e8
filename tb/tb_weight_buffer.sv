// tb_weight_buffer: loads 4 kernels x 6 channels of 2 x 2 weights and 4
// biases, then steps through every (output group, input group) selection of
// a 2 x 3 parallel array and checks that each presented weight and bias is
// the stored word of output channel sel_mg*2+m, input channel sel_ng*3+n.
module tb_weight_buffer;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int unsigned M = 4, N = 6, K = 2, PM = 2, PN = 3;

  logic               w_wr_en, b_wr_en;
  logic [2:0]         w_wr_m, b_wr_m, w_wr_n, w_wr_k;
  logic signed [15:0] w_wr_data;
  logic signed [31:0] b_wr_data;
  logic [1:0]         sel_mg, sel_ng;
  logic signed [15:0] wgt [PM][PN][K*K];
  logic signed [31:0] bias [PM];

  weight_buffer #(.M(M), .N(N), .K(K), .PM(PM), .PN(PN), .DATA_W(16), .BIAS_W(32)) dut (.*);

  logic signed [15:0] rw [M][N][K*K];
  logic signed [31:0] rb [M];
  int checks = 0, failures = 0;

  initial begin
    w_wr_en = 0; b_wr_en = 0; sel_mg = '0; sel_ng = '0;
    w_wr_m = '0; w_wr_n = '0; w_wr_k = '0; w_wr_data = '0; b_wr_m = '0; b_wr_data = '0;
    @(negedge clk);
    for (int m = 0; m < M; m++)
      for (int n = 0; n < N; n++)
        for (int k = 0; k < K*K; k++) begin
          rw[m][n][k] = 16'($urandom);
          w_wr_en = 1; w_wr_m = 3'(m); w_wr_n = 3'(n); w_wr_k = 3'(k); w_wr_data = rw[m][n][k];
          @(negedge clk);
        end
    w_wr_en = 0;
    for (int m = 0; m < M; m++) begin
      rb[m] = $signed($urandom);
      b_wr_en = 1; b_wr_m = 3'(m); b_wr_data = rb[m];
      @(negedge clk);
    end
    b_wr_en = 0;
    for (int mg = 0; mg < M/PM; mg++)
      for (int ng = 0; ng < N/PN; ng++) begin
        sel_mg = 2'(mg); sel_ng = 2'(ng);
        #1;
        for (int m = 0; m < PM; m++) begin
          checks++;
          if (bias[m] != rb[mg*PM+m]) begin failures++; $display("bias %0d wrong", mg*PM+m); end
          for (int n = 0; n < PN; n++)
            for (int k = 0; k < K*K; k++) begin
              checks++;
              if (wgt[m][n][k] != rw[mg*PM+m][ng*PN+n][k]) begin
                failures++; $display("w[%0d][%0d][%0d] wrong", mg*PM+m, ng*PN+n, k);
              end
            end
        end
        @(negedge clk);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500) @(posedge clk);
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
