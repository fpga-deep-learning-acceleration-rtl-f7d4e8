// tb_feature_buffer: fills a 4-channel, 3 x 4 input buffer read two channels
// at a time (two banks), then reads every (group, pixel) pair and checks that
// rd_data[p] holds channel group*2+p one clock after the read, with rd_valid.
// Writes are in random order so that a bank or address mix-up shows.
module tb_feature_buffer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int unsigned N = 4, PN = 2, H = 3, W = 4;

  logic               wr_en, rd_en, rd_valid;
  logic [2:0]         wr_ch;
  logic [3:0]         wr_addr, rd_addr;
  logic signed [15:0] wr_data, rd_data [PN];
  logic [1:0]         rd_grp;

  feature_buffer #(.N(N), .PN(PN), .H(H), .W(W), .DATA_W(16)) dut (.*);

  logic signed [15:0] ref_mem [N][H*W];
  int order [N*H*W];
  int checks = 0, failures = 0;

  initial begin
    wr_en = 0; rd_en = 0; wr_ch = '0; wr_addr = '0; wr_data = '0; rd_grp = '0; rd_addr = '0;
    foreach (order[i]) order[i] = i;
    order.shuffle();
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (order[i]) begin
      int ch, a;
      ch = order[i] / (H*W); a = order[i] % (H*W);
      ref_mem[ch][a] = 16'($urandom);
      wr_en = 1; wr_ch = 3'(ch); wr_addr = 4'(a); wr_data = ref_mem[ch][a];
      @(negedge clk);
    end
    wr_en = 0;
    for (int g = 0; g < N/PN; g++)
      for (int a = 0; a < H*W; a++) begin
        rd_en = 1; rd_grp = 2'(g); rd_addr = 4'(a);
        @(negedge clk);
        rd_en = 0;
        checks++;
        if (!rd_valid) begin failures++; $display("rd_valid missing"); end
        for (int p = 0; p < PN; p++) begin
          checks++;
          if (rd_data[p] != ref_mem[g*PN+p][a]) begin
            failures++; $display("ch %0d pix %0d: %0d expected %0d", g*PN+p, a, rd_data[p], ref_mem[g*PN+p][a]);
          end
        end
      end
    @(negedge clk);
    checks++;
    if (rd_valid) begin failures++; $display("rd_valid without a read"); end
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
