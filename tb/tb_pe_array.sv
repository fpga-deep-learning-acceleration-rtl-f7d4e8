// tb_pe_array: checks the PM x PN compute array with K = 3, PM = 3 output and
// PN = 2 input channels. A random set of PN windows and PM x PN kernels enters
// every clock; out_data[m] must equal sum_n sum_k win[n][k]*wgt[m][n][k]
// exactly LATENCY = (1 + 4) + (1 + 1) = 7 clocks later, with out_valid set.
module tb_pe_array;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int unsigned K = 3, PM = 3, PN = 2, KK = 9, LAT = 7, T = 120;

  logic               v_in, v_out;
  logic signed [15:0] win [PN][KK];
  logic signed [15:0] wgt [PM][PN][KK];
  logic signed [47:0] y [PM];

  pe_array #(.K(K), .PM(PM), .PN(PN), .DATA_W(16), .ACC_W(48)) dut (
    .clk, .rst_n, .in_valid(v_in), .win, .wgt, .out_valid(v_out), .out_data(y));

  longint e [T+10][PM];
  logic   ev [T+10];
  int checks = 0, failures = 0, cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    v_in = 0;
    foreach (win[n, k]) win[n][k] = '0;
    foreach (wgt[m, n, k]) wgt[m][n][k] = '0;
    foreach (ev[i]) ev[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < T; t++) begin
      v_in = ($urandom % 5) != 0;
      foreach (win[n, k]) win[n][k] = 16'($urandom);
      foreach (wgt[m, n, k]) wgt[m][n][k] = 16'($urandom);
      for (int m = 0; m < PM; m++) begin
        e[cyc+1][m] = 0;
        for (int n = 0; n < PN; n++)
          for (int k = 0; k < KK; k++) e[cyc+1][m] += longint'(win[n][k]) * longint'(wgt[m][n][k]);
      end
      ev[cyc+1] = v_in;
      @(negedge clk);
      if (cyc - int'(LAT) + 1 >= 4) begin
        checks++;
        if (v_out !== ev[cyc-LAT+1]) begin failures++; $display("valid wrong at %0d", cyc); end
        if (ev[cyc-LAT+1])
          for (int m = 0; m < PM; m++) begin
            checks++;
            if (y[m] != e[cyc-LAT+1][m]) begin failures++; $display("m%0d: %0d expected %0d", m, y[m], e[cyc-LAT+1][m]); end
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (T + 100) @(posedge clk);
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
