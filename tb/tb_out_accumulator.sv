// tb_out_accumulator: feeds two accumulator lanes with the components of
// G = 5 windows over NG = 3 input groups, window after window as the window
// pipeline delivers them (group 0 for all windows, then group 1, then group
// 2), with idle clocks in between. After the last group each window's result
// must be the sum of its three components plus the lane's bias, one clock
// after the last component, and nothing may be emitted for the earlier
// groups. A second layer reuses the lanes to check that in_first restarts the
// sums.
module tb_out_accumulator;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int unsigned PM = 2, G = 5, NG = 3;

  logic               in_valid, in_first, in_last, out_valid;
  logic [2:0]         in_idx, out_idx;
  logic signed [47:0] in_data [PM], out_data [PM];
  logic signed [31:0] bias [PM];

  out_accumulator #(.PM(PM), .G(G), .ACC_W(48), .BIAS_W(32)) dut (.*);

  longint comp [NG][G][PM];
  int checks = 0, failures = 0, n_out = 0;

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; in_idx = '0;
    foreach (in_data[m]) in_data[m] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int layer = 0; layer < 2; layer++) begin
      foreach (bias[m]) bias[m] = $signed($urandom);
      foreach (comp[g, w, m]) comp[g][w][m] = longint'($signed($urandom)) * 1000;
      for (int g = 0; g < NG; g++)
        for (int w = 0; w < G; w++) begin
          in_valid = 1; in_first = (g == 0); in_last = (g == NG-1); in_idx = 3'(w);
          for (int m = 0; m < PM; m++) in_data[m] = 48'(comp[g][w][m]);
          @(negedge clk);
          in_valid = 0;
          checks++;
          if (out_valid != (g == NG-1)) begin failures++; $display("out_valid %0b in group %0d", out_valid, g); end
          if (g == NG-1) begin
            checks++;
            if (out_idx != 3'(w)) begin failures++; $display("out_idx %0d expected %0d", out_idx, w); end
            for (int m = 0; m < PM; m++) begin
              longint e;
              e = longint'(bias[m]);
              for (int gg = 0; gg < NG; gg++) e += comp[gg][w][m];
              checks++;
              if (out_data[m] != e) begin failures++; $display("win %0d lane %0d: %0d expected %0d", w, m, out_data[m], e); end
            end
            n_out++;
          end
          repeat ($urandom % 2) @(negedge clk);
        end
    end
    checks++;
    if (n_out != 2 * G) begin failures++; $display("%0d results", n_out); end
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
