// tb_mac_tree: checks the multiplication-addition tree for K = 3 (9
// multipliers, result 5 clocks after the window) and K = 6 (36 multipliers,
// 7 clocks). A random signed window and kernel enter every clock; each dot
// product must appear at exactly that latency, computed here independently.
module tb_mac_tree;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int unsigned LAT3 = 5, LAT6 = 7, T = 150;

  logic                v_in;
  logic signed [15:0]  x3 [9],  w3 [9];
  logic signed [15:0]  x6 [36], w6 [36];
  logic                v3, v6;
  logic signed [47:0]  y3, y6;

  mac_tree #(.K(3), .DATA_W(16), .OUT_W(48)) u3 (.clk, .rst_n, .in_valid(v_in), .win(x3), .wgt(w3), .out_valid(v3), .out_data(y3));
  mac_tree #(.K(6), .DATA_W(16), .OUT_W(48)) u6 (.clk, .rst_n, .in_valid(v_in), .win(x6), .wgt(w6), .out_valid(v6), .out_data(y6));

  longint e3 [T+10], e6 [T+10];
  int checks = 0, failures = 0, cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    v_in = 0;
    foreach (x3[i]) begin x3[i] = '0; w3[i] = '0; end
    foreach (x6[i]) begin x6[i] = '0; w6[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < T; t++) begin
      longint s3, s6;
      s3 = 0; s6 = 0;
      v_in = 1;
      foreach (x3[i]) begin x3[i] = 16'($urandom); w3[i] = 16'($urandom); s3 += longint'(x3[i]) * longint'(w3[i]); end
      foreach (x6[i]) begin x6[i] = 16'($urandom); w6[i] = 16'($urandom); s6 += longint'(x6[i]) * longint'(w6[i]); end
      e3[cyc+1] = s3; e6[cyc+1] = s6;
      @(negedge clk);
      if (t >= LAT3) begin
        checks += 2;
        if (!v3 || y3 != e3[cyc-LAT3+1]) begin failures++; $display("K3: %0d expected %0d", y3, e3[cyc-LAT3+1]); end
      end
      if (t >= LAT6) begin
        checks += 2;
        if (!v6 || y6 != e6[cyc-LAT6+1]) begin failures++; $display("K6: %0d expected %0d", y6, e6[cyc-LAT6+1]); end
      end
      if (t == LAT3 - 2) begin
        checks++;
        if (v3) begin failures++; $display("K3 result earlier than the latency"); end
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
