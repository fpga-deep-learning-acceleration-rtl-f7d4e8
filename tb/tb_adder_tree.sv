// tb_adder_tree: checks the odd-pass-through addition tree with 9 operands
// (the specification's example: 4 adder layers after the input registers) and
// with 6 operands (3 adder layers, odd count on layer 2). Random signed
// operand sets enter every clock; each sum must appear exactly
// 1 + ceil(log2(ETA)) clocks later with out_valid set, and out_valid must
// follow the in_valid pattern.
module tb_adder_tree;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int unsigned LAT9 = 5, LAT6 = 4, T = 200;

  logic                 v_in;
  logic signed [31:0]   a9 [9], a6 [6];
  logic                 v9, v6;
  logic signed [47:0]   s9, s6;

  adder_tree #(.ETA(9), .IN_W(32), .OUT_W(48)) u9 (.clk, .rst_n, .in_valid(v_in), .in_data(a9), .out_valid(v9), .out_data(s9));
  adder_tree #(.ETA(6), .IN_W(32), .OUT_W(48)) u6 (.clk, .rst_n, .in_valid(v_in), .in_data(a6), .out_valid(v6), .out_data(s6));

  longint e9 [T+10], e6 [T+10];
  logic   ev [T+10];
  int checks = 0, failures = 0, cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    v_in = 0;
    foreach (a9[i]) a9[i] = '0;
    foreach (a6[i]) a6[i] = '0;
    foreach (ev[i]) begin ev[i] = 0; e9[i] = 0; e6[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < T; t++) begin
      // inputs set now are sampled by posedge number cyc+1
      longint s_9, s_6;
      s_9 = 0; s_6 = 0;
      v_in = ($urandom % 4) != 0;
      foreach (a9[i]) begin a9[i] = $signed($urandom); s_9 += a9[i]; end
      foreach (a6[i]) begin a6[i] = $signed($urandom); s_6 += a6[i]; end
      e9[cyc+1] = s_9; e6[cyc+1] = s_6; ev[cyc+1] = v_in;
      @(negedge clk);
      // after posedge p = cyc, the outputs hold what posedge p-LAT+1 sampled
      if (cyc - LAT9 + 1 >= 4) begin
        checks += 2;
        if (v9 !== ev[cyc-LAT9+1]) begin failures++; $display("ETA9 valid wrong at %0d", cyc); end
        if (ev[cyc-LAT9+1] && s9 != e9[cyc-LAT9+1]) begin
          failures++; $display("ETA9 sum %0d expected %0d", s9, e9[cyc-LAT9+1]);
        end
      end
      if (cyc - LAT6 + 1 >= 4) begin
        checks += 2;
        if (v6 !== ev[cyc-LAT6+1]) begin failures++; $display("ETA6 valid wrong at %0d", cyc); end
        if (ev[cyc-LAT6+1] && s6 != e6[cyc-LAT6+1]) begin
          failures++; $display("ETA6 sum %0d expected %0d", s6, e6[cyc-LAT6+1]);
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
