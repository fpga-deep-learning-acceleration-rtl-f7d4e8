// tb_conv_accel: end-to-end test of the convolution accelerator at reduced
// sizes, two configurations side by side.
//   A: 7 x 7 input, 4 input and 4 output channels, 3 x 3 kernels, stride 1,
//      computed 2 x 2 channels at a time (2 input groups x 2 output groups =
//      4 passes), so partial sums are accumulated across input groups and the
//      output group changes during the layer.
//   B: 7 x 8 input, 2 input and 3 output channels, stride 2, one input channel
//      at a time (2 passes), exercising the stride filter of the window buffer.
// Every result is compared with a direct convolution (see conv_harness), the
// start-to-done clock count is checked, and each mechanism (input-group
// accumulation, output-group switch, row-boundary invalid gaps, stride skips)
// must occur at least once.
module tb_conv_accel;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic fin_a, fin_b;
  int   ck_a, fl_a, acc_a, sw_a, gap_a, sk_a;
  int   ck_b, fl_b, acc_b, sw_b, gap_b, sk_b;
  int   checks, failures;

  conv_harness #(.K(3), .H(7), .W(7), .S(1), .N(4), .M(4), .PN(2), .PM(2), .SEED(11)) u_a (
    .clk(clk), .rst_n(rst_n), .finished(fin_a), .checks(ck_a), .failures(fl_a),
    .n_accum(acc_a), .n_group_switch(sw_a), .n_row_gap(gap_a), .n_stride_skip(sk_a));

  conv_harness #(.K(3), .H(7), .W(8), .S(2), .N(2), .M(3), .PN(1), .PM(3), .SEED(23)) u_b (
    .clk(clk), .rst_n(rst_n), .finished(fin_b), .checks(ck_b), .failures(fl_b),
    .n_accum(acc_b), .n_group_switch(sw_b), .n_row_gap(gap_b), .n_stride_skip(sk_b));

  task automatic mech(string name, int count);
    checks++;
    $display("mechanism %-28s occurred %0d times", name, count);
    if (count == 0) begin
      failures++;
      $display("FAIL: mechanism %s never occurred", name);
    end
  endtask

  initial begin
    checks = 0; failures = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (fin_a && fin_b);
    checks   += ck_a + ck_b;
    failures += fl_a + fl_b;
    mech("input-group accumulation", acc_a + acc_b);
    mech("output-group switch", sw_a + sw_b);
    mech("row-boundary invalid gap", gap_a + gap_b);
    mech("stride skip", sk_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
