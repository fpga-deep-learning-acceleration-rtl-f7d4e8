// tb_conv2_layer: runs layer 2 of the evaluated MNIST network on the
// accelerator: a 13 x 13 input with 15 channels (layer 1's 26 x 26 output
// after 2 x 2 pooling), twenty 6 x 6 kernels, stride 1, giving 20 x 8 x 8
// results. The layer is folded onto 5 input x 4 output channels in parallel
// (720 multipliers), i.e. 3 input groups x 5 output groups = 15 passes of 169
// clocks. All 1280 results are compared with a direct convolution and the
// start-to-done clock count is checked (see conv_harness).
module tb_conv2_layer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic fin;
  int   checks, failures, n_accum, n_sw, n_gap, n_skip;

  conv_harness #(.K(6), .H(13), .W(13), .S(1), .N(15), .M(20), .PN(5), .PM(4), .SEED(7)) u_h (
    .clk(clk), .rst_n(rst_n), .finished(fin), .checks(checks), .failures(failures),
    .n_accum(n_accum), .n_group_switch(n_sw), .n_row_gap(n_gap), .n_stride_skip(n_skip));

  int c2, f2;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (fin);
    c2 = checks + 2;
    f2 = failures;
    if (n_accum == 0) begin f2++; $display("FAIL: no input-group accumulation"); end
    if (n_sw != 4)    begin f2++; $display("FAIL: %0d output-group switches, expected 4", n_sw); end
    $display("accumulations %0d, output-group switches %0d, row gaps %0d", n_accum, n_sw, n_gap);
    $display("TB_RESULT checks=%0d failures=%0d", c2, f2);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
