// tb_window_buffer: streams random frames through two window buffers and
// checks every window against the frame it came from.
//   A: K = 3 on a 6 x 7 frame, stride 1, pixels every clock, two frames back
//      to back. Windows must appear one per clock from pixel Tu+1 =
//      (K-1)*W + K to pixel H*W, except at the K-1 row-boundary pixels.
//   B: K = 3 on a 7 x 7 frame, stride 2, with random idle clocks between
//      pixels (the buffer only advances on in_valid).
// For each pixel the testbench predicts, from its row and column alone,
// whether it completes a window, which window index that is and whether it is
// the last one, and compares all K*K window words one clock later.
module tb_window_buffer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int unsigned K = 3;
  localparam int unsigned HA = 6, WA = 7, SA = 1;
  localparam int unsigned HB = 7, WB = 7, SB = 2;

  logic               va, vb, clr;
  logic signed [15:0] da, db;
  logic               wva, wvb, wla, wlb;
  logic signed [15:0] wa [K*K], wbw [K*K];
  logic [$clog2(((HA-K)/SA+1)*((WA-K)/SA+1))-1:0] ia;
  logic [$clog2(((HB-K)/SB+1)*((WB-K)/SB+1))-1:0] ib;

  window_buffer #(.K(K), .H(HA), .W(WA), .S(SA), .DATA_W(16)) u_a (
    .clk, .rst_n, .clear(clr), .in_valid(va), .in_data(da),
    .win_valid(wva), .win(wa), .win_idx(ia), .win_last(wla));
  window_buffer #(.K(K), .H(HB), .W(WB), .S(SB), .DATA_W(16)) u_b (
    .clk, .rst_n, .clear(clr), .in_valid(vb), .in_data(db),
    .win_valid(wvb), .win(wbw), .win_idx(ib), .win_last(wlb));

  int checks = 0, failures = 0, nwin_a = 0, nwin_b = 0;
  logic signed [15:0] fa [HA][WA];
  logic signed [15:0] fb [HB][WB];

  // Check one window buffer's outputs for the pixel (r, c) it accepted.
  task automatic check_a(int r, int c, int frame);
    bit  exp_v;
    int  oi, oj;
    exp_v = (r >= K-1) && (c >= K-1) && ((r-K+1) % SA == 0) && ((c-K+1) % SA == 0);
    checks++;
    if (wva !== exp_v) begin failures++; $display("A: valid %0b expected %0b at r%0d c%0d", wva, exp_v, r, c); end
    if (exp_v && wva) begin
      oi = (r-K+1)/SA; oj = (c-K+1)/SA;
      checks += 2;
      if (ia != oi*((WA-K)/SA+1)+oj) begin failures++; $display("A: idx %0d at r%0d c%0d", ia, r, c); end
      if (wla != (r == HA-1 && c == WA-1)) begin failures++; $display("A: last flag wrong"); end
      for (int i = 0; i < K; i++)
        for (int j = 0; j < K; j++) begin
          checks++;
          if (wa[i*K+j] != fa[r-K+1+i][c-K+1+j]) begin
            failures++; $display("A: frame %0d win(%0d,%0d)[%0d][%0d] wrong", frame, oi, oj, i, j);
          end
        end
      nwin_a++;
    end
  endtask

  task automatic check_b(int r, int c);
    bit  exp_v;
    int  oi, oj;
    exp_v = (r >= K-1) && (c >= K-1) && ((r-K+1) % SB == 0) && ((c-K+1) % SB == 0);
    checks++;
    if (wvb !== exp_v) begin failures++; $display("B: valid %0b expected %0b at r%0d c%0d", wvb, exp_v, r, c); end
    if (exp_v && wvb) begin
      oi = (r-K+1)/SB; oj = (c-K+1)/SB;
      checks++;
      if (ib != oi*((WB-K)/SB+1)+oj) begin failures++; $display("B: idx %0d at r%0d c%0d", ib, r, c); end
      for (int i = 0; i < K; i++)
        for (int j = 0; j < K; j++) begin
          checks++;
          if (wbw[i*K+j] != fb[r-K+1+i][c-K+1+j]) begin failures++; $display("B: win(%0d,%0d) wrong", oi, oj); end
        end
      nwin_b++;
    end
  endtask

  initial begin
    va = 0; vb = 0; clr = 0; da = '0; db = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // A: two frames, one pixel per clock, no gaps
    for (int f = 0; f < 2; f++) begin
      foreach (fa[r, c]) fa[r][c] = 16'($urandom);
      for (int r = 0; r < HA; r++)
        for (int c = 0; c < WA; c++) begin
          va = 1; da = fa[r][c];
          @(negedge clk);
          va = 0;
          check_a(r, c, f);
        end
    end
    checks++;
    if (nwin_a != 2 * (HA-K+1) * (WA-K+1)) begin failures++; $display("A: %0d windows", nwin_a); end
    // B: one frame with random idle clocks
    foreach (fb[r, c]) fb[r][c] = 16'($urandom);
    for (int r = 0; r < HB; r++)
      for (int c = 0; c < WB; c++) begin
        while ($urandom % 3 == 0) begin
          vb = 0; @(negedge clk);
          checks++;
          if (wvb) begin failures++; $display("B: window without a pixel"); end
        end
        vb = 1; db = fb[r][c];
        @(negedge clk);
        vb = 0;
        check_b(r, c);
      end
    checks++;
    if (nwin_b != ((HB-K)/SB+1) * ((WB-K)/SB+1)) begin failures++; $display("B: %0d windows", nwin_b); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
