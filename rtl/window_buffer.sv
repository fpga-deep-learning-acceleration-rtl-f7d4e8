// window_buffer: turns a raster-order stream of one feature-map channel, one
// pixel per clock, into one K x K convolution window per clock.
//
// Two register arrays do the work, as in the specification's window cache:
// WINDOW_BUFFER (K x K) holds the current window, SHIFT_BUFFER ((K-1) rows of
// W-K registers) holds the rest of the last K-1 image rows. On every accepted
// pixel, all in the same clock: the new pixel enters column 1 of the bottom
// window row; every window row shifts right; the last column of window rows
// 2..K enters column 1 of the matching shift row; every shift row shifts right;
// the last column of shift row r enters column 1 of window row r-1. Each row
// chain is W registers long, so window row r-1 holds the image row above window
// row r, and after (K-1)*W + K pixels (the "invalid" start-up period
// Tu = (K-1)*W + K-1 plus one) the window buffer holds the first window. From
// then on each pixel completes a new window, except while the window straddles
// a row boundary (the K-1 pixels at the start of each row), which this block
// flags invalid. The last window is complete with pixel H*W. Columns are
// therefore stored newest-first; win is re-ordered to image order.
//
// Stride S (both directions) is supported by flagging only every S-th window
// row and column valid; the layers evaluated in the specification all use
// stride 1, the default. The row/column counters, win_idx and win_last are
// this design's additions: they locate each window for the stages after it.
//
// Interface and timing: in_valid/in_data present one pixel; row and column
// counters advance on each, wrapping after H*W pixels, so consecutive frames
// (or consecutive channel groups) may follow back to back. clear restarts the
// counters at pixel 0 (the register contents need no clearing: they are
// overwritten before the next valid window). win/win_valid/win_idx are
// registered: they describe the window completed by the pixel accepted on the
// previous clock. win is indexed i*K + j, window row i (top = 0) and column j
// (left = 0); win_idx numbers the valid windows of a frame 0..Ho*Wo-1 in raster
// order. Reset (rst_n, synchronous, active low) clears counters and valid.
module window_buffer #(
  parameter int unsigned K      = 3,
  parameter int unsigned H      = 28,
  parameter int unsigned W      = 28,
  parameter int unsigned S      = 1,
  parameter int unsigned DATA_W = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] in_data,
  output logic                     win_valid,
  output logic signed [DATA_W-1:0] win [K*K],
  output logic [$clog2((((H-K)/S)+1)*(((W-K)/S)+1))-1:0] win_idx,
  output logic                     win_last
);
  localparam int unsigned HO = (H - K) / S + 1;
  localparam int unsigned WO = (W - K) / S + 1;
  localparam int unsigned G  = HO * WO;
  localparam int unsigned SL = W - K;   // length of one SHIFT_BUFFER row

  if (W < K || H < K) begin : g_bad
    $error("window_buffer: the feature map must be at least K x K");
  end

  // WINDOW_BUFFER: wb[r][c], row r (0 = top), column c (0 = newest pixel).
  logic signed [DATA_W-1:0] wb [K][K];

  // Value entering column 0 of each window row.
  logic signed [DATA_W-1:0] row_in [K];

  assign row_in[K-1] = in_data;

  // SHIFT_BUFFER rows, one behind each of window rows 1..K-1.
  for (genvar r = 1; r < K; r++) begin : g_row
    if (SL > 0) begin : g_sh
      logic signed [DATA_W-1:0] sb [SL];
      always_ff @(posedge clk) begin
        if (in_valid) begin
          sb[0] <= wb[r][K-1];
          for (int c = 1; c < SL; c++) sb[c] <= sb[c-1];
        end
      end
      assign row_in[r-1] = sb[SL-1];
    end else begin : g_nosh
      assign row_in[r-1] = wb[r][K-1];
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int r = 0; r < K; r++) begin
        wb[r][0] <= row_in[r];
        for (int c = 1; c < K; c++) wb[r][c] <= wb[r][c-1];
      end
    end
  end

  // Present the window in image order: image column j is stored at K-1-j.
  always_comb begin
    for (int i = 0; i < K; i++)
      for (int j = 0; j < K; j++)
        win[i*K + j] = wb[i][K-1-j];
  end

  // Position of the incoming pixel and validity of the window it completes.
  logic [$clog2(H+1)-1:0] row;
  logic [$clog2(W+1)-1:0] col;
  logic [$clog2(S+1)-1:0] row_ph, col_ph;   // (row-(K-1)) mod S, (col-(K-1)) mod S
  logic                   completes;
  // Index the next valid window gets: 0 for the first one of a frame.
  logic [$bits(win_idx)-1:0] next_idx;
  logic                      first_seen;   // a window of this frame was already issued

  assign completes = (row >= ($bits(row))'(K - 1)) && (col >= ($bits(col))'(K - 1))
                  && (row_ph == '0) && (col_ph == '0);

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      row       <= '0;
      col       <= '0;
      row_ph    <= '0;
      col_ph    <= '0;
      win_valid <= 1'b0;
      win_idx   <= '0;
      win_last  <= 1'b0;
    end else begin
      win_valid <= in_valid && completes;
      win_last  <= in_valid && completes && (next_idx == ($bits(win_idx))'(G - 1));
      if (in_valid) begin
        if (completes) win_idx <= next_idx;
        if (col == ($bits(col))'(W - 1)) begin
          col    <= '0;
          col_ph <= '0;
          if (row == ($bits(row))'(H - 1)) begin
            row    <= '0;
            row_ph <= '0;
          end else begin
            row <= row + 1'b1;
            if (row >= ($bits(row))'(K - 1))
              row_ph <= (row_ph == ($bits(row_ph))'(S - 1)) ? '0 : row_ph + 1'b1;
          end
        end else begin
          col <= col + 1'b1;
          if (col >= ($bits(col))'(K - 1))
            col_ph <= (col_ph == ($bits(col_ph))'(S - 1)) ? '0 : col_ph + 1'b1;
        end
      end
    end
  end

  always_comb next_idx = first_seen ? win_idx + 1'b1 : '0;

  always_ff @(posedge clk) begin
    if (!rst_n || clear) first_seen <= 1'b0;
    else if (in_valid) begin
      if (col == ($bits(col))'(W - 1) && row == ($bits(row))'(H - 1)) first_seen <= 1'b0;
      else if (completes) first_seen <= 1'b1;
    end
  end

endmodule
