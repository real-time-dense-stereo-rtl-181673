// line_window_buffer: line buffers plus a W x W window buffer for a raster stream.
//
// Pixels arrive one per valid beat in raster order (row by row, left to
// right) for an IMG_W x IMG_H frame. W-1 line buffers hold the previous W-1
// rows. They are kept as one memory of IMG_W words, each word holding the
// column of W-1 older pixels at that x: on a beat the word at x is read, the
// oldest pixel drops out of the top, the remaining ones move up one row and
// the new pixel enters at the bottom, and the word is written back to the same
// address (one read and one write per clock, as a BRAM allows). The column
// read out, plus the new pixel, is shifted into the right-hand side of a
// W x W register window while all window columns move one place left.
//
// Interface: in_valid/in_data carry one pixel; there is no back-pressure.
// One cycle after a valid beat, out_valid is high and win holds the window
// whose bottom-right element is that pixel; out_x/out_y give that pixel's
// position. win[r][c] is the pixel at (out_x-(W-1-c), out_y-(W-1-r)).
// Entries whose position falls outside the frame hold stale data; the user
// masks them with out_x/out_y. The frame position wraps after IMG_W*IMG_H
// beats, or returns to (0,0) on sof (a beat with sof high is pixel (0,0)).
//
// The line buffer / window buffer organisation follows the paper (Fig. 4 of
// the paper shows W-1 line buffers for a W x W window). Storing the W-1
// rows as one wide word and the sof/raster counters are choices of this
// design.
module line_window_buffer #(
  parameter int W     = 9,
  parameter int IMG_W = 1242,
  parameter int IMG_H = 375,
  parameter int DW    = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic                          in_sof,
  input  logic [DW-1:0]                 in_data,
  output logic                          out_valid,
  output logic [W-1:0][W-1:0][DW-1:0]   win,
  output logic [$clog2(IMG_W)-1:0]      out_x,
  output logic [$clog2(IMG_H)-1:0]      out_y
);
  localparam int XW = $clog2(IMG_W);
  localparam int YW = $clog2(IMG_H);

  // word[k] for k = 0..W-2 holds the pixel of row y-(W-1)+k at column x
  logic [W-2:0][DW-1:0] lb [IMG_W];

  logic [XW-1:0] x_q, x_cur;
  logic [YW-1:0] y_q, y_cur;
  logic [W-2:0][DW-1:0] rd_word, wr_word;
  logic [W-1:0][DW-1:0] column;

  // position of the incoming beat
  always_comb begin
    x_cur = in_sof ? '0 : x_q;
    y_cur = in_sof ? '0 : y_q;
  end

  always_comb begin
    rd_word = lb[x_cur];
    for (int k = 0; k < W - 1; k++) column[k] = rd_word[k];
    column[W-1] = in_data;
    for (int k = 0; k < W - 2; k++) wr_word[k] = rd_word[k+1];
    wr_word[W-2] = in_data;
  end

  always_ff @(posedge clk) begin
    if (in_valid) lb[x_cur] <= wr_word;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q       <= '0;
      y_q       <= '0;
      out_valid <= 1'b0;
      out_x     <= '0;
      out_y     <= '0;
      win       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_x <= x_cur;
        out_y <= y_cur;
        for (int r = 0; r < W; r++) begin
          for (int c = 0; c < W - 1; c++) win[r][c] <= win[r][c+1];
          win[r][W-1] <= column[r];
        end
        if (x_cur == XW'(IMG_W - 1)) begin
          x_q <= '0;
          y_q <= (y_cur == YW'(IMG_H - 1)) ? '0 : y_cur + 1'b1;
        end else begin
          x_q <= x_cur + 1'b1;
          y_q <= y_cur;
        end
      end
    end
  end

  initial begin
    assert (W >= 3 && (W % 2) == 1) else $error("line_window_buffer: W must be odd and >= 3");
  end

endmodule
