// tb_line_window_buffer: checks the line/window buffer against a stored frame.
//
// Two small frames of random pixels are streamed with random idle cycles
// between beats (the second one starting with sof). After every beat each
// window element whose position lies inside the frame is compared with the
// pixel stored by the testbench at that position, together with the
// reported coordinates. The window must follow each beat after one clock.
module tb_line_window_buffer;
  localparam int W = 3, IMG_W = 7, IMG_H = 5, DW = 8;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sof = 0;
  logic [DW-1:0] in_data = '0;
  logic out_valid;
  logic [W-1:0][W-1:0][DW-1:0] win;
  logic [$clog2(IMG_W)-1:0] out_x;
  logic [$clog2(IMG_H)-1:0] out_y;

  int checks = 0, failures = 0;
  int img [IMG_H][IMG_W];
  int exp_x, exp_y;
  bit pending = 0;

  line_window_buffer #(.W(W), .IMG_W(IMG_W), .IMG_H(IMG_H), .DW(DW)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at (%0d,%0d)", what, exp_x, exp_y);
    end
  endtask

  always @(posedge clk) begin
    if (pending) begin
      check(out_valid, "out_valid");
      check(out_x == exp_x && out_y == exp_y, "coordinates");
      for (int r = 0; r < W; r++)
        for (int c = 0; c < W; c++) begin
          automatic int px = exp_x - (W - 1 - c), py = exp_y - (W - 1 - r);
          if (px >= 0 && py >= 0) check(win[r][c] == DW'(img[py][px]), "window element");
        end
    end else if (rst_n) check(!out_valid, "no spurious out_valid");
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++)
      for (int y = 0; y < IMG_H; y++)
        for (int x = 0; x < IMG_W; x++) begin
          while ($urandom % 3 == 0) begin
            @(negedge clk); in_valid = 0; in_sof = 0;
            @(posedge clk); #1 pending = 0;
          end
          @(negedge clk);
          img[y][x] = int'($urandom % 256);
          in_valid = 1; in_sof = (f == 1 && x == 0 && y == 0); in_data = DW'(img[y][x]);
          @(posedge clk); #1 pending = 1; exp_x = x; exp_y = y;
        end
    @(negedge clk); in_valid = 0;
    @(posedge clk); #1 pending = 0;
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
