// tb_census_transform: checks census descriptors of random windows.
//
// Random 5 x 5 windows (some with many pixels equal to the centre, to
// exercise the strict comparison) are applied on consecutive clocks, with
// occasional idle clocks. One clock later each descriptor is compared with
// a bit-by-bit reference computed by the testbench.
module tb_census_transform;
  localparam int W = 5, DW = 8;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [W-1:0][W-1:0][DW-1:0] win = '0;
  logic out_valid;
  logic [W*W-1:0] census;

  int checks = 0, failures = 0;
  logic [W*W-1:0] expq[$];

  census_transform #(.W(W), .DW(DW)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (expq.size() == 0 || census != expq[0]) begin
        failures++;
        if (failures < 10) $display("FAIL census %h", census);
      end
      if (expq.size() != 0) void'(expq.pop_front());
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      logic [W*W-1:0] e;
      @(negedge clk);
      in_valid = ($urandom % 5 != 0);
      for (int r = 0; r < W; r++)
        for (int c = 0; c < W; c++)
          win[r][c] = (n % 4 == 0) ? DW'(100 + $urandom % 3) : DW'($urandom);
      for (int r = 0; r < W; r++)
        for (int c = 0; c < W; c++)
          e[r*W + c] = (win[r][c] < win[W/2][W/2]) ? 1'b1 : 1'b0;
      if (in_valid) expq.push_back(e);
    end
    @(negedge clk); in_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (expq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
