// tb_census_cost_volume: checks census matching costs against the reference.
//
// A random 16 x 6 stereo pair is streamed (3 x 3 census, 8 disparities) with
// random idle clocks. For every output beat the testbench checks the centre
// coordinates, the centre-inside flag, the per-disparity mask (right window
// inside the frame) and each unmasked Hamming cost against costs computed
// from the stored images by elas_ref_pkg. Each beat must come out exactly
// four clocks after it went in.
module tb_census_cost_volume;
  import elas_pkg::*;
  import elas_ref_pkg::*;
  localparam int W = 3, D = 8, IMG_W = 16, IMG_H = 6, CW = cost_width(W * W), R = (W - 1) / 2;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sof = 0;
  pix_t in_left = '0, in_right = '0;
  logic out_valid, out_center_ok;
  logic [D-1:0] out_mask;
  logic [D-1:0][CW-1:0] out_cost;
  logic [$clog2(IMG_W)-1:0] out_x;
  logic [$clog2(IMG_H)-1:0] out_y;

  int checks = 0, failures = 0;
  int cycle = 0, nout = 0;
  int tin[$];
  elas_model m;

  census_cost_volume #(.W(W), .D(D), .IMG_W(IMG_W), .IMG_H(IMG_H), .CW(CW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s beat %0d", what, nout);
    end
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      automatic int x = nout % IMG_W, y = nout / IMG_W;
      automatic int cx = x - R, cy = y - R;
      automatic bit ok = (cx >= R) && (cy >= R);
      check(tin.size() > 0 && cycle - tin[0] == 4, "latency 4");
      if (tin.size() > 0) void'(tin.pop_front());
      check(out_x == ($clog2(IMG_W))'(x) && out_y == ($clog2(IMG_H))'(y), "coordinates");
      check(out_center_ok == ok, "centre flag");
      for (int d = 0; d < D; d++) begin
        automatic bit mk = ok && (cx - d >= R);
        check(out_mask[d] == mk, "mask");
        if (mk)
          check(int'(out_cost[d]) == $countones(m.census(0, cx, cy, W) ^ m.census(1, cx - d, cy, W)),
                "cost");
      end
      nout++;
    end
  end

  initial begin
    m = new(IMG_W, IMG_H, D);
    for (int i = 0; i < IMG_W * IMG_H; i++) begin
      m.L[i] = int'($urandom % 256);
      m.R[i] = (i % IMG_W >= 2) ? m.L[i - 2] : int'($urandom % 256);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < IMG_W * IMG_H; i++) begin
      while ($urandom % 4 == 0) begin
        @(negedge clk); in_valid = 0;
      end
      @(negedge clk);
      in_valid = 1; in_sof = (i == 0);
      in_left = pix_t'(m.L[i]); in_right = pix_t'(m.R[i]);
      tin.push_back(cycle + 1);
    end
    @(negedge clk); in_valid = 0;
    repeat (8) @(posedge clk);
    check(nout == IMG_W * IMG_H, "one output per input");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
