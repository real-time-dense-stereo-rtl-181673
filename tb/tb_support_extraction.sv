// tb_support_extraction: checks support points against the reference model.
//
// A 24 x 8 stereo pair with a known disparity (left half 3, right half 5),
// a band of unmatched noise and a flat (textureless) patch is streamed with
// random idle clocks through a 3 x 3 census / 8-disparity extractor. Every
// output beat is compared with elas_ref_pkg::support_at (best census match
// kept only if m1 <= m2/2+m2/4+m2/8+m2/32). The run must show accepted and
// rejected matches, and every beat must leave exactly 6+log2(D) clocks
// after it entered (one pixel per clock, fixed latency).
module tb_support_extraction;
  import elas_pkg::*;
  import elas_ref_pkg::*;
  localparam int W = 3, D = 8, IMG_W = 24, IMG_H = 8, R = (W - 1) / 2;
  localparam int LAT = 6 + $clog2(D);

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sof = 0;
  pix_t in_left = '0, in_right = '0;
  logic out_valid, out_sof;
  disp_t out_disp;

  int checks = 0, failures = 0, cycle = 0, nout = 0, n_acc = 0, n_rej = 0;
  int tin[$];
  int expd[];
  elas_model m;

  support_extraction #(.W(W), .D(D), .IMG_W(IMG_W), .IMG_H(IMG_H)) dut (.*);

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
      automatic int e = expd[nout];
      check(tin.size() > 0 && cycle - tin[0] == LAT, "latency");
      if (tin.size() > 0) void'(tin.pop_front());
      check(out_sof == (nout == 0), "sof");
      check(out_disp.valid == (e >= 0) && (e < 0 || int'(out_disp.d) == e), "support point");
      if (e >= 0) n_acc++;
      else if (nout % IMG_W >= 2 * R + 1 && nout / IMG_W >= 2 * R) n_rej++;
      nout++;
    end
  end

  initial begin
    int disp[];
    m = new(IMG_W, IMG_H, D);
    disp = new[IMG_W * IMG_H];
    for (int y = 0; y < IMG_H; y++)
      for (int x = 0; x < IMG_W; x++)
        disp[y*IMG_W + x] = (y == 5) ? -1 : (x < IMG_W / 2) ? 3 : 5;
    m.make_scene(7, disp);
    for (int y = 1; y < 4; y++)
      for (int x = 14; x < 20; x++) begin   // flat patch in both images
        m.L[y*IMG_W + x] = 90;
        m.R[y*IMG_W + x] = 90;
      end
    m.support_stream(W, expd);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < IMG_W * IMG_H; i++) begin
      while ($urandom % 5 == 0) begin
        @(negedge clk); in_valid = 0;
      end
      @(negedge clk);
      in_valid = 1; in_sof = (i == 0);
      in_left = pix_t'(m.L[i]); in_right = pix_t'(m.R[i]);
      tin.push_back(cycle + 1);
    end
    @(negedge clk); in_valid = 0;
    repeat (LAT + 4) @(posedge clk);
    check(nout == IMG_W * IMG_H, "one output per input");
    check(n_acc > 0, "some support points accepted");
    check(n_rej > 0, "some candidates rejected");
    $display("accepted %0d rejected %0d", n_acc, n_rej);
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
