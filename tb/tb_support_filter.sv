// tb_support_filter: checks consistency and backward redundancy filtering.
//
// A 24 x 10 sparse disparity stream is built from two smooth regions
// (disparities around 10 and 16) at about 50 % density, plus isolated
// outliers with random disparities. It is streamed with random idle
// clocks through a filter with a 5 x 5 consistency window and the default
// thresholds. Every output beat is compared with
// elas_ref_pkg::filter_stream, the numbers of points removed by each of the
// two checks (reported on out_incon_drop / out_redun_drop) must match the
// model and both must be non-zero, and each beat must take 3 clocks.
module tb_support_filter;
  import elas_pkg::*;
  import elas_ref_pkg::*;
  localparam int IMG_W = 24, IMG_H = 10, FW = 5;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sof = 0;
  disp_t in_disp = '0;
  logic out_valid, out_sof, out_incon_drop, out_redun_drop;
  disp_t out_disp;

  int checks = 0, failures = 0, cycle = 0, nout = 0, n_incon = 0, n_redun = 0;
  int tin[$];
  int src[], expd[];
  int e_incon, e_redun;
  elas_model m;

  support_filter #(.IMG_W(IMG_W), .IMG_H(IMG_H), .FW(FW)) dut (.*);

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
      check(tin.size() > 0 && cycle - tin[0] == 3, "latency 3");
      if (tin.size() > 0) void'(tin.pop_front());
      check(out_sof == (nout == 0), "sof");
      check(out_disp.valid == (e >= 0) && (e < 0 || int'(out_disp.d) == e), "filtered point");
      n_incon += int'(out_incon_drop);
      n_redun += int'(out_redun_drop);
      nout++;
    end
  end

  initial begin
    m = new(IMG_W, IMG_H, 256);
    src = new[IMG_W * IMG_H];
    for (int i = 0; i < IMG_W * IMG_H; i++) begin
      automatic int r = int'($urandom % 100);
      if (r < 6) src[i] = int'($urandom % 256);
      else if (r < 55) src[i] = ((i % IMG_W < IMG_W / 2) ? 10 : 16) + int'($urandom % 3) - 1;
      else src[i] = -1;
    end
    m.filter_stream(src, FW, 5, 5, 5, 1, expd, e_incon, e_redun);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < IMG_W * IMG_H; i++) begin
      while ($urandom % 5 == 0) begin
        @(negedge clk); in_valid = 0;
      end
      @(negedge clk);
      in_valid = 1; in_sof = (i == 0);
      in_disp.valid = (src[i] >= 0);
      in_disp.d = (src[i] >= 0) ? DISP_W'(src[i]) : '0;
      tin.push_back(cycle + 1);
    end
    @(negedge clk); in_valid = 0;
    repeat (8) @(posedge clk);
    check(nout == IMG_W * IMG_H, "one output per input");
    check(n_incon == e_incon && n_incon > 0, "inconsistent points removed");
    check(n_redun == e_redun && n_redun > 0, "redundant points removed");
    $display("removed: inconsistent %0d (model %0d), redundant %0d (model %0d)",
             n_incon, e_incon, n_redun, e_redun);
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
