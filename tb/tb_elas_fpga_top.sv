// tb_elas_fpga_top: end-to-end run of both FPGA passes on a small frame.
//
// Scene: a 40 x 14 random-texture stereo pair with two depth planes
// (disparity 3 on the left, 7 on the right), a row of unmatched noise and
// a flat patch. Sizes are reduced (16 disparities, 5 x 5 support window,
// 3 x 3 dense window, 5 x 5 filter window, 4 x 4 grid cells).
//  1. Pass 1 streams the pair; the filtered support stream is compared
//     beat by beat with elas_ref_pkg (support_stream then filter_stream).
//  2. The processor's part is stood in for by simple testbench code: grid
//     vectors pool the surviving support points of each cell with +-1
//     widening; the per-pixel prior is the nearest surviving support point
//     to the left in the same row (a stand-in for the triangulated plane
//     prior, which is outside the FPGA).
//  3. Pass 2 streams the pair with the priors after the grid vectors were
//     written; the dense stream is compared with dense_stream. Pass 1 of
//     the next frame runs at the same time and must reproduce step 1.
// Mechanisms counted (each must occur): accepted and ambiguous support
// matches, consistency and redundancy removals, dense pixels decided by the
// grid vector only and by the prior only, empty candidate sets, idle input
// clocks, and overlapping passes. Latencies of both paths are checked.
module tb_elas_fpga_top;
  import elas_pkg::*;
  import elas_ref_pkg::*;
  localparam int IMG_W = 40, IMG_H = 14, D = 16, WS = 5, WD = 3, FWIN = 5, GRID = 4;
  localparam int RS = (WS - 1) / 2, RD = (WD - 1) / 2, F = (FWIN - 1) / 2;
  localparam int GC = (IMG_W + GRID - 1) / GRID, GR = (IMG_H + GRID - 1) / GRID;
  localparam int GA_W = $clog2(GC * GR);
  localparam int LAT1 = 6 + $clog2(D) + 3, LAT2 = 6 + $clog2(D);
  localparam int N = IMG_W * IMG_H;

  logic clk = 0, rst_n = 0;
  logic sp_in_valid = 0, sp_in_sof = 0;
  pix_t sp_in_left = '0, sp_in_right = '0;
  logic sp_out_valid, sp_out_sof, sp_incon_drop, sp_redun_drop;
  disp_t sp_out_disp;
  logic gv_we = 0;
  logic [GA_W-1:0] gv_addr = '0;
  logic [D-1:0] gv_data = '0;
  logic dm_in_valid = 0, dm_in_sof = 0;
  pix_t dm_in_left = '0, dm_in_right = '0;
  disp_t dm_in_prior = '0;
  logic dm_out_valid, dm_out_sof;
  disp_t dm_out_disp;

  elas_fpga_top #(.IMG_W(IMG_W), .IMG_H(IMG_H), .D(D), .W_SUPPORT(WS), .W_DENSE(WD),
                  .FILTER_WIN(FWIN), .GRID(GRID)) dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  int n1 = 0, n2 = 0;
  int t1[$], t2[$];
  int sup[], filt[], dense[], prior[], disp[];
  int e_incon, e_redun;
  bit [255:0] gv[];
  elas_model m;
  // mechanism counters
  int c_acc = 0, c_amb = 0, c_incon = 0, c_redun = 0, c_grid = 0, c_prior = 0, c_empty = 0;
  int c_idle = 0, c_overlap = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s (pass1 beat %0d, pass2 beat %0d)", what, n1, n2);
    end
  endtask

  always @(posedge clk) begin
    if (rst_n) begin
      if (sp_out_valid && dm_out_valid) c_overlap++;
      c_incon += int'(sp_incon_drop);
      c_redun += int'(sp_redun_drop);
      if (sp_out_valid) begin
        automatic int e = filt[n1 % N];
        check(t1.size() > 0 && cycle - t1[0] == LAT1, "pass 1 latency");
        if (t1.size() > 0) void'(t1.pop_front());
        check(sp_out_sof == (n1 % N == 0), "pass 1 sof");
        check(sp_out_disp.valid == (e >= 0) && (e < 0 || int'(sp_out_disp.d) == e),
              "filtered support point");
        n1++;
      end
      if (dm_out_valid) begin
        automatic int e = dense[n2];
        automatic int cx = n2 % IMG_W - RD, cy = n2 / IMG_W - RD;
        check(t2.size() > 0 && cycle - t2[0] == LAT2, "pass 2 latency");
        if (t2.size() > 0) void'(t2.pop_front());
        check(dm_out_sof == (n2 == 0), "pass 2 sof");
        check(dm_out_disp.valid == (e >= 0) && (e < 0 || int'(dm_out_disp.d) == e),
              "dense disparity");
        if (cx >= RD && cy >= RD) begin
          automatic int p = prior[cy*IMG_W + cx];
          automatic bit in_gv = (e >= 0) && gv[(cy / GRID) * GC + cx / GRID][e];
          automatic bit in_pr = (e >= 0) && p >= 0 && e >= p - 1 && e <= p + 1;
          if (e < 0) c_empty++;
          else if (in_gv && !in_pr) c_grid++;
          else if (in_pr && !in_gv) c_prior++;
        end
        n2++;
      end
    end
  end

  task automatic pass1_frame();
    for (int i = 0; i < N; i++) begin
      while ($urandom % 6 == 0) begin
        @(negedge clk); sp_in_valid = 0; c_idle++;
      end
      @(negedge clk);
      sp_in_valid = 1; sp_in_sof = (i == 0);
      sp_in_left = pix_t'(m.L[i]); sp_in_right = pix_t'(m.R[i]);
      t1.push_back(cycle + 1);
    end
    @(negedge clk); sp_in_valid = 0;
  endtask

  task automatic pass2_frame();
    for (int i = 0; i < N; i++) begin
      while ($urandom % 6 == 0) begin
        @(negedge clk); dm_in_valid = 0; c_idle++;
      end
      @(negedge clk);
      dm_in_valid = 1; dm_in_sof = (i == 0);
      dm_in_left = pix_t'(m.L[i]); dm_in_right = pix_t'(m.R[i]);
      dm_in_prior.valid = (prior[i] >= 0);
      dm_in_prior.d = (prior[i] >= 0) ? DISP_W'(prior[i]) : '0;
      t2.push_back(cycle + 1);
    end
    @(negedge clk); dm_in_valid = 0;
  endtask

  initial begin
    m = new(IMG_W, IMG_H, D);
    disp = new[N];
    for (int y = 0; y < IMG_H; y++)
      for (int x = 0; x < IMG_W; x++)
        disp[y*IMG_W + x] = (y == 9) ? -1 : (x < IMG_W / 2) ? 3 : 7;
    m.make_scene(5, disp);
    for (int y = 2; y < 6; y++)
      for (int x = 26; x < 34; x++) begin
        m.L[y*IMG_W + x] = 120; m.R[y*IMG_W + x] = 120;
      end
    m.support_stream(WS, sup);
    m.filter_stream(sup, FWIN, 5, 5, 5, 1, filt, e_incon, e_redun);
    for (int y = 0; y < IMG_H; y++)
      for (int x = 0; x < IMG_W; x++)
        if (x >= 2 * RS + 1 && y >= 2 * RS) begin
          if (sup[y*IMG_W + x] >= 0) c_acc++; else c_amb++;
        end

    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---- pass 1
    pass1_frame();
    repeat (LAT1 + 2) @(posedge clk);
    check(n1 == N, "pass 1 one output per input");
    check(c_incon == e_incon && c_redun == e_redun, "filter removal counts");

    // ---- processor stand-in: grid vectors and priors from the support points
    gv = new[GC * GR];
    prior = new[N];
    for (int i = 0; i < GC * GR; i++) gv[i] = '0;
    for (int i = 0; i < N; i++) prior[i] = -1;
    for (int k = 0; k < N; k++)
      if (filt[k] >= 0) begin
        automatic int u = k % IMG_W - RS - F, v = k / IMG_W - RS - F, d = filt[k];
        automatic int c = (v / GRID) * GC + u / GRID;
        gv[c][d] = 1'b1;
        if (d > 0) gv[c][d-1] = 1'b1;
        if (d < D - 1) gv[c][d+1] = 1'b1;
      end
    for (int y = 0; y < IMG_H; y++) begin
      automatic int last = -1;
      for (int x = 0; x < IMG_W; x++) begin
        automatic int k = (y + RS + F) * IMG_W + x + RS + F;
        if (x + RS + F < IMG_W && y + RS + F < IMG_H && filt[k] >= 0) last = filt[k];
        prior[y*IMG_W + x] = last;
      end
    end
    m.dense_stream(WD, GRID, 1, prior, gv, dense);
    for (int c = 0; c < GC * GR; c++) begin
      @(negedge clk);
      gv_we = 1; gv_addr = GA_W'(c); gv_data = gv[c][D-1:0];
    end
    @(negedge clk); gv_we = 0;

    // ---- pass 2, overlapped with pass 1 of the next frame
    fork
      pass2_frame();
      pass1_frame();
    join
    repeat (LAT1 + 4) @(posedge clk);
    check(n2 == N, "pass 2 one output per input");
    check(n1 == 2 * N, "second pass 1 frame complete");

    check(c_acc > 0, "mechanism: support points accepted");
    check(c_amb > 0, "mechanism: ambiguous matches rejected");
    check(c_incon > 0, "mechanism: inconsistent points removed");
    check(c_redun > 0, "mechanism: redundant points removed");
    check(c_grid > 0, "mechanism: dense decided by grid vector only");
    check(c_prior > 0, "mechanism: dense decided by prior only");
    check(c_empty > 0, "mechanism: empty candidate set");
    check(c_idle > 0, "mechanism: idle input clocks");
    check(c_overlap > 0, "mechanism: both passes at once");
    $display("support: accepted %0d ambiguous %0d; removed: inconsistent %0d redundant %0d",
             c_acc, c_amb, c_incon, c_redun);
    $display("dense: grid only %0d prior only %0d empty %0d; idle %0d overlap %0d",
             c_grid, c_prior, c_empty, c_idle, c_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
