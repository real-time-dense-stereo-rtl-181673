// tb_elas_fpga_multi_full: the dual system at full size, two frames at once.
//
// Same flow and checks as tb_elas_fpga_multi, but elas_fpga_multi keeps
// all its default parameters: two accelerator sets, 1242 x 375 frames (the
// KITTI size), 256 disparities, 9 x 9 support window, 5 x 5 dense window,
// 11 x 11 filter window, 20 x 20 grid cells. Each set gets its own scene
// (disparity planes 48/112 and 80/160). Every output beat of both sets is
// compared with elas_ref_pkg, and the first pass-1 frame of each set, sent
// without idle clocks, must leave after exactly 465,750 clocks plus the
// pipeline latency (one pixel per clock per set).
module tb_elas_fpga_multi_full;
  import elas_pkg::*;
  import elas_ref_pkg::*;
  localparam int NS = 2;
  localparam int IMG_W = 1242, IMG_H = 375, D = 256, WS = 9, WD = 5, FWIN = 11, GRID = 20;
  localparam int GAP = 1000; // an idle clock before a beat with probability 1/GAP
  localparam int RS = (WS - 1) / 2, RD = (WD - 1) / 2, F = (FWIN - 1) / 2;
  localparam int GC = (IMG_W + GRID - 1) / GRID, GR = (IMG_H + GRID - 1) / GRID;
  localparam int GA_W = $clog2(GC * GR);
  localparam int LAT1 = 6 + $clog2(D) + 3, LAT2 = 6 + $clog2(D);
  localparam int N = IMG_W * IMG_H;

  logic clk = 0, rst_n = 0;
  logic  [NS-1:0] sp_in_valid = '0, sp_in_sof = '0;
  pix_t  [NS-1:0] sp_in_left = '0, sp_in_right = '0;
  logic  [NS-1:0] sp_out_valid, sp_out_sof, sp_incon_drop, sp_redun_drop;
  disp_t [NS-1:0] sp_out_disp;
  logic  [NS-1:0] gv_we = '0;
  logic  [NS-1:0][GA_W-1:0] gv_addr = '0;
  logic  [NS-1:0][D-1:0] gv_data = '0;
  logic  [NS-1:0] dm_in_valid = '0, dm_in_sof = '0;
  pix_t  [NS-1:0] dm_in_left = '0, dm_in_right = '0;
  disp_t [NS-1:0] dm_in_prior = '0;
  logic  [NS-1:0] dm_out_valid, dm_out_sof;
  disp_t [NS-1:0] dm_out_disp;

  elas_fpga_multi dut (.*);

  // per-set testbench state
  class sys_ctx;
    elas_model m;
    int sup[], filt[], dense[], prior[];
    bit [255:0] gv[];
    int n1 = 0, n2 = 0, e_incon = 0, e_redun = 0, t_first = 0, t_last1 = 0;
    int t1[$], t2[$];
    function new();
      m = new(IMG_W, IMG_H, D);
    endfunction
  endclass

  sys_ctx c[NS];
  int checks = 0, failures = 0, cycle = 0;
  int c_acc = 0, c_amb = 0, c_incon = 0, c_redun = 0, c_grid = 0, c_prior = 0, c_empty = 0;
  int c_idle = 0, c_overlap = 0, c_both_sets = 0;
  bit started = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  task automatic check(bit cond, string what, int s);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s (set %0d)", what, s);
    end
  endtask

  always @(posedge clk) begin
    if (rst_n && started) begin
      if ((sp_out_valid[0] || dm_out_valid[0]) && (sp_out_valid[1] || dm_out_valid[1])) c_both_sets++;
      for (int s = 0; s < NS; s++) begin
        if (sp_out_valid[s] && dm_out_valid[s]) c_overlap++;
        c_incon += int'(sp_incon_drop[s]);
        c_redun += int'(sp_redun_drop[s]);
        if (sp_out_valid[s]) begin
          automatic int e = c[s].filt[c[s].n1 % N];
          check(c[s].t1.size() > 0 && cycle - c[s].t1[0] == LAT1, "pass 1 latency", s);
          if (c[s].t1.size() > 0) void'(c[s].t1.pop_front());
          check(sp_out_sof[s] == (c[s].n1 % N == 0), "pass 1 sof", s);
          check(sp_out_disp[s].valid == (e >= 0) && (e < 0 || int'(sp_out_disp[s].d) == e),
                "filtered support point", s);
          if (c[s].n1 == N - 1) c[s].t_last1 = cycle;
          c[s].n1++;
        end
        if (dm_out_valid[s]) begin
          automatic int e = c[s].dense[c[s].n2];
          automatic int cx = c[s].n2 % IMG_W - RD, cy = c[s].n2 / IMG_W - RD;
          check(c[s].t2.size() > 0 && cycle - c[s].t2[0] == LAT2, "pass 2 latency", s);
          if (c[s].t2.size() > 0) void'(c[s].t2.pop_front());
          check(dm_out_sof[s] == (c[s].n2 == 0), "pass 2 sof", s);
          check(dm_out_disp[s].valid == (e >= 0) && (e < 0 || int'(dm_out_disp[s].d) == e),
                "dense disparity", s);
          if (cx >= RD && cy >= RD) begin
            automatic int p = c[s].prior[cy*IMG_W + cx];
            automatic bit in_gv = (e >= 0) && c[s].gv[(cy / GRID) * GC + cx / GRID][e];
            automatic bit in_pr = (e >= 0) && p >= 0 && e >= p - 1 && e <= p + 1;
            if (e < 0) c_empty++;
            else if (in_gv && !in_pr) c_grid++;
            else if (in_pr && !in_gv) c_prior++;
          end
          c[s].n2++;
        end
      end
    end
  end

  task automatic pass1_frame(int s, bit gaps);
    for (int i = 0; i < N; i++) begin
      while (gaps && $urandom % GAP == 0) begin
        @(negedge clk); sp_in_valid[s] = 0; c_idle++;
      end
      @(negedge clk);
      sp_in_valid[s] = 1; sp_in_sof[s] = (i == 0);
      sp_in_left[s] = pix_t'(c[s].m.L[i]); sp_in_right[s] = pix_t'(c[s].m.R[i]);
      c[s].t1.push_back(cycle + 1);
      if (i == 0 && !gaps) c[s].t_first = cycle + 1;
    end
    @(negedge clk); sp_in_valid[s] = 0;
  endtask

  task automatic pass2_frame(int s);
    for (int i = 0; i < N; i++) begin
      while ($urandom % GAP == 0) begin
        @(negedge clk); dm_in_valid[s] = 0; c_idle++;
      end
      @(negedge clk);
      dm_in_valid[s] = 1; dm_in_sof[s] = (i == 0);
      dm_in_left[s] = pix_t'(c[s].m.L[i]); dm_in_right[s] = pix_t'(c[s].m.R[i]);
      dm_in_prior[s].valid = (c[s].prior[i] >= 0);
      dm_in_prior[s].d = (c[s].prior[i] >= 0) ? DISP_W'(c[s].prior[i]) : '0;
      c[s].t2.push_back(cycle + 1);
    end
    @(negedge clk); dm_in_valid[s] = 0;
  endtask

  // scene of set s: disparity planes differ per set
  task automatic make_scene(int s);
    int disp[];
    int d_left = (3 + 2 * s) * (D / 16), d_right = d_left + (4 + s) * (D / 16);
    disp = new[N];
    for (int y = 0; y < IMG_H; y++)
      for (int x = 0; x < IMG_W; x++)
        disp[y*IMG_W + x] = (y % 64 == 9) ? -1 : (x < IMG_W / 2) ? d_left : d_right;
    c[s].m.make_scene(5 + 17 * s, disp);
    for (int y = IMG_H / 7; y < IMG_H / 7 + 4; y++)
      for (int x = IMG_W * 2 / 3; x < IMG_W * 2 / 3 + 8; x++) begin
        c[s].m.L[y*IMG_W + x] = 120; c[s].m.R[y*IMG_W + x] = 120;
      end
    c[s].m.support_stream(WS, c[s].sup);
    c[s].m.filter_stream(c[s].sup, FWIN, 5, 5, 5, 1, c[s].filt, c[s].e_incon, c[s].e_redun);
    for (int y = 0; y < IMG_H; y++)
      for (int x = 0; x < IMG_W; x++)
        if (x >= 2 * RS + 1 && y >= 2 * RS) begin
          if (c[s].sup[y*IMG_W + x] >= 0) c_acc++; else c_amb++;
        end
  endtask

  // processor stand-in: grid vectors and priors from the surviving points
  task automatic processor_side(int s);
    c[s].gv = new[GC * GR];
    c[s].prior = new[N];
    for (int i = 0; i < GC * GR; i++) c[s].gv[i] = '0;
    for (int k = 0; k < N; k++)
      if (c[s].filt[k] >= 0) begin
        automatic int u = k % IMG_W - RS - F, v = k / IMG_W - RS - F, d = c[s].filt[k];
        automatic int g = (v / GRID) * GC + u / GRID;
        c[s].gv[g][d] = 1'b1;
        if (d > 0) c[s].gv[g][d-1] = 1'b1;
        if (d < D - 1) c[s].gv[g][d+1] = 1'b1;
      end
    for (int y = 0; y < IMG_H; y++) begin
      automatic int last = -1;
      for (int x = 0; x < IMG_W; x++) begin
        automatic int k = (y + RS + F) * IMG_W + x + RS + F;
        if (x + RS + F < IMG_W && y + RS + F < IMG_H && c[s].filt[k] >= 0) last = c[s].filt[k];
        c[s].prior[y*IMG_W + x] = last;
      end
    end
    // every 7th cell without grid vector and priors: empty candidate sets
    for (int g = 0; g < GC * GR; g++) if (g % 7 == 6) c[s].gv[g] = '0;
    for (int i = 0; i < N; i++)
      if ((((i / IMG_W) / GRID) * GC + (i % IMG_W) / GRID) % 7 == 6) c[s].prior[i] = -1;
    c[s].m.dense_stream(WD, GRID, 1, c[s].prior, c[s].gv, c[s].dense);
  endtask

  task automatic run_set(int s);
    pass1_frame(s, 0);
    repeat (LAT1 + 2) @(posedge clk);
    check(c[s].n1 == N, "pass 1 one output per input", s);
    check(c[s].t_last1 - c[s].t_first == N - 1 + LAT1, "pass 1 frame takes N + latency clocks", s);
    processor_side(s);
    for (int g = 0; g < GC * GR; g++) begin
      @(negedge clk);
      gv_we[s] = 1; gv_addr[s] = GA_W'(g); gv_data[s] = c[s].gv[g][D-1:0];
    end
    @(negedge clk); gv_we[s] = 0;
    fork
      pass2_frame(s);
      pass1_frame(s, 1);
    join
    repeat (LAT1 + 4) @(posedge clk);
    check(c[s].n2 == N, "pass 2 one output per input", s);
    check(c[s].n1 == 2 * N, "second pass 1 frame complete", s);
  endtask

  initial begin
    for (int s = 0; s < NS; s++) begin
      c[s] = new();
      make_scene(s);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    started = 1;
    fork
      run_set(0);
      run_set(1);
    join
    begin
      int e_incon = 0, e_redun = 0;
      for (int s = 0; s < NS; s++) begin
        e_incon += 2 * c[s].e_incon;
        e_redun += 2 * c[s].e_redun;
      end
      check(c_incon == e_incon && c_redun == e_redun, "filter removal counts", 0);
    end
    check(c_acc > 0, "mechanism: support points accepted", 0);
    check(c_amb > 0, "mechanism: ambiguous matches rejected", 0);
    check(c_incon > 0, "mechanism: inconsistent points removed", 0);
    check(c_redun > 0, "mechanism: redundant points removed", 0);
    check(c_grid > 0, "mechanism: dense decided by grid vector only", 0);
    check(c_prior > 0, "mechanism: dense decided by prior only", 0);
    check(c_empty > 0, "mechanism: empty candidate set", 0);
    check(c_idle > 0, "mechanism: idle input clocks", 0);
    check(c_overlap > 0, "mechanism: both passes of a set at once", 0);
    check(c_both_sets > 0, "mechanism: both accelerator sets busy at once", 0);
    $display("support: accepted %0d ambiguous %0d; removed: inconsistent %0d redundant %0d",
             c_acc, c_amb, c_incon, c_redun);
    $display("dense: grid only %0d prior only %0d empty %0d", c_grid, c_prior, c_empty);
    $display("idle %0d, passes overlapped %0d, sets overlapped %0d", c_idle, c_overlap, c_both_sets);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20 * N + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
