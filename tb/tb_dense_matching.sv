// tb_dense_matching: checks dense disparities against the reference model.
//
// A 24 x 10 stereo pair with known disparities (4 on the left, 9 on the
// right) is matched with a 3 x 3 census over 16 disparities and 4 x 4 grid
// cells. Grid vectors are written first: each cell gets a few random
// disparities, and about half of the cells also the true one (widened by
// +-1). Priors are given for some pixels only, sometimes true, sometimes
// wrong. Every output beat is compared with elas_ref_pkg::dense_stream.
// The run must contain pixels decided by the grid vector alone, by the
// prior band alone, and pixels with an empty candidate set; each beat must
// take 6+log2(D) clocks.
module tb_dense_matching;
  import elas_pkg::*;
  import elas_ref_pkg::*;
  localparam int W = 3, D = 16, IMG_W = 24, IMG_H = 10, GRID = 4, R = (W - 1) / 2;
  localparam int GC = (IMG_W + GRID - 1) / GRID, GR = (IMG_H + GRID - 1) / GRID;
  localparam int GA_W = $clog2(GC * GR);
  localparam int LAT = 6 + $clog2(D);

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sof = 0;
  pix_t in_left = '0, in_right = '0;
  disp_t in_prior = '0;
  logic gv_we = 0;
  logic [GA_W-1:0] gv_addr = '0;
  logic [D-1:0] gv_data = '0;
  logic out_valid, out_sof;
  disp_t out_disp;

  int checks = 0, failures = 0, cycle = 0, nout = 0;
  int n_grid_only = 0, n_prior_only = 0, n_empty = 0;
  int tin[$];
  int prior[], expd[], disp[];
  bit [255:0] gv[];
  elas_model m;

  dense_matching #(.W(W), .D(D), .IMG_W(IMG_W), .IMG_H(IMG_H), .GRID(GRID)) dut (.*);

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
      automatic int cx = nout % IMG_W - R, cy = nout / IMG_W - R;
      check(tin.size() > 0 && cycle - tin[0] == LAT, "latency");
      if (tin.size() > 0) void'(tin.pop_front());
      check(out_sof == (nout == 0), "sof");
      check(out_disp.valid == (e >= 0) && (e < 0 || int'(out_disp.d) == e), "dense disparity");
      if (cx >= R && cy >= R) begin
        automatic int p = prior[cy*IMG_W + cx];
        automatic bit in_gv = (e >= 0) && gv[(cy / GRID) * GC + cx / GRID][e];
        automatic bit in_pr = (e >= 0) && p >= 0 && e >= p - 1 && e <= p + 1;
        if (e < 0) n_empty++;
        else if (in_gv && !in_pr) n_grid_only++;
        else if (in_pr && !in_gv) n_prior_only++;
      end
      nout++;
    end
  end

  initial begin
    m = new(IMG_W, IMG_H, D);
    disp = new[IMG_W * IMG_H];
    prior = new[IMG_W * IMG_H];
    gv = new[GC * GR];
    for (int i = 0; i < IMG_W * IMG_H; i++) disp[i] = (i % IMG_W < 12) ? 4 : 9;
    m.make_scene(11, disp);
    for (int c = 0; c < GC * GR; c++) begin
      gv[c] = '0;
      if (c % 5 != 3)
        for (int k = 0; k < 3; k++) gv[c][$urandom % D] = 1'b1;
      if ($urandom % 2 == 0) begin
        automatic int t = (((c % GC) * GRID) < 12) ? 4 : 9;
        gv[c][t-1] = 1'b1; gv[c][t] = 1'b1; gv[c][t+1] = 1'b1;
      end
    end
    for (int i = 0; i < IMG_W * IMG_H; i++) begin
      automatic int r = int'($urandom % 3);
      prior[i] = (r == 0) ? -1 : (r == 1) ? disp[i] : int'($urandom % D);
    end
    m.dense_stream(W, GRID, 1, prior, gv, expd);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < GC * GR; c++) begin
      @(negedge clk);
      gv_we = 1; gv_addr = GA_W'(c); gv_data = gv[c][D-1:0];
    end
    @(negedge clk); gv_we = 0;
    for (int i = 0; i < IMG_W * IMG_H; i++) begin
      while ($urandom % 5 == 0) begin
        @(negedge clk); in_valid = 0;
      end
      @(negedge clk);
      in_valid = 1; in_sof = (i == 0);
      in_left = pix_t'(m.L[i]); in_right = pix_t'(m.R[i]);
      in_prior.valid = (prior[i] >= 0);
      in_prior.d = (prior[i] >= 0) ? DISP_W'(prior[i]) : '0;
      tin.push_back(cycle + 1);
    end
    @(negedge clk); in_valid = 0;
    repeat (LAT + 4) @(posedge clk);
    check(nout == IMG_W * IMG_H, "one output per input");
    check(n_grid_only > 0, "grid-vector-only decisions");
    check(n_prior_only > 0, "prior-only decisions");
    check(n_empty > 0, "empty candidate sets");
    $display("grid only %0d, prior only %0d, empty %0d", n_grid_only, n_prior_only, n_empty);
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
