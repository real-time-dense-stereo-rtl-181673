// dense_matching: the dense matching accelerator.
//
// For every pixel of the left image it picks, among a restricted set of
// candidate disparities, the one with the smallest census Hamming cost.
// The candidate set of pixel (u, v) is
//   - the grid vector of the grid grid_cell holding (u, v): a D-bit one-hot
//     encoded set of disparities pooled from the support points of that
//     GRID x GRID grid_cell (already widened by +-1 when it is built), OR
//   - the disparities within +-PRIOR_RADIUS of the pixel's disparity prior
//     (the slanted-plane prior, remapped to one disparity per pixel),
// further limited to disparities whose right window lies inside the frame.
// Pixels with an empty set (or a window outside the frame) get no disparity.
// Ties go to the smaller disparity.
//
// Pipeline: census_cost_volume (W x W census, feature buffer, D Hamming
// distances) -> candidate masking -> min2_tree (only its minimum is used)
// -> output register. The prior stream enters together with the pixels and
// is delayed to the window centre by a line_window_buffer of its own.
// Grid vectors of the whole frame are held in a memory of
// ceil(IMG_H/GRID) * ceil(IMG_W/GRID) words of D bits, written through
// gv_we/gv_addr/gv_data (address = cell_row * GRID_COLS + cell_col) before
// the frame's pixels are streamed.
//
// Interface/timing: in_valid/in_sof/in_left/in_right/in_prior, one beat per
// clock in raster order, no back-pressure, one output beat per input beat
// LAT = 6 + ceil(log2(D)) clocks later (14 for D = 256); the output beat of
// input beat (x, y) is the disparity of pixel (x-R, y-R), R = (W-1)/2.
// The use of grid vectors and one prior per pixel, the +-1 widening and the
// one-pixel-per-clock census matching follow the paper. Loading all grid
// vectors into a frame-sized memory, the grid size of 20 (the ELAS library
// default), taking the minimum cost without an added prior energy term, and
// the border rules are this design's choices.
module dense_matching
  import elas_pkg::*;
#(
  parameter int W            = 5,
  parameter int D            = 256,
  parameter int IMG_W        = 1242,
  parameter int IMG_H        = 375,
  parameter int GRID         = 20,
  parameter int PRIOR_RADIUS = 1,
  parameter int GRID_COLS    = (IMG_W + GRID - 1) / GRID,
  parameter int GRID_ROWS    = (IMG_H + GRID - 1) / GRID,
  parameter int GA_W         = $clog2(GRID_COLS * GRID_ROWS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic            in_sof,
  input  pix_t            in_left,
  input  pix_t            in_right,
  input  disp_t           in_prior,
  input  logic            gv_we,
  input  logic [GA_W-1:0] gv_addr,
  input  logic [D-1:0]    gv_data,
  output logic            out_valid,
  output logic            out_sof,
  output disp_t           out_disp
);
  localparam int R   = (W - 1) / 2;
  localparam int CW  = cost_width(W * W);
  localparam int LV  = $clog2(D);
  localparam int LAT = 4 + (1 + LV) + 1;
  localparam int XW  = $clog2(IMG_W);
  localparam int YW  = $clog2(IMG_H);

  // grid vector memory
  logic [D-1:0] gv_mem [GRID_COLS * GRID_ROWS];
  always_ff @(posedge clk) begin
    if (gv_we) gv_mem[gv_addr] <= gv_data;
  end

  // matching costs
  logic                 cv_valid, cv_ok;
  logic [D-1:0]         cv_mask;
  logic [D-1:0][CW-1:0] cv_cost;
  logic [XW-1:0]        cv_x;
  logic [YW-1:0]        cv_y;

  census_cost_volume #(.W(W), .D(D), .IMG_W(IMG_W), .IMG_H(IMG_H), .CW(CW)) u_cv (
    .clk, .rst_n, .in_valid, .in_sof, .in_left, .in_right,
    .out_valid(cv_valid), .out_center_ok(cv_ok), .out_mask(cv_mask), .out_cost(cv_cost),
    .out_x(cv_x), .out_y(cv_y));

  // prior of the window centre: window buffer centre, then 3 clocks to line
  // up with the cost volume (which takes 4 clocks in all)
  logic                                pw_valid;
  logic [W-1:0][W-1:0][DISP_T_W-1:0]   pwin;
  logic [XW-1:0]                       pw_x;
  logic [YW-1:0]                       pw_y;
  disp_t [2:0]                         prior_dly;

  line_window_buffer #(.W(W), .IMG_W(IMG_W), .IMG_H(IMG_H), .DW(DISP_T_W)) u_lwb_prior (
    .clk, .rst_n, .in_valid, .in_sof, .in_data(in_prior),
    .out_valid(pw_valid), .win(pwin), .out_x(pw_x), .out_y(pw_y));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) prior_dly <= '0;
    else        prior_dly <= {prior_dly[1:0], disp_t'(pwin[R][R])};
  end

  // candidate set
  logic [XW-1:0]   cx;
  logic [YW-1:0]   cy;
  logic [GA_W-1:0] grid_cell;
  logic [D-1:0]    gvec, cand;
  disp_t           prior;

  always_comb begin
    cx    = cv_x - XW'(R);
    cy    = cv_y - YW'(R);
    grid_cell  = GA_W'((int'(cy) / GRID) * GRID_COLS + int'(cx) / GRID);
    gvec  = gv_mem[grid_cell];
    prior = prior_dly[2];
    for (int d = 0; d < D; d++) begin
      cand[d] = cv_mask[d] &&
                (gvec[d] || (prior.valid &&
                             (d >= int'(prior.d) - PRIOR_RADIUS) &&
                             (d <= int'(prior.d) + PRIOR_RADIUS)));
    end
  end

  logic          mt_valid, mt_ok;
  logic [CW-1:0] mt_m1, mt_m2;
  logic [LV-1:0] mt_idx;
  logic          mt_side;

  min2_tree #(.N(D), .CW(CW), .SW(1)) u_min (
    .clk, .rst_n, .in_valid(cv_valid), .in_mask(cand), .in_cost(cv_cost), .in_side(cv_ok),
    .out_valid(mt_valid), .out_ok(mt_ok), .out_m1(mt_m1), .out_m2(mt_m2), .out_idx(mt_idx),
    .out_side(mt_side));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_disp  <= '0;
    end else begin
      out_valid <= mt_valid;
      if (mt_valid) begin
        out_disp.valid <= mt_ok && mt_side;
        out_disp.d     <= (mt_ok && mt_side) ? DISP_W'(mt_idx) : '0;
      end
    end
  end

  logic [LAT-1:0] sof_pipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sof_pipe <= '0;
    else        sof_pipe <= {sof_pipe[LAT-2:0], in_valid && in_sof};
  end
  assign out_sof = sof_pipe[LAT-1];

  // the prior window buffer and the cost volume see the same beats
  a_prior_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    cv_valid |-> ($past(pw_valid, 3) && $past(pw_x, 3) == cv_x && $past(pw_y, 3) == cv_y))
    else $error("dense_matching: prior not aligned with the cost volume");

endmodule
