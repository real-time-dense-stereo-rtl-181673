// support_extraction: the support point extraction accelerator.
//
// For every pixel of the left image it finds the best census match in the
// right image over a disparity range of D and keeps it as a support point
// only if the match is unambiguous. Pipeline:
//   census_cost_volume (W x W census of both images, right feature buffer,
//   D Hamming distances)  ->  min2_tree (best cost m1 with its disparity and
//   second best cost m2)  ->  ambiguity_test (m1 <= m2/2+m2/4+m2/8+m2/32).
// Every pixel is a candidate (no candidate sub-sampling); pixels whose left
// window leaves the frame, or that have fewer than two disparities whose
// right window lies inside the frame, give no support point.
//
// Interface: in_valid/in_sof/in_left/in_right, one rectified pixel pair per
// beat in raster order, no back-pressure; throughput one pixel per clock.
// The output stream has one beat per input beat, LAT clocks later
// (LAT = 6 + ceil(log2(D)), 14 for D = 256). The output beat belonging to
// the input beat at (x, y) carries the support point of pixel (x-R, y-R),
// R = (W-1)/2, as a disp_t {valid, d}; out_sof marks the first beat of a
// frame. Census matching, the full-window descriptor, streaming at one pixel
// per clock and the shift-sum test follow the paper; the stream alignment,
// the handling of borders and the single-candidate rule are this design's.
module support_extraction
  import elas_pkg::*;
#(
  parameter int W     = 9,
  parameter int D     = 256,
  parameter int IMG_W = 1242,
  parameter int IMG_H = 375
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_sof,
  input  pix_t  in_left,
  input  pix_t  in_right,
  output logic  out_valid,
  output logic  out_sof,
  output disp_t out_disp
);
  localparam int CW  = cost_width(W * W);
  localparam int LV  = $clog2(D);
  localparam int LAT = 4 + (1 + LV) + 1;

  logic                 cv_valid, cv_ok;
  logic [D-1:0]         cv_mask;
  logic [D-1:0][CW-1:0] cv_cost;
  logic [$clog2(IMG_W)-1:0] cv_x;
  logic [$clog2(IMG_H)-1:0] cv_y;

  census_cost_volume #(.W(W), .D(D), .IMG_W(IMG_W), .IMG_H(IMG_H), .CW(CW)) u_cv (
    .clk, .rst_n, .in_valid, .in_sof, .in_left, .in_right,
    .out_valid(cv_valid), .out_center_ok(cv_ok), .out_mask(cv_mask), .out_cost(cv_cost),
    .out_x(cv_x), .out_y(cv_y));

  logic          mt_valid, mt_ok;
  logic [CW-1:0] mt_m1, mt_m2;
  logic [LV-1:0] mt_idx;
  logic          mt_side;

  min2_tree #(.N(D), .CW(CW), .SW(1)) u_min2 (
    .clk, .rst_n, .in_valid(cv_valid), .in_mask(cv_mask), .in_cost(cv_cost), .in_side(cv_ok),
    .out_valid(mt_valid), .out_ok(mt_ok), .out_m1(mt_m1), .out_m2(mt_m2), .out_idx(mt_idx),
    .out_side(mt_side));

  ambiguity_test #(.CW(CW)) u_amb (
    .clk, .rst_n, .in_valid(mt_valid), .in_ok(mt_ok && mt_side), .in_m1(mt_m1), .in_m2(mt_m2),
    .in_d(DISP_W'(mt_idx)), .out_valid, .out_disp);

  // start-of-frame marker follows the fixed pipeline latency
  logic [LAT-1:0] sof_pipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sof_pipe <= '0;
    else        sof_pipe <= {sof_pipe[LAT-2:0], in_valid && in_sof};
  end
  assign out_sof = sof_pipe[LAT-1];

  initial begin
    assert (D >= 2 && D <= MAX_D) else $error("support_extraction: D must be 2..256");
  end

endmodule
