// census_cost_volume: census matching costs of one left pixel against D right pixels.
//
// The left and right streams (same raster position on every beat) each pass
// through a line_window_buffer and a census_transform. The right descriptors
// then enter a feature buffer: a shift register of D descriptors, so that it
// always holds the right descriptors of the D most recent window centres of
// the row. Because a descriptor is extracted once and reused for all D
// disparities, only one census per image and pixel is computed (the scheme
// the paper contrasts with SAD in its Fig. 5). For the current left centre
// (cx, cy) the Hamming distance to the right descriptor at (cx-d, cy) is
// produced for every d in 0..D-1 in the same clock.
//
// Interface: in_valid/in_sof/in_left/in_right, one pixel pair per beat, no
// back-pressure. Exactly four clocks after a beat at raster position (x, y),
// out_valid is high and the outputs describe the window centre
// (cx, cy) = (x-R, y-R), R = (W-1)/2:
//   out_center_ok - the left window lies completely inside the frame,
//   out_mask[d]   - out_center_ok and the right window at cx-d is inside too,
//   out_cost[d]   - Hamming distance of the two descriptors (valid where masked).
// out_x/out_y give (x, y) of the beat, so the centre is (out_x-R, out_y-R).
// Disparities that would need a right window left of the image are masked;
// that rule is this design's own, the paper does not describe the borders.
module census_cost_volume
  import elas_pkg::*;
#(
  parameter int W     = 9,
  parameter int D     = 256,
  parameter int IMG_W = 1242,
  parameter int IMG_H = 375,
  parameter int CW    = cost_width(W * W)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic                          in_sof,
  input  pix_t                          in_left,
  input  pix_t                          in_right,
  output logic                          out_valid,
  output logic                          out_center_ok,
  output logic [D-1:0]                  out_mask,
  output logic [D-1:0][CW-1:0]          out_cost,
  output logic [$clog2(IMG_W)-1:0]      out_x,
  output logic [$clog2(IMG_H)-1:0]      out_y
);
  localparam int NB = W * W;
  localparam int XW = $clog2(IMG_W);
  localparam int YW = $clog2(IMG_H);

  // stage 0: window buffers
  logic                        v0, v0r;
  logic [W-1:0][W-1:0][PIX_W-1:0] win_l, win_r;
  logic [XW-1:0]               x0, x0r;
  logic [YW-1:0]               y0, y0r;

  line_window_buffer #(.W(W), .IMG_W(IMG_W), .IMG_H(IMG_H), .DW(PIX_W)) u_lwb_l (
    .clk, .rst_n, .in_valid, .in_sof, .in_data(in_left),
    .out_valid(v0), .win(win_l), .out_x(x0), .out_y(y0));

  line_window_buffer #(.W(W), .IMG_W(IMG_W), .IMG_H(IMG_H), .DW(PIX_W)) u_lwb_r (
    .clk, .rst_n, .in_valid, .in_sof, .in_data(in_right),
    .out_valid(v0r), .win(win_r), .out_x(x0r), .out_y(y0r));

  // stage 1: census descriptors
  logic          v1, v1r;
  logic [NB-1:0] cen_l, cen_r;
  logic [XW-1:0] x1;
  logic [YW-1:0] y1;

  census_transform #(.W(W), .DW(PIX_W)) u_ct_l (
    .clk, .rst_n, .in_valid(v0), .win(win_l), .out_valid(v1), .census(cen_l));
  census_transform #(.W(W), .DW(PIX_W)) u_ct_r (
    .clk, .rst_n, .in_valid(v0r), .win(win_r), .out_valid(v1r), .census(cen_r));

  // stage 2: left descriptor register and right feature buffer
  logic                 v2;
  logic [NB-1:0]        lc;
  logic [D-1:0][NB-1:0] fb;
  logic [XW-1:0]        x2;
  logic [YW-1:0]        y2;

  // stage 3: Hamming costs
  logic [D-1:0][CW-1:0] cost_d;
  logic [D-1:0]         mask_d;
  logic                 ok_d;

  always_comb begin
    ok_d = (x2 >= XW'(W - 1)) && (y2 >= YW'(W - 1));
    for (int d = 0; d < D; d++) begin
      cost_d[d] = CW'($countones(lc ^ fb[d]));
      mask_d[d] = ok_d && ({1'b0, x2} >= (XW + 1)'(d + W - 1));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x1 <= '0; y1 <= '0;
      v2 <= 1'b0; x2 <= '0; y2 <= '0;
      out_valid <= 1'b0; out_center_ok <= 1'b0; out_mask <= '0;
      out_x <= '0; out_y <= '0;
    end else begin
      if (v0) begin x1 <= x0; y1 <= y0; end
      v2 <= v1;
      if (v1) begin
        x2    <= x1;
        y2    <= y1;
      end
      out_valid <= v2;
      if (v2) begin
        out_center_ok <= ok_d;
        out_mask      <= mask_d;
        out_x         <= x2;
        out_y         <= y2;
      end
    end
  end

  // Datapath registers without reset: what they hold is only used where
  // out_mask says it is valid.
  always_ff @(posedge clk) begin
    if (v1) begin
      lc    <= cen_l;
      fb[0] <= cen_r;
      for (int d = 1; d < D; d++) fb[d] <= fb[d-1];
    end
    if (v2) out_cost <= cost_d;
  end

  // both images are consumed in lock step
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    v0 == v0r && v1 == v1r && x0 == x0r && y0 == y0r)
    else $error("census_cost_volume: left/right window buffers out of step");

endmodule
