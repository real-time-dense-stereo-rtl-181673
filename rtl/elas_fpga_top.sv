// elas_fpga_top: the FPGA part of the ELAS stereo system.
//
// ELAS estimates dense disparity in three steps: confident sparse matches
// ("support points") are found and filtered, a triangle mesh through them
// gives a slanted-plane prior, and a dense matching pass searches each pixel
// only near what the prior and the nearby support points suggest. The
// streaming, data-parallel steps run in the FPGA; the mesh (Delaunay
// triangulation), its remapping to one prior disparity per pixel, the
// pooling of support points into grid vectors and their one-hot encoding run
// on the processor and are not part of this RTL.
//
// Pass 1 (sp_*): the rectified left/right images stream into
// support_extraction, whose output feeds support_filter directly; the
// filtered sparse disparity map leaves on sp_out_* (towards a DMA engine and
// memory). Pass 2 (dm_*): the same images stream again, now with the
// per-pixel prior disparities, into dense_matching, whose grid vector memory
// is written through gv_* beforehand; the dense map leaves on dm_out_*. The
// two passes are independent and may run at the same time on different
// frames. Each path processes one pixel per clock with no back-pressure.
//
// Stream alignment: sp_out beat k belongs to pixel k shifted by
// (RS+F, RS+F) pixels, RS = (W_SUPPORT-1)/2, F = (FILTER_WIN-1)/2;
// dm_out beat k to pixel k shifted by (RD, RD), RD = (W_DENSE-1)/2.
// Latencies: pass 1 = 6+ceil(log2(D)) + 3 clocks, pass 2 = 6+ceil(log2(D)).
// The partitioning, the direct support extraction -> filter link and the
// window sizes 9 x 9 / 5 x 5 and KITTI frame size 1242 x 375 follow the
// paper; D = 256 and the remaining sizes are this design's choices. The
// dual system is two copies of this module, see elas_fpga_multi.
module elas_fpga_top
  import elas_pkg::*;
#(
  parameter int IMG_W      = 1242,
  parameter int IMG_H      = 375,
  parameter int D          = 256,
  parameter int W_SUPPORT  = 9,
  parameter int W_DENSE    = 5,
  parameter int FILTER_WIN = 11,
  parameter int GRID       = 20,
  parameter int GA_W       = $clog2(((IMG_W + GRID - 1) / GRID) * ((IMG_H + GRID - 1) / GRID))
) (
  input  logic            clk,
  input  logic            rst_n,
  // pass 1: support points
  input  logic            sp_in_valid,
  input  logic            sp_in_sof,
  input  pix_t            sp_in_left,
  input  pix_t            sp_in_right,
  output logic            sp_out_valid,
  output logic            sp_out_sof,
  output disp_t           sp_out_disp,
  output logic            sp_incon_drop,
  output logic            sp_redun_drop,
  // pass 2: dense matching
  input  logic            gv_we,
  input  logic [GA_W-1:0] gv_addr,
  input  logic [D-1:0]    gv_data,
  input  logic            dm_in_valid,
  input  logic            dm_in_sof,
  input  pix_t            dm_in_left,
  input  pix_t            dm_in_right,
  input  disp_t           dm_in_prior,
  output logic            dm_out_valid,
  output logic            dm_out_sof,
  output disp_t           dm_out_disp
);
  logic  se_valid, se_sof;
  disp_t se_disp;

  support_extraction #(.W(W_SUPPORT), .D(D), .IMG_W(IMG_W), .IMG_H(IMG_H)) u_support (
    .clk, .rst_n, .in_valid(sp_in_valid), .in_sof(sp_in_sof),
    .in_left(sp_in_left), .in_right(sp_in_right),
    .out_valid(se_valid), .out_sof(se_sof), .out_disp(se_disp));

  support_filter #(.IMG_W(IMG_W), .IMG_H(IMG_H), .FW(FILTER_WIN)) u_filter (
    .clk, .rst_n, .in_valid(se_valid), .in_sof(se_sof), .in_disp(se_disp),
    .out_valid(sp_out_valid), .out_sof(sp_out_sof), .out_disp(sp_out_disp),
    .out_incon_drop(sp_incon_drop), .out_redun_drop(sp_redun_drop));

  dense_matching #(.W(W_DENSE), .D(D), .IMG_W(IMG_W), .IMG_H(IMG_H), .GRID(GRID),
                   .GA_W(GA_W)) u_dense (
    .clk, .rst_n, .in_valid(dm_in_valid), .in_sof(dm_in_sof),
    .in_left(dm_in_left), .in_right(dm_in_right), .in_prior(dm_in_prior),
    .gv_we, .gv_addr, .gv_data,
    .out_valid(dm_out_valid), .out_sof(dm_out_sof), .out_disp(dm_out_disp));

endmodule
