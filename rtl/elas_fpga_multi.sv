// elas_fpga_multi: several independent ELAS accelerator sets side by side.
//
// To raise the frame rate beyond what one processor core can sustain for
// triangulation, the system is duplicated: each processor core works on its
// own frame with its own, identical set of FPGA accelerators (support
// extraction -> filtering, and dense matching). This module instantiates
// NUM_SYS copies of elas_fpga_top (two by default, the dual system) and
// gives every copy its own set of streams; port index i belongs to copy i.
// The copies share only the clock and reset.
//
// Interface/timing: identical to elas_fpga_top per copy (valid-only streams,
// one pixel per clock per copy, pass 1 latency 9+ceil(log2 D), pass 2
// latency 6+ceil(log2 D)). Duplicating the accelerators for two frames in
// flight follows the paper; sharing nothing but the clock and reset is this
// design's choice (the paper mentions some shared overhead without saying
// what it is).
module elas_fpga_multi
  import elas_pkg::*;
#(
  parameter int NUM_SYS    = 2,
  parameter int IMG_W      = 1242,
  parameter int IMG_H      = 375,
  parameter int D          = 256,
  parameter int W_SUPPORT  = 9,
  parameter int W_DENSE    = 5,
  parameter int FILTER_WIN = 11,
  parameter int GRID       = 20,
  parameter int GA_W       = $clog2(((IMG_W + GRID - 1) / GRID) * ((IMG_H + GRID - 1) / GRID))
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic  [NUM_SYS-1:0]           sp_in_valid,
  input  logic  [NUM_SYS-1:0]           sp_in_sof,
  input  pix_t  [NUM_SYS-1:0]           sp_in_left,
  input  pix_t  [NUM_SYS-1:0]           sp_in_right,
  output logic  [NUM_SYS-1:0]           sp_out_valid,
  output logic  [NUM_SYS-1:0]           sp_out_sof,
  output disp_t [NUM_SYS-1:0]           sp_out_disp,
  output logic  [NUM_SYS-1:0]           sp_incon_drop,
  output logic  [NUM_SYS-1:0]           sp_redun_drop,
  input  logic  [NUM_SYS-1:0]           gv_we,
  input  logic  [NUM_SYS-1:0][GA_W-1:0] gv_addr,
  input  logic  [NUM_SYS-1:0][D-1:0]    gv_data,
  input  logic  [NUM_SYS-1:0]           dm_in_valid,
  input  logic  [NUM_SYS-1:0]           dm_in_sof,
  input  pix_t  [NUM_SYS-1:0]           dm_in_left,
  input  pix_t  [NUM_SYS-1:0]           dm_in_right,
  input  disp_t [NUM_SYS-1:0]           dm_in_prior,
  output logic  [NUM_SYS-1:0]           dm_out_valid,
  output logic  [NUM_SYS-1:0]           dm_out_sof,
  output disp_t [NUM_SYS-1:0]           dm_out_disp
);
  for (genvar i = 0; i < NUM_SYS; i++) begin : g_sys
    elas_fpga_top #(.IMG_W(IMG_W), .IMG_H(IMG_H), .D(D), .W_SUPPORT(W_SUPPORT),
                    .W_DENSE(W_DENSE), .FILTER_WIN(FILTER_WIN), .GRID(GRID), .GA_W(GA_W)) u_sys (
      .clk, .rst_n,
      .sp_in_valid(sp_in_valid[i]), .sp_in_sof(sp_in_sof[i]),
      .sp_in_left(sp_in_left[i]), .sp_in_right(sp_in_right[i]),
      .sp_out_valid(sp_out_valid[i]), .sp_out_sof(sp_out_sof[i]), .sp_out_disp(sp_out_disp[i]),
      .sp_incon_drop(sp_incon_drop[i]), .sp_redun_drop(sp_redun_drop[i]),
      .gv_we(gv_we[i]), .gv_addr(gv_addr[i]), .gv_data(gv_data[i]),
      .dm_in_valid(dm_in_valid[i]), .dm_in_sof(dm_in_sof[i]),
      .dm_in_left(dm_in_left[i]), .dm_in_right(dm_in_right[i]), .dm_in_prior(dm_in_prior[i]),
      .dm_out_valid(dm_out_valid[i]), .dm_out_sof(dm_out_sof[i]), .dm_out_disp(dm_out_disp[i]));
  end

endmodule
