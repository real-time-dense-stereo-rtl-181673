// support_filter: the filtering accelerator for the sparse support points.
//
// It receives the support extraction stream directly (a sparse disparity
// map, one disp_t per pixel in raster order) and removes support points in
// two in-stream steps:
//  1. Consistency. A line_window_buffer forms a FW x FW window around each
//     point. The point is kept only if at least INCON_MIN valid points of the
//     window (itself included) differ from it by at most INCON_THRESH.
//     Window positions outside the frame count as empty.
//  2. Redundancy, looking only backwards. A consistent point is removed when
//     one of the REDUN_DIST previous positions in its row (to the left) or in
//     its column (above) holds a point that survived this step and whose
//     disparity differs by at most REDUN_THRESH. Because only surviving
//     points are compared against, a long run of equal values is thinned to
//     one point every REDUN_DIST+1 positions instead of vanishing. The row
//     history is a shift register; the column history is a memory of
//     IMG_W words of REDUN_DIST decisions, read and rewritten at x each beat.
//
// Interface/timing: in_valid/in_sof/in_disp in, one beat per clock, no
// back-pressure. One output beat per input beat, 3 clocks later; the output
// beat of input beat (x, y) holds the filtered point of input position
// (x-F, y-F), F = (FW-1)/2 (invalid where that position is outside the
// frame). The two checks, "past values only" and the removal of identical
// values along rows and columns follow the paper; the window size and
// thresholds are not given there and are taken from the defaults of the
// original ELAS library (its window is +-5 and max distance 5, applied here
// on the pixel grid).
module support_filter
  import elas_pkg::*;
#(
  parameter int IMG_W        = 1242,
  parameter int IMG_H        = 375,
  parameter int FW           = 11,
  parameter int INCON_THRESH = 5,
  parameter int INCON_MIN    = 5,
  parameter int REDUN_DIST   = 5,
  parameter int REDUN_THRESH = 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_sof,
  input  disp_t in_disp,
  output logic  out_valid,
  output logic  out_sof,
  output disp_t out_disp,
  // event strobes (one per removed point), for statistics
  output logic  out_incon_drop,
  output logic  out_redun_drop
);
  localparam int F  = (FW - 1) / 2;
  localparam int XW = $clog2(IMG_W);
  localparam int YW = $clog2(IMG_H);
  localparam int RD = REDUN_DIST;
  localparam int NW = FW * FW;

  // ---------------- step 1: consistency ----------------
  logic                            wv;
  logic [FW-1:0][FW-1:0][DISP_T_W-1:0] win;
  logic [XW-1:0]                   wx;
  logic [YW-1:0]                   wy;

  line_window_buffer #(.W(FW), .IMG_W(IMG_W), .IMG_H(IMG_H), .DW(DISP_T_W)) u_lwb (
    .clk, .rst_n, .in_valid, .in_sof, .in_data(in_disp),
    .out_valid(wv), .win, .out_x(wx), .out_y(wy));

  disp_t                centre;
  logic [$clog2(NW+1)-1:0] support;
  logic                 cons_keep;

  function automatic logic close(input logic [DISP_W-1:0] a, input logic [DISP_W-1:0] b,
                                 input int thr);
    return ((a > b) ? (a - b) : (b - a)) <= DISP_W'(thr);
  endfunction

  always_comb begin
    disp_t e;
    centre  = disp_t'(win[F][F]);
    support = '0;
    for (int r = 0; r < FW; r++) begin
      for (int c = 0; c < FW; c++) begin
        e = disp_t'(win[r][c]);
        if (({1'b0, wx} >= (XW + 1)'(FW - 1 - c)) && ({1'b0, wy} >= (YW + 1)'(FW - 1 - r)) &&
            e.valid && close(e.d, centre.d, INCON_THRESH))
          support = support + 1'b1;
      end
    end
    cons_keep = centre.valid && (wx >= XW'(F)) && (wy >= YW'(F)) &&
                (support >= ($clog2(NW+1))'(INCON_MIN));
  end

  logic          cv;
  disp_t         cons;
  logic          cons_drop;
  logic [XW-1:0] cx;
  logic [YW-1:0] cy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cv <= 1'b0; cons <= '0; cons_drop <= 1'b0; cx <= '0; cy <= '0;
    end else begin
      cv <= wv;
      cons_drop <= 1'b0;
      if (wv) begin
        cons.valid <= cons_keep;
        cons.d     <= cons_keep ? centre.d : '0;
        cons_drop  <= centre.valid && (wx >= XW'(F)) && (wy >= YW'(F)) && !cons_keep;
        cx         <= wx;
        cy         <= wy;
      end
    end
  end

  // ---------------- step 2: backward-only redundancy ----------------
  disp_t [RD-1:0] row_hist;            // row_hist[k-1]: decision at (cx-k, cy)
  disp_t [RD-1:0] col_mem [IMG_W];     // col_mem[x][k-1]: decision at (x, cy-k)
  disp_t [RD-1:0] col_rd, col_wr;
  logic           redundant;
  disp_t          decided;

  always_comb begin
    col_rd    = col_mem[cx];
    redundant = 1'b0;
    for (int k = 1; k <= RD; k++) begin
      if (({1'b0, cx} >= (XW + 1)'(k)) && row_hist[k-1].valid &&
          close(row_hist[k-1].d, cons.d, REDUN_THRESH))
        redundant = 1'b1;
      if (({1'b0, cy} >= (YW + 1)'(k)) && col_rd[k-1].valid &&
          close(col_rd[k-1].d, cons.d, REDUN_THRESH))
        redundant = 1'b1;
    end
    redundant = redundant && cons.valid;
    decided   = redundant ? disp_t'('0) : cons;
    col_wr[0] = decided;
    for (int k = 1; k < RD; k++) col_wr[k] = col_rd[k-1];
  end

  always_ff @(posedge clk) begin
    if (cv) col_mem[cx] <= col_wr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_hist <= '0;
      out_valid <= 1'b0; out_disp <= '0; out_incon_drop <= 1'b0; out_redun_drop <= 1'b0;
    end else begin
      out_valid      <= cv;
      out_incon_drop <= cv && cons_drop;
      out_redun_drop <= cv && redundant;
      if (cv) begin
        out_disp <= decided;
        row_hist <= {row_hist[RD-2:0], decided};
      end
    end
  end

  logic [2:0] sof_pipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sof_pipe <= '0;
    else        sof_pipe <= {sof_pipe[1:0], in_valid && in_sof};
  end
  assign out_sof = sof_pipe[2];

  initial begin
    assert (REDUN_DIST >= 2) else $error("support_filter: REDUN_DIST must be >= 2");
  end

endmodule
