// min2_tree: pipelined search for the smallest and second smallest cost.
//
// N candidate costs, each with an enable bit, are reduced by a binary tree
// of compare nodes, one register level per tree level. Each node keeps the
// best cost m1, its index and the runner-up m2; merging two nodes a (lower
// indices) and b gives m1 = min(a.m1, b.m1) with ties going to a, and m2 =
// the smaller of the loser's m1 and the winner's m2. So m2 equals m1 when
// the minimum is shared by two disparities, and m2 is all ones when only
// one candidate is enabled. out_ok is low when no candidate is enabled.
// An SW-bit side-band word travels with each search unchanged.
//
// Timing: fully pipelined, one search per clock; the result appears
// 1 + ceil(log2(N)) clocks after in_valid. The tree shape and register
// placement are choices of this design; the paper only states that the
// first and second minima over the disparity range are compared and that
// the accelerators are pipelined.
module min2_tree #(
  parameter int N  = 256,
  parameter int CW = 7,
  parameter int SW = 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic [N-1:0]                in_mask,
  input  logic [N-1:0][CW-1:0]        in_cost,
  input  logic [SW-1:0]               in_side,
  output logic                        out_valid,
  output logic                        out_ok,
  output logic [CW-1:0]               out_m1,
  output logic [CW-1:0]               out_m2,
  output logic [$clog2(N)-1:0]        out_idx,
  output logic [SW-1:0]               out_side
);
  localparam int LV = (N > 1) ? $clog2(N) : 1;
  localparam int N2 = 1 << LV;
  localparam int IW = LV;

  typedef struct packed {
    logic          ok;
    logic [CW-1:0] m1;
    logic [CW-1:0] m2;
    logic [IW-1:0] idx;
  } node_t;

  node_t         lvl  [LV+1][N2];
  logic [LV:0]   vld;
  logic [SW-1:0] side [LV+1];

  function automatic node_t merge(input node_t a, input node_t b);
    node_t o;
    if (!a.ok) o = b;
    else if (!b.ok) o = a;
    else if (a.m1 <= b.m1) begin
      o     = a;
      o.m2  = (b.m1 < a.m2) ? b.m1 : a.m2;
    end else begin
      o     = b;
      o.m2  = (a.m1 < b.m2) ? a.m1 : b.m2;
    end
    return o;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
      for (int l = 0; l <= LV; l++) begin
        side[l] <= '0;
        for (int i = 0; i < N2; i++) lvl[l][i] <= '0;
      end
    end else begin
      vld[0]  <= in_valid;
      side[0] <= in_side;
      for (int i = 0; i < N2; i++) begin
        if (i < N) begin
          lvl[0][i].ok  <= in_mask[i];
          lvl[0][i].m1  <= in_cost[i];
        end else begin
          lvl[0][i].ok  <= 1'b0;
          lvl[0][i].m1  <= '1;
        end
        lvl[0][i].m2  <= '1;
        lvl[0][i].idx <= IW'(i);
      end
      for (int l = 1; l <= LV; l++) begin
        vld[l]  <= vld[l-1];
        side[l] <= side[l-1];
        for (int i = 0; i < (N2 >> l); i++)
          lvl[l][i] <= merge(lvl[l-1][2*i], lvl[l-1][2*i+1]);
      end
    end
  end

  assign out_valid = vld[LV];
  assign out_ok    = lvl[LV][0].ok;
  assign out_m1    = lvl[LV][0].m1;
  assign out_m2    = lvl[LV][0].m2;
  assign out_idx   = lvl[LV][0].idx[$clog2(N)-1:0];
  assign out_side  = side[LV];

endmodule
