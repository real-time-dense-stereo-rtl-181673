// census_transform: census descriptor of a full W x W pixel window.
//
// Every pixel of the window is compared with the window's centre pixel; bit
// r*W+c of the descriptor is 1 when win[r][c] is darker than the centre
// (strictly less). All W*W positions are used, the centre included (its bit
// is always 0), so a 9 x 9 window gives an 81-bit descriptor and a 5 x 5
// window a 25-bit one, the lengths the paper quotes. Descriptors are later
// compared with the Hamming distance.
//
// Interface/timing: one register stage. in_valid/win in, out_valid/census
// one clock later. Using the full window and the 81/25 descriptor lengths
// follow the paper; the comparison sense ("less than centre") is a choice of
// this design.
module census_transform #(
  parameter int W  = 9,
  parameter int DW = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic [W-1:0][W-1:0][DW-1:0] win,
  output logic                        out_valid,
  output logic [W*W-1:0]              census
);
  localparam int R = (W - 1) / 2;

  logic [W*W-1:0] census_d;

  always_comb begin
    for (int r = 0; r < W; r++)
      for (int c = 0; c < W; c++)
        census_d[r*W+c] = (win[r][c] < win[R][R]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      census    <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) census <= census_d;
    end
  end

endmodule
