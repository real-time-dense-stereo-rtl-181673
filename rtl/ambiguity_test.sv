// ambiguity_test: keeps a support match only if it is unambiguous.
//
// The original ELAS criterion m1/m2 <= 0.9 (m1, m2: best and second best
// matching cost over the disparity range) is evaluated as m1 <= T(m2) with
// the shift-sum T(m2) = m2/2 + m2/4 + m2/8 + m2/32 (= 0.90625*m2), which
// needs only adders, no multiplier or DSP block. Each shift truncates, as a
// plain wire shift does in hardware. A match also needs a second candidate
// at all: m2 all ones (the min2_tree code for "only one candidate") rejects
// it, and so does in_ok low (no candidate).
//
// Interface/timing: one register stage; out_disp.valid is the accept flag and
// out_disp.d the disparity of the best match. The shift-sum follows the paper
// (Sec. "Measuring ambiguity"); rejecting single-candidate pixels and the
// truncating shifts are choices of this design.
module ambiguity_test
  import elas_pkg::*;
#(
  parameter int CW = 7
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              in_ok,
  input  logic [CW-1:0]     in_m1,
  input  logic [CW-1:0]     in_m2,
  input  logic [DISP_W-1:0] in_d,
  output logic              out_valid,
  output disp_t             out_disp
);
  logic [CW+1:0] thr;
  logic          accept;

  always_comb begin
    thr    = (CW+2)'(in_m2 >> 1) + (CW+2)'(in_m2 >> 2) + (CW+2)'(in_m2 >> 3) + (CW+2)'(in_m2 >> 5);
    accept = in_ok && (in_m2 != '1) && ((CW+2)'(in_m1) <= thr);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_disp  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_disp.valid <= accept;
        out_disp.d     <= accept ? in_d : '0;
      end
    end
  end

endmodule
