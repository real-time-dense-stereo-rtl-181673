// elas_pkg: types and helper functions shared by the ELAS stereo accelerators.
//
// A pixel is an 8-bit grey level. A disparity travels through the streams as
// a packed struct {valid, d}: valid=0 marks "no disparity" (an empty sparse
// position, an ambiguous match, a border pixel). Disparities are 8 bits wide,
// so the disparity range D of any accelerator may be at most 256.
// cost_width() sizes a Hamming cost with one spare code above the largest
// possible cost. The 8-bit pixel and disparity widths are choices of this
// design; the paper does not state them.
package elas_pkg;

  localparam int PIX_W  = 8;
  localparam int DISP_W = 8;
  localparam int MAX_D  = 1 << DISP_W;

  typedef logic [PIX_W-1:0] pix_t;

  typedef struct packed {
    logic              valid;
    logic [DISP_W-1:0] d;
  } disp_t;

  localparam int DISP_T_W = $bits(disp_t);

  // Width of a Hamming cost for a descriptor of nbits bits, one spare code
  // above the largest cost so that all-ones can mean "no second minimum".
  function automatic int cost_width(input int nbits);
    return $clog2(nbits + 2);
  endfunction

endpackage
