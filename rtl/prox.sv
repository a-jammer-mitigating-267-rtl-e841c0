// prox: proximal operator of the box prior used by SANDMAN.
//
// The data symbols are assumed to lie in a box of half-width 1/sqrt(2) per
// real dimension (the box size of the Gray-mapped QPSK/16-QAM constellations).
// The operator clamps the real and the imaginary part of a wide intermediate
// value R independently to [-BOX, +BOX] and returns a symbol estimate of S_W
// bits per component. It is purely combinational.
//
// Interface: r (IN_W bits per component, FRAC fraction bits) in, s out.
// Follows the design description: a per-PE "prox" thresholding unit whose
// drawing shows a saturating linear characteristic. The exact clip level in
// fixed point (BOX = 91 = round(2^7/sqrt 2)) is this design's choice.
module prox
  import sandman_pkg::*;
#(
  parameter int IN_W = ACC_W + 2
) (
  input  logic signed [IN_W-1:0] r_re,
  input  logic signed [IN_W-1:0] r_im,
  output cs_t                    s
);
  function automatic logic signed [S_W-1:0] clip(input logic signed [IN_W-1:0] v);
    if (v > IN_W'(BOX))       return S_W'(BOX);
    else if (v < -IN_W'(BOX)) return -S_W'(BOX);
    else                      return S_W'(v);
  endfunction

  always_comb begin
    s.re = clip(r_re);
    s.im = clip(r_im);
  end
endmodule
