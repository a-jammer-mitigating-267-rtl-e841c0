// llr_unit: soft-output unit of SANDMAN.
//
// Converts one complex symbol estimate s (S_W bits per component, FRAC
// fraction bits) into LLRs of LLR_W bits for Gray-mapped QPSK (two LLRs) or
// 16-QAM (four LLRs). Both constellations are scaled to the box of
// half-width 1/sqrt(2):
//   llr[0] = re(s)              (sign bit of the in-phase dimension)
//   llr[1] = im(s)              (sign bit of the quadrature dimension)
//   llr[2] = QAM_TH - |re(s)|   (16-QAM only: inner (+) or outer (-) level)
//   llr[3] = QAM_TH - |im(s)|   (16-QAM only)
// each scaled by 2^-LLR_SHIFT and saturated. A positive LLR favours bit 0.
// For QPSK llr[2] and llr[3] are 0. Combinational.
//
// The two/four LLRs per symbol, Gray mapping, box size and 5b LLR width
// (960b rows of the S FF array = 48 x 4 x 5b) follow the design description;
// the max-log form without noise-variance scaling, the bit order and the
// sign convention are this design's choices.
module llr_unit
  import sandman_pkg::*;
(
  input  cs_t                           s,
  input  logic                          qam16,
  output logic signed [3:0][LLR_W-1:0]  llr
);
  function automatic logic signed [LLR_W-1:0] scale(input logic signed [S_W+1:0] v);
    return LLR_W'(sat(64'(v >>> LLR_SHIFT), LLR_W));
  endfunction

  logic signed [S_W+1:0] re, im, are, aim;
  always_comb begin
    re  = (S_W+2)'(s.re);
    im  = (S_W+2)'(s.im);
    are = re[S_W+1] ? -re : re;
    aim = im[S_W+1] ? -im : im;
    llr[0] = scale(re);
    llr[1] = scale(im);
    llr[2] = qam16 ? scale((S_W+2)'(QAM_TH) - are) : '0;
    llr[3] = qam16 ? scale((S_W+2)'(QAM_TH) - aim) : '0;
  end
endmodule
