// inv_sqrt: look-up-table based inverse square root for the jammer
// renormalisation u = j~ / ||j~||_2 of SANDMAN (step 4).
//
// The input e = ||j~||^2 is an unsigned integer. It is normalised by an even
// power of two, e = (i / 2^(IDX_W-2)) * 4^s with an IDX_W-bit index i in
// [2^(IDX_W-2), 2^IDX_W), found from the position of its leading one (the
// bits of e below the index are dropped). With L = (IDX_W-2)/2 the table
// holds the value at the middle of each index interval,
//   LUT[i] = round(2^(16+L) / sqrt(i + 1/2)),
// so that 1 / sqrt(e) ~= mant * 2^-expo, mant = LUT[i], expo = 16 + s.
// The table (768 entries for IDX_W = 10) is computed at elaboration with an
// integer square root. For e = 0 the mantissa is 0. Combinational; the
// relative error is below 2^-(IDX_W-1) plus the rounding of the mantissa.
//
// The use of a look-up table follows the design description; the
// normalisation, table size and output format are this design's choices.
// The table has to be this fine because any error in ||u|| leaves a
// fraction of a strong jammer in the projected residual Q.
module inv_sqrt
  import sandman_pkg::*;
#(
  parameter int IN_W  = EN_W,
  parameter int IDX_W = 10       // index bits (even, >= 4)
) (
  input  logic [IN_W-1:0]   e,
  output logic [MANT_W-1:0] mant,
  output logic [6:0]        expo
);
  localparam int L = (IDX_W - 2) / 2;
  localparam int NLUT = 1 << IDX_W;
  typedef logic [MANT_W-1:0] lut_t [NLUT];

  function automatic longint unsigned isqrt(input longint unsigned v);
    longint unsigned r, b;
    r = 0;
    for (int k = 31; k >= 0; k--) begin
      b = r | (64'd1 << k);
      if (b * b <= v) r = b;
    end
    return r;
  endfunction

  // 2^(17+L) / sqrt(i + 1/2) = sqrt(2^(35+2L) / (2i + 1)), then halved with rounding
  function automatic lut_t build_lut();
    lut_t t;
    for (int i = 0; i < NLUT; i++) begin
      if (i < NLUT / 4) t[i] = '0;
      else t[i] = MANT_W'((isqrt((64'd1 << (35 + 2 * L)) / 64'(2 * i + 1)) + 1) >> 1);
    end
    return t;
  endfunction

  localparam lut_t LUT = build_lut();

  logic [6:0]       msb;
  logic [6:0]       s;
  logic [IDX_W-1:0] idx;
  always_comb begin
    msb = '0;
    for (int b = 0; b < IN_W; b++)
      if (e[b]) msb = 7'(b);
    s = msb >> 1;
    if (2 * s >= 2 * L) idx = IDX_W'(e >> (2 * s - 2 * L));
    else                idx = IDX_W'(e << (2 * L - 2 * s));
    mant = (e == '0) ? '0 : LUT[idx];
    expo = 7'd16 + s;
  end
endmodule
