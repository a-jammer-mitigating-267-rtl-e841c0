// pe_array: the 32x8 SANDMAN PE array, built from four 8x8 slices joined
// column-wise, with the column adders and the per-column z and c^H
// registers.
//
// Column k of the array serves UE k. Column adders add the four slices'
// partial column sums, giving colsum[k] = sum over all 32 rows. The array
// keeps, per column k,
//   z[k][j]  = z(k + 8 j),   j = 0..7   (step 2: z = E^H x, scaled 2^-ZSHIFT)
//   c[k][i]  = c^H(16 + k + 8 i), i = 0..5   (step 5: c^H = u^H E_D)
// and broadcasts them down the column in steps 3 (z) and 6 (c^H). In the
// other operations the column broadcast is ext_col[k] (pilot S_T(k,t) or
// estimate S~_D(k,n) from the FF arrays). Row sums of all 32 rows go to the
// PE+ column (step 3); colsum goes to the gradient step units (step 7/8).
// z and c^H are registered at the end of the OP_PZ / OP_CH cycle.
//
// The 32x8 size, the four slices and the column-wise connection follow the
// design description; where z and c^H are held is this design's choice.
module pe_array
  import sandman_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  ctrl_t             ctrl,
  input  cb_t   [K_UE-1:0]  ext_col,
  input  cb_t   [M_ANT-1:0] u_in,
  input  logic  [M_ANT-1:0] x_bits,
  input  logic              y_we,
  input  logic  [5:0]       y_n,
  input  cy_t   [M_ANT-1:0] y_in,
  output crs_t  [M_ANT-1:0] rsum,
  output ccs_t  [K_UE-1:0]  colsum
);
  ccs_t [K_UE-1:0] psum [N_SLICE];
  cb_t  zbuf [K_UE][NSLOT];
  cb_t  cbuf [K_UE][NTSLOT];
  cb_t  [K_UE-1:0] col_in;

  always_comb begin
    for (int k = 0; k < K_UE; k++) begin
      unique case (ctrl.op)
        OP_PJ:   col_in[k] = zbuf[k][ctrl.idx[2:0]];
        OP_Q:    col_in[k] = cbuf[k][3'(ctrl.idx[2:0] - 3'd2)];
        default: col_in[k] = ext_col[k];
      endcase
    end
  end

  for (genvar s = 0; s < N_SLICE; s++) begin : g_slice
    pe_slice u_slice (
      .clk, .rst_n, .ctrl,
      .col_in,
      .u_in   (u_in[s*SLICE +: SLICE]),
      .x_bits (x_bits[s*SLICE +: SLICE]),
      .y_we, .y_n,
      .y_in   (y_in[s*SLICE +: SLICE]),
      .rsum   (rsum[s*SLICE +: SLICE]),
      .psum   (psum[s])
    );
  end

  // column adders across the slices
  always_comb begin
    for (int k = 0; k < K_UE; k++) begin
      colsum[k] = '0;
      for (int s = 0; s < N_SLICE; s++) begin
        colsum[k].re = colsum[k].re + psum[s][k].re;
        colsum[k].im = colsum[k].im + psum[s][k].im;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < K_UE; k++) begin
        for (int j = 0; j < NSLOT; j++)  zbuf[k][j] <= '0;
        for (int i = 0; i < NTSLOT; i++) cbuf[k][i] <= '0;
      end
    end else begin
      for (int k = 0; k < K_UE; k++) begin
        if (ctrl.op == OP_PZ) begin
          zbuf[k][ctrl.idx[2:0]].re <= MB_W'(sat(64'(colsum[k].re >>> ZSHIFT), MB_W));
          zbuf[k][ctrl.idx[2:0]].im <= MB_W'(sat(64'(colsum[k].im >>> ZSHIFT), MB_W));
        end
        if (ctrl.op == OP_CH) begin
          cbuf[k][3'(ctrl.idx[2:0] - 3'd2)].re <= MB_W'(sat(64'(colsum[k].re), MB_W));
          cbuf[k][3'(ctrl.idx[2:0] - 3'd2)].im <= MB_W'(sat(64'(colsum[k].im), MB_W));
        end
      end
    end
  end
endmodule
