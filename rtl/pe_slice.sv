// pe_slice: one 8x8 slice of the SANDMAN PE array (antenna rows
// BASE..BASE+7, all 8 UE columns).
//
// Inside the slice:
//  * row broadcast: for OP_CHEST and OP_GRAD the PE of column idx%8 offers a
//    stored entry (Y or Q) that all 8 PEs of its row receive; for OP_CH and
//    OP_Q the row receives u(m) from the PE+ of that row instead.
//  * column broadcast: col_in[k] reaches all 8 PEs of column k.
//  * row adders: rsum[r] = sum over the 8 PEs of row r of their `red`
//    output; it is fed back to the row for the step-1 write-back and
//    exported to the PE+ for step 3.
//  * partial column sums: psum[k] = sum over the 8 rows of column k, which
//    the array adds across the four slices.
// The adders are combinational trees.
//
// The slice size and the row/column broadcast and adder functions follow
// the design description. There, row and column adders are built by
// reconfiguring the PEs' own adders into chains, and circular-shift links
// between neighbouring PEs implement Cannon's algorithm for steps 1 and 7;
// this slice uses separate adder trees and no shift links (see pe.sv).
module pe_slice
  import sandman_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  ctrl_t             ctrl,
  input  cb_t   [K_UE-1:0]  col_in,
  input  cb_t   [SLICE-1:0] u_in,     // u(m) of the 8 rows, from the PE+
  input  logic  [SLICE-1:0] x_bits,
  input  logic              y_we,
  input  logic  [5:0]       y_n,
  input  cy_t   [SLICE-1:0] y_in,
  output crs_t  [SLICE-1:0] rsum,
  output ccs_t  [K_UE-1:0]  psum
);
  ct_t   bval [SLICE][K_UE];
  cacc_t red  [SLICE][K_UE];
  ct_t   row_in [SLICE];

  always_comb begin
    for (int r = 0; r < SLICE; r++) begin
      if (ctrl.op == OP_CH || ctrl.op == OP_Q) begin
        row_in[r].re = T_W'(u_in[r].re);
        row_in[r].im = T_W'(u_in[r].im);
      end else begin
        row_in[r] = bval[r][ctrl.idx[2:0]];
      end
    end
  end

  for (genvar r = 0; r < SLICE; r++) begin : g_row
    for (genvar k = 0; k < K_UE; k++) begin : g_col
      pe #(.COL(k)) u_pe (
        .clk, .rst_n, .ctrl,
        .row_in (row_in[r]),
        .col_in (col_in[k]),
        .x_bit  (x_bits[r]),
        .row_sum(rsum[r]),
        .y_we, .y_n,
        .y_in   (y_in[r]),
        .bval   (bval[r][k]),
        .red    (red[r][k])
      );
    end
  end

  always_comb begin
    for (int r = 0; r < SLICE; r++) begin
      rsum[r] = '0;
      for (int k = 0; k < K_UE; k++) begin
        rsum[r].re = rsum[r].re + RS_W'(red[r][k].re);
        rsum[r].im = rsum[r].im + RS_W'(red[r][k].im);
      end
    end
    for (int k = 0; k < K_UE; k++) begin
      psum[k] = '0;
      for (int r = 0; r < SLICE; r++) begin
        psum[k].re = psum[k].re + CS_W'(red[r][k].re);
        psum[k].im = psum[k].im + CS_W'(red[r][k].im);
      end
    end
  end
endmodule
