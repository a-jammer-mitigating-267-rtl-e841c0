// pe: processing element of the SANDMAN PE array.
//
// PE(m,k) sits at antenna row m and UE column k of the 32x8 array. It holds
//   H      channel estimate H(m,k)                       (12b per component)
//   Y[8]   receive samples Y(m, k + 8 j), j = 0..7        (Y FF array 8x28b)
//   E[8]   residual E(m, k + 8 j)                          (E FF array 8x30b)
//   T[6]   Q(m, 16 + k + 8 i), i = 0..5, data columns      (T FF array 6x42b)
//   acc    22b accumulator
// and one complex multiplier (operand A 21b, operand B 18b, 39b products,
// result scaled by 2^-FRAC, 2^-H_FRAC when H is an operand, 2^-U_FRAC when
// u is) followed by an add/subtract stage.
//
// All PEs execute the same operation `ctrl.op` on index `ctrl.idx` each
// cycle (SIMD control). Per operation:
//   OP_CHEST    acc = (t==0 ? 0 : acc) + row_in * conj(col_in)   Y(m,t) S_T(k,t)*
//   OP_CHEST_WB H = acc / 16, rounded down to H_FRAC fraction bits
//   OP_ERR      red = H * col_in; if n%8 == k: E[n/8] = Y[n/8] - row_sum
//   OP_PZ       red = +-conj(E[j])  (sign from x(m))
//   OP_PJ       acc = (j==0 ? 0 : acc) + E[j] * col_in             z(k+8j)
//   OP_PJ_WB    red = acc
//   OP_CH       red = E[j] * conj(row_in)                          u(m)*
//   OP_Q        T[j-2] = E[j] - row_in * col_in                     u(m) c^H(n)
//   OP_GRAD     red = row_in * conj(H)                              Q(m,n) H(m,k)*
// `red` goes to the row and column adders outside the PE; `bval` is the
// stored entry this PE offers for a row broadcast (Y for CHEST, T for GRAD).
// Registers update at the rising clock edge; `red` and `bval` are
// combinational. Asynchronous active-low reset clears all state.
//
// The storage sizes, operand widths and the multiply/add structure follow
// the PE drawing of the design description. The per-operation dataflow
// (which operand comes from a broadcast, which from local storage) is this
// design's simplification: it uses row/column broadcasts and adder
// reductions for every step, where the original uses Cannon's algorithm with
// circular shifts inside each 8x8 slice for steps 1 and 7.
module pe
  import sandman_pkg::*;
#(
  parameter int COL = 0   // UE column k of this PE
) (
  input  logic       clk,
  input  logic       rst_n,
  input  ctrl_t      ctrl,
  input  ct_t        row_in,   // row broadcast
  input  cb_t        col_in,   // column broadcast
  input  logic       x_bit,    // x(m): 1 = +1, 0 = -1
  input  crs_t       row_sum,  // row adder result (step 1 write-back)
  input  logic       y_we,     // load Y(m, y_n) into this PE
  input  logic [5:0] y_n,
  input  cy_t        y_in,
  output ct_t        bval,
  output cacc_t      red
);
  ch_t   h;
  cy_t   y [NSLOT];
  ce_t   e [NSLOT];
  ct_t   t [NTSLOT];
  cacc_t acc;

  // idx is a symbol index n (OP_CHEST, OP_ERR), a data index d (OP_GRAD) or
  // directly a slot j (OP_PZ, OP_PJ, OP_CH, OP_Q)
  logic       slot_op;
  logic [2:0] slot;     // Y/E slot
  logic [2:0] col_of;   // n % 8: PE column that owns symbol n
  logic [2:0] tslot;    // T slot: j - 2, or d / 8 in OP_GRAD
  assign slot_op = (ctrl.op == OP_PZ) || (ctrl.op == OP_PJ) || (ctrl.op == OP_CH) || (ctrl.op == OP_Q);
  assign slot    = slot_op ? ctrl.idx[2:0] : ctrl.idx[5:3];
  assign col_of  = ctrl.idx[2:0];
  assign tslot   = (ctrl.op == OP_GRAD) ? ctrl.idx[5:3] : 3'(ctrl.idx[2:0] - 3'd2);

  // multiplier operand selection
  logic signed [MA_W-1:0] a_re, a_im;
  logic signed [MB_W-1:0] b_re, b_im;
  logic                   conj_b;
  cacc_t                  prod;
  ce_t                    e_sel;
  cacc_t                  acc_base;  // accumulator, cleared at the first index

  assign acc_base = (ctrl.idx == 6'd0) ? cacc_t'('0) : acc;

  always_comb begin
    e_sel  = e[slot];
    a_re   = '0; a_im = '0; b_re = '0; b_im = '0; conj_b = 1'b0;
    unique case (ctrl.op)
      OP_CHEST: begin a_re = row_in.re; a_im = row_in.im;
                      b_re = MB_W'(col_in.re); b_im = MB_W'(col_in.im); conj_b = 1'b1; end
      OP_ERR:   begin a_re = MA_W'(h.re); a_im = MA_W'(h.im);
                      b_re = col_in.re; b_im = col_in.im; end
      OP_PJ:    begin a_re = MA_W'(e_sel.re); a_im = MA_W'(e_sel.im);
                      b_re = col_in.re; b_im = col_in.im; end
      OP_CH:    begin a_re = MA_W'(e_sel.re); a_im = MA_W'(e_sel.im);
                      b_re = MB_W'(row_in.re); b_im = MB_W'(row_in.im); conj_b = 1'b1; end
      OP_Q:     begin a_re = row_in.re; a_im = row_in.im;
                      b_re = col_in.re; b_im = col_in.im; end
      OP_GRAD:  begin a_re = row_in.re; a_im = row_in.im;
                      b_re = MB_W'(h.re); b_im = MB_W'(h.im); conj_b = 1'b1; end
      default: ;
    endcase
    prod = cmul(a_re, a_im, b_re, b_im, 1'b0, conj_b,
                (ctrl.op == OP_CH || ctrl.op == OP_Q) ? U_FRAC :
                (ctrl.op == OP_ERR || ctrl.op == OP_GRAD) ? H_FRAC : FRAC);
  end

  // value offered to the row reduction / column reduction
  always_comb begin
    red = '0;
    unique case (ctrl.op)
      OP_ERR, OP_CH, OP_GRAD: red = prod;
      OP_PZ: begin
        red.re = x_bit ?  ACC_W'(e_sel.re) : -ACC_W'(e_sel.re);
        red.im = x_bit ? -ACC_W'(e_sel.im) :  ACC_W'(e_sel.im);
      end
      OP_PJ_WB: red = acc;
      default: ;
    endcase
  end

  // value offered to the row broadcast
  always_comb begin
    bval = '0;
    if (ctrl.op == OP_CHEST) begin
      bval.re = T_W'(y[slot].re);
      bval.im = T_W'(y[slot].im);
    end else if (ctrl.op == OP_GRAD) begin
      bval = t[tslot];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h   <= '0;
      acc <= '0;
      for (int i = 0; i < NSLOT; i++) begin y[i] <= '0; e[i] <= '0; end
      for (int i = 0; i < NTSLOT; i++) t[i] <= '0;
    end else begin
      if (y_we && y_n[2:0] == 3'(COL)) y[y_n[5:3]] <= y_in;
      unique case (ctrl.op)
        OP_CHEST: begin
          acc.re <= ACC_W'(sat(64'(acc_base.re) + 64'(prod.re), ACC_W));
          acc.im <= ACC_W'(sat(64'(acc_base.im) + 64'(prod.im), ACC_W));
        end
        OP_CHEST_WB: begin
          h.re <= H_W'(sat(64'(acc.re >>> (CHEST_SHIFT + FRAC - H_FRAC)), H_W));
          h.im <= H_W'(sat(64'(acc.im >>> (CHEST_SHIFT + FRAC - H_FRAC)), H_W));
        end
        OP_ERR: if (col_of == 3'(COL)) begin
          e[slot].re <= E_W'(sat(64'(y[slot].re) - 64'(row_sum.re), E_W));
          e[slot].im <= E_W'(sat(64'(y[slot].im) - 64'(row_sum.im), E_W));
        end
        OP_PJ: begin
          acc.re <= ACC_W'(sat(64'(acc_base.re) + 64'(prod.re), ACC_W));
          acc.im <= ACC_W'(sat(64'(acc_base.im) + 64'(prod.im), ACC_W));
        end
        OP_Q: begin
          t[tslot].re <= T_W'(sat(64'(e_sel.re) - 64'(prod.re), T_W));
          t[tslot].im <= T_W'(sat(64'(e_sel.im) - 64'(prod.im), T_W));
        end
        default: ;
      endcase
    end
  end
endmodule
