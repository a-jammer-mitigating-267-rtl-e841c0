// pe_plus: extended-precision processing element (PE+) for the jammer
// renormalisation of SANDMAN (step 4). There is one PE+ per antenna row m,
// 32 in all (four 8x1 PE+ columns, one next to each 8x8 PE slice).
//
//   OP_PJ_WB  j~(m) = row_sum(m) * 2^-JSHIFT    (from the row adder of step 3)
//   OP_NRM_E  en    = |j~(m)|^2                 (added over the 32 PE+ by a
//                                                column adder outside)
//   OP_NRM_U  u(m)  = j~(m) * mant * 2^-(expo - U_FRAC)
//                                     with 1/||j~|| ~= mant * 2^-expo
// u(m) is held and broadcast along row m of the PE array in steps 5 and 6.
// j~ and u are registered; en is combinational. Asynchronous reset clears.
//
// The PE+ column, its larger word width and its role in step 4 follow the
// design description; the widths (24b per component for j~, 48b for
// |j~|^2, 18b for u with U_FRAC = 15 fraction bits) and the scaling are
// this design's choices.
module pe_plus
  import sandman_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  ctrl_t               ctrl,
  input  crs_t                row_sum,
  input  logic [MANT_W-1:0]   mant,
  input  logic [6:0]          expo,
  output logic [2*J_W-1:0]    en,
  output cj_t                 jt,
  output cb_t                 u
);
  localparam int P_W = J_W + MANT_W + 1;
  logic signed [P_W-1:0] pr, pi;
  logic [6:0] sh;

  always_comb begin
    en = (2*J_W)'(64'(jt.re) * 64'(jt.re)) + (2*J_W)'(64'(jt.im) * 64'(jt.im));
    pr = P_W'(jt.re) * P_W'($signed({1'b0, mant}));
    pi = P_W'(jt.im) * P_W'($signed({1'b0, mant}));
    sh = expo - 7'(U_FRAC);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      jt <= '0;
      u  <= '0;
    end else begin
      if (ctrl.op == OP_PJ_WB) begin
        jt.re <= J_W'(sat(64'(row_sum.re >>> JSHIFT), J_W));
        jt.im <= J_W'(sat(64'(row_sum.im >>> JSHIFT), J_W));
      end
      if (ctrl.op == OP_NRM_U) begin
        u.re <= MB_W'(sat(64'(pr >>> sh), MB_W));
        u.im <= MB_W'(sat(64'(pi >>> sh), MB_W));
      end
    end
  end
endmodule
