// sandman_top: jammer-mitigating 32x8 multi-user MIMO receiver core
// running the SANDMAN algorithm (joint jammer nulling and box-constrained
// data detection by projected gradient descent).
//
// One block = Y (32 antennas x 64 symbols: 16 pilots, then 48 data
// symbols) and the pilot matrix S_T (8 UEs x 16). The core
//   1. estimates the channel H = Y_T S_T^H / 16,
//   2. forms the pilot residual E_T = Y_T - H S_T once,
//   3. runs t_max iterations of: data residual E_D = Y_D - H S~_D; one
//      power-iteration step z = E^H x, j~ = E z with a pseudorandom +-1 x;
//      u = j~/||j~||; c^H = u^H E_D; Q = E_D - u c^H (E_D with the jammer
//      direction u projected out); -grad = H^H Q; S~_D = prox(S~_D - 2 tau grad),
//   4. turns each symbol estimate into 2 (QPSK) or 4 (16-QAM) LLRs.
//
// Interface (host side, all synchronous to clk, active-low async reset):
//   y_we/y_n/y_col   write column n (32 complex samples, 14b+14b, 7
//                    fraction bits) of Y; only while idle
//   st_we/st_t/st_row  write pilot column t (8 complex pilots, 8b+8b)
//   x_load/x_seed    load the 32b x shift register
//   tau2             step size 2*tau, unsigned with 12 fraction bits
//   qam16            0: QPSK, 1: 16-QAM;  t_max: iterations (1..15)
//   start            begin a block; busy high while working; done pulses
//                    once when the LLRs are in the S FF array
//   rd_n/rd_llr      read the 4 LLRs (5b each, llr0 in bits 4:0) of the
//                    8 UEs for data symbol rd_n; valid after done
// A block takes 1351 cycles after start for t_max = 10 (plus 2 cycles of
// control latency); loading Y takes 64 cycles and the pilots 16.
//
// The architecture (32x8 PE array in four 8x8 slices, 32 PE+, a LUT-based
// inverse square root, a 32b x shift register, S and ST FF arrays, LLR
// units, a controller) follows the design description. The host interface,
// the number of LLR units (8, one per UE) and all fixed-point scalings are
// this design's choices. With these scalings, simulated blocks are
// error-free for jammers up to 24 dB above a UE (QPSK) and 18 dB
// (16-QAM barrage); the reference reports robustness to 30 dB jammers.
module sandman_top
  import sandman_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        y_we,
  input  logic [5:0]                  y_n,
  input  cy_t  [M_ANT-1:0]            y_col,
  input  logic                        st_we,
  input  logic [3:0]                  st_t,
  input  cst_t [K_UE-1:0]             st_row,
  input  logic                        x_load,
  input  logic [M_ANT-1:0]            x_seed,
  input  logic [TAU_W-1:0]            tau2,
  input  logic                        qam16,
  input  logic [3:0]                  t_max,
  input  logic                        start,
  output logic                        busy,
  output logic                        done,
  input  logic [5:0]                  rd_n,
  output logic [K_UE-1:0][19:0]       rd_llr
);
  ctrl_t                  ctrl;
  logic                   clr_s, x_shift;
  logic [M_ANT-1:0]       x_bits;
  cst_t [K_UE-1:0]        st_rd;
  logic [K_UE-1:0][19:0]  s_rd, s_wr;
  logic                   s_we;
  logic [5:0]             s_rd_n;
  cb_t  [K_UE-1:0]        ext_col;
  cb_t  [M_ANT-1:0]       u;
  crs_t [M_ANT-1:0]       rsum;
  ccs_t [K_UE-1:0]        colsum;
  logic [2*J_W-1:0]       en [M_ANT];
  logic [EN_W-1:0]        en_tot;
  logic [MANT_W-1:0]      mant, mant_q;
  logic [6:0]             expo, expo_q;

  sandman_ctrl u_ctrl (
    .clk, .rst_n, .start, .t_max, .ctrl, .busy, .done, .clr_s, .x_shift, .iter()
  );

  x_shift_reg #(.N(M_ANT)) u_x (
    .clk, .rst_n, .load(x_load), .seed(x_seed), .shift(x_shift), .x(x_bits)
  );

  st_ff_array u_st (
    .clk, .we(st_we), .wr_t(st_t), .wr_row(st_row), .rd_t(ctrl.idx[3:0]), .rd_row(st_rd)
  );

  // S~_D is read for step 1 (column n-16) and for steps 7-8 / LLR (column d)
  assign s_rd_n = (ctrl.op == OP_ERR) ? 6'(ctrl.idx - 6'd16) : ctrl.idx;

  s_ff_array u_s (
    .clk, .rst_n, .clr(clr_s), .we(s_we), .wr_n(ctrl.idx), .wr_col(s_wr),
    .rd_n(s_rd_n), .rd_col(s_rd), .host_n(rd_n), .host_col(rd_llr)
  );

  // column broadcast from the FF arrays: pilots for CHEST and the pilot
  // part of step 1, symbol estimates for the data part of step 1
  always_comb begin
    for (int k = 0; k < K_UE; k++) begin
      cs_t sv;
      sv = cs_t'(s_rd[k]);
      ext_col[k] = '0;
      if (ctrl.op == OP_CHEST || (ctrl.op == OP_ERR && ctrl.idx < 6'd16)) begin
        ext_col[k].re = MB_W'(st_rd[k].re);
        ext_col[k].im = MB_W'(st_rd[k].im);
      end else if (ctrl.op == OP_ERR) begin
        ext_col[k].re = MB_W'(sv.re);
        ext_col[k].im = MB_W'(sv.im);
      end
    end
  end

  pe_array u_array (
    .clk, .rst_n, .ctrl, .ext_col, .u_in(u), .x_bits,
    .y_we, .y_n, .y_in(y_col), .rsum, .colsum
  );

  for (genvar m = 0; m < M_ANT; m++) begin : g_peplus
    cj_t jt_unused;
    pe_plus u_pep (
      .clk, .rst_n, .ctrl, .row_sum(rsum[m]), .mant(mant_q), .expo(expo_q),
      .en(en[m]), .jt(jt_unused), .u(u[m])
    );
  end

  // column adder of the PE+ column and the inverse square root
  always_comb begin
    en_tot = '0;
    for (int m = 0; m < M_ANT; m++) en_tot = en_tot + EN_W'(en[m]);
  end

  inv_sqrt u_isqrt (.e(en_tot), .mant, .expo);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mant_q <= '0;
      expo_q <= '0;
    end else begin
      if (ctrl.op == OP_NRM_E) begin
        mant_q <= mant;
        expo_q <= expo;
      end
      // the host may only load Y and pilots while the core is idle
      assert (!((y_we || st_we) && busy)) else $error("Y or pilot write while busy");
    end
  end

  // gradient step + prox (steps 7-8) and LLR units, one per UE
  for (genvar k = 0; k < K_UE; k++) begin : g_ue
    cs_t s_new;
    logic signed [3:0][LLR_W-1:0] llr;
    step_unit u_step (.g(colsum[k]), .s_old(cs_t'(s_rd[k])), .tau2, .s_new);
    llr_unit  u_llr  (.s(cs_t'(s_rd[k])), .qam16, .llr);
    assign s_wr[k] = (ctrl.op == OP_LLR) ? 20'(llr) : 20'(s_new);
  end

  assign s_we = (ctrl.op == OP_GRAD) || (ctrl.op == OP_LLR);

endmodule
