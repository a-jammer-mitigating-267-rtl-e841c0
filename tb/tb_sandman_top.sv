// tb_sandman_top: end-to-end test of the SANDMAN receiver core at its
// default size (32 antennas, 8 UEs, 16 pilots + 48 data symbols, t_max=10).
//
// For each scenario the testbench draws a random channel H (components
// uniform in [-1, 1]), orthogonal Walsh-Hadamard QPSK pilots, random QPSK or
// 16-QAM data scaled to the box 1/sqrt(2), a single-antenna jammer j w^T
// that is active on all symbols (barrage), only on the pilots, or only on
// the data, plus a little noise, and quantises Y = H S + j w^T + N to the
// 14b input format. It then checks:
//   * the channel estimate inside every PE against an integer model of
//     H = Y_T S_T^H / 16 computed here with the same rounding,
//   * the hard decisions of the LLRs against the transmitted bits
//     (bit errors may not exceed 1% of the bits of a block). Jammer
//     amplitudes are 16 (QPSK, 24 dB above a UE) and 8 (16-QAM, 18 dB)
//     times the UE amplitude; at 30 dB this fixed-point design leaves a
//     few bit errors, so those blocks are not part of this test,
//   * the number of cycles from start to done: exactly the schedule
//     (1353) and within the 1841 cycles per 16-QAM block implied by
//     267 Mb/s at 320 MHz (8 x 48 x 4 bits per block),
//   * that every operation of the schedule, the prox clipping, the x
//     rotation, both constellations and all three jammer types occurred.
// Ends with the TB_RESULT line; a watchdog stops a hung run.
module tb_sandman_top;
  import sandman_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                  y_we = 0, st_we = 0, x_load = 0, start = 0, qam16 = 0;
  logic [5:0]            y_n = '0, rd_n = '0;
  cy_t  [M_ANT-1:0]      y_col;
  logic [3:0]            st_t = '0, t_max = 4'd10;
  cst_t [K_UE-1:0]       st_row;
  logic [M_ANT-1:0]      x_seed = 32'h9E37_79B9;
  logic [TAU_W-1:0]      tau2 = 16'd180;
  logic                  busy, done;
  logic [K_UE-1:0][19:0] rd_llr;

  sandman_top dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // watchdog
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ mechanisms
  int op_seen [16];
  int clip_seen = 0, xshift_seen = 0;
  always @(posedge clk) if (rst_n) begin
    op_seen[int'(dut.ctrl.op)]++;
    if (dut.x_shift) xshift_seen++;
    if (dut.ctrl.op == OP_GRAD)
      for (int k = 0; k < K_UE; k++)
        if (s_new_dut[k].re == S_W'(BOX) || s_new_dut[k].re == -S_W'(BOX)) clip_seen++;
  end
  cs_t s_new_dut [K_UE];
  for (genvar k = 0; k < K_UE; k++) begin : g_sn
    assign s_new_dut[k] = dut.g_ue[k].s_new;
  end

  // channel estimates inside the PEs
  ch_t h_dut [M_ANT][K_UE];
  for (genvar m = 0; m < M_ANT; m++) begin : g_hm
    for (genvar k = 0; k < K_UE; k++) begin : g_hk
      assign h_dut[m][k] = dut.u_array.g_slice[m/8].u_slice.g_row[m%8].g_col[k].u_pe.h;
    end
  end

  // ------------------------------------------------------------ scenario
  real hr [M_ANT][K_UE], hi [M_ANT][K_UE];
  int  sr [K_UE][N_SYM], si [K_UE][N_SYM];     // transmitted symbols, FRAC format
  int  bits [K_UE][D_DAT][4];
  cy_t ymat [M_ANT][N_SYM];

  function automatic real urand();   // uniform in [-1, 1)
    return (real'($urandom_range(0, 65535)) - 32768.0) / 32768.0;
  endfunction

  function automatic int rnd(real v);
    return (v >= 0.0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
  endfunction

  function automatic int sat_i(int v, int w);
    int hi_l = (1 <<< (w - 1)) - 1;
    if (v > hi_l) return hi_l;
    if (v < -hi_l - 1) return -hi_l - 1;
    return v;
  endfunction

  // 1D Gray levels: bit b_sign (0 -> +), bit b_mag (0 -> inner level)
  function automatic int level(int bs, int bm, bit q16);
    int a;
    if (!q16) a = 91;                  // 1/sqrt(2)
    else a = bm ? 91 : 30;             // 1/sqrt(2), 1/(3 sqrt(2))
    return bs ? -a : a;
  endfunction

  task automatic make_block(input bit q16, input int jam_mode, input real jam_amp, input real noise);
    real jr [M_ANT], ji [M_ANT], wr [N_SYM], wi [N_SYM];
    for (int m = 0; m < M_ANT; m++) for (int k = 0; k < K_UE; k++) begin
      hr[m][k] = urand(); hi[m][k] = urand();
    end
    for (int m = 0; m < M_ANT; m++) begin jr[m] = urand(); ji[m] = urand(); end
    for (int n = 0; n < N_SYM; n++) begin
      wr[n] = jam_amp * (urand() > 0.0 ? 0.7071 : -0.7071);
      wi[n] = jam_amp * (urand() > 0.0 ? 0.7071 : -0.7071);
      // jam_mode 0: barrage, 1: pilots only, 2: data only
      if ((jam_mode == 1 && n >= T_PIL) || (jam_mode == 2 && n < T_PIL)) begin wr[n] = 0.0; wi[n] = 0.0; end
    end
    // pilots: Walsh-Hadamard rows times (1+i)/sqrt(2)
    for (int k = 0; k < K_UE; k++) for (int t = 0; t < T_PIL; t++) begin
      int sgn = ($countones(k & t) % 2) ? -1 : 1;
      sr[k][t] = 91 * sgn; si[k][t] = 91 * sgn;
    end
    for (int k = 0; k < K_UE; k++) for (int d = 0; d < D_DAT; d++) begin
      for (int b = 0; b < 4; b++) bits[k][d][b] = $urandom_range(0, 1);
      if (!q16) begin bits[k][d][2] = 0; bits[k][d][3] = 0; end
      sr[k][T_PIL + d] = level(bits[k][d][0], bits[k][d][2], q16);
      si[k][T_PIL + d] = level(bits[k][d][1], bits[k][d][3], q16);
    end
    for (int m = 0; m < M_ANT; m++) for (int n = 0; n < N_SYM; n++) begin
      real ar = 0.0, ai = 0.0;
      for (int k = 0; k < K_UE; k++) begin
        ar += hr[m][k] * sr[k][n] - hi[m][k] * si[k][n];
        ai += hr[m][k] * si[k][n] + hi[m][k] * sr[k][n];
      end
      ar += 128.0 * (jr[m] * wr[n] - ji[m] * wi[n]) + 128.0 * noise * urand();
      ai += 128.0 * (jr[m] * wi[n] + ji[m] * wr[n]) + 128.0 * noise * urand();
      ymat[m][n].re = Y_W'(sat_i(rnd(ar), Y_W));
      ymat[m][n].im = Y_W'(sat_i(rnd(ai), Y_W));
    end
  endtask

  task automatic load_block();
    for (int n = 0; n < N_SYM; n++) begin
      @(negedge clk);
      y_we = 1; y_n = 6'(n);
      for (int m = 0; m < M_ANT; m++) y_col[m] = ymat[m][n];
    end
    for (int t = 0; t < T_PIL; t++) begin
      @(negedge clk);
      y_we = 0; st_we = 1; st_t = 4'(t);
      for (int k = 0; k < K_UE; k++) begin
        st_row[k].re = ST_W'(sr[k][t]); st_row[k].im = ST_W'(si[k][t]);
      end
    end
    @(negedge clk); st_we = 0;
  endtask

  // integer model of the channel estimate (same rounding as the PEs)
  task automatic check_chest();
    int bad = 0;
    for (int m = 0; m < M_ANT; m++) for (int k = 0; k < K_UE; k++) begin
      longint ar = 0, ai = 0;
      int er, ei;
      for (int t = 0; t < T_PIL; t++) begin
        longint yr = ymat[m][t].re, yi = ymat[m][t].im;
        longint pr = yr * sr[k][t] + yi * si[k][t];   // y * conj(s)
        longint pi = yi * sr[k][t] - yr * si[k][t];
        ar = ar + (pr >>> FRAC); ai = ai + (pi >>> FRAC);
      end
      er = sat_i(int'(ar >>> CHEST_SHIFT), H_W);
      ei = sat_i(int'(ai >>> CHEST_SHIFT), H_W);
      if (int'(h_dut[m][k].re) != er || int'(h_dut[m][k].im) != ei) bad++;
    end
    checks++;
    if (bad != 0) begin failures++; $display("CHEST mismatch in %0d PEs", bad); end
  endtask

  task automatic run_block(input string name, input bit q16, input int jam_mode,
                           input real jam_amp, input real noise,
                           input int max_err_pct);
    int t0, errs, nbits;
    make_block(q16, jam_mode, jam_amp, noise);
    load_block();
    qam16 = q16;
    @(negedge clk); start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    wait (done == 1'b1);
    t0 = cyc - t0;
    checks++;
    if (t0 != 1353) begin failures++; $display("%s: %0d cycles, expected 1353", name, t0); end
    checks++;
    if (t0 > 1841) begin failures++; $display("%s: slower than 267 Mb/s at 320 MHz", name); end
    check_chest();
    errs = 0; nbits = 0;
    @(negedge clk);
    for (int d = 0; d < D_DAT; d++) begin
      rd_n = 6'(d); #1;
      for (int k = 0; k < K_UE; k++) begin
        logic signed [LLR_W-1:0] l [4];
        for (int b = 0; b < 4; b++) l[b] = rd_llr[k][b*LLR_W +: LLR_W];
        for (int b = 0; b < (q16 ? 4 : 2); b++) begin
          nbits++;
          if ((l[b] < 0 ? 1 : 0) != bits[k][d][b]) errs++;
        end
        if (!q16) begin
          checks++;
          if (l[2] != 0 || l[3] != 0) failures++;
        end
      end
    end
    checks++;
    if (errs * 100 > nbits * max_err_pct) failures++;
    $display("%-26s cycles=%0d bit errors=%0d/%0d", name, t0, errs, nbits);
  endtask

  initial begin
    for (int i = 0; i < 16; i++) op_seen[i] = 0;
    y_col = '0; st_row = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); x_load = 1; @(negedge clk); x_load = 0;
    run_block("no jammer, QPSK",        1'b0, 0, 0.0, 0.0,  1);
    run_block("barrage jammer, QPSK",   1'b0, 0, 16.0, 0.02, 1);
    run_block("pilot jammer, QPSK",     1'b0, 1, 16.0, 0.02, 1);
    run_block("data jammer, QPSK",      1'b0, 2, 16.0, 0.02, 1);
    run_block("no jammer, 16-QAM",      1'b1, 0, 0.0, 0.0,  1);
    run_block("barrage jammer, 16-QAM", 1'b1, 0, 8.0, 0.02, 1);
    // every mechanism of the schedule must have happened
    for (int op = int'(OP_CHEST); op <= int'(OP_LLR); op++) begin
      checks++;
      if (op_seen[op] == 0) begin failures++; $display("operation %0d never issued", op); end
    end
    checks++; if (clip_seen == 0)   begin failures++; $display("prox never clipped"); end
    checks++; if (xshift_seen == 0) begin failures++; $display("x never rotated"); end
    $display("mechanisms: prox clips=%0d x rotations=%0d grad cycles=%0d",
             clip_seen, xshift_seen, op_seen[int'(OP_GRAD)]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
