// tb_pe_slice: the full 32x8 PE array taken through one pass of the
// schedule (Y load, channel estimation, step 1 for all 64 symbols,
// steps 2, 3, 5, 6 and 7) with random inputs. The testbench keeps its own
// integer model of H, E, z, c^H and Q and checks every row sum and column
// sum the array produces, including the values it broadcasts from its own
// z and c^H registers.
module tb_pe_slice;
  import sandman_pkg::*;
  import tb_model_pkg::*;
  localparam int R = SLICE;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  ctrl_t ctrl;
  cb_t  [K_UE-1:0] ext_col;
  cb_t  [R-1:0]    u_in;
  logic [R-1:0]    x_bits;
  logic            y_we;
  logic [5:0]      y_n;
  cy_t  [R-1:0]    y_in;
  crs_t [R-1:0]    rsum;
  ccs_t [K_UE-1:0] psum;
  cb_t  [K_UE-1:0] col_in;
  pe_slice dut (.clk, .rst_n, .ctrl, .col_in, .u_in, .x_bits, .y_we, .y_n, .y_in, .rsum, .psum);
  assign col_in = ext_col;

  cx ym [R][64], em [R][64], qm [R][48], hm [R][8], um [R], zm [64], cm [48];

  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic cx c_of(longint re, longint im);
    cx r; r.re = re; r.im = im; return r;
  endfunction
  function automatic cx add(cx a, cx b);
    return c_of(a.re + b.re, a.im + b.im);
  endfunction

  int bad;
  task automatic cmp(string what, longint gr, longint gi, cx e);
    checks++;
    if (gr != e.re || gi != e.im) begin
      failures++;
      if (bad++ < 5) $display("%s: got (%0d,%0d) expected (%0d,%0d)", what, gr, gi, e.re, e.im);
    end
  endtask

  initial begin
    bad = 0;
    ctrl = '{op: OP_NOP, idx: '0}; ext_col = '0; u_in = '0; x_bits = '0; y_we = 0; y_n = '0; y_in = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 64; n++) begin
      @(negedge clk); y_we = 1; y_n = 6'(n);
      for (int m = 0; m < R; m++) begin
        y_in[m].re = Y_W'(srand(10)); y_in[m].im = Y_W'(srand(10));
        ym[m][n] = c_of(y_in[m].re, y_in[m].im);
      end
    end
    @(negedge clk); y_we = 0;
    // channel estimation
    for (int m = 0; m < R; m++) for (int k = 0; k < 8; k++) hm[m][k] = c_of(0, 0);
    for (int t = 0; t < 16; t++) begin
      ctrl = '{op: OP_CHEST, idx: 6'(t)};
      for (int k = 0; k < 8; k++) begin
        ext_col[k].re = MB_W'(srand(ST_W)); ext_col[k].im = MB_W'(srand(ST_W));
        for (int m = 0; m < R; m++) begin
          automatic cx p = mulq(ym[m][t], c_of(ext_col[k].re, ext_col[k].im), 1);
          hm[m][k] = c_of(satw(hm[m][k].re + p.re, 22), satw(hm[m][k].im + p.im, 22));
        end
      end
      @(negedge clk);
    end
    for (int m = 0; m < R; m++) for (int k = 0; k < 8; k++)
      hm[m][k] = c_of(satw(hm[m][k].re >>> 4, 12), satw(hm[m][k].im >>> 4, 12));
    ctrl = '{op: OP_CHEST_WB, idx: '0}; @(negedge clk);
    // step 1: E = Y - H S
    for (int n = 0; n < 64; n++) begin
      cx s [8];
      ctrl = '{op: OP_ERR, idx: 6'(n)};
      for (int k = 0; k < 8; k++) begin
        ext_col[k].re = MB_W'(srand(8)); ext_col[k].im = MB_W'(srand(8));
        s[k] = c_of(ext_col[k].re, ext_col[k].im);
      end
      #1;
      for (int m = 0; m < R; m++) begin
        automatic cx acc = c_of(0, 0);
        for (int k = 0; k < 8; k++) acc = add(acc, mulq(hm[m][k], s[k], 0));
        cmp("step1 row sum", rsum[m].re, rsum[m].im, acc);
        em[m][n] = c_of(satw(ym[m][n].re - acc.re, 15), satw(ym[m][n].im - acc.im, 15));
      end
      @(negedge clk);
    end
    // step 2: z = E^H x
    x_bits = R'($urandom);
    for (int j = 0; j < 8; j++) begin
      ctrl = '{op: OP_PZ, idx: 6'(j)}; #1;
      for (int k = 0; k < 8; k++) begin
        automatic cx acc = c_of(0, 0);
        for (int m = 0; m < R; m++)
          acc = add(acc, x_bits[m] ? c_of(em[m][k+8*j].re, -em[m][k+8*j].im)
                                   : c_of(-em[m][k+8*j].re, em[m][k+8*j].im));
        cmp("step2 column sum", psum[k].re, psum[k].im, acc);
        zm[k+8*j] = c_of(satw(acc.re >>> 5, 18), satw(acc.im >>> 5, 18));
      end
      @(negedge clk);
    end
    // step 3: j~ = E z, using the z registers of the array
    for (int j = 0; j < 8; j++) begin
      ctrl = '{op: OP_PJ, idx: 6'(j)};
      for (int k = 0; k < 8; k++) begin ext_col[k].re = MB_W'(zm[k+8*j].re); ext_col[k].im = MB_W'(zm[k+8*j].im); end
      @(negedge clk);
    end
    ctrl = '{op: OP_PJ_WB, idx: '0}; #1;
    for (int m = 0; m < R; m++) begin
      automatic cx tot = c_of(0, 0);
      for (int k = 0; k < 8; k++) begin
        automatic cx acc = c_of(0, 0);
        for (int j = 0; j < 8; j++) begin
          automatic cx p = mulq(em[m][k+8*j], zm[k+8*j], 0);
          acc = c_of(satw(acc.re + p.re, 22), satw(acc.im + p.im, 22));
        end
        tot = add(tot, acc);
      end
      cmp("step3 row sum", rsum[m].re, rsum[m].im, tot);
    end
    @(negedge clk);
    // step 5: c^H = u^H E_D
    for (int m = 0; m < R; m++) begin
      u_in[m].re = MB_W'(srand(16)); u_in[m].im = MB_W'(srand(16));
      um[m] = c_of(u_in[m].re, u_in[m].im);
    end
    for (int j = 2; j < 8; j++) begin
      ctrl = '{op: OP_CH, idx: 6'(j)}; #1;
      for (int k = 0; k < 8; k++) begin
        automatic cx acc = c_of(0, 0);
        for (int m = 0; m < R; m++) acc = add(acc, mulq(em[m][k+8*j], um[m], 1, 15));
        cmp("step5 column sum", psum[k].re, psum[k].im, acc);
        cm[k+8*j-16] = c_of(satw(acc.re, 18), satw(acc.im, 18));
      end
      @(negedge clk);
    end
    // step 6: Q = E_D - u c^H, using the c^H registers of the array
    for (int j = 2; j < 8; j++) begin
      ctrl = '{op: OP_Q, idx: 6'(j)};
      for (int k = 0; k < 8; k++) begin ext_col[k].re = MB_W'(cm[k+8*j-16].re); ext_col[k].im = MB_W'(cm[k+8*j-16].im); end
      for (int m = 0; m < R; m++) for (int k = 0; k < 8; k++) begin
        automatic cx p = mulq(um[m], cm[k+8*j-16], 0, 15);
        qm[m][k+8*j-16] = c_of(satw(em[m][k+8*j].re - p.re, 21), satw(em[m][k+8*j].im - p.im, 21));
      end
      @(negedge clk);
    end
    // step 7: -grad = H^H Q
    for (int d = 0; d < 48; d++) begin
      ctrl = '{op: OP_GRAD, idx: 6'(d)}; #1;
      for (int k = 0; k < 8; k++) begin
        automatic cx acc = c_of(0, 0);
        for (int m = 0; m < R; m++) acc = add(acc, mulq(qm[m][d], hm[m][k], 1));
        cmp("step7 column sum", psum[k].re, psum[k].im, acc);
      end
      @(negedge clk);
    end
    ctrl = '{op: OP_NOP, idx: '0};
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
