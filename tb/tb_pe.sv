// tb_pe: one processing element (column 3) taken through every operation:
// Y load, channel-estimate accumulation, step-1 products and E write-back,
// step 2 (+-conj E), step 3 accumulation, step 5 products, step 6 Q
// write-back, step 7 products and the row-broadcast outputs. Every output
// and stored value is predicted with the integer model of tb_model_pkg.
module tb_pe;
  import sandman_pkg::*;
  import tb_model_pkg::*;
  localparam int COL = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  ctrl_t ctrl;
  ct_t   row_in, bval;
  cb_t   col_in;
  logic  x_bit;
  crs_t  row_sum;
  logic  y_we;
  logic [5:0] y_n;
  cy_t   y_in;
  cacc_t red;

  pe #(.COL(COL)) dut (.*);

  cx ym [8], em [8], tm [6], hm, accm;

  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic cx c_of(longint re, longint im);
    cx r; r.re = re; r.im = im; return r;
  endfunction

  task automatic expect_c(string what, longint gr, longint gi, cx e);
    checks++;
    if (gr != e.re || gi != e.im) begin
      failures++; $display("%s: got (%0d,%0d) expected (%0d,%0d)", what, gr, gi, e.re, e.im);
    end
  endtask

  task automatic issue(op_e op, int idx);
    ctrl.op = op; ctrl.idx = 6'(idx);
  endtask

  initial begin
    ctrl = '{op: OP_NOP, idx: '0}; row_in = '0; col_in = '0; x_bit = 0; row_sum = '0;
    y_we = 0; y_n = '0; y_in = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    // load Y(m, 3 + 8j); also write other columns, which must be ignored
    for (int n = 0; n < 64; n++) begin
      @(negedge clk);
      y_we = 1; y_n = 6'(n);
      y_in.re = Y_W'(srand(Y_W)); y_in.im = Y_W'(srand(Y_W));
      if (n % 8 == COL) ym[n / 8] = c_of(y_in.re, y_in.im);
    end
    @(negedge clk); y_we = 0;
    // channel estimation
    accm = c_of(0, 0);
    for (int t = 0; t < 16; t++) begin
      cx a, b, p;
      issue(OP_CHEST, t);
      row_in.re = T_W'(srand(Y_W)); row_in.im = T_W'(srand(Y_W));
      col_in.re = MB_W'(srand(ST_W)); col_in.im = MB_W'(srand(ST_W));
      a = c_of(row_in.re, row_in.im); b = c_of(col_in.re, col_in.im);
      p = mulq(a, b, 1);
      accm.re = satw(accm.re + p.re, 22); accm.im = satw(accm.im + p.im, 22);
      #1; expect_c("CHEST bval", bval.re, bval.im, ym[t / 8]);
      @(negedge clk);
    end
    issue(OP_CHEST_WB, 0); @(negedge clk);
    hm = c_of(satw(accm.re >>> 4, 12), satw(accm.im >>> 4, 12));
    // step 1
    for (int n = 0; n < 64; n++) begin
      cx b;
      issue(OP_ERR, n);
      col_in.re = MB_W'(srand(S_W)); col_in.im = MB_W'(srand(S_W));
      row_sum.re = RS_W'(srand(16)); row_sum.im = RS_W'(srand(16));
      b = c_of(col_in.re, col_in.im);
      #1; expect_c("ERR red", red.re, red.im, mulq(hm, b, 0));
      if (n % 8 == COL)
        em[n / 8] = c_of(satw(ym[n / 8].re - row_sum.re, 15), satw(ym[n / 8].im - row_sum.im, 15));
      @(negedge clk);
    end
    // step 2
    for (int j = 0; j < 8; j++) begin
      issue(OP_PZ, j); x_bit = 1'($urandom_range(0, 1)); #1;
      expect_c("PZ red", red.re, red.im, x_bit ? c_of(em[j].re, -em[j].im) : c_of(-em[j].re, em[j].im));
      @(negedge clk);
    end
    // step 3
    accm = c_of(0, 0);
    for (int j = 0; j < 8; j++) begin
      cx p;
      issue(OP_PJ, j);
      col_in.re = MB_W'(srand(12)); col_in.im = MB_W'(srand(12));
      p = mulq(em[j], c_of(col_in.re, col_in.im), 0);
      accm.re = satw(accm.re + p.re, 22); accm.im = satw(accm.im + p.im, 22);
      @(negedge clk);
    end
    issue(OP_PJ_WB, 0); #1; expect_c("PJ_WB red", red.re, red.im, accm);
    @(negedge clk);
    // step 5
    for (int j = 2; j < 8; j++) begin
      issue(OP_CH, j);
      row_in.re = T_W'(srand(MB_W)); row_in.im = T_W'(srand(MB_W)); #1;
      expect_c("CH red", red.re, red.im, mulq(em[j], c_of(row_in.re, row_in.im), 1, 15));
      @(negedge clk);
    end
    // step 6
    for (int j = 2; j < 8; j++) begin
      cx p;
      issue(OP_Q, j);
      row_in.re = T_W'(srand(MB_W)); row_in.im = T_W'(srand(MB_W));
      col_in.re = MB_W'(srand(MB_W)); col_in.im = MB_W'(srand(MB_W));
      p = mulq(c_of(row_in.re, row_in.im), c_of(col_in.re, col_in.im), 0, 15);
      tm[j - 2] = c_of(satw(em[j].re - p.re, 21), satw(em[j].im - p.im, 21));
      @(negedge clk);
    end
    // step 7
    for (int d = 0; d < 48; d++) begin
      issue(OP_GRAD, d);
      row_in.re = T_W'(srand(T_W)); row_in.im = T_W'(srand(T_W)); #1;
      expect_c("GRAD red", red.re, red.im, mulq(c_of(row_in.re, row_in.im), hm, 1));
      expect_c("GRAD bval", bval.re, bval.im, tm[d / 8]);
      @(negedge clk);
    end
    issue(OP_NOP, 0); #1;
    expect_c("NOP red", red.re, red.im, c_of(0, 0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
