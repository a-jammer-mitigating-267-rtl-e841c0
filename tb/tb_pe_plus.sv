// tb_pe_plus: j~ capture from the row sum, |j~|^2 and u = j~ * mant >> (expo-15).
module tb_pe_plus;
  import sandman_pkg::*;
  import tb_model_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  ctrl_t ctrl;
  crs_t row_sum;
  logic [MANT_W-1:0] mant;
  logic [6:0] expo;
  logic [2*J_W-1:0] en;
  cj_t jt;
  cb_t u;
  pe_plus dut (.*);

  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    ctrl = '{op: OP_NOP, idx: '0}; row_sum = '0; mant = '0; expo = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      automatic longint rr = srand(RS_W), ri = srand(RS_W), jr, ji, m, e, ur, ui;
      @(negedge clk);
      ctrl.op = OP_PJ_WB; row_sum.re = RS_W'(rr); row_sum.im = RS_W'(ri);
      @(negedge clk);
      ctrl.op = OP_NRM_E;
      jr = satw(rr >>> 6, 24); ji = satw(ri >>> 6, 24);
      #1; checks++;
      if (longint'(jt.re) != jr || longint'(jt.im) != ji || longint'(en) != jr * jr + ji * ji) begin
        failures++; $display("jt/en mismatch");
      end
      m = $urandom_range(32768, 65536); e = $urandom_range(16, 40);
      @(negedge clk);
      ctrl.op = OP_NRM_U; mant = MANT_W'(m); expo = 7'(e);
      @(negedge clk);
      ctrl.op = OP_NOP;
      ur = satw((jr * m) >>> (e - 15), 18); ui = satw((ji * m) >>> (e - 15), 18);
      #1; checks++;
      if (longint'(u.re) != ur || longint'(u.im) != ui) begin
        failures++; $display("u=(%0d,%0d) expected (%0d,%0d)", u.re, u.im, ur, ui);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
