// tb_prox: checks the box clamp of the prox unit on random and edge values.
module tb_prox;
  import sandman_pkg::*;
  import tb_model_pkg::*;
  int checks = 0, failures = 0;
  logic signed [ACC_W+1:0] r_re, r_im;
  cs_t s;
  prox dut (.r_re, .r_im, .s);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(longint a, longint b);
    longint er, ei;
    r_re = (ACC_W+2)'(a); r_im = (ACC_W+2)'(b); #1;
    er = (a > 91) ? 91 : (a < -91) ? -91 : a;
    ei = (b > 91) ? 91 : (b < -91) ? -91 : b;
    checks++;
    if (longint'(s.re) != er || longint'(s.im) != ei) begin
      failures++; $display("prox(%0d,%0d) = (%0d,%0d), expected (%0d,%0d)", a, b, s.re, s.im, er, ei);
    end
  endtask

  initial begin
    chk(0, 0); chk(91, -91); chk(92, -92); chk(90, -90); chk(100000, -100000);
    for (int i = 0; i < 300; i++) chk(srand(9), srand(24));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
