// tb_llr_unit: LLRs for QPSK and 16-QAM against a direct model.
module tb_llr_unit;
  import sandman_pkg::*;
  import tb_model_pkg::*;
  int checks = 0, failures = 0;
  cs_t s;
  logic qam16;
  logic signed [3:0][LLR_W-1:0] llr;
  llr_unit dut (.s, .qam16, .llr);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic longint l5(longint v);
    return satw(v >>> 3, 5);
  endfunction

  task automatic chk(longint a, longint b, bit q);
    longint e [4];
    s.re = S_W'(a); s.im = S_W'(b); qam16 = q; #1;
    e[0] = l5(a); e[1] = l5(b);
    e[2] = q ? l5(60 - (a < 0 ? -a : a)) : 0;
    e[3] = q ? l5(60 - (b < 0 ? -b : b)) : 0;
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (longint'($signed(llr[i])) != e[i]) begin
        failures++; $display("s=(%0d,%0d) q=%0d llr%0d=%0d expected %0d", a, b, q, i, llr[i], e[i]);
      end
    end
  endtask

  initial begin
    chk(91, -91, 0); chk(30, -30, 1); chk(91, 91, 1); chk(0, 0, 1);
    for (int i = 0; i < 200; i++) chk(longint'($urandom_range(0, 182)) - 91, longint'($urandom_range(0, 182)) - 91, 1'($urandom_range(0, 1)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
