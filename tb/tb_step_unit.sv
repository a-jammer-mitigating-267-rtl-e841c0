// tb_step_unit: S_new = prox(S_old + (G * 2tau) / 2^12) against a model.
module tb_step_unit;
  import sandman_pkg::*;
  import tb_model_pkg::*;
  int checks = 0, failures = 0, clipped = 0;
  ccs_t g;
  cs_t s_old, s_new;
  logic [TAU_W-1:0] tau2;
  step_unit dut (.g, .s_old, .tau2, .s_new);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic longint clip(longint v);
    return (v > 91) ? 91 : (v < -91) ? -91 : v;
  endfunction

  initial begin
    for (int i = 0; i < 400; i++) begin
      automatic longint gr = srand(16), gi = srand(16), sr, si, t, er, ei;
      sr = longint'($urandom_range(0, 182)) - 91; si = longint'($urandom_range(0, 182)) - 91;
      t  = $urandom_range(0, 1023);
      g.re = CS_W'(gr); g.im = CS_W'(gi); s_old.re = S_W'(sr); s_old.im = S_W'(si); tau2 = TAU_W'(t);
      #1;
      er = clip(sr + ((gr * t) >>> 12));
      ei = clip(si + ((gi * t) >>> 12));
      if (er == 91 || er == -91) clipped++;
      checks++;
      if (longint'(s_new.re) != er || longint'(s_new.im) != ei) begin
        failures++; $display("step mismatch %0d %0d vs %0d %0d", s_new.re, s_new.im, er, ei);
      end
    end
    checks++; if (clipped == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
