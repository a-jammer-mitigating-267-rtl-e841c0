// tb_inv_sqrt: compares mant * 2^-expo with 1/sqrt(e) computed in floating
// point (relative error below 0.25% for the default 10-bit table index),
// and checks exact table entries round(2^20 / sqrt(i + 1/2)) for
// e = 1 (i = 256), e = 4 (same entry, one step higher exponent) and
// e = 3 (i = 768). Watchdog: 100 us.
module tb_inv_sqrt;
  import sandman_pkg::*;
  int checks = 0, failures = 0;
  logic [EN_W-1:0] e;
  logic [MANT_W-1:0] mant;
  logic [6:0] expo;
  inv_sqrt dut (.e, .mant, .expo);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int lut(int i);
    return int'($floor(2.0 ** 20 / $sqrt(real'(i) + 0.5) + 0.5));
  endfunction

  task automatic chk(logic [EN_W-1:0] v);
    real got, want;
    e = v; #1;
    got = real'(mant) / (2.0 ** real'(expo));
    want = 1.0 / $sqrt(real'(v));
    checks++;
    if (got < want * 0.9975 || got > want * 1.0025) begin
      failures++; $display("inv_sqrt(%0d) = %f, expected %f", v, got, want);
    end
  endtask

  initial begin
    e = '0; #1; checks++; if (mant != 0) failures++;
    e = 1; #1; checks++; if (int'(mant) != lut(256) || expo != 7'd16) failures++;
    e = 4; #1; checks++; if (int'(mant) != lut(256) || expo != 7'd17) failures++;
    e = 3; #1; checks++; if (int'(mant) != lut(768) || expo != 7'd16) failures++;
    for (int b = 0; b < EN_W; b++) chk(EN_W'(1) << b);
    for (int i = 0; i < 400; i++) begin
      logic [EN_W-1:0] v;
      automatic int sh = $urandom_range(0, EN_W - 1);
      v = {$urandom, $urandom};
      v = v >> sh;
      if (v == 0) v = 1;
      chk(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
