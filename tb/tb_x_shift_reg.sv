// tb_x_shift_reg: reset value, seed load and circular rotation of x.
module tb_x_shift_reg;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, load = 0, shift = 0;
  logic [31:0] seed = '0, x, model;
  always #5 clk = ~clk;
  x_shift_reg dut (.clk, .rst_n, .load, .seed, .shift, .x);

  initial begin
    repeat (2000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    checks++; if (x !== 32'hB4E1_6C3A) failures++;
    rst_n = 1;
    @(negedge clk); seed = 32'h8000_0001; load = 1; @(negedge clk); load = 0;
    model = 32'h8000_0001;
    checks++; if (x !== model) failures++;
    for (int i = 0; i < 70; i++) begin
      shift = ($urandom_range(0, 3) != 0);
      @(negedge clk);
      if (shift) model = {model[30:0], model[31]};
      checks++;
      if (x !== model) begin failures++; $display("x=%h expected %h", x, model); end
    end
    shift = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
