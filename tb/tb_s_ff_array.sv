// tb_s_ff_array: reset to zero, column writes, both read ports, clear.
module tb_s_ff_array;
  import sandman_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0, we = 0;
  logic [5:0] wr_n = '0, rd_n = '0, host_n = '0;
  logic [K_UE-1:0][19:0] wr_col, rd_col, host_col;
  logic [K_UE-1:0][19:0] model [D_DAT];
  always #5 clk = ~clk;
  s_ff_array dut (.*);

  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wr_col = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < D_DAT; n++) begin
      rd_n = 6'(n); #1; checks++; if (rd_col !== '0) failures++;
    end
    for (int n = 0; n < D_DAT; n++) begin
      @(negedge clk); we = 1; wr_n = 6'(n);
      wr_col = {$urandom, $urandom, $urandom, $urandom, $urandom};
      model[n] = wr_col;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 100; i++) begin
      rd_n = 6'($urandom_range(0, 47)); host_n = 6'($urandom_range(0, 47)); #1;
      checks++; if (rd_col !== model[rd_n]) failures++;
      checks++; if (host_col !== model[host_n]) failures++;
    end
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    for (int n = 0; n < D_DAT; n++) begin
      host_n = 6'(n); #1; checks++; if (host_col !== '0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
