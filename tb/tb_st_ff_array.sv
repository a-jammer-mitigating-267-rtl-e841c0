// tb_st_ff_array: writes all 16 pilot rows, reads them back in random order.
module tb_st_ff_array;
  import sandman_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, we = 0;
  logic [3:0] wr_t = '0, rd_t = '0;
  cst_t [K_UE-1:0] wr_row, rd_row;
  cst_t [K_UE-1:0] model [T_PIL];
  always #5 clk = ~clk;
  st_ff_array dut (.clk, .we, .wr_t, .wr_row, .rd_t, .rd_row);

  initial begin
    repeat (2000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < T_PIL; t++) begin
      @(negedge clk);
      we = 1; wr_t = 4'(t);
      for (int k = 0; k < K_UE; k++) wr_row[k] = cst_t'($urandom);
      model[t] = wr_row;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 64; i++) begin
      rd_t = 4'($urandom_range(0, 15)); #1;
      checks++; if (rd_row !== model[rd_t]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
