// tb_sandman_ctrl: the control word sequence of whole blocks for t_max = 1,
// 3 and 10 against a schedule built here from the algorithm outline, plus
// the start-to-done latency, busy, clr_s, x_shift and the iteration count,
// and that start is ignored while busy.
module tb_sandman_ctrl;
  import sandman_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic [3:0] t_max = 4'd10, iter;
  ctrl_t ctrl;
  logic busy, done, clr_s, x_shift;
  always #5 clk = ~clk;
  sandman_ctrl dut (.*);

  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  ctrl_t exp_q [$];
  task automatic push(op_e op, int first, int last);
    for (int i = first; i <= last; i++) exp_q.push_back('{op: op, idx: 6'(i)});
  endtask

  task automatic run(int tm);
    int cycles = 0, shifts = 0, clrs = 0, bad = 0;
    exp_q.delete();
    push(OP_CHEST, 0, 15); push(OP_CHEST_WB, 0, 0); push(OP_ERR, 0, 15);
    for (int it = 0; it < tm; it++) begin
      push(OP_ERR, 16, 63); push(OP_PZ, 0, 7); push(OP_PJ, 0, 7); push(OP_PJ_WB, 0, 0);
      push(OP_NRM_E, 0, 0); push(OP_NRM_U, 0, 0); push(OP_CH, 2, 7); push(OP_Q, 2, 7);
      push(OP_GRAD, 0, 47);
    end
    push(OP_LLR, 0, 47);
    t_max = 4'(tm);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    if (clr_s) clrs++;
    // control words appear from the cycle after start
    while (!done) begin
      if (ctrl.op != OP_NOP) begin
        ctrl_t e = exp_q.pop_front();
        if (ctrl != e && bad++ < 3) $display("t_max=%0d cycle %0d: op %0d idx %0d, expected op %0d idx %0d",
                                             tm, cycles, ctrl.op, ctrl.idx, e.op, e.idx);
        if (!busy) bad++;
      end
      if (x_shift) shifts++;
      if (cycles == 100) start = 1;       // must be ignored while busy
      @(negedge clk); start = 0; cycles++;
    end
    checks++; if (bad != 0) failures++;
    checks++; if (exp_q.size() != 0) begin failures++; $display("%0d words missing", exp_q.size()); end
    checks++; if (cycles != 33 + 127 * tm + 48 + 1) begin failures++; $display("t_max=%0d: %0d cycles", tm, cycles); end
    checks++; if (shifts != tm) failures++;
    checks++; if (clrs != 1) failures++;
    checks++; if (int'(iter) != tm) failures++;
    checks++; if (busy) failures++;
    repeat (3) @(negedge clk);
    checks++; if (ctrl.op != OP_NOP || done) failures++;
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    checks++; if (busy || ctrl.op != OP_NOP) failures++;
    run(1); run(3); run(10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
