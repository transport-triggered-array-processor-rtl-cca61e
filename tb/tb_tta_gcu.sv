// tb_tta_gcu: self-checking test of the program counter unit.
// Checks: halted after reset; start clears the PC and runs; PC+1 per enabled
// cycle; jump loads the target for the next cycle; call also stores PC+1 in
// RA; en = 0 freezes; a jump to its own address halts, and the PC then stays.
module tb_tta_gcu;
  import tta_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b1, start = 1'b0, jump = 1'b0, call = 1'b0;
  word_t target = '0, ra;
  logic [10:0] pc;
  logic halted;
  int checks = 0, failures = 0;

  tta_gcu dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    int exp_pc, exp_ra;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check("halted after reset", halted, 1);
    @(negedge clk); check("held while halted", pc, 0);
    start = 1'b1; @(negedge clk); start = 1'b0;
    check("start", pc, 0); check("running", halted, 0);
    exp_pc = 0; exp_ra = 0;
    for (int i = 0; i < 4000; i++) begin
      automatic int k = $urandom_range(0, 9);
      jump = 1'b0; call = 1'b0; en = 1'b1;
      target = word_t'($urandom_range(0, 2047));
      if (target == word_t'(exp_pc)) target = word_t'((exp_pc + 1) % 2048);
      if (k == 0) jump = 1'b1;
      else if (k == 1) call = 1'b1;
      else if (k == 2) en = 1'b0;
      @(negedge clk);
      if (k == 0) exp_pc = int'(target);
      else if (k == 1) begin exp_ra = exp_pc + 1; exp_pc = int'(target); end
      else if (k != 2) exp_pc = (exp_pc + 1) % 2048;
      check("pc", pc, exp_pc);
      check("ra", ra, exp_ra);
      check("not halted", halted, 0);
    end
    // return through RA
    jump = 1'b1; call = 1'b0; en = 1'b1; target = ra;
    @(negedge clk); jump = 1'b0;
    check("return", pc, exp_ra);
    // stop: jump to itself
    target = word_t'(pc); jump = 1'b1;
    @(negedge clk); jump = 1'b0;
    check("halt", halted, 1);
    exp_pc = pc;
    repeat (5) @(negedge clk);
    check("pc held after halt", pc, exp_pc);
    start = 1'b1; @(negedge clk); start = 1'b0;
    check("restart", pc, 0); check("restart run", halted, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
