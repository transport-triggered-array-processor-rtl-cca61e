// tb_tta_rf: self-checking test of the 4 x 16-bit register file.
// Random writes against a reference copy; every register is compared after
// every cycle. Also checks reset to zero and that we/en low leave it alone.
module tb_tta_rf;
  import tta_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b1, we = 1'b0;
  logic [1:0] waddr = '0;
  word_t din = '0;
  word_t regs [4];
  word_t ref_q [4];
  int checks = 0, failures = 0;

  tta_rf dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 4; r++) ref_q[r] = '0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      for (int r = 0; r < 4; r++) begin
        checks++;
        if (regs[r] !== ref_q[r]) begin
          failures++;
          $display("FAIL reg %0d: got %h expected %h", r, regs[r], ref_q[r]);
        end
      end
      we = 1'($urandom); en = ($urandom_range(0, 7) != 0);
      waddr = 2'($urandom); din = word_t'($urandom);
      if (we && en) ref_q[waddr] = din;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
