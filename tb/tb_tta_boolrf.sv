// tb_tta_boolrf: self-checking test of the 2 x 1-bit boolean register file.
// Random writes against a reference copy, both bits compared every cycle.
module tb_tta_boolrf;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b1, we = 1'b0, waddr = 1'b0, din = 1'b0;
  logic [1:0] bits, ref_q;
  int checks = 0, failures = 0;

  tta_boolrf dut (.*);
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
    ref_q = '0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      checks++;
      if (bits !== ref_q) begin
        failures++;
        $display("FAIL: got %b expected %b", bits, ref_q);
      end
      we = 1'($urandom); en = ($urandom_range(0, 7) != 0);
      waddr = 1'($urandom); din = 1'($urandom);
      if (we && en) ref_q[waddr] = din;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
