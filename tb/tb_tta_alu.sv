// tb_tta_alu: self-checking test of the ALU function unit.
// Random operands and operations; the expected result is computed here from
// the operation definitions. Checks the one-cycle latency (the output changes
// only at the edge after the trigger), that in2 is held between triggers, and
// that en = 0 freezes the unit.
module tb_tta_alu;
  import tta_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b1, in2_we = 1'b0, trig = 1'b0;
  alu_op_e op = ALU_ADD;
  word_t din = '0, dout;
  int checks = 0, failures = 0;

  tta_alu dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t model(alu_op_e o, word_t a, word_t b);
    case (o)
      ALU_ADD: return word_t'(32'(a) + 32'(b));
      ALU_SUB: return word_t'(32'(a) - 32'(b));
      ALU_EQ:  return (a == b) ? 16'd1 : 16'd0;
      ALU_GT:  return (int'($signed(a)) > int'($signed(b))) ? 16'd1 : 16'd0;
      default: return (int'(a) > int'(b)) ? 16'd1 : 16'd0;
    endcase
  endfunction

  task automatic check(string what, word_t got, word_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    word_t a, b, prev;
    alu_op_e o;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 2000; i++) begin
      a = word_t'($urandom);
      b = (i % 5 == 0) ? a : word_t'($urandom);
      o = alu_op_e'($urandom_range(0, 4));
      // in2 move
      @(negedge clk); in2_we = 1'b1; din = b;
      @(negedge clk); in2_we = 1'b0;
      prev = dout;
      // trigger move
      trig = 1'b1; op = o; din = a;
      #1 check("no change before edge", dout, prev);
      @(negedge clk); trig = 1'b0; din = word_t'($urandom);
      check($sformatf("op %s %h,%h", o.name(), a, b), dout, model(o, a, b));
      // a second trigger reuses the held in2
      if (i % 7 == 0) begin
        a = word_t'($urandom);
        trig = 1'b1; op = ALU_SUB; din = a;
        @(negedge clk); trig = 1'b0;
        check("in2 held", dout, model(ALU_SUB, a, b));
      end
      // en low freezes
      if (i % 11 == 0) begin
        prev = dout; en = 1'b0; trig = 1'b1; op = ALU_ADD; din = 16'h1234;
        @(negedge clk); trig = 1'b0; en = 1'b1;
        check("frozen", dout, prev);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
