// tta_alu: arithmetic function unit of the TTA processing element.
//
// Operations add, sub, eq, gt (signed) and gtu (unsigned), as listed for the
// ALU of the PE core. Operand 2 is latched by a plain move to ALU.in2; a move
// to the trigger port ALU.in1t.<op> supplies operand 1 and starts the
// operation: out = in1 <op> in2. Comparisons give 1 or 0.
// Timing: the result register is written at the clock edge that ends the
// triggering cycle, so the result can be moved by the very next instruction
// (latency 1). The output keeps its value until the next trigger.
// Interface: en is the PE's clock enable (low while the PE is halted or the
// array sleeps). Reset clears in2 and the result.
module tta_alu
  import tta_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    en,
  input  logic    in2_we,   // move to ALU.in2
  input  logic    trig,     // move to ALU.in1t.<op>
  input  alu_op_e op,
  input  word_t   din,      // bus value
  output word_t   dout      // ALU.out1
);
  word_t in2_q;
  word_t res;

  always_comb begin
    unique case (op)
      ALU_ADD: res = din + in2_q;
      ALU_SUB: res = din - in2_q;
      ALU_EQ:  res = word_t'(din == in2_q);
      ALU_GT:  res = word_t'($signed(din) > $signed(in2_q));
      ALU_GTU: res = word_t'(din > in2_q);
      default: res = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in2_q <= '0;
      dout  <= '0;
    end else if (en) begin
      if (in2_we) in2_q <= din;
      if (trig)   dout  <= res;
    end
  end
endmodule
