// tta_logic: bitwise logic function unit of the TTA processing element.
//
// Operations and, ior and xor on 16-bit words. Operand 2 is latched by a move
// to LOGIC.in2; a move to LOGIC.in1t.<op> supplies operand 1 and starts the
// operation: out = in1 <op> in2.
// Timing: latency 1, the result is readable by the next instruction and held
// until the next trigger. en is the PE clock enable; reset clears the unit.
module tta_logic
  import tta_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    en,
  input  logic    in2_we,
  input  logic    trig,
  input  log_op_e op,
  input  word_t   din,
  output word_t   dout
);
  word_t in2_q;
  word_t res;

  always_comb begin
    unique case (op)
      LOG_AND: res = din & in2_q;
      LOG_IOR: res = din | in2_q;
      LOG_XOR: res = din ^ in2_q;
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
