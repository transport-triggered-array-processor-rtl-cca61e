// tta_shift: shifter function unit of the TTA processing element.
//
// Operations shl (left), shr (arithmetic right) and shru (logical right).
// The value to shift is the trigger operand (SHIFT.in1t.<op>); the shift
// amount is operand 2, latched by a move to SHIFT.in2, of which the low four
// bits are used (a 16-bit word never needs more).
// Timing: latency 1, result readable by the next instruction and held until
// the next trigger. en is the PE clock enable; reset clears the unit.
module tta_shift
  import tta_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    en,
  input  logic    in2_we,
  input  logic    trig,
  input  sh_op_e  op,
  input  word_t   din,
  output word_t   dout
);
  word_t      in2_q;
  word_t      res;
  logic [3:0] amt;

  assign amt = in2_q[3:0];

  always_comb begin
    unique case (op)
      SH_SHL:  res = din << amt;
      SH_SHR:  res = word_t'($signed(din) >>> amt);
      SH_SHRU: res = din >> amt;
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
