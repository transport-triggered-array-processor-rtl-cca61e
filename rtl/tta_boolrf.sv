// tta_boolrf: boolean register file of the TTA processing element.
//
// NREGS one-bit registers (two in the paper's core) that hold the outcome of
// comparisons. A move to BOOL.i stores bit 0 of the bus value. Register 0 is
// the guard that predicates guarded moves (see tta_bus). Reading a boolean
// register as a source gives 0 or 1 as a 16-bit word.
// Timing: written at the end of the moving cycle, visible the next cycle.
// Reset clears the registers.
module tta_boolrf
  import tta_pkg::*;
#(
  parameter int unsigned NREGS = 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(NREGS)-1:0] waddr,
  input  logic                     din,
  output logic [NREGS-1:0]         bits
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          bits <= '0;
    else if (en && we)   bits[waddr] <= din;
  end
endmodule
