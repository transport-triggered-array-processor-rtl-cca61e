// tta_rf: general register file of the TTA processing element.
//
// NREGS registers of 16 bits (four in the paper's pruned core). One write
// port from the bus, and every register visible as a bus source (the bus
// selects one per cycle). Write timing: the value is stored at the end of the
// cycle that moves it and is readable from the next cycle.
// Reset clears all registers.
module tta_rf
  import tta_pkg::*;
#(
  parameter int unsigned NREGS = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(NREGS)-1:0] waddr,
  input  word_t                    din,
  output word_t                    regs [NREGS]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
    end else if (en && we) begin
      regs[waddr] <= din;
    end
  end
endmodule
