// tta_gcu: global control unit of the TTA processing element.
//
// Holds the program counter and provides the jump and call operations. A move
// to GCU.jump loads the PC with the bus value; a move to GCU.call also stores
// the return address (PC+1) in RA, which is a bus source, so "RA -> GCU.jump"
// returns. Otherwise the PC advances by one instruction per enabled cycle.
// Jumps take effect on the next cycle: there are no delay slots, since the
// instruction memory is read combinationally in this design.
// Control around the paper's GCU (this design's own choice): after reset the
// unit is halted; start clears the PC to 0 and releases it. A taken jump to
// its own address ("stop: -> jump stop") halts the PE; halted stops the
// fetch and serves the array's done signal. en is the array clock enable
// (low while the array sleeps).
module tta_gcu
  import tta_pkg::*;
#(
  parameter int unsigned PC_W = 11
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en,
  input  logic            start,
  input  logic            jump,
  input  logic            call,
  input  word_t           target,
  output logic [PC_W-1:0] pc,
  output word_t           ra,
  output logic            halted
);
  logic [PC_W-1:0] tgt;
  assign tgt = target[PC_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc     <= '0;
      ra     <= '0;
      halted <= 1'b1;
    end else if (start) begin
      pc     <= '0;
      halted <= 1'b0;
    end else if (en && !halted) begin
      if (jump) begin
        pc <= tgt;
        if (tgt == pc) halted <= 1'b1;
      end else if (call) begin
        ra <= word_t'(pc) + word_t'(1);
        pc <= tgt;
      end else begin
        pc <= pc + 1'b1;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(jump && call))
    else $error("tta_gcu: jump and call in the same cycle");
endmodule
