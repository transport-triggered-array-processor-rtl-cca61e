// tta_sfu: neighbour communication function unit (the "special FU").
//
// The unit that links a PE to its eight adjacent PEs. It has one input port
// on the PE bus (a trigger port that carries the operation) and one output
// port, plus nine external ports: eight neighbour inputs and the output of
// this PE's Shared register. Three operations:
//   read_neighbour  operand d (0..7 = N, NE, E, SE, S, SW, W, NW): out = nb_in[d]
//   read_index      operand 0 -> out = X (column) index, 1 -> Y (row) index
//   write_shared    Shared register = operand; neighbours see it from the
//                   next cycle on. The Shared register can only be read from
//                   outside (by the neighbours), not by its own PE.
// The ports, the three operations, the direction numbering and the index
// numbering follow the paper. The PE indices arrive as constant inputs that
// the array ties off. Latency 1 for read_neighbour/read_index, like the other
// FUs; the unit samples the neighbours' Shared registers as they are at the
// trigger cycle. Only bits [2:0] (direction) and [0] (index) of the operand
// are used. Reset clears the output and the Shared register.
module tta_sfu
  import tta_pkg::*;
#(
  parameter int unsigned IDX_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             trig,
  input  sfu_op_e          op,
  input  word_t            din,
  input  word_t            nb_in [NUM_NB],   // neighbours' Shared registers
  input  logic [IDX_W-1:0] x_idx,            // horizontal index (column)
  input  logic [IDX_W-1:0] y_idx,            // vertical index (row)
  output word_t            shared_out,       // this PE's Shared register
  output word_t            dout              // CustomFU.output
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dout       <= '0;
      shared_out <= '0;
    end else if (en && trig) begin
      unique case (op)
        SFU_RDNB:  dout <= nb_in[din[2:0]];
        SFU_RDIDX: dout <= din[0] ? word_t'(y_idx) : word_t'(x_idx);
        SFU_WRSH:  shared_out <= din;
        default:   ;
      endcase
    end
  end
endmodule
