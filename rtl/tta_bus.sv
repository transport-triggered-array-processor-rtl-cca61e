// tta_bus: transport bus and instruction decoder of the TTA processing element.
//
// The PE has a single move bus: each 23-bit instruction names one source and
// one destination. This unit decodes the instruction (layout in tta_pkg),
// selects the source onto the bus (a 16-bit short immediate, or one of the
// FU output / register ports) and passes the destination on. A guarded move
// ([22] set) whose guard, boolean register 0, is clear is squashed: the
// destination becomes D_NOP, so no register and no FU sees it.
// The single bus follows the core diagram of the paper; the field layout, the
// port numbering and the guard (only "?bool.0", the guard used in the paper's
// LBP code) are this design's own choices. Purely combinational.
module tta_bus
  import tta_pkg::*;
(
  input  instr_t instr,
  input  logic   guard_bit,            // boolean register 0
  input  word_t  src_val [11],         // indexed by src_e
  output word_t  bus_data,
  output dst_e   dst,                  // D_NOP when squashed
  output logic   squashed
);
  logic       guarded, is_imm;
  logic [3:0] src_sel;
  dst_e       dst_raw;

  assign guarded  = instr[22];
  assign dst_raw  = dst_e'(instr[21:17]);
  assign is_imm   = instr[16];
  assign src_sel  = instr[3:0];
  assign squashed = guarded && !guard_bit;
  assign dst      = squashed ? D_NOP : dst_raw;

  always_comb begin
    if (is_imm)              bus_data = instr[15:0];
    else if (src_sel <= 4'd10) bus_data = src_val[src_sel];
    else                     bus_data = '0;
  end
endmodule
