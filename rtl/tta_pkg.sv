// tta_pkg: shared types, constants and the instruction encoding of the
// transport-triggered (TTA) processing element used in the array.
//
// Each PE is a single-bus TTA core: one instruction moves one value from a
// source port to a destination port per cycle, and writing a "trigger"
// destination starts an operation in a function unit (FU). The opcode is part
// of the destination, as in the usual TTA notation "RF.1 -> ALU.in1t.add".
//
// Instruction word, 23 bits (the width and the 16-bit short immediate are the
// paper's numbers; the field layout is this design's own choice, picked so
// that both numbers fit exactly):
//   [22]    guard : 1 = the move happens only when boolean register 0 is set
//   [21:17] dst   : destination port / operation (dst_e)
//   [16]    imm   : 1 = the source is the 16-bit short immediate in [15:0]
//   [15:0]  src   : immediate value, or a source port number (src_e) in [3:0]
// Data width is 16 bits (register files hold 16-bit values).
package tta_pkg;

  localparam int unsigned DATA_W  = 16;
  localparam int unsigned INSTR_W = 23;
  localparam int unsigned DST_W   = 5;
  localparam int unsigned SRC_W   = 4;
  localparam int unsigned NUM_NB  = 8;   // eight neighbour directions

  typedef logic [DATA_W-1:0]  word_t;
  typedef logic [INSTR_W-1:0] instr_t;

  // Neighbour direction numbers given as the operand of read_neighbour
  // (0 = North, then clockwise, the order in which the paper lists them).
  typedef enum logic [2:0] {
    NB_N  = 3'd0, NB_NE = 3'd1, NB_E  = 3'd2, NB_SE = 3'd3,
    NB_S  = 3'd4, NB_SW = 3'd5, NB_W  = 3'd6, NB_NW = 3'd7
  } nb_dir_e;

  // Source ports readable by the bus.
  typedef enum logic [SRC_W-1:0] {
    S_ALU   = 4'd0,  S_LOGIC = 4'd1,  S_SHIFT = 4'd2,  S_SFU = 4'd3,
    S_BOOL0 = 4'd4,  S_BOOL1 = 4'd5,
    S_RF0   = 4'd6,  S_RF1   = 4'd7,  S_RF2   = 4'd8,  S_RF3 = 4'd9,
    S_RA    = 4'd10
  } src_e;

  // Destination ports. "T" entries are trigger ports that start an operation.
  typedef enum logic [DST_W-1:0] {
    D_ALU_IN2   = 5'd0,
    D_ALU_ADD   = 5'd1,  D_ALU_SUB   = 5'd2,  D_ALU_EQ    = 5'd3,
    D_ALU_GT    = 5'd4,  D_ALU_GTU   = 5'd5,
    D_LOG_IN2   = 5'd6,
    D_LOG_AND   = 5'd7,  D_LOG_IOR   = 5'd8,  D_LOG_XOR   = 5'd9,
    D_SH_IN2    = 5'd10,
    D_SH_SHL    = 5'd11, D_SH_SHR    = 5'd12, D_SH_SHRU   = 5'd13,
    D_SFU_RDNB  = 5'd14, D_SFU_RDIDX = 5'd15, D_SFU_WRSH  = 5'd16,
    D_BOOL0     = 5'd17, D_BOOL1     = 5'd18,
    D_RF0       = 5'd19, D_RF1       = 5'd20, D_RF2       = 5'd21, D_RF3 = 5'd22,
    D_JUMP      = 5'd23, D_CALL      = 5'd24,
    D_NOP       = 5'd31
  } dst_e;

  // Operation codes inside the FUs.
  typedef enum logic [2:0] {
    ALU_ADD = 3'd0, ALU_SUB = 3'd1, ALU_EQ = 3'd2, ALU_GT = 3'd3, ALU_GTU = 3'd4
  } alu_op_e;
  typedef enum logic [1:0] { LOG_AND = 2'd0, LOG_IOR = 2'd1, LOG_XOR = 2'd2 } log_op_e;
  typedef enum logic [1:0] { SH_SHL = 2'd0, SH_SHR = 2'd1, SH_SHRU = 2'd2 } sh_op_e;
  typedef enum logic [1:0] { SFU_RDNB = 2'd0, SFU_RDIDX = 2'd1, SFU_WRSH = 2'd2 } sfu_op_e;

  // Assembler helpers: build one instruction word.
  // Move from a source port: mv(S_RF0, D_ALU_ADD) is "RF.0 -> ALU.in1t.add".
  function automatic instr_t mv(src_e s, dst_e d, logic guarded = 1'b0);
    return {guarded, d, 1'b0, 12'd0, s};
  endfunction

  // Move of a short immediate: mi(5, D_SFU_RDNB) is "5 -> SFU.in1t.read_neighbour".
  function automatic instr_t mi(word_t v, dst_e d, logic guarded = 1'b0);
    return {guarded, d, 1'b1, v};
  endfunction

  function automatic instr_t nop();
    return {1'b0, D_NOP, 1'b0, 16'd0};
  endfunction

endpackage
