// tta_pe: one processing element of the array, a pruned single-bus TTA core.
//
// Function units on one move bus: ALU (add, sub, eq, gt, gtu), LOGIC (and,
// ior, xor), SHIFT (shl, shr, shru), the neighbour unit SFU (read_neighbour,
// read_index, write_shared), a boolean register file of 2 x 1 bit, a register
// file of 4 x 16 bits and the GCU (jump, call). This is the unit set of the
// paper's PE core. Each cycle the PE executes one 23-bit instruction = one
// move (decoded by tta_bus); a move into a trigger port starts that FU's
// operation, whose result is readable from the next cycle.
// The PE can be fed by one of NUM_IMEM shared instruction memories; imem_sel
// picks which one it executes (the paper: "each PE can multiplex between
// different instruction memories"). It sends its PC to all of them.
// Interface: en is the array clock enable (sleep), start restarts the program
// at address 0, halted says that the PE has reached its stop jump.
// nb_in/shared_out are the links to the eight neighbours; x_idx/y_idx are
// this PE's constant position in the array.
module tta_pe
  import tta_pkg::*;
#(
  parameter int unsigned NUM_IMEM = 2,
  parameter int unsigned PC_W     = 11,
  parameter int unsigned IDX_W    = 8,
  localparam int unsigned SEL_W   = (NUM_IMEM > 1) ? $clog2(NUM_IMEM) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             start,
  input  instr_t           instr_in [NUM_IMEM],
  input  logic [SEL_W-1:0] imem_sel,
  output logic [PC_W-1:0]  pc,
  input  word_t            nb_in [NUM_NB],
  input  logic [IDX_W-1:0] x_idx,
  input  logic [IDX_W-1:0] y_idx,
  output word_t            shared_out,
  output logic             halted
);
  instr_t     instr;
  word_t      bus_data;
  dst_e       dst;
  logic       run;
  word_t      src_val [11];
  word_t      alu_out, log_out, sh_out, sfu_out, ra;
  word_t      rf_regs [4];
  logic [1:0] bools;

  assign instr = (int'(imem_sel) < int'(NUM_IMEM)) ? instr_in[imem_sel] : instr_in[0];
  assign run   = en && !halted;

  assign src_val[S_ALU]   = alu_out;
  assign src_val[S_LOGIC] = log_out;
  assign src_val[S_SHIFT] = sh_out;
  assign src_val[S_SFU]   = sfu_out;
  assign src_val[S_BOOL0] = word_t'(bools[0]);
  assign src_val[S_BOOL1] = word_t'(bools[1]);
  assign src_val[S_RF0]   = rf_regs[0];
  assign src_val[S_RF1]   = rf_regs[1];
  assign src_val[S_RF2]   = rf_regs[2];
  assign src_val[S_RF3]   = rf_regs[3];
  assign src_val[S_RA]    = ra;

  tta_bus u_bus (
    .instr(instr), .guard_bit(bools[0]), .src_val(src_val),
    .bus_data(bus_data), .dst(dst), .squashed()
  );

  // Destination decode: which port this cycle's move writes.
  logic    alu_in2, alu_trig, log_in2, log_trig, sh_in2, sh_trig, sfu_trig;
  logic    bool_we, rf_we, jump, call;
  alu_op_e alu_op;
  log_op_e log_op;
  sh_op_e  sh_op;
  sfu_op_e sfu_op;

  always_comb begin
    alu_in2 = 1'b0; alu_trig = 1'b0; alu_op = ALU_ADD;
    log_in2 = 1'b0; log_trig = 1'b0; log_op = LOG_AND;
    sh_in2  = 1'b0; sh_trig  = 1'b0; sh_op  = SH_SHL;
    sfu_trig = 1'b0; sfu_op = SFU_RDNB;
    bool_we = 1'b0; rf_we = 1'b0; jump = 1'b0; call = 1'b0;
    unique case (dst)
      D_ALU_IN2:   alu_in2 = 1'b1;
      D_ALU_ADD:   begin alu_trig = 1'b1; alu_op = ALU_ADD; end
      D_ALU_SUB:   begin alu_trig = 1'b1; alu_op = ALU_SUB; end
      D_ALU_EQ:    begin alu_trig = 1'b1; alu_op = ALU_EQ;  end
      D_ALU_GT:    begin alu_trig = 1'b1; alu_op = ALU_GT;  end
      D_ALU_GTU:   begin alu_trig = 1'b1; alu_op = ALU_GTU; end
      D_LOG_IN2:   log_in2 = 1'b1;
      D_LOG_AND:   begin log_trig = 1'b1; log_op = LOG_AND; end
      D_LOG_IOR:   begin log_trig = 1'b1; log_op = LOG_IOR; end
      D_LOG_XOR:   begin log_trig = 1'b1; log_op = LOG_XOR; end
      D_SH_IN2:    sh_in2 = 1'b1;
      D_SH_SHL:    begin sh_trig = 1'b1; sh_op = SH_SHL;  end
      D_SH_SHR:    begin sh_trig = 1'b1; sh_op = SH_SHR;  end
      D_SH_SHRU:   begin sh_trig = 1'b1; sh_op = SH_SHRU; end
      D_SFU_RDNB:  begin sfu_trig = 1'b1; sfu_op = SFU_RDNB;  end
      D_SFU_RDIDX: begin sfu_trig = 1'b1; sfu_op = SFU_RDIDX; end
      D_SFU_WRSH:  begin sfu_trig = 1'b1; sfu_op = SFU_WRSH;  end
      D_BOOL0, D_BOOL1:             bool_we = 1'b1;
      D_RF0, D_RF1, D_RF2, D_RF3:   rf_we   = 1'b1;
      D_JUMP:      jump = 1'b1;
      D_CALL:      call = 1'b1;
      default:     ;
    endcase
  end

  logic       bool_waddr;
  logic [1:0] rf_waddr;
  assign bool_waddr = (dst == D_BOOL1);
  assign rf_waddr   = 2'(dst - D_RF0);

  tta_alu u_alu (
    .clk, .rst_n, .en(run), .in2_we(alu_in2), .trig(alu_trig), .op(alu_op),
    .din(bus_data), .dout(alu_out)
  );
  tta_logic u_logic (
    .clk, .rst_n, .en(run), .in2_we(log_in2), .trig(log_trig), .op(log_op),
    .din(bus_data), .dout(log_out)
  );
  tta_shift u_shift (
    .clk, .rst_n, .en(run), .in2_we(sh_in2), .trig(sh_trig), .op(sh_op),
    .din(bus_data), .dout(sh_out)
  );
  tta_sfu #(.IDX_W(IDX_W)) u_sfu (
    .clk, .rst_n, .en(run), .trig(sfu_trig), .op(sfu_op), .din(bus_data),
    .nb_in, .x_idx, .y_idx, .shared_out, .dout(sfu_out)
  );
  tta_boolrf #(.NREGS(2)) u_bool (
    .clk, .rst_n, .en(run), .we(bool_we), .waddr(bool_waddr),
    .din(bus_data[0]), .bits(bools)
  );
  tta_rf #(.NREGS(4)) u_rf (
    .clk, .rst_n, .en(run), .we(rf_we), .waddr(rf_waddr), .din(bus_data),
    .regs(rf_regs)
  );
  tta_gcu #(.PC_W(PC_W)) u_gcu (
    .clk, .rst_n, .en, .start, .jump, .call, .target(bus_data),
    .pc, .ra, .halted
  );
endmodule
