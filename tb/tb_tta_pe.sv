// tb_tta_pe: self-checking test of one processing element against an
// instruction-level reference model written here.
// Two instruction memories hold random programs (random sources, immediates,
// destinations, guards, jumps and calls); the PE runs them while the
// neighbour inputs change at random and imem_sel switches between the two
// memories. After every cycle the model's PC, RA, register file, boolean
// registers, FU results and Shared register are compared with the PE's. The
// run ends with a stop jump, after which the PE must report halted and keep
// its state; sleep (en low) must freeze it.
module tb_tta_pe;
  import tta_pkg::*;
  localparam int DEPTH = 256;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b1, start = 1'b0;
  instr_t instr_in [2];
  logic imem_sel = 1'b0;
  logic [7:0] pc;
  word_t nb_in [NUM_NB];
  logic [7:0] x_idx = 8'd3, y_idx = 8'd7;
  word_t shared_out;
  logic halted;
  int checks = 0, failures = 0;

  instr_t mem [2][DEPTH];
  assign instr_in[0] = mem[0][pc];
  assign instr_in[1] = mem[1][pc];

  tta_pe #(.NUM_IMEM(2), .PC_W(8)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference state.
  int    m_pc, m_ra;
  word_t m_rf [4];
  logic  m_b [2];
  word_t m_alu2, m_alu, m_log2, m_log, m_sh2, m_sh, m_sfu, m_shared;

  function automatic word_t src_value(instr_t ins);
    if (ins[16]) return ins[15:0];
    case (int'(ins[3:0]))
      0: return m_alu;   1: return m_log;   2: return m_sh;    3: return m_sfu;
      4: return word_t'(m_b[0]); 5: return word_t'(m_b[1]);
      6: return m_rf[0]; 7: return m_rf[1]; 8: return m_rf[2]; 9: return m_rf[3];
      10: return word_t'(m_ra);
      default: return '0;
    endcase
  endfunction

  // Executes one instruction in the model; returns 1 on a stop jump.
  function automatic bit step(instr_t ins);
    word_t v = src_value(ins);
    int d = int'(ins[21:17]);
    int next_pc = (m_pc + 1) % DEPTH;
    bit stop = 0;
    if (ins[22] && !m_b[0]) d = 31;
    case (d)
      0: m_alu2 = v;
      1: m_alu = v + m_alu2;
      2: m_alu = v - m_alu2;
      3: m_alu = (v == m_alu2) ? 16'd1 : 16'd0;
      4: m_alu = ($signed(v) > $signed(m_alu2)) ? 16'd1 : 16'd0;
      5: m_alu = (v > m_alu2) ? 16'd1 : 16'd0;
      6: m_log2 = v;
      7: m_log = v & m_log2;
      8: m_log = v | m_log2;
      9: m_log = v ^ m_log2;
      10: m_sh2 = v;
      11: m_sh = v << m_sh2[3:0];
      12: m_sh = word_t'($signed(v) >>> m_sh2[3:0]);
      13: m_sh = v >> m_sh2[3:0];
      14: m_sfu = nb_in[v[2:0]];
      15: m_sfu = v[0] ? word_t'(y_idx) : word_t'(x_idx);
      16: m_shared = v;
      17: m_b[0] = v[0];
      18: m_b[1] = v[0];
      19, 20, 21, 22: m_rf[d-19] = v;
      23: begin next_pc = int'(v) % DEPTH; stop = (next_pc == m_pc); end
      24: begin m_ra = m_pc + 1; next_pc = int'(v) % DEPTH; end
      default: ;
    endcase
    m_pc = next_pc;
    return stop;
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0h expected %0h (pc %0d)", what, got, exp, m_pc);
    end
  endtask

  task automatic compare();
    check("pc", int'(pc), m_pc);
    check("ra", int'(dut.ra), m_ra);
    for (int r = 0; r < 4; r++) check($sformatf("rf%0d", r), int'(dut.rf_regs[r]), int'(m_rf[r]));
    check("b0", int'(dut.bools[0]), int'(m_b[0]));
    check("b1", int'(dut.bools[1]), int'(m_b[1]));
    check("alu", int'(dut.alu_out), int'(m_alu));
    check("logic", int'(dut.log_out), int'(m_log));
    check("shift", int'(dut.sh_out), int'(m_sh));
    check("sfu", int'(dut.sfu_out), int'(m_sfu));
    check("shared", int'(shared_out), int'(m_shared));
  endtask

  function automatic instr_t rand_instr();
    int d = $urandom_range(0, 25);
    logic g = ($urandom_range(0, 3) == 0);
    if (d == 25) d = 31;
    if (d == 23 || d == 24) begin
      // jumps and calls: rare, to a random address that is not the current one
      if ($urandom_range(0, 3) != 0) d = 19;
    end
    if ($urandom_range(0, 2) == 0 || d == 23 || d == 24)
      return mi((d == 23 || d == 24) ? word_t'($urandom_range(1, DEPTH-2)) : word_t'($urandom), dst_e'(d), g);
    return mv(src_e'($urandom_range(0, 10)), dst_e'(d), g);
  endfunction

  initial begin
    bit stopped;
    for (int m = 0; m < 2; m++)
      for (int a = 0; a < DEPTH; a++) mem[m][a] = rand_instr();
    for (int k = 0; k < NUM_NB; k++) nb_in[k] = word_t'($urandom);
    m_pc = 0; m_ra = 0; m_b[0] = 0; m_b[1] = 0;
    for (int r = 0; r < 4; r++) m_rf[r] = '0;
    m_alu2 = '0; m_alu = '0; m_log2 = '0; m_log = '0; m_sh2 = '0; m_sh = '0; m_sfu = '0; m_shared = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check("halted after reset", int'(halted), 1);
    start = 1'b1; @(negedge clk); start = 1'b0;
    for (int i = 0; i < 6000; i++) begin
      instr_t ins;
      if (i % 500 == 0) imem_sel = ~imem_sel;
      for (int k = 0; k < NUM_NB; k++) nb_in[k] = word_t'($urandom);
      x_idx = 8'($urandom); y_idx = 8'($urandom);
      en = ($urandom_range(0, 15) != 0);
      // never a jump to its own address during the random run
      ins = mem[imem_sel][m_pc];
      if ((ins[21:17] == 5'd23 || ins[21:17] == 5'd24) && ins[16] && int'(ins[15:0]) % DEPTH == m_pc) begin
        mem[imem_sel][m_pc] = nop(); ins = nop();
      end
      #1;
      if (en) void'(step(ins));
      @(negedge clk);
      compare();
    end
    // stop jump at the current address
    en = 1'b1;
    mem[imem_sel][m_pc] = mi(word_t'(m_pc), D_JUMP);
    #1 stopped = step(mem[imem_sel][m_pc]);
    @(negedge clk);
    check("halted", int'(halted), 1);
    check("model stop", int'(stopped), 1);
    repeat (4) @(negedge clk);
    compare();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
