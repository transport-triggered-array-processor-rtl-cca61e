// tb_tta_bus: self-checking test of the instruction decoder / move bus.
// Random instructions; the expected bus value and destination are decoded
// here from the field layout independently of the unit: immediate vs source
// port, guard squash when boolean register 0 is clear, and the assembler
// helpers mv/mi of the package.
module tb_tta_bus;
  import tta_pkg::*;
  instr_t instr = '0;
  logic   guard_bit = 1'b0;
  word_t  src_val [11];
  word_t  bus_data;
  dst_e   dst;
  logic   squashed;
  int checks = 0, failures = 0;

  tta_bus dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    for (int i = 0; i < 5000; i++) begin
      logic g, imm;
      logic [4:0] d;
      logic [15:0] v;
      int s, exp_bus, exp_dst;
      for (int k = 0; k < 11; k++) src_val[k] = word_t'($urandom);
      g = 1'($urandom); imm = 1'($urandom); d = 5'($urandom_range(0, 24));
      s = $urandom_range(0, 10); v = 16'($urandom);
      guard_bit = 1'($urandom);
      if (imm) instr = mi(v, dst_e'(d), g);
      else     instr = mv(src_e'(s), dst_e'(d), g);
      #1;
      exp_bus = imm ? int'(v) : int'(src_val[s]);
      exp_dst = (g && !guard_bit) ? 31 : int'(d);
      check("bus", int'(bus_data), exp_bus);
      check("dst", int'(dst), exp_dst);
      check("squash", int'(squashed), int'(g && !guard_bit));
      check("layout", int'(instr[21:17]), int'(d));
    end
    instr = nop(); #1;
    check("nop", int'(dst), 31);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
