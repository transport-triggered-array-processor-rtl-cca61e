// tb_tta_imem: self-checking test of the shared instruction memory.
// A small instance (DEPTH 64, 5 read ports): writes a pattern, then reads it
// through every port at random addresses, including ports that read the same
// address, and rewrites some words.
module tb_tta_imem;
  import tta_pkg::*;
  localparam int D = 64, N = 5;
  logic clk = 1'b0, we = 1'b0;
  logic [5:0] waddr = '0;
  instr_t wdata = '0;
  logic [5:0] raddr [N];
  instr_t rdata [N];
  instr_t ref_q [D];
  int checks = 0, failures = 0;

  tta_imem #(.DEPTH(D), .NPORTS(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < N; p++) raddr[p] = '0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = 1'b1; waddr = 6'(a); wdata = instr_t'($urandom); ref_q[a] = wdata;
    end
    @(negedge clk); we = 1'b0;
    for (int i = 0; i < 2000; i++) begin
      automatic int same = $urandom_range(0, 63);
      for (int p = 0; p < N; p++) raddr[p] = (i % 3 == 0) ? 6'(same) : 6'($urandom);
      if (i % 4 == 0) begin
        we = 1'b1; waddr = 6'($urandom); wdata = instr_t'($urandom);
      end
      #1;
      for (int p = 0; p < N; p++) begin
        checks++;
        if (rdata[p] !== ref_q[raddr[p]]) begin
          failures++;
          $display("FAIL port %0d addr %0d: got %h expected %h", p, raddr[p], rdata[p], ref_q[raddr[p]]);
        end
      end
      @(negedge clk);
      if (we) ref_q[waddr] = wdata;
      we = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
