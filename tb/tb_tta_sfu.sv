// tb_tta_sfu: self-checking test of the neighbour communication unit.
// Drives random values on the eight neighbour inputs and checks that
// read_neighbour d returns input d one cycle after the trigger, read_index 0/1
// returns X/Y, write_shared updates the Shared register (and only it), and
// that en = 0 blocks all three operations.
module tb_tta_sfu;
  import tta_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b1, trig = 1'b0;
  sfu_op_e op = SFU_RDNB;
  word_t din = '0, dout, shared_out;
  word_t nb_in [NUM_NB];
  logic [7:0] x_idx = 8'd5, y_idx = 8'd9;
  int checks = 0, failures = 0;

  tta_sfu dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, word_t got, word_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic move(sfu_op_e o, word_t v);
    @(negedge clk); trig = 1'b1; op = o; din = v;
    @(negedge clk); trig = 1'b0; din = word_t'($urandom);
  endtask

  initial begin
    word_t sh, prev;
    for (int d = 0; d < NUM_NB; d++) nb_in[d] = word_t'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check("reset shared", shared_out, '0);
    sh = '0;
    for (int i = 0; i < 1000; i++) begin
      int d;
      for (int k = 0; k < NUM_NB; k++) nb_in[k] = word_t'($urandom);
      d = $urandom_range(0, 7);
      x_idx = 8'($urandom); y_idx = 8'($urandom);
      move(SFU_RDNB, word_t'(d));
      check($sformatf("read_neighbour %0d", d), dout, nb_in[d]);
      check("shared untouched", shared_out, sh);
      move(SFU_RDIDX, 16'd0);
      check("read_index X", dout, word_t'(x_idx));
      move(SFU_RDIDX, 16'd1);
      check("read_index Y", dout, word_t'(y_idx));
      prev = dout;
      sh = word_t'($urandom);
      move(SFU_WRSH, sh);
      check("write_shared", shared_out, sh);
      check("output untouched by write", dout, prev);
      if (i % 9 == 0) begin
        en = 1'b0;
        move(SFU_WRSH, ~sh);
        move(SFU_RDNB, 16'd2);
        en = 1'b1;
        check("frozen shared", shared_out, sh);
        check("frozen out", dout, prev);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
