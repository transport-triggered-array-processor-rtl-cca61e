// tb_tta_array_full: the end-to-end test of tb_tta_array on the array at its
// default size (10 x 11 PEs, two 2048-word instruction memories).
//
// Each run loads programs into the instruction memories, starts the array,
// feeds a random 8-bit image into the west edge one column per load pass
// (standing in for the column ADCs), lets every PE compute its pixel's
// result, then collects the results column by column from the east edge and
// compares them with reference values computed in tta_prog_pkg from the same
// image. Runs: LBP, 3x3 box sum (binary weights), 3x3 integer-weight
// convolution (shift-and-add subroutine via call/return), 2x2/stride-2 and
// 3x3/stride-3 max-pooling with idle PEs selected by their indices, and two
// runs with the PEs split at random between the two instruction memories
// (LBP against box sum, and an X/Y index test), and the 4 x 4 max-pooling
// example of the paper's Fig. 5 with its printed 2 x 2 result. The array is put to sleep at
// random cycles during some runs.
// Also checked: the LBP kernel takes 74 cycles; done rises only at the end.
// Mechanisms counted (each must occur): reads of all eight neighbour
// directions, index reads, Shared writes, direct SFU-to-Shared data passing,
// squashed guarded moves, taken jumps, calls, returns, halts, sleep cycles,
// PEs running from memory 1, columns fed in and columns collected.
module tb_tta_array_full;
  import tta_pkg::*;
  import tta_prog_pkg::*;

  localparam int ROWS = 10;
  localparam int COLS = 11;
  localparam int NUM_IMEM = 2;
  localparam int DEPTH = 2048;
  localparam int PC_W = $clog2(DEPTH);
  localparam int MAXC = 2000000;

  logic              clk = 1'b0, rst_n = 1'b0, start = 1'b0, sleep = 1'b0;
  logic              imem_we = 1'b0;
  logic [0:0]        imem_wsel = '0;
  logic [PC_W-1:0]   imem_waddr = '0;
  instr_t            imem_wdata = '0;
  logic [0:0]        pe_imem_sel [ROWS][COLS];
  word_t             west_in [ROWS];
  word_t             east_out [ROWS];
  logic              done;

  tta_array dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (MAXC) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 30) $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  // ------------------------------------------------------------ edge models
  img_t       img;
  int         res [ROWS][COLS];
  bit         running = 1'b0;
  int         load_rd, unl_wr, kst, klen;
  int         fed, got;
  int         sleep_pct = 0;
  int         kcycles, kbeg;
  bit         fig5 = 1'b0;

  // mechanism counters
  int n_nb [8];
  int n_idx = 0, n_wrsh = 0, n_pass = 0, n_squash = 0, n_jump = 0, n_call = 0, n_ret = 0;
  int n_halt = 0, n_sleep = 0, n_grp1 = 0, n_fed = 0, n_got = 0;

  always @(negedge clk) begin
    if (running) begin
      sleep = ($urandom_range(0, 99) < sleep_pct);
      if (sleep) n_sleep++;
      if (!sleep && int'(dut.pe_pc[0]) == load_rd && fed < COLS) begin
        for (int r = 0; r < ROWS; r++) west_in[r] = word_t'(img[r][COLS-1-fed]);
        fed++; n_fed++;
      end else begin
        for (int r = 0; r < ROWS; r++) west_in[r] = '0;
      end
      if (!sleep && int'(dut.pe_pc[0]) == unl_wr && got < COLS) begin
        for (int r = 0; r < ROWS; r++) res[r][COLS-1-got] = int'(east_out[r]);
        got++; n_got++;
      end
      // kernel cycles, not counting cycles spent asleep
      if (!sleep && int'(dut.pe_pc[0]) == kst && kbeg < 0) kbeg = 0;
      if (!sleep && int'(dut.pe_pc[0]) == kst + klen && kbeg >= 0 && kcycles < 0)
        kcycles = kbeg;
      if (!sleep && kbeg >= 0 && kcycles < 0) kbeg++;
    end else begin
      sleep = 1'b0;
    end
  end

  // Mechanism monitor on PE (1,1), an interior PE.
  always @(negedge clk) begin
    if (dut.g_row[1].g_col[1].u_pe.run) begin
      automatic dst_e  d = dut.g_row[1].g_col[1].u_pe.dst;
      automatic instr_t ins = dut.g_row[1].g_col[1].u_pe.instr;
      if (dut.g_row[1].g_col[1].u_pe.u_bus.squashed) n_squash++;
      case (d)
        D_SFU_RDNB:  n_nb[dut.g_row[1].g_col[1].u_pe.bus_data[2:0]]++;
        D_SFU_RDIDX: n_idx++;
        D_SFU_WRSH:  begin n_wrsh++; if (!ins[16] && ins[3:0] == 4'(S_SFU)) n_pass++; end
        D_JUMP:      begin n_jump++; if (!ins[16] && ins[3:0] == 4'(S_RA)) n_ret++; end
        D_CALL:      n_call++;
        default: ;
      endcase
    end
  end
  always @(negedge clk) begin
    if (running && !sleep) begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++)
          if (pe_imem_sel[r][c] == 1'b1 && !dut.halted[r*COLS+c]) n_grp1++;
    end
  end

  // ------------------------------------------------------------ one run
  task automatic load_prog(int m, prog_t p);
    if (p.size() > DEPTH) begin
      failures++;
      $display("FAIL program of %0d words does not fit %0d", p.size(), DEPTH);
    end
    foreach (p[a]) begin
      @(negedge clk);
      imem_we = 1'b1; imem_wsel = 1'(m); imem_waddr = PC_W'(a); imem_wdata = p[a];
    end
    @(negedge clk);
    imem_we = 1'b0;
  endtask

  // mode 0: all PEs run memory 0; 1: all run memory 1; 2: random split.
  task automatic run(string name, kernel_e k0, kernel_e k1, int mode, int slp);
    prog_t p0, p1;
    prog_info_t i0, i1;
    int w [9];
    int pad, t0, maxi, exp_v;
    bit sel;
    maxi = (ROWS > COLS ? ROWS : COLS) - 1;
    img = new[ROWS];
    foreach (img[r]) begin
      img[r] = new[COLS];
      foreach (img[r][c]) img[r][c] = $urandom_range(0, 255);
    end
    foreach (w[i]) w[i] = $urandom_range(0, 15);
    if (fig5) begin
      // the 4 x 4 input of the paper's max-pooling example (Fig. 5)
      int f [4][4] = '{'{6, 4, 1, 6}, '{7, 0, 8, 6}, '{2, 1, 0, 0}, '{3, 8, 4, 5}};
      for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) img[r][c] = f[r][c];
      for (int r = 0; r < ROWS; r++) for (int c = 4; c < COLS; c++) img[r][c] = 0;
      for (int r = 4; r < ROWS; r++) for (int c = 0; c < COLS; c++) img[r][c] = 0;
    end
    // common kernel length so that both groups stay in lockstep
    i0 = build(p0, k0, COLS, maxi, w, 0, 1'b0);
    i1 = build(p1, k1, COLS, maxi, w, 0, 1'b1);
    pad = (i0.kernel_len > i1.kernel_len) ? i0.kernel_len : i1.kernel_len;
    i0 = build(p0, k0, COLS, maxi, w, pad, 1'b0);
    i1 = build(p1, k1, COLS, maxi, w, pad, 1'b1);
    if (mode != 1) load_prog(0, p0);
    if (mode != 0) load_prog(1, p1);
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        pe_imem_sel[r][c] = (mode == 0) ? 1'b0 : (mode == 1) ? 1'b1 : 1'($urandom);
    // PE (0,0) paces the edge models; both programs share the frame addresses
    load_rd = (mode == 1) ? i1.load_rd : i0.load_rd;
    unl_wr  = (mode == 1) ? i1.unl_wr  : i0.unl_wr;
    kst     = (mode == 1) ? i1.kernel_start : i0.kernel_start;
    klen    = (mode == 1) ? i1.kernel_len   : i0.kernel_len;
    fed = 0; got = 0; kbeg = -1; kcycles = -1;
    sleep_pct = slp;
    check({name, ": done before start"}, int'(done), 1);
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0; running = 1'b1;
    t0 = cyc;
    check({name, ": running"}, int'(done), 0);
    while (!done && cyc - t0 < 1000000) @(negedge clk);
    running = 1'b0;
    n_halt++;
    check({name, ": done"}, int'(done), 1);
    check({name, ": columns fed"}, fed, COLS);
    check({name, ": columns collected"}, got, COLS);
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        sel = pe_imem_sel[r][c];
        exp_v = expect_px(sel ? k1 : k0, img, r, c, w, sel);
        check($sformatf("%s: PE[%0d,%0d] (mem %0d)", name, r, c, sel), res[r][c], exp_v);
      end
    $display("%s: %0d cycles in all, kernel %0d cycles, program %0d/%0d words",
             name, cyc - t0, kcycles, p0.size(), p1.size());
    if (k0 == K_LBP && mode == 0 && slp == 0) check("LBP kernel cycles (74 in the paper)", kcycles, 74);
  endtask

  initial begin
    foreach (n_nb[i]) n_nb[i] = 0;
    for (int r = 0; r < ROWS; r++) begin
      west_in[r] = '0;
      for (int c = 0; c < COLS; c++) pe_imem_sel[r][c] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    run("LBP",            K_LBP,   K_LBP,   0, 0);
    run("box sum",        K_BOX,   K_BOX,   1, 0);
    run("integer conv",   K_CONV,  K_CONV,  0, 10);
    run("max-pool 2x2",   K_POOL2, K_POOL2, 1, 0);
    fig5 = 1'b1;
    run("Fig. 5 example", K_POOL2, K_POOL2, 0, 0);
    fig5 = 1'b0;
    // the printed 2 x 2 output of Fig. 5: 7 8 / 8 5
    check("Fig. 5 out (0,0)", res[0][0], 7);
    check("Fig. 5 out (0,1)", res[0][2], 8);
    check("Fig. 5 out (1,0)", res[2][0], 8);
    check("Fig. 5 out (1,1)", res[2][2], 5);
    run("max-pool 3x3",   K_POOL3, K_POOL3, 0, 5);
    run("LBP | box",      K_LBP,   K_BOX,   2, 5);
    run("index X | Y",    K_INDEX, K_INDEX, 2, 0);
    for (int d = 0; d < 8; d++) check($sformatf("neighbour %0d read", d), int'(n_nb[d] > 0), 1);
    check("index reads",  int'(n_idx > 0), 1);
    check("shared writes", int'(n_wrsh > 0), 1);
    check("data passing", int'(n_pass > 0), 1);
    check("guard squash", int'(n_squash > 0), 1);
    check("jumps",        int'(n_jump > 0), 1);
    check("calls",        int'(n_call > 0), 1);
    check("returns",      int'(n_ret > 0), 1);
    check("halts",        int'(n_halt > 0), 1);
    check("sleep",        int'(n_sleep > 0), 1);
    check("memory 1",     int'(n_grp1 > 0), 1);
    check("columns in",   int'(n_fed > 0), 1);
    check("columns out",  int'(n_got > 0), 1);
    $display("mechanisms: nb reads %0d %0d %0d %0d %0d %0d %0d %0d, index %0d, shared writes %0d, data passing %0d,",
             n_nb[0], n_nb[1], n_nb[2], n_nb[3], n_nb[4], n_nb[5], n_nb[6], n_nb[7], n_idx, n_wrsh, n_pass);
    $display("  squashed %0d, jumps %0d, calls %0d, returns %0d, halts %0d, sleep cycles %0d, memory-1 PE cycles %0d, columns in %0d out %0d",
             n_squash, n_jump, n_call, n_ret, n_halt, n_sleep, n_grp1, n_fed, n_got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
