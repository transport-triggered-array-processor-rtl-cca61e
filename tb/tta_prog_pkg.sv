// tta_prog_pkg: test programs for the TTA array, built with the assembler
// helpers of tta_pkg, and the matching reference results.
//
// Every program has the same frame:
//   load    COLS passes of "read West neighbour -> write Shared": the image
//           enters column by column through the west edge (one column from
//           the column ADCs per pass) and ripples east. Afterwards the last
//           value read is the PE's own pixel; it is kept in RF.1.
//   kernel  the image operation (LBP, box sum, integer-weight convolution,
//           max-pooling, index test), padded with leading no-ops to a common
//           length when two programs must stay in lockstep. Each kernel ends
//           by writing its result into the Shared register.
//   unload  COLS passes of the same West-to-own move: results leave through
//           the east edge one column per pass.
//   stop    a jump to its own address, which halts the PE.
// Subroutines (the multiply of the convolution) follow the stop.
// load_rd / unl_wr are the addresses of the loop moves the test bench uses
// to feed and collect columns at the array edges.
package tta_prog_pkg;
  import tta_pkg::*;

  typedef instr_t prog_t [$];

  typedef enum int { K_LBP, K_BOX, K_CONV, K_POOL2, K_POOL3, K_INDEX } kernel_e;

  // Addresses that the test bench watches.
  typedef struct {
    int load_rd;
    int unl_wr;
    int kernel_start;
    int kernel_len;
  } prog_info_t;

  // Count-down loop around a "read West, write Shared" pass, n passes.
  // Registers used: RF.0 counter.
  function automatic void emit_pass_loop(ref prog_t p, input int n, output int rd_addr);
    int l;
    p.push_back(mi(word_t'(n), D_RF0));
    l = p.size();
    rd_addr = l;
    p.push_back(mi(word_t'(NB_W), D_SFU_RDNB));
    p.push_back(mv(S_SFU, D_SFU_WRSH));
    p.push_back(mi(16'hFFFF, D_ALU_IN2));
    p.push_back(mv(S_RF0, D_ALU_ADD));
    p.push_back(mv(S_ALU, D_RF0));
    p.push_back(mi(16'd0, D_ALU_IN2));
    p.push_back(mv(S_RF0, D_ALU_GT));
    p.push_back(mv(S_ALU, D_BOOL0));
    p.push_back(mi(word_t'(l), D_JUMP, 1'b1));
  endfunction

  // LBP: code = sum over directions d of (neighbour_d >= centre) << d.
  // Centre in RF.1, code accumulates in RF.3. 2 + 8 x 9 = 74 moves.
  function automatic void emit_lbp(ref prog_t p);
    p.push_back(mi(16'd0, D_RF3));
    for (int d = 0; d < 8; d++) begin
      p.push_back(mi(word_t'(d), D_SFU_RDNB));
      p.push_back(mv(S_SFU, D_ALU_IN2));
      p.push_back(mv(S_RF1, D_ALU_GTU));          // centre > neighbour ?
      p.push_back(mv(S_ALU, D_BOOL0));
      p.push_back(mi(word_t'(1 << d), D_RF2));
      p.push_back(mi(16'd0, D_RF2, 1'b1));        // then bit d is 0
      p.push_back(mv(S_RF2, D_LOG_IN2));
      p.push_back(mv(S_RF3, D_LOG_IOR));
      p.push_back(mv(S_LOGIC, D_RF3));
    end
    p.push_back(mv(S_RF3, D_SFU_WRSH));
  endfunction

  // 3x3 convolution with binary (all-one) weights: sum of the window.
  function automatic void emit_box(ref prog_t p);
    p.push_back(mv(S_RF1, D_RF3));
    for (int d = 0; d < 8; d++) begin
      p.push_back(mi(word_t'(d), D_SFU_RDNB));
      p.push_back(mv(S_SFU, D_ALU_IN2));
      p.push_back(mv(S_RF3, D_ALU_ADD));
      p.push_back(mv(S_ALU, D_RF3));
    end
    p.push_back(mv(S_RF3, D_SFU_WRSH));
  endfunction

  // 3x3 convolution with integer weights w[0..7] (directions) and w[8]
  // (centre), 0..15 each. There is no multiplier: each tap calls a
  // shift-and-add subroutine (RF.0 pixel, RF.2 weight, RF.3 accumulator).
  // Returns the positions of the call moves, patched once the subroutine
  // address is known.
  function automatic void emit_conv(ref prog_t p, input int w [9], ref int calls [$]);
    p.push_back(mi(16'd0, D_RF3));
    p.push_back(mv(S_RF1, D_RF0));
    p.push_back(mi(word_t'(w[8]), D_RF2));
    calls.push_back(p.size());
    p.push_back(mi(16'd0, D_CALL));
    for (int d = 0; d < 8; d++) begin
      p.push_back(mi(word_t'(d), D_SFU_RDNB));
      p.push_back(mv(S_SFU, D_RF0));
      p.push_back(mi(word_t'(w[d]), D_RF2));
      calls.push_back(p.size());
      p.push_back(mi(16'd0, D_CALL));
    end
    p.push_back(mv(S_RF3, D_SFU_WRSH));
  endfunction

  function automatic void emit_mul(ref prog_t p);
    int m = p.size();
    p.push_back(mi(16'd1, D_LOG_IN2));
    p.push_back(mv(S_RF2, D_LOG_AND));            // weight bit 0
    p.push_back(mv(S_LOGIC, D_BOOL0));
    p.push_back(mv(S_RF0, D_ALU_IN2));
    p.push_back(mv(S_RF3, D_ALU_ADD));
    p.push_back(mv(S_ALU, D_RF3, 1'b1));          // acc += pixel if bit set
    p.push_back(mi(16'd1, D_SH_IN2));
    p.push_back(mv(S_RF0, D_SH_SHL));
    p.push_back(mv(S_SHIFT, D_RF0));              // pixel <<= 1
    p.push_back(mv(S_RF2, D_SH_SHRU));
    p.push_back(mv(S_SHIFT, D_RF2));              // weight >>= 1
    p.push_back(mi(16'd0, D_ALU_IN2));
    p.push_back(mv(S_RF2, D_ALU_GTU));
    p.push_back(mv(S_ALU, D_BOOL0));
    p.push_back(mi(word_t'(m), D_JUMP, 1'b1));    // loop while weight > 0
    p.push_back(mv(S_RA, D_JUMP));                // return
  endfunction

  // RF.0 = RF.0 mod k by nit guarded subtractions (no divider: the fixed
  // count keeps all PEs in lockstep).
  function automatic void emit_mod(ref prog_t p, input int k, input int nit);
    for (int i = 0; i < nit; i++) begin
      p.push_back(mi(word_t'(k - 1), D_ALU_IN2));
      p.push_back(mv(S_RF0, D_ALU_GTU));
      p.push_back(mv(S_ALU, D_BOOL0));
      p.push_back(mi(word_t'(k), D_ALU_IN2));
      p.push_back(mv(S_RF0, D_ALU_SUB));
      p.push_back(mv(S_ALU, D_RF0, 1'b1));
    end
  endfunction

  // Max-pooling with a k x k window and stride k. Only the PEs whose indices
  // satisfy X mod k == t and Y mod k == t take part (t = 0 for k = 2, the
  // window's top-left PE; t = 1 for k = 3, the window's centre PE); they
  // write the window maximum, all others stay idle and keep their pixel.
  function automatic void emit_pool(ref prog_t p, input int k, input int max_idx);
    int t = (k == 2) ? 0 : 1;
    int nit = max_idx / k;
    nb_dir_e dirs [$];
    if (k == 2) dirs = '{NB_E, NB_S, NB_SE};
    else        dirs = '{NB_N, NB_NE, NB_E, NB_SE, NB_S, NB_SW, NB_W, NB_NW};
    p.push_back(mi(16'd0, D_SFU_RDIDX));
    p.push_back(mv(S_SFU, D_RF0));
    emit_mod(p, k, nit);
    p.push_back(mi(word_t'(t), D_ALU_IN2));
    p.push_back(mv(S_RF0, D_ALU_EQ));
    p.push_back(mv(S_ALU, D_RF2));
    p.push_back(mi(16'd1, D_SFU_RDIDX));
    p.push_back(mv(S_SFU, D_RF0));
    emit_mod(p, k, nit);
    p.push_back(mi(word_t'(t), D_ALU_IN2));
    p.push_back(mv(S_RF0, D_ALU_EQ));
    p.push_back(mv(S_ALU, D_LOG_IN2));
    p.push_back(mv(S_RF2, D_LOG_AND));
    p.push_back(mv(S_LOGIC, D_RF2));              // RF.2 = this PE is active
    p.push_back(mv(S_RF1, D_RF3));
    foreach (dirs[i]) begin
      p.push_back(mi(word_t'(dirs[i]), D_SFU_RDNB));
      p.push_back(mv(S_SFU, D_RF0));
      p.push_back(mv(S_RF3, D_ALU_IN2));
      p.push_back(mv(S_RF0, D_ALU_GTU));
      p.push_back(mv(S_ALU, D_BOOL0));
      p.push_back(mv(S_RF0, D_RF3, 1'b1));
    end
    p.push_back(mv(S_RF2, D_BOOL0));
    p.push_back(mv(S_RF3, D_SFU_WRSH, 1'b1));     // idle PEs skip the write
  endfunction

  // Index test: Shared = X (sel 0) or Y | 0x100 (sel 1).
  function automatic void emit_index(ref prog_t p, input bit y);
    p.push_back(mi(word_t'(y), D_SFU_RDIDX));
    p.push_back(mi(y ? 16'h0100 : 16'h0000, D_LOG_IN2));
    p.push_back(mv(S_SFU, D_LOG_IOR));
    p.push_back(mv(S_LOGIC, D_SFU_WRSH));
  endfunction

  // Whole program: load, kernel (front-padded to pad_to moves), unload, stop.
  function automatic prog_info_t build(ref prog_t p, input kernel_e k, input int cols,
                                       input int max_idx, input int w [9], input int pad_to,
                                       input bit idx_y = 1'b0);
    prog_info_t info;
    prog_t kern;
    int calls [$];
    int base, orig, dummy, stop;
    p.delete();
    emit_pass_loop(p, cols, info.load_rd);
    p.push_back(mv(S_SFU, D_RF1));                // own pixel
    case (k)
      K_LBP:   emit_lbp(kern);
      K_BOX:   emit_box(kern);
      K_CONV:  emit_conv(kern, w, calls);
      K_POOL2: emit_pool(kern, 2, max_idx);
      K_POOL3: emit_pool(kern, 3, max_idx);
      default: emit_index(kern, idx_y);
    endcase
    orig = kern.size();
    while (kern.size() < pad_to) kern.push_front(nop());
    base = p.size() + kern.size() - orig;         // address of the kernel's first real move
    info.kernel_start = p.size();
    info.kernel_len = kern.size();
    foreach (kern[i]) p.push_back(kern[i]);
    emit_pass_loop(p, cols, dummy);
    info.unl_wr = dummy + 1;
    stop = p.size();
    p.push_back(mi(word_t'(stop), D_JUMP));
    if (calls.size() > 0) begin
      int m = p.size();
      emit_mul(p);
      foreach (calls[i]) p[base + calls[i]] = mi(word_t'(m), D_CALL);
    end
    return info;
  endfunction

  // ---------------------------------------------------------------- reference
  typedef int img_t [][];

  function automatic int px(img_t im, int r, int c);
    if (r < 0 || c < 0 || r >= im.size() || c >= im[0].size()) return 0;
    return im[r][c];
  endfunction

  function automatic int nbr(img_t im, int r, int c, int d);
    int dr [8] = '{-1, -1, 0, 1, 1, 1, 0, -1};
    int dc [8] = '{0, 1, 1, 1, 0, -1, -1, -1};
    return px(im, r + dr[d], c + dc[d]);
  endfunction

  function automatic int expect_px(kernel_e k, img_t im, int r, int c, int w [9], bit idx_y = 1'b0);
    int v = 0;
    case (k)
      K_LBP: for (int d = 0; d < 8; d++) if (nbr(im, r, c, d) >= im[r][c]) v += (1 << d);
      K_BOX: begin v = im[r][c]; for (int d = 0; d < 8; d++) v += nbr(im, r, c, d); end
      K_CONV: begin v = w[8] * im[r][c]; for (int d = 0; d < 8; d++) v += w[d] * nbr(im, r, c, d); end
      K_POOL2: begin
        v = im[r][c];
        if (r % 2 == 0 && c % 2 == 0)
          for (int d = 2; d <= 4; d++) if (nbr(im, r, c, d) > v) v = nbr(im, r, c, d);
      end
      K_POOL3: begin
        v = im[r][c];
        if (r % 3 == 1 && c % 3 == 1)
          for (int d = 0; d < 8; d++) if (nbr(im, r, c, d) > v) v = nbr(im, r, c, d);
      end
      default: v = idx_y ? (r | 'h100) : c;
    endcase
    return v & 'hFFFF;
  endfunction
endpackage
