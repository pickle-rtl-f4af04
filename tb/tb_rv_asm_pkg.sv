// tb_rv_asm_pkg: a small RV64E assembler for the testbenches, and two prefetch kernel images
// (bfs_kernel, and csr_kernel for sparse row traversals with conditional prefetching).
//
// Encoders return 32-bit RV64I instruction words. bfs_kernel() builds the kernel image that
// the end-to-end tests load into every slot: word 0..7 is the jump table (kernel 0 = BFS, the
// others end at once), then the BFS kernel:
//   drop test     target = hint + dist*8; drop if target <= latest_hint + drop*8
//   level 1       fetch work_queue[target] into the slot area, wait (PENDING == 0); a
//                 page fault leaves the -1 sentinel in place and ends the kernel
//   level 2       fetch neighbor_ptrs[u] and neighbor_ptrs[u+1], wait
//   level 3       fetch neighbors[start..end-1] into the slot area, wait
//   level 4       last-level prefetch of visited[neighbor] for every neighbor
// Context layout: 0x00 dist, 0x08 drop, 0x18 neighbor_ptrs base, 0x20 neighbors base,
// 0x28 visited base; slot area at 0x1000 + slot*1024: u, start, end, neighbors...
package tb_rv_asm_pkg;

  function automatic logic [31:0] r_t(int f7, int rs2, int rs1, int f3, int rd, int op);
    return {7'(f7), 5'(rs2), 5'(rs1), 3'(f3), 5'(rd), 7'(op)};
  endfunction
  function automatic logic [31:0] i_t(int imm, int rs1, int f3, int rd, int op);
    return {12'(imm), 5'(rs1), 3'(f3), 5'(rd), 7'(op)};
  endfunction
  function automatic logic [31:0] s_t(int imm, int rs2, int rs1, int f3);
    logic [11:0] i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), 3'(f3), i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] b_t(int off, int rs2, int rs1, int f3);
    logic [12:0] o = 13'(off);
    return {o[12], o[10:5], 5'(rs2), 5'(rs1), 3'(f3), o[4:1], o[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] j_t(int off, int rd);
    logic [20:0] o = 21'(off);
    return {o[20], o[10:1], o[11], o[19:12], 5'(rd), 7'b1101111};
  endfunction

  function automatic logic [31:0] addi(int rd, int rs1, int imm); return i_t(imm, rs1, 0, rd, 7'h13); endfunction
  function automatic logic [31:0] slli(int rd, int rs1, int sh);  return i_t(sh, rs1, 1, rd, 7'h13); endfunction
  function automatic logic [31:0] srli(int rd, int rs1, int sh);  return i_t(sh, rs1, 5, rd, 7'h13); endfunction
  function automatic logic [31:0] srai(int rd, int rs1, int sh);  return i_t(sh | 'h400, rs1, 5, rd, 7'h13); endfunction
  function automatic logic [31:0] andi(int rd, int rs1, int imm); return i_t(imm, rs1, 7, rd, 7'h13); endfunction
  function automatic logic [31:0] add(int rd, int a, int b);  return r_t(0, b, a, 0, rd, 7'h33); endfunction
  function automatic logic [31:0] sub(int rd, int a, int b);  return r_t(32, b, a, 0, rd, 7'h33); endfunction
  function automatic logic [31:0] xor_(int rd, int a, int b); return r_t(0, b, a, 4, rd, 7'h33); endfunction
  function automatic logic [31:0] sltu(int rd, int a, int b); return r_t(0, b, a, 3, rd, 7'h33); endfunction
  function automatic logic [31:0] addw(int rd, int a, int b); return r_t(0, b, a, 0, rd, 7'h3b); endfunction
  function automatic logic [31:0] ld(int rd, int rs1, int imm); return i_t(imm, rs1, 3, rd, 7'h03); endfunction
  function automatic logic [31:0] lw(int rd, int rs1, int imm); return i_t(imm, rs1, 2, rd, 7'h03); endfunction
  function automatic logic [31:0] lbu(int rd, int rs1, int imm); return i_t(imm, rs1, 4, rd, 7'h03); endfunction
  function automatic logic [31:0] sd(int rs2, int rs1, int imm); return s_t(imm, rs2, rs1, 3); endfunction
  function automatic logic [31:0] sw(int rs2, int rs1, int imm); return s_t(imm, rs2, rs1, 2); endfunction
  function automatic logic [31:0] sb(int rs2, int rs1, int imm); return s_t(imm, rs2, rs1, 0); endfunction
  function automatic logic [31:0] lui(int rd, int imm20); return {20'(imm20), 5'(rd), 7'h37}; endfunction
  function automatic logic [31:0] beq(int a, int b, int off); return b_t(off, b, a, 0); endfunction
  function automatic logic [31:0] bne(int a, int b, int off); return b_t(off, b, a, 1); endfunction
  function automatic logic [31:0] blt(int a, int b, int off); return b_t(off, b, a, 4); endfunction
  function automatic logic [31:0] bge(int a, int b, int off); return b_t(off, b, a, 5); endfunction
  function automatic logic [31:0] jal(int rd, int off); return j_t(off, rd); endfunction
  function automatic logic [31:0] jalr(int rd, int rs1, int imm); return i_t(imm, rs1, 0, rd, 7'h67); endfunction
  localparam logic [31:0] EBREAK = 32'h0010_0073;
  localparam logic [31:0] ECALL  = 32'h0000_0073;

  // MMIO offsets from x1 = 0x100000
  localparam int O_HINT = 0, O_META = 8, O_LATEST = 16, O_DEST = 24, O_ISSUE = 32,
                 O_LAST = 40, O_PEND = 48;

  typedef logic [31:0] prog_t [$];

  // Two passes: the first places the labels, the second encodes with them.
  function automatic prog_t bfs_kernel();
    prog_t p;
    int L_K0, L_W1, L_W2, L_L3, L_E3, L_W3, L_L4, L_DONE, L_DROP;
    int pc;
    L_K0 = 0; L_W1 = 0; L_W2 = 0; L_L3 = 0; L_E3 = 0; L_W3 = 0; L_L4 = 0; L_DONE = 0; L_DROP = 0;
    for (int pass = 0; pass < 2; pass++) begin
      p = {};
      // jump table
      p.push_back(jal(0, L_K0 - 0));
      for (int k = 1; k < 8; k++) p.push_back(EBREAK);
      L_K0 = p.size() * 4;
      p.push_back(lui(1, 'h100));            // x1 = MMIO base
      p.push_back(ld(2, 1, O_HINT));         // x2 = hint_data
      p.push_back(ld(3, 1, O_LATEST));       // x3 = latest hint of core/kernel
      p.push_back(ld(4, 0, 'h00));           // x4 = prefetch distance
      p.push_back(ld(5, 0, 'h08));           // x5 = drop distance
      p.push_back(slli(6, 4, 3));
      p.push_back(add(6, 2, 6));             // x6 = target = hint + dist*8
      p.push_back(slli(7, 5, 3));
      p.push_back(add(7, 3, 7));             // x7 = latest + drop*8
      pc = p.size() * 4; p.push_back(bge(7, 6, L_DROP - pc));
      p.push_back(ld(8, 1, O_META));
      p.push_back(srli(8, 8, 6));
      p.push_back(slli(8, 8, 10));
      p.push_back(lui(9, 1));                // 0x1000
      p.push_back(add(8, 8, 9));             // x8 = slot area
      p.push_back(addi(9, 0, -1));
      p.push_back(sd(9, 8, 0));              // sentinel
      p.push_back(sd(8, 1, O_DEST));
      p.push_back(sd(6, 1, O_ISSUE));        // level 1
      L_W1 = p.size() * 4;
      p.push_back(ld(10, 1, O_PEND));
      pc = p.size() * 4; p.push_back(bne(10, 0, L_W1 - pc));
      p.push_back(ld(10, 8, 0));             // u
      pc = p.size() * 4; p.push_back(beq(10, 9, L_DROP - pc));
      p.push_back(ld(11, 0, 'h18));
      p.push_back(slli(12, 10, 3));
      p.push_back(add(11, 11, 12));          // &neighbor_ptrs[u]
      p.push_back(addi(12, 8, 8));
      p.push_back(sd(12, 1, O_DEST));
      p.push_back(sd(11, 1, O_ISSUE));
      p.push_back(addi(12, 8, 16));
      p.push_back(sd(12, 1, O_DEST));
      p.push_back(addi(11, 11, 8));
      p.push_back(sd(11, 1, O_ISSUE));       // &neighbor_ptrs[u+1]
      L_W2 = p.size() * 4;
      p.push_back(ld(10, 1, O_PEND));
      pc = p.size() * 4; p.push_back(bne(10, 0, L_W2 - pc));
      p.push_back(ld(12, 8, 8));             // start
      p.push_back(ld(13, 8, 16));            // end
      p.push_back(ld(11, 0, 'h20));          // neighbors base
      p.push_back(addi(14, 8, 24));
      p.push_back(addi(15, 12, 0));
      L_L3 = p.size() * 4;
      pc = p.size() * 4; p.push_back(bge(15, 13, L_E3 - pc));
      p.push_back(sd(14, 1, O_DEST));
      p.push_back(slli(10, 15, 3));
      p.push_back(add(10, 11, 10));
      p.push_back(sd(10, 1, O_ISSUE));
      p.push_back(addi(14, 14, 8));
      p.push_back(addi(15, 15, 1));
      pc = p.size() * 4; p.push_back(jal(0, L_L3 - pc));
      L_E3 = p.size() * 4;
      L_W3 = p.size() * 4;
      p.push_back(ld(10, 1, O_PEND));
      pc = p.size() * 4; p.push_back(bne(10, 0, L_W3 - pc));
      p.push_back(ld(11, 0, 'h28));          // visited base
      p.push_back(addi(14, 8, 24));
      p.push_back(sub(15, 13, 12));
      L_L4 = p.size() * 4;
      pc = p.size() * 4; p.push_back(beq(15, 0, L_DONE - pc));
      p.push_back(ld(10, 14, 0));
      p.push_back(slli(10, 10, 3));
      p.push_back(add(10, 11, 10));
      p.push_back(sd(10, 1, O_LAST));
      p.push_back(addi(14, 14, 8));
      p.push_back(addi(15, 15, -1));
      pc = p.size() * 4; p.push_back(jal(0, L_L4 - pc));
      L_DONE = p.size() * 4;
      p.push_back(EBREAK);
      L_DROP = p.size() * 4;
      p.push_back(ECALL);
    end
    return p;
  endfunction

  // Kernel image for sparse row traversals (pull-style PageRank/CC, the SpMV of CG):
  //   kernel 1  hint = row i; r = i + dist; drop if r < threshold[core] (context 0x40 +
  //             core*8); fetch row_ptr[r], row_ptr[r+1]; fetch col[start..end-1];
  //             last-level prefetch of x[col] for each of them
  //   kernel 2  hint = threshold; stores it into threshold[core] (conditional prefetching:
  //             the application tells the prefetcher which rows it will skip)
  // Context layout as in bfs_kernel (0x00 dist, 0x18 row_ptr, 0x20 col, 0x28 x).
  function automatic prog_t csr_kernel();
    prog_t p;
    int L_K1, L_K2, L_W2, L_L3, L_E3, L_W3, L_L4, L_DONE, L_DROP;
    int pc;
    L_K1 = 0; L_K2 = 0; L_W2 = 0; L_L3 = 0; L_E3 = 0; L_W3 = 0; L_L4 = 0; L_DONE = 0; L_DROP = 0;
    for (int pass = 0; pass < 2; pass++) begin
      p = {};
      p.push_back(EBREAK);
      p.push_back(jal(0, L_K1 - 4));
      p.push_back(jal(0, L_K2 - 8));
      for (int k = 3; k < 8; k++) p.push_back(EBREAK);
      L_K1 = p.size() * 4;
      p.push_back(lui(1, 'h100));
      p.push_back(ld(2, 1, O_HINT));         // x2 = row i
      p.push_back(ld(4, 0, 'h00));           // x4 = dist (rows)
      p.push_back(add(6, 2, 4));             // x6 = r
      p.push_back(ld(3, 1, O_META));
      p.push_back(srli(7, 3, 3));
      p.push_back(andi(7, 7, 7));
      p.push_back(slli(7, 7, 3));
      p.push_back(ld(7, 7, 'h40));           // x7 = threshold of this core
      pc = p.size() * 4; p.push_back(blt(6, 7, L_DROP - pc));
      p.push_back(srli(8, 3, 6));
      p.push_back(slli(8, 8, 10));
      p.push_back(lui(9, 1));
      p.push_back(add(8, 8, 9));             // x8 = slot area
      p.push_back(ld(11, 0, 'h18));
      p.push_back(slli(12, 6, 3));
      p.push_back(add(11, 11, 12));          // &row_ptr[r]
      p.push_back(addi(12, 8, 8));
      p.push_back(sd(12, 1, O_DEST));
      p.push_back(sd(11, 1, O_ISSUE));
      p.push_back(addi(12, 8, 16));
      p.push_back(sd(12, 1, O_DEST));
      p.push_back(addi(11, 11, 8));
      p.push_back(sd(11, 1, O_ISSUE));       // &row_ptr[r+1]
      L_W2 = p.size() * 4;
      p.push_back(ld(10, 1, O_PEND));
      pc = p.size() * 4; p.push_back(bne(10, 0, L_W2 - pc));
      p.push_back(ld(12, 8, 8));             // start
      p.push_back(ld(13, 8, 16));            // end
      p.push_back(ld(11, 0, 'h20));          // col base
      p.push_back(addi(14, 8, 24));
      p.push_back(addi(15, 12, 0));
      L_L3 = p.size() * 4;
      pc = p.size() * 4; p.push_back(bge(15, 13, L_E3 - pc));
      p.push_back(sd(14, 1, O_DEST));
      p.push_back(slli(10, 15, 3));
      p.push_back(add(10, 11, 10));
      p.push_back(sd(10, 1, O_ISSUE));
      p.push_back(addi(14, 14, 8));
      p.push_back(addi(15, 15, 1));
      pc = p.size() * 4; p.push_back(jal(0, L_L3 - pc));
      L_E3 = p.size() * 4;
      L_W3 = p.size() * 4;
      p.push_back(ld(10, 1, O_PEND));
      pc = p.size() * 4; p.push_back(bne(10, 0, L_W3 - pc));
      p.push_back(ld(11, 0, 'h28));          // x base
      p.push_back(addi(14, 8, 24));
      p.push_back(sub(15, 13, 12));
      L_L4 = p.size() * 4;
      pc = p.size() * 4; p.push_back(beq(15, 0, L_DONE - pc));
      p.push_back(ld(10, 14, 0));
      p.push_back(slli(10, 10, 3));
      p.push_back(add(10, 11, 10));
      p.push_back(sd(10, 1, O_LAST));
      p.push_back(addi(14, 14, 8));
      p.push_back(addi(15, 15, -1));
      pc = p.size() * 4; p.push_back(jal(0, L_L4 - pc));
      L_DONE = p.size() * 4;
      p.push_back(EBREAK);
      L_DROP = p.size() * 4;
      p.push_back(ECALL);
      L_K2 = p.size() * 4;
      p.push_back(lui(1, 'h100));
      p.push_back(ld(2, 1, O_HINT));
      p.push_back(ld(3, 1, O_META));
      p.push_back(srli(7, 3, 3));
      p.push_back(andi(7, 7, 7));
      p.push_back(slli(7, 7, 3));
      p.push_back(sd(2, 7, 'h40));
      p.push_back(EBREAK);
    end
    return p;
  endfunction

endpackage
