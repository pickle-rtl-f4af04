// tb_graph_pkg: memory image used by the end-to-end testbenches, computed, never stored.
//
// A CSR graph of N nodes in virtual memory, and the page table that maps it:
//   work_queue    VA 0x0010_0000  wq[i]  = (7*i + 3) % N
//   neighbor_ptrs VA 0x0020_0000  np[u]  = sum of deg(v) for v < u, deg(v) = v%4 + 1
//   neighbors     VA 0x0030_0000  nb[e]  = (13*e + 5) % N
//   visited       VA 0x0040_0000  (only prefetched)
// Every VA below 1GiB maps to PA = VA + 0x4000_0000, except the pages from FAULT_VA upward
// (unmapped: the leaf PTE is invalid). Page tables: root 0x1000_0000, level-2 table
// 0x1000_1000, level-1 table 0x1000_2000, leaf tables 0x1001_0000 + j*0x1000. PTE: bit 0
// valid, bits 47:12 the next table or the frame.
package tb_graph_pkg;

  localparam longint N         = 4096;
  localparam longint WQ        = 64'h0010_0000;
  localparam longint NP        = 64'h0020_0000;
  localparam longint NB        = 64'h0030_0000;
  localparam longint VIS       = 64'h0040_0000;
  localparam longint FAULT_VA  = 64'h0080_0000;
  localparam longint PA_OFF    = 64'h4000_0000;
  localparam longint ROOT      = 64'h1000_0000;

  function automatic longint deg(longint v); return (v % 4) + 1; endfunction
  function automatic longint wq(longint i); return (7 * i + 3) % N; endfunction
  function automatic longint np(longint u);
    longint f[4] = '{0, 1, 3, 6};
    return (u / 4) * 10 + f[u % 4];
  endfunction
  function automatic longint nb(longint e); return (13 * e + 5) % N; endfunction

  // 64-bit word at a virtual address of the data arrays
  function automatic longint data_word(longint va);
    if (va >= NB) return nb((va - NB) / 8);
    if (va >= NP) return np((va - NP) / 8);
    if (va >= WQ) return wq((va - WQ) / 8);
    return 0;
  endfunction

  function automatic longint mem_word(longint pa);
    longint idx;
    if (pa >= ROOT && pa < ROOT + 64'h1000) begin
      idx = (pa - ROOT) / 8;
      return (idx == 0) ? (ROOT + 64'h1000) | 1 : 0;
    end
    if (pa >= ROOT + 64'h1000 && pa < ROOT + 64'h2000) begin
      idx = (pa - ROOT - 64'h1000) / 8;
      return (idx == 0) ? (ROOT + 64'h2000) | 1 : 0;
    end
    if (pa >= ROOT + 64'h2000 && pa < ROOT + 64'h3000) begin
      idx = (pa - ROOT - 64'h2000) / 8;            // 2MiB region j
      return (64'h1001_0000 + idx * 64'h1000) | 1;
    end
    if (pa >= 64'h1001_0000 && pa < 64'h1021_0000) begin
      longint vpn;
      vpn = (pa - 64'h1001_0000) / 8;              // leaf entry number = VPN
      if (vpn * 4096 >= FAULT_VA) return 0;
      return (vpn * 4096 + PA_OFF) | 1;
    end
    if (pa >= PA_OFF) return data_word(pa - PA_OFF);
    return 0;
  endfunction

  function automatic logic [511:0] mem_line(longint pa);
    logic [511:0] l;
    for (int w = 0; w < 8; w++) l[w*64 +: 64] = 64'(mem_word((pa & ~64'h3f) + w * 8));
    return l;
  endfunction

endpackage
