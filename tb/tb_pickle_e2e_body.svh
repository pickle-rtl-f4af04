// Shared body of the end-to-end testbenches (included after the pickle_top instance `dut`).
// Needs: localparam bit FULL, localparam int NSL (slots), NLLC (LLC slices), and the signals
// declared below being connected to dut. Models the network/memory side and the LLC slices,
// loads the BFS kernel and the context, sends hints, and checks the delegated last-level
// prefetches against the ones computed from the graph image.

  int checks = 0, failures = 0;
  longint cyc = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (cycle %0d)", what, cyc);
    end
  endtask

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- network / memory model ----------------
  typedef struct { longint pa; int id; longint due; } nreq_t;
  nreq_t npend[$];
  int    n_victim_seen = 0;
  localparam int MEM_LAT = 20;

  assign noc_req_ready = 1'b1;
  always @(posedge clk) begin
    if (noc_req_valid && noc_req_ready) begin
      if (noc_req_victim) n_victim_seen++;
      else npend.push_back('{pa: longint'(noc_req_paddr), id: int'(noc_req_id), due: cyc + MEM_LAT});
    end
  end
  always @(negedge clk) begin
    noc_resp_valid <= 1'b0;
    if (npend.size() > 0 && npend[0].due <= cyc && noc_resp_ready) begin
      noc_resp_valid <= 1'b1;
      noc_resp_id    <= 16'(npend[0].id);
      noc_resp_data  <= tb_graph_pkg::mem_line(npend[0].pa);
      void'(npend.pop_front());
    end
  end

  // ---------------- LLC slices model ----------------
  bit mem_block = 0;
  int lk_delay [NLLC];
  longint lk_pa [NLLC];
  always @(negedge clk) begin
    for (int i = 0; i < NLLC; i++) begin
      llc_lk_resp_valid[i] <= 1'b0;
      if (llc_lk_valid[i]) begin lk_delay[i] = 2; lk_pa[i] = longint'(llc_lk_paddr[i]); end
      else if (lk_delay[i] > 0) begin
        lk_delay[i]--;
        if (lk_delay[i] == 0) begin
          llc_lk_resp_valid[i] <= 1'b1;
          llc_lk_in_llc[i]     <= ((lk_pa[i] >> 6) % 5 == 0);
          llc_lk_in_other[i]   <= ((lk_pa[i] >> 6) % 5 == 1);
        end
      end
      llc_mem_ready[i] <= !mem_block;
    end
  end

  // ---------------- observation ----------------
  int     llc_seen [longint];     // delegated line PA -> count
  int     req_seen [longint];     // line VA of requests from slots -> count
  longint expected [longint];
  always @(posedge clk) begin
    if (dut.llc_valid && dut.llc_ready) llc_seen[longint'(dut.llc_paddr)]++;
    if (dut.rm_in_valid && dut.rm_in_ready)
      req_seen[longint'(dut.rm_in_req.block_aligned_vaddr)]++;
  end

  // ---------------- stimulus helpers ----------------
  task automatic send_hint(int core, int kernel, longint data);
    @(negedge clk);
    st_valid = 1; st_addr = 64'h1000 + 64'(kernel * 8); st_core = 3'(core); st_data = 64'(data);
    @(posedge clk);
    while (!st_ready) @(posedge clk);
    @(negedge clk);
    st_valid = 0;
  endtask

  task automatic wait_idle();
    int quiet = 0;
    while (quiet < 60) begin
      @(posedge clk);
      if (hq_count == 0 && slot_busy == '0 && rm_occupancy == 0 && npend.size() == 0 &&
          llc_mem_valid == '0)
        quiet++;
      else quiet = 0;
    end
  endtask

  // lines the BFS kernel prefetches at the last level for a hint at work-queue index i
  task automatic expect_hint(longint i, longint pdist);
    longint u, s, e, v;
    u = tb_graph_pkg::wq(i + pdist);
    s = tb_graph_pkg::np(u);
    e = tb_graph_pkg::np(u + 1);
    for (longint k = s; k < e; k++) begin
      v = tb_graph_pkg::nb(k);
      expected[((tb_graph_pkg::VIS + v * 8) & ~64'h3f) + tb_graph_pkg::PA_OFF] = i;
    end
  endtask

  task automatic cfg_ctx(int addr, longint val);
    @(negedge clk);
    cfg_ctx_we = 1; cfg_ctx_addr = 32'(addr); cfg_ctx_data = 64'(val);
    @(posedge clk);
    while (!cfg_ctx_ready) @(posedge clk);
    @(negedge clk);
    cfg_ctx_we = 0;
  endtask

  localparam longint DIST = 4, DROPD = 2;
  int n_drop_checks = 0;

  initial begin
    tb_rv_asm_pkg::prog_t prog;
    clk = 0; rst_n = 0;
    st_valid = 0; st_addr = 0; st_core = 0; st_data = 0;
    cfg_imem_we = 0; cfg_imem_addr = 0; cfg_imem_data = 0;
    cfg_ctx_we = 0; cfg_ctx_addr = 0; cfg_ctx_data = 0;
    cfg_root = 64'(tb_graph_pkg::ROOT); cfg_delegate_en = 1;
    cfg_timeout_we = 0; cfg_timeout = 0;
    inv_valid = 0; inv_all = 0; inv_vaddr = 0;
    noc_resp_valid = 0; noc_resp_id = 0; noc_resp_data = '0;
    for (int i = 0; i < NLLC; i++) lk_delay[i] = 0;
    llc_lk_resp_valid = '0; llc_lk_in_llc = '0; llc_lk_in_other = '0; llc_mem_ready = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // load kernels and configuration
    prog = tb_rv_asm_pkg::bfs_kernel();
    foreach (prog[k]) begin
      @(negedge clk);
      cfg_imem_we = 1; cfg_imem_addr = 32'(k * 4); cfg_imem_data = prog[k];
    end
    @(negedge clk); cfg_imem_we = 0;
    cfg_ctx('h00, DIST);
    cfg_ctx('h08, DROPD);
    cfg_ctx('h18, tb_graph_pkg::NP);
    cfg_ctx('h20, tb_graph_pkg::NB);
    cfg_ctx('h28, tb_graph_pkg::VIS);

    // phase 1: hints one at a time (never dropped)
    for (int i = 0; i < (FULL ? 4 : 8); i++) begin
      send_hint(0, 0, tb_graph_pkg::WQ + i * 8);
      expect_hint(i, DIST);
      wait_idle();
    end
    check(stats.kernels_done == (FULL ? 4 : 8), "phase 1 kernels completed");

    if (!FULL) begin
      // phase 2: burst of hints from four cores, shared lines coalesce
      // (each core walks its hints backwards, so none is stale when it runs)
      for (int j = 15; j >= 0; j--)
        for (int c = 0; c < 4; c++) begin
          send_hint(c, 0, tb_graph_pkg::WQ + (c * 2 + j) * 8);
          expect_hint(c * 2 + j, DIST);
        end
      wait_idle();

      // phase 3: core 5 overtakes its own hint -> the first hint is dropped
      send_hint(5, 0, tb_graph_pkg::WQ + 500 * 8);
      send_hint(5, 0, tb_graph_pkg::WQ + 510 * 8);
      expect_hint(510, DIST);
      wait_idle();
      n_drop_checks++;
      check(!req_seen.exists((tb_graph_pkg::WQ + 504 * 8) & ~64'h3f), "stale hint dropped");
      check(req_seen.exists((tb_graph_pkg::WQ + 514 * 8) & ~64'h3f), "newer hint served");

      // phase 4: page fault in the first level
      send_hint(6, 0, tb_graph_pkg::FAULT_VA - DIST * 8);
      wait_idle();
      check(stats.rm_fault_drops >= 1 && stats.mmu_faults >= 1, "page fault dropped");

      // phase 5: TLB shootdown forces new walks
      begin
        int w0;
        w0 = int'(stats.mmu_walks);
        @(negedge clk); inv_valid = 1; inv_all = 1;
        @(negedge clk); inv_valid = 0; inv_all = 0;
        send_hint(0, 0, tb_graph_pkg::WQ + 20 * 8);
        expect_hint(20, DIST);
        wait_idle();
        check(int'(stats.mmu_walks) > w0, "walk after shootdown");
      end

      // phase 6: memory controller busy longer than the timeout
      @(negedge clk); cfg_timeout_we = 1; cfg_timeout = 40;
      @(negedge clk); cfg_timeout_we = 0;
      mem_block = 1;
      for (int j = 5; j >= 0; j--) send_hint(7, 0, tb_graph_pkg::WQ + (900 + j * 9) * 8);
      for (int j = 0; j < 6; j++) expect_hint(900 + j * 9, DIST);
      repeat (400) @(posedge clk);
      mem_block = 0;
      wait_idle();
    end

    // every delegated prefetch is one the kernel should make, and all of them were made
    begin
      int missing = 0, extra = 0;
      foreach (expected[a]) if (!llc_seen.exists(a)) missing++;
      foreach (llc_seen[a]) if (!expected.exists(a)) extra++;
      check(missing == 0, $sformatf("all expected last-level prefetches issued (%0d missing)", missing));
      check(extra == 0, $sformatf("no unexpected last-level prefetch (%0d extra)", extra));
    end
    check(stats.kernels_illegal == 0, "no illegal instruction");
    check(stats.hints_ignored == 0, "no ignored hint");

    // mechanisms
    begin
      int fills = 0, mru = 0, elsew = 0, tos = 0;
      for (int i = 0; i < NLLC; i++) begin
        fills += int'(llc_n_fills[i]); mru += int'(llc_n_mru[i]);
        elsew += int'(llc_n_elsewhere[i]); tos += int'(llc_n_timeouts[i]);
      end
      $display("mechanisms: kernels=%0d alloc=%0d coalesced=%0d full_stalls=%0d fault_drops=%0d llc=%0d cache=%0d",
               stats.kernels_done, stats.rm_alloc, stats.rm_coalesced, stats.rm_full_stalls,
               stats.rm_fault_drops, stats.rm_llc, stats.rm_cache);
      $display("mechanisms: l1tlb_hits=%0d l2tlb_hits=%0d walks=%0d pc_hits=%0d pc_misses=%0d victims=%0d mshr_waits=%0d",
               stats.mmu_l1_hits, stats.mmu_l2_hits, stats.mmu_walks, stats.pc_hits,
               stats.pc_misses, stats.pc_victims, stats.pc_mshr_waits);
      $display("mechanisms: llc fills=%0d mru=%0d elsewhere=%0d timeouts=%0d drops_checked=%0d",
               fills, mru, elsew, tos, n_drop_checks);
      check(stats.rm_llc > 0, "LLC delegation used");
      check(stats.rm_cache > 0, "PickleCache fetches used");
      check(stats.mmu_walks > 0, "page walks");
      check(stats.mmu_l1_hits > 0, "L1 TLB hits");
      check(fills > 0, "delegated memory fills");
      check(mru > 0, "MRU refresh of LLC-resident lines");
      if (!FULL) begin
        check(stats.rm_coalesced > 0, "request coalescing");
        check(stats.rm_full_stalls > 0, "request manager full -> slot retry");
        check(stats.mmu_l2_hits > 0, "L2 TLB hits");
        check(stats.pc_hits > 0, "PickleCache hits");
        check(stats.pc_victims > 0 && n_victim_seen > 0, "PickleCache victims to LLC");
        check(elsew > 0, "line found in another cache");
        check(tos > 0, "delegation timeout");
        check(n_drop_checks > 0, "prefetch drop");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
