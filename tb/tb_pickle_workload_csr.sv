// tb_pickle_workload_csr: sparse-row workload on the whole prefetcher (reduced sizes).
//
// Stands for the evaluated workloads whose irregular access is x[col[row_ptr[r] ..
// row_ptr[r+1]-1]] over consecutive rows: pull-style PageRank and connected components, and
// the sparse matrix-vector product of CG. Uses the CSR arrays of tb_graph_pkg (row_ptr =
// neighbor_ptrs, col = neighbors, x = visited). Four cores send row hints; rows overlap
// between cores, so requests coalesce. Core 1 first sends a threshold through kernel 2
// (conditional prefetching as in the delta-stepping SSSP case: the application tells the
// prefetcher which work it will skip), and kernel 1 then drops every row below it; core 1
// walks rows of its own so that the skipped rows are visible.
// Checks that the set of last-level prefetches reaching the LLC is exactly the one computed
// from the arrays, that the skipped rows produced no request, and that every kernel ended.
`timescale 1ns/1ps
module tb_pickle_workload_csr;
  import pickle_pkg::*;
  localparam int NSL  = 8;
  localparam int NLLC = 8;
  localparam longint DIST = 3;
  localparam longint THRESH1 = 115;
  localparam longint BASE [4] = '{0, 100, 6, 12};

  logic clk, rst_n;
  logic st_valid, st_ready; logic [63:0] st_addr; logic [2:0] st_core; word_t st_data;
  logic cfg_imem_we; logic [31:0] cfg_imem_addr, cfg_imem_data;
  logic cfg_ctx_we, cfg_ctx_ready; logic [31:0] cfg_ctx_addr; word_t cfg_ctx_data;
  word_t cfg_root; logic cfg_delegate_en, cfg_timeout_we; logic [31:0] cfg_timeout;
  logic inv_valid, inv_all; word_t inv_vaddr;
  logic noc_req_valid, noc_req_ready, noc_req_victim; word_t noc_req_paddr;
  logic [15:0] noc_req_id; line_t noc_req_data;
  logic noc_resp_valid, noc_resp_ready; logic [15:0] noc_resp_id; line_t noc_resp_data;
  logic [NLLC-1:0] llc_lk_valid, llc_lk_resp_valid, llc_lk_in_llc, llc_lk_in_other;
  logic [NLLC-1:0] llc_touch_valid, llc_mem_valid, llc_mem_ready;
  word_t llc_lk_paddr [NLLC], llc_touch_paddr [NLLC], llc_mem_paddr [NLLC];
  logic [31:0] llc_n_fills [NLLC], llc_n_mru [NLLC], llc_n_elsewhere [NLLC], llc_n_timeouts [NLLC];
  logic [NSL-1:0] slot_busy;
  logic [8:0] hq_count;
  logic [5:0] rm_occupancy;
  pickle_stats_t stats;

  pickle_top #(.NUM_SLOTS(NSL), .CTX_BYTES(32768), .RM_ENTRIES(32), .L1_TLB_ENTRIES(8),
               .L2_TLB_ENTRIES(64), .L2_TLB_WAYS(8), .PC_BYTES(8192), .PC_WAYS(16),
               .PC_MSHRS(8)) dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (cycle %0d)", what, cyc);
    end
  endtask

  initial begin
    #20_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // network / memory: fixed latency, always ready
  typedef struct { longint pa; int id; longint due; } nreq_t;
  nreq_t npend[$];
  assign noc_req_ready = 1'b1;
  always @(posedge clk)
    if (noc_req_valid && !noc_req_victim)
      npend.push_back('{pa: longint'(noc_req_paddr), id: int'(noc_req_id), due: cyc + 30});
  always @(negedge clk) begin
    noc_resp_valid <= 1'b0;
    if (npend.size() > 0 && npend[0].due <= cyc && noc_resp_ready) begin
      noc_resp_valid <= 1'b1;
      noc_resp_id    <= 16'(npend[0].id);
      noc_resp_data  <= tb_graph_pkg::mem_line(npend[0].pa);
      void'(npend.pop_front());
    end
  end

  // LLC slices: answer each lookup two cycles later (the unit waits from the cycle after
  // its lookup pulse); the line is never cached, so every command becomes a memory fill
  logic [NLLC-1:0] lk_seen = '0;
  always @(negedge clk) begin
    for (int i = 0; i < NLLC; i++) begin
      lk_seen[i]           <= llc_lk_valid[i];
      llc_lk_resp_valid[i] <= lk_seen[i];
      llc_lk_in_llc[i]     <= 1'b0;
      llc_lk_in_other[i]   <= 1'b0;
      llc_mem_ready[i]     <= 1'b1;
    end
  end

  int llc_seen [longint];
  int req_rows [longint];     // row_ptr line VAs requested by slots
  longint expected [longint];
  always @(posedge clk) begin
    if (dut.llc_valid && dut.llc_ready) llc_seen[longint'(dut.llc_paddr)]++;
    if (dut.rm_in_valid && dut.rm_in_ready)
      req_rows[longint'(dut.rm_in_req.block_aligned_vaddr)]++;
  end

  task automatic send_hint(int core, int kernel, longint data);
    @(negedge clk);
    st_valid = 1; st_addr = 64'h1000 + 64'(kernel * 8); st_core = 3'(core); st_data = 64'(data);
    @(posedge clk);
    while (!st_ready) @(posedge clk);
    @(negedge clk);
    st_valid = 0;
  endtask

  task automatic cfg_ctx(int addr, longint val);
    @(negedge clk);
    cfg_ctx_we = 1; cfg_ctx_addr = 32'(addr); cfg_ctx_data = 64'(val);
    @(posedge clk);
    while (!cfg_ctx_ready) @(posedge clk);
    @(negedge clk);
    cfg_ctx_we = 0;
  endtask

  task automatic wait_idle();
    int quiet = 0;
    while (quiet < 60) begin
      @(posedge clk);
      if (hq_count == 0 && slot_busy == '0 && rm_occupancy == 0 && npend.size() == 0)
        quiet++;
      else quiet = 0;
    end
  endtask

  task automatic expect_row(longint r);
    for (longint k = tb_graph_pkg::np(r); k < tb_graph_pkg::np(r + 1); k++)
      expected[((tb_graph_pkg::VIS + tb_graph_pkg::nb(k) * 8) & ~64'h3f) + tb_graph_pkg::PA_OFF] = r;
  endtask

  int n_hints = 0;
  int n_skipped = 0;

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
    llc_lk_resp_valid = '0; llc_lk_in_llc = '0; llc_lk_in_other = '0; llc_mem_ready = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;

    prog = tb_rv_asm_pkg::csr_kernel();
    foreach (prog[k]) begin
      @(negedge clk);
      cfg_imem_we = 1; cfg_imem_addr = 32'(k * 4); cfg_imem_data = prog[k];
    end
    @(negedge clk); cfg_imem_we = 0;
    cfg_ctx('h00, DIST);
    cfg_ctx('h18, tb_graph_pkg::NP);
    cfg_ctx('h20, tb_graph_pkg::NB);
    cfg_ctx('h28, tb_graph_pkg::VIS);
    for (int c = 0; c < 8; c++) cfg_ctx('h40 + c * 8, 0);

    // core 1 announces that it skips rows below THRESH1
    send_hint(1, 2, THRESH1);
    n_hints++;
    wait_idle();

    // four cores walk overlapping row ranges
    for (int i = 0; i < 24; i++)
      for (int c = 0; c < 4; c++) begin
        automatic longint row = BASE[c] + longint'(i);
        send_hint(c, 1, row);
        n_hints++;
        if (c == 1 && row + DIST < THRESH1) n_skipped++;
        else expect_row(row + DIST);
      end
    wait_idle();

    begin
      automatic int missing = 0, extra = 0;
      foreach (expected[a]) if (!llc_seen.exists(a)) missing++;
      foreach (llc_seen[a]) if (!expected.exists(a)) extra++;
      check(missing == 0, $sformatf("all expected last-level prefetches issued (%0d missing)", missing));
      check(extra == 0, $sformatf("no unexpected last-level prefetch (%0d extra)", extra));
    end
    // rows 104..111 fill one row_ptr line that only core 1 would have asked for
    check(!req_rows.exists(tb_graph_pkg::NP + 104 * 8), "rows below the threshold skipped");
    check(req_rows.exists(tb_graph_pkg::NP + 120 * 8), "rows above the threshold served");
    check(int'(stats.kernels_done) == n_hints, "every kernel ended");
    check(stats.kernels_illegal == 0, "no illegal instruction");
    check(stats.rm_coalesced > 0, "overlapping rows coalesced");
    check(n_skipped > 0, "conditional drops exercised");
    $display("workload: hints=%0d skipped=%0d lines=%0d alloc=%0d coalesced=%0d llc=%0d cache=%0d walks=%0d",
             n_hints, n_skipped, expected.num(), stats.rm_alloc, stats.rm_coalesced, stats.rm_llc,
             stats.rm_cache, stats.mmu_walks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
