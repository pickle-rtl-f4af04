// tb_pickle_request_manager: checks the request manager (8 entries here).
//
// Eight slots send prefetch requests over a small set of lines, so that requests coalesce
// and the table fills up. Models: PickleMMU (VA -> VA + 0x4000_0000, fault for one page,
// random latency), PickleCache (random latency, answers by tag with a line computed from the
// physical address) and an LLC port that is sometimes not ready. Checked: oldest hint first
// to translation; every non-last-level request gets exactly one completion carrying its slot
// bit, its line and the right data, or a drop if its page faults; every last-level request
// reaches the LLC port with its translated address (or is served by a merged fetch); back-
// pressure only when the table is full; occupancy and counters.
`timescale 1ns/1ps
module tb_pickle_request_manager;
  import pickle_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  localparam int ENT = 8;
  localparam word_t OFF = 64'h4000_0000;
  localparam word_t FAULT_PAGE = 64'h0000_3000;
  logic delegate_en, in_valid, in_ready, mmu_req_valid, mmu_req_ready, mmu_resp_valid;
  logic mmu_resp_ready, mmu_resp_fault, c_req_valid, c_req_ready, c_resp_valid;
  logic llc_valid, llc_ready, fill_valid;
  pf_req_t in_req; pf_fill_t fill;
  word_t mmu_req_vaddr, mmu_resp_paddr, c_req_paddr, llc_paddr;
  logic [15:0] c_req_tag, c_resp_tag; line_t c_resp_data;
  logic [31:0] n_alloc, n_coalesced, n_fault_drops, n_llc, n_cache, n_full_stalls;
  logic [$clog2(ENT):0] occupancy;

  pickle_request_manager #(.ENTRIES(ENT)) dut (.*);

  function automatic line_t line_of(word_t pa);
    line_t l;
    for (int w = 0; w < 8; w++) l[w*64 +: 64] = pa * 5 + 64'(w);
    return l;
  endfunction

  // ---- MMU model: one translation at a time ----
  bit mmu_hold = 0, mmu_busy = 0;
  int mmu_cnt = 0;
  word_t mmu_va = 0;
  word_t mmu_order [$];
  bit rand_hold = 0;
  always @(negedge clk) if (rand_hold) mmu_hold = ($urandom_range(0, 2) == 0);
  assign mmu_req_ready = !mmu_hold && !mmu_busy && !mmu_resp_valid;
  always @(posedge clk) if (rst_n) begin
    if (mmu_resp_valid && mmu_resp_ready) mmu_resp_valid <= 0;
    if (mmu_req_valid && mmu_req_ready) begin
      mmu_busy <= 1; mmu_va <= mmu_req_vaddr; mmu_cnt <= $urandom_range(0, 4);
      mmu_order.push_back(mmu_req_vaddr);
    end else if (mmu_busy) begin
      if (mmu_cnt == 0) begin
        mmu_resp_valid <= 1; mmu_resp_paddr <= mmu_va + OFF;
        mmu_resp_fault <= ((mmu_va & ~64'hfff) == FAULT_PAGE);
        mmu_busy <= 0;
      end else mmu_cnt <= mmu_cnt - 1;
    end
  end

  // ---- cache model ----
  typedef struct { word_t pa; logic [15:0] tag; longint due; } creq_t;
  creq_t cq [$];
  always @(posedge clk) if (rst_n && c_req_valid && c_req_ready)
    cq.push_back('{pa: c_req_paddr, tag: c_req_tag, due: cyc + $urandom_range(2, 12)});
  always @(negedge clk) begin
    c_req_ready = ($urandom_range(0, 3) != 0);
    llc_ready   = ($urandom_range(0, 2) != 0);
    c_resp_valid = 0;
    if (cq.size() > 0) begin
      automatic int k = $urandom_range(0, cq.size() - 1);
      if (cq[k].due <= cyc) begin
        c_resp_valid = 1; c_resp_tag = cq[k].tag; c_resp_data = line_of(cq[k].pa);
        cq.delete(k);
      end
    end
  end

  // ---- scoreboard ----
  int    want_fill [int][word_t];   // slot -> line va -> open non-last-level requests
  int    llc_want [word_t];         // line va -> open last-level requests
  int    n_fills = 0, n_drops = 0, n_llc_seen = 0, n_full = 0;
  always @(posedge clk) if (rst_n) begin
    check(in_ready == (int'(occupancy) < ENT), "in_ready exactly when an entry is free");
    if (in_valid && !in_ready) n_full++;
    if (fill_valid) begin
      for (int s = 0; s < 8; s++) if (fill.slot_bitmap[s]) begin
        if (want_fill.exists(s) && want_fill[s].exists(fill.block_aligned_vaddr)) begin
          want_fill[s].delete(fill.block_aligned_vaddr);
        end else
          check(llc_want.exists(fill.block_aligned_vaddr), "completion only for a requesting slot");
      end
      if (llc_want.exists(fill.block_aligned_vaddr)) llc_want.delete(fill.block_aligned_vaddr);
      check(fill.dropped == ((fill.block_aligned_vaddr & ~64'hfff) == FAULT_PAGE), "drop exactly on fault");
      if (!fill.dropped) begin
        check(fill.data == line_of(fill.block_aligned_vaddr + OFF), "completion data");
        n_fills++;
      end else n_drops++;
    end
    if (llc_valid && llc_ready) begin
      check(llc_want.exists(llc_paddr - OFF), "LLC prefetch was requested");
      llc_want.delete(llc_paddr - OFF);
      n_llc_seen++;
    end
    if (in_valid && in_ready) begin
      if (in_req.llc) llc_want[in_req.block_aligned_vaddr] = 1;
      else want_fill[int'(in_req.slot_id)][in_req.block_aligned_vaddr] = 1;
    end
  end

  longint order = 0;
  task automatic send(int slot, word_t va, bit llc, longint ord);
    @(negedge clk);
    in_valid = 1;
    in_req = '{hint_arrival_order: 64'(ord), block_aligned_vaddr: va & ~64'h3f,
               slot_id: 6'(slot), llc: llc};
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk); in_valid = 0;
  endtask

  initial begin
    #5_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    delegate_en = 1; in_valid = 0; in_req = '0;
    mmu_resp_valid = 0; mmu_resp_paddr = 0; mmu_resp_fault = 0;
    c_req_ready = 0; c_resp_valid = 0; c_resp_tag = 0; c_resp_data = '0; llc_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // oldest hint first: queue four while translation is held
    mmu_hold = 1;
    send(0, 64'h1400, 0, 40);
    send(1, 64'h1100, 0, 10);
    send(2, 64'h1300, 0, 30);
    send(3, 64'h1200, 0, 20);
    repeat (3) @(negedge clk);
    mmu_hold = 0;
    repeat (60) @(negedge clk);
    check(mmu_order.size() >= 4 && mmu_order[0] == 64'h1100 && mmu_order[1] == 64'h1200 &&
          mmu_order[2] == 64'h1300 && mmu_order[3] == 64'h1400, "translation in arrival order");

    // coalescing: two slots, same line, while translation is held
    mmu_hold = 1;
    begin
      automatic int c0 = int'(n_coalesced);
      send(4, 64'h2040, 0, 50);
      send(5, 64'h2050, 0, 51);
      check(int'(n_coalesced) == c0 + 1 && int'(occupancy) == 1, "same line coalesced into one entry");
    end
    mmu_hold = 0;
    repeat (60) @(negedge clk);

    // random traffic
    order = 100;
    rand_hold = 1;
    for (int n = 0; n < 1500; n++) begin
      int slot;
      word_t va;
      slot = $urandom_range(0, 7);
      va = 64'($urandom_range(0, 4)) * 64'h1000 + 64'($urandom_range(0, 5) * 64);
      if (!(want_fill.exists(slot) && want_fill[slot].exists(va))) begin
        send(slot, va, ($urandom_range(0, 2) == 0), order);
        order++;
      end
    end
    rand_hold = 0;
    @(negedge clk); mmu_hold = 0;
    repeat (300) @(negedge clk);
    begin
      automatic int open_fill = 0;
      foreach (want_fill[s]) open_fill += want_fill[s].size();
      check(open_fill == 0, $sformatf("every request completed (%0d open)", open_fill));
      check(llc_want.size() == 0, $sformatf("every last-level request issued (%0d open)", llc_want.size()));
    end
    check(occupancy == 0, "table empty at the end");
    check(n_full > 0 && n_full_stalls > 0, "table became full");
    check(int'(n_llc) == n_llc_seen && n_llc_seen > 0, "LLC counter");
    check(n_coalesced > 0 && n_fault_drops > 0, "coalescing and fault drops happened");
    $display("fills=%0d drops=%0d llc=%0d coalesced=%0d full=%0d", n_fills, n_drops, n_llc_seen, n_coalesced, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
