// tb_pickle_mmu: checks PickleMMU translation, TLB levels, page faults and shootdown.
//
// The page table is the computed one of tb_graph_pkg (4 levels, VA -> VA + 0x4000_0000 below
// 8MiB, leaf PTE invalid from 8MiB up to 1GiB). Page-table line reads are answered after a
// random delay. TLBs are reduced to 4 (L1) and 16 entries / 4 ways (L2). Checked: every
// physical address and fault against the page-table formula; exactly four table reads per
// walk, each at the address the VA's index selects; a repeated page is an L1 hit answered
// faster than an L2 hit, which is faster than a walk; after the L1 overflows, L2 hits occur;
// after a shootdown the page is walked again; counters agree with what was observed.
`timescale 1ns/1ps
module tb_pickle_mmu;
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

  word_t root, req_vaddr, resp_paddr, pt_req_paddr, inv_vaddr;
  logic req_valid, req_ready, resp_valid, resp_ready, resp_fault;
  logic pt_req_valid, pt_req_ready, pt_resp_valid, inv_valid, inv_all;
  line_t pt_resp_data;
  logic [31:0] n_l1_hits, n_l2_hits, n_walks, n_faults;

  pickle_mmu #(.L1_ENTRIES(4), .L2_ENTRIES(16), .L2_WAYS(4)) dut (.*);

  // expected table line for each level of a walk of va
  function automatic word_t walk_line(word_t va, int lvl);
    case (lvl)
      0: return (64'(tb_graph_pkg::ROOT) + 8 * va[47:39]) & ~64'h3f;
      1: return (64'(tb_graph_pkg::ROOT) + 64'h1000 + 8 * va[38:30]) & ~64'h3f;
      2: return (64'(tb_graph_pkg::ROOT) + 64'h2000 + 8 * va[29:21]) & ~64'h3f;
      default: return (64'h1001_0000 + 64'h1000 * va[29:21] + 8 * va[20:12]) & ~64'h3f;
    endcase
  endfunction

  // page-table memory
  int pt_reads = 0;
  word_t cur_va = 0;
  int lvl_ctr = 0;
  int pt_delay = -1;
  word_t pt_addr = 0;
  always @(negedge clk) begin
    pt_req_ready = ($urandom_range(0, 3) != 0);
    pt_resp_valid = 0;
    if (pt_delay == 0) begin
      pt_resp_valid = 1; pt_resp_data = tb_graph_pkg::mem_line(longint'(pt_addr));
      pt_delay = -1;
    end else if (pt_delay > 0) pt_delay--;
  end
  always @(posedge clk) if (pt_req_valid && pt_req_ready) begin
    pt_addr <= pt_req_paddr; pt_delay <= $urandom_range(0, 6); pt_reads++;
    check(pt_req_paddr == walk_line(cur_va, lvl_ctr), "table read address of this level");
    lvl_ctr++;
  end

  int lat_l1 = 0, lat_l2 = 0, lat_walk = 0;

  // one translation; returns latency in cycles and which path was expected
  task automatic xlate(word_t va, output int lat);
    longint t0;
    int r0;
    bit flt;
    r0 = pt_reads;
    @(negedge clk);
    cur_va = va; lvl_ctr = 0;
    req_valid = 1; req_vaddr = va;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    t0 = cyc;
    @(negedge clk); req_valid = 0;
    while (!resp_valid) @(negedge clk);
    lat = int'(cyc - t0);
    flt = (va >= 64'(tb_graph_pkg::FAULT_VA));
    check(resp_fault == flt, $sformatf("fault flag for va %0h", va));
    if (!flt) check(resp_paddr == ((va & ~64'hfff) + 64'(tb_graph_pkg::PA_OFF) + (va & 64'hfff)) ||
                    resp_paddr == ((va & ~64'hfff) + 64'(tb_graph_pkg::PA_OFF)),
                    $sformatf("physical address for va %0h", va));
    resp_ready = ($urandom_range(0, 1) != 0);
    while (!resp_ready) begin @(negedge clk); resp_ready = 1; end
    @(negedge clk); resp_ready = 1;
  endtask

  initial begin
    #5_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int lat, w0, r0;
    root = 64'(tb_graph_pkg::ROOT);
    req_valid = 0; req_vaddr = 0; resp_ready = 1;
    pt_req_ready = 0; pt_resp_valid = 0; pt_resp_data = '0;
    inv_valid = 0; inv_all = 0; inv_vaddr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // walk, then L1 hit
    r0 = pt_reads;
    xlate(64'h0012_3440, lat_walk);
    check(pt_reads - r0 == 4, "four table reads per walk");
    r0 = pt_reads;
    xlate(64'h0012_3480, lat_l1);
    check(pt_reads == r0, "L1 hit reads no table");
    // fill the L1 with four other pages, then the first page hits in L2
    for (int i = 1; i <= 4; i++) xlate(64'h0012_3000 + 64'(i) * 64'h1000, lat);
    r0 = pt_reads;
    xlate(64'h0012_3440, lat_l2);
    check(pt_reads == r0, "L2 hit reads no table");
    check(n_l2_hits == 1, "L2 hit counted");
    check(lat_l1 < lat_l2 && lat_l2 < lat_walk, "L1 hit faster than L2 hit faster than walk");
    $display("latency: L1 hit %0d, L2 hit %0d, walk %0d cycles", lat_l1, lat_l2, lat_walk);
    // page fault: four reads, leaf invalid
    r0 = pt_reads;
    xlate(64'(tb_graph_pkg::FAULT_VA) + 64'h40, lat);
    check(pt_reads - r0 == 4 && n_faults == 1, "page fault after a full walk");
    // shootdown of one page
    @(negedge clk); inv_valid = 1; inv_all = 0; inv_vaddr = 64'h0012_3440;
    @(negedge clk); inv_valid = 0;
    r0 = pt_reads;
    xlate(64'h0012_3440, lat);
    check(pt_reads - r0 == 4, "walk after single-page shootdown");
    // random traffic
    for (int n = 0; n < 300; n++) begin
      word_t va;
      va = ($urandom_range(0, 9) == 0) ? 64'(tb_graph_pkg::FAULT_VA) + 64'($urandom_range(0, 255)) * 64'h1000
                                       : 64'($urandom_range(0, 40)) * 64'h1000 + 64'($urandom_range(0, 63) * 64);
      xlate(va, lat);
      if (n == 150) begin
        @(negedge clk); inv_valid = 1; inv_all = 1;
        @(negedge clk); inv_valid = 0; inv_all = 0;
        w0 = int'(n_walks);
        xlate(va, lat);
        check(int'(n_walks) == w0 + 1, "walk after full shootdown");
      end
    end
    check(int'(n_l1_hits + n_l2_hits + n_walks) == 310, "every translation counted once");
    check(pt_reads == 4 * int'(n_walks), "table reads = 4 per walk");
    $display("l1=%0d l2=%0d walks=%0d faults=%0d", n_l1_hits, n_l2_hits, n_walks, n_faults);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
