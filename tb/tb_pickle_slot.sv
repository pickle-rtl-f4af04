// tb_pickle_slot: runs the BFS prefetch kernel in one generator slot (slot 3).
//
// The slot's core runs the kernel of tb_rv_asm_pkg against the graph of tb_graph_pkg.
// Models: the context scratchpad (random grant, read data one cycle later), and the request
// manager (random ready; a fetched line comes back after a random delay with the graph data,
// or as a drop when its page is unmapped). Checked, per hint: every request carries this
// slot's id and the hint's arrival order; the last-level prefetches are exactly the visited[]
// lines of the neighbours of node wq[i + distance]; a hint overtaken by a newer one from the
// same core is dropped without any request; a page fault ends the kernel after its first
// fetch; the fetched words land in the slot's context area; busy falls when the kernel ends.
`timescale 1ns/1ps
module tb_pickle_slot;
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

  localparam int SID = 3;
  logic imem_we, assign_valid, busy, kernel_done, kernel_illegal, pf_valid, pf_ready, fill_valid;
  logic [31:0] imem_waddr, imem_wdata;
  hint_entry_t assign_hint;
  logic [2:0] cur_core, cur_kernel;
  word_t latest_hint;
  pf_req_t pf_req; pf_fill_t fill;
  logic ctx_req, ctx_we, ctx_gnt, ctx_rvalid; logic [31:0] ctx_addr; word_t ctx_wdata, ctx_rdata;
  logic [7:0] ctx_be;

  pickle_slot #(.SLOT_ID(SID)) dut (.*);

  // context model
  word_t cmem [8192];
  always @(negedge clk) ctx_gnt = ctx_req && ($urandom_range(0, 3) != 0);
  always @(posedge clk) begin
    ctx_rvalid <= 1'b0;
    if (ctx_req && ctx_gnt) begin
      if (ctx_we) begin
        for (int b = 0; b < 8; b++) if (ctx_be[b]) cmem[ctx_addr[15:3]][b*8 +: 8] <= ctx_wdata[b*8 +: 8];
      end else begin
        ctx_rvalid <= 1'b1; ctx_rdata <= cmem[ctx_addr[15:3]];
      end
    end
  end

  // request manager model
  typedef struct { word_t va; longint due; } f_t;
  f_t fq [$];
  longint vis_seen [longint];
  int n_issue = 0, n_last = 0;
  logic [63:0] cur_order = 0;
  always @(negedge clk) begin
    pf_ready = ($urandom_range(0, 4) != 0);
    fill_valid = 0;
    if (fq.size() > 0 && fq[0].due <= cyc) begin
      fill_valid = 1;
      fill.slot_bitmap = 64'(1) << SID | 64'(1) << 7;
      fill.block_aligned_vaddr = fq[0].va;
      fill.dropped = (fq[0].va >= 64'(tb_graph_pkg::FAULT_VA));
      for (int w = 0; w < 8; w++) fill.data[w*64 +: 64] = 64'(tb_graph_pkg::data_word(longint'(fq[0].va) + w * 8));
      void'(fq.pop_front());
    end
  end
  always @(posedge clk) if (rst_n && pf_valid && pf_ready) begin
    check(pf_req.slot_id == 6'(SID), "request carries the slot id");
    check(pf_req.hint_arrival_order == cur_order, "request carries the hint's arrival order");
    check(pf_req.block_aligned_vaddr[5:0] == 0, "request is line aligned");
    if (pf_req.llc) begin vis_seen[longint'(pf_req.block_aligned_vaddr)] = 1; n_last++; end
    else begin
      fq.push_back('{va: pf_req.block_aligned_vaddr, due: cyc + $urandom_range(2, 15)});
      n_issue++;
    end
  end

  localparam longint DIST = 4, DROPD = 2;

  task automatic run_hint(int core, longint i, longint latest, logic [63:0] order);
    @(negedge clk);
    cur_order = order;
    latest_hint = 64'(latest);
    assign_valid = 1;
    assign_hint = '{kernel_id: 3'd0, core_id: 3'(core), hint_data: 64'(tb_graph_pkg::WQ + i * 8),
                    hint_arrival_order: order};
    @(negedge clk); assign_valid = 0;
    check(busy, "busy after assignment");
    while (busy) @(negedge clk);
  endtask

  function automatic int expect_lines(longint i, ref longint exp [longint]);
    longint u, s, e;
    exp.delete();
    u = tb_graph_pkg::wq(i + DIST);
    s = tb_graph_pkg::np(u); e = tb_graph_pkg::np(u + 1);
    for (longint k = s; k < e; k++)
      exp[(tb_graph_pkg::VIS + tb_graph_pkg::nb(k) * 8) & ~64'h3f] = 1;
    return int'(e - s);
  endfunction

  initial begin
    #5_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    tb_rv_asm_pkg::prog_t prog;
    longint exp [longint];
    int nnb, i0, l0, dn;
    imem_we = 0; imem_waddr = 0; imem_wdata = 0; assign_valid = 0; assign_hint = '0;
    latest_hint = 0; pf_ready = 0; fill_valid = 0; fill = '0; ctx_gnt = 0; ctx_rdata = 0;
    foreach (cmem[k]) cmem[k] = 0;
    cmem[0] = 64'(DIST); cmem[1] = 64'(DROPD);
    cmem[3] = 64'(tb_graph_pkg::NP); cmem[4] = 64'(tb_graph_pkg::NB); cmem[5] = 64'(tb_graph_pkg::VIS);
    repeat (2) @(posedge clk);
    rst_n = 1;
    prog = tb_rv_asm_pkg::bfs_kernel();
    foreach (prog[k]) begin
      @(negedge clk); imem_we = 1; imem_waddr = 32'(k * 4); imem_wdata = prog[k];
    end
    @(negedge clk); imem_we = 0;
    @(negedge clk);
    check(!busy, "idle after loading");

    // served hints
    for (int h = 0; h < 12; h++) begin
      longint i = 37 * h + 5;
      vis_seen.delete();
      dn = 0;
      nnb = expect_lines(i, exp);
      run_hint(h % 8, i, (h % 8 == 0) ? 0 : tb_graph_pkg::WQ + (i - 1) * 8, 64'(100 + h));
      check(!kernel_illegal, "no illegal instruction");
      foreach (exp[a]) if (!vis_seen.exists(a)) dn++;
      foreach (vis_seen[a]) if (!exp.exists(a)) dn++;
      check(dn == 0, $sformatf("last-level prefetch set of hint %0d", i));
      check(cmem[(32'h1000 + SID * 1024) / 8] == 64'(tb_graph_pkg::wq(i + DIST)),
            "fetched node id in the slot area");
      check(cmem[(32'h1000 + SID * 1024) / 8 + 3 + nnb - 1] ==
            64'(tb_graph_pkg::nb(tb_graph_pkg::np(tb_graph_pkg::wq(i + DIST) + 1) - 1)),
            "last fetched neighbour in the slot area");
    end

    // stale hint: latest hint of this core is already well ahead -> no request
    i0 = n_issue; l0 = n_last;
    run_hint(2, 300, tb_graph_pkg::WQ + 310 * 8, 64'd500);
    check(n_issue == i0 && n_last == l0, "stale hint dropped without requests");

    // page fault on the first level: one fetch, then the kernel ends
    i0 = n_issue; l0 = n_last;
    run_hint(4, (tb_graph_pkg::FAULT_VA - tb_graph_pkg::WQ) / 8 - DIST + 2, 0, 64'd501);
    check(n_issue == i0 + 1 && n_last == l0, "page fault ends the kernel after one fetch");
    check(!kernel_illegal, "no illegal instruction");
    $display("issue=%0d last=%0d", n_issue, n_last);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
