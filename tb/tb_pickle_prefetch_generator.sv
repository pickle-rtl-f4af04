// tb_pickle_prefetch_generator: the prefetch generator engine with four slots.
//
// The generator takes hints from a hint-queue model, runs the BFS kernel of tb_rv_asm_pkg in
// its slots and sends their requests, one per cycle, to a request-manager model that
// returns lines of the tb_graph_pkg graph after a random delay. The context is the real
// scratchpad block with one port per slot. Checked: a hint goes to the lowest free slot,
// only when a slot is free; several slots run at once; every hint's kernel completes; the
// last-level prefetches of all hints together are exactly the expected visited[] lines;
// each completion reaches only the slots in its bitmap; the done counter.
`timescale 1ns/1ps
module tb_pickle_prefetch_generator;
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

  localparam int NS = 4;
  logic imem_we, hq_valid, hq_ready, rm_valid, rm_ready, fill_valid;
  logic [31:0] imem_waddr, imem_wdata, kernels_done, kernels_illegal;
  hint_entry_t hq_entry;
  word_t latest_hint [NUM_CORES][NUM_KERNELS];
  pf_req_t rm_req; pf_fill_t fill;
  logic [NS-1:0] ctx_req, ctx_we, ctx_gnt, ctx_rvalid, slot_busy;
  logic [31:0] ctx_addr [NS]; word_t ctx_wdata [NS]; logic [7:0] ctx_be [NS]; word_t ctx_rdata;

  pickle_prefetch_generator #(.NUM_SLOTS(NS)) dut (.*);

  // context: the scratchpad block, with a configuration port
  logic [NS:0] cx_req, cx_we, cx_gnt, cx_rvalid;
  logic [31:0] cx_addr [NS+1]; word_t cx_wdata [NS+1]; logic [7:0] cx_be [NS+1];
  logic cfg_we; logic [31:0] cfg_addr; word_t cfg_data;
  logic prog_valid; logic [2:0] prog_core, prog_kernel; word_t prog_data;
  always_comb begin
    for (int s = 0; s < NS; s++) begin
      cx_req[s] = ctx_req[s]; cx_we[s] = ctx_we[s]; cx_addr[s] = ctx_addr[s];
      cx_wdata[s] = ctx_wdata[s]; cx_be[s] = ctx_be[s];
    end
    cx_req[NS] = cfg_we; cx_we[NS] = 1'b1; cx_addr[NS] = cfg_addr; cx_wdata[NS] = cfg_data;
    cx_be[NS] = 8'hff;
  end
  assign ctx_gnt = cx_gnt[NS-1:0];
  assign ctx_rvalid = cx_rvalid[NS-1:0];
  pickle_prefetch_context #(.BYTES(16384), .NUM_PORTS(NS + 1)) u_ctx (
    .clk, .rst_n, .req(cx_req), .we(cx_we), .addr(cx_addr), .wdata(cx_wdata), .be(cx_be),
    .gnt(cx_gnt), .rvalid(cx_rvalid), .rdata(ctx_rdata), .prog_valid, .prog_core,
    .prog_kernel, .prog_data, .latest_hint);

  // request manager model: every line fetched for its slot alone, in order
  typedef struct { word_t va; int slot; longint due; } f_t;
  f_t fq [$];
  longint vis_seen [longint];
  int n_req = 0;
  always @(negedge clk) begin
    rm_ready = ($urandom_range(0, 3) != 0);
    fill_valid = 0;
    if (fq.size() > 0 && fq[0].due <= cyc) begin
      fill_valid = 1;
      fill.slot_bitmap = 64'(1) << fq[0].slot;
      fill.block_aligned_vaddr = fq[0].va;
      fill.dropped = 0;
      for (int w = 0; w < 8; w++) fill.data[w*64 +: 64] = 64'(tb_graph_pkg::data_word(longint'(fq[0].va) + w * 8));
      void'(fq.pop_front());
    end
  end
  always @(posedge clk) if (rst_n && rm_valid && rm_ready) begin
    check(int'(rm_req.slot_id) < NS && slot_busy[rm_req.slot_id], "request from a busy slot");
    if (rm_req.llc) vis_seen[longint'(rm_req.block_aligned_vaddr)] = 1;
    else fq.push_back('{va: rm_req.block_aligned_vaddr, slot: int'(rm_req.slot_id), due: cyc + $urandom_range(2, 20)});
    n_req++;
  end

  // dispatch checks
  int max_busy = 0, n_disp = 0;
  int disp_pending = -1;
  always @(posedge clk) if (rst_n) begin
    if ($countones(slot_busy) > max_busy) max_busy = $countones(slot_busy);
    check(hq_ready == (slot_busy != '1), "hint taken only when a slot is free");
  end
  always @(negedge clk) if (rst_n && disp_pending >= 0) begin
    check(slot_busy[disp_pending], "hint went to the lowest free slot");
    disp_pending = -1;
  end
  always @(posedge clk) if (rst_n && hq_valid && hq_ready) begin
    n_disp++;
    for (int s = NS - 1; s >= 0; s--) if (!slot_busy[s]) disp_pending = s;
  end

  localparam longint DIST = 4, DROPD = 2;

  initial begin
    #5_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic cfg(int a, longint v);
    @(negedge clk); cfg_we = 1; cfg_addr = 32'(a); cfg_data = 64'(v);
    @(posedge clk); while (!cx_gnt[NS]) @(posedge clk);
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    tb_rv_asm_pkg::prog_t prog;
    longint exp [longint];
    int dn;
    imem_we = 0; imem_waddr = 0; imem_wdata = 0; hq_valid = 0; hq_entry = '0;
    rm_ready = 0; fill_valid = 0; fill = '0;
    cfg_we = 0; cfg_addr = 0; cfg_data = 0;
    prog_valid = 0; prog_core = 0; prog_kernel = 0; prog_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    prog = tb_rv_asm_pkg::bfs_kernel();
    foreach (prog[k]) begin
      @(negedge clk); imem_we = 1; imem_waddr = 32'(k * 4); imem_wdata = prog[k];
    end
    @(negedge clk); imem_we = 0;
    cfg('h00, DIST); cfg('h08, DROPD);
    cfg('h18, tb_graph_pkg::NP); cfg('h20, tb_graph_pkg::NB); cfg('h28, tb_graph_pkg::VIS);

    // 24 hints, each from its own core/index so none is stale; pushed back to back
    for (int h = 0; h < 24; h++) begin
      longint i = 11 * h + 1, u, s, e;
      u = tb_graph_pkg::wq(i + DIST);
      s = tb_graph_pkg::np(u); e = tb_graph_pkg::np(u + 1);
      for (longint k = s; k < e; k++) exp[(tb_graph_pkg::VIS + tb_graph_pkg::nb(k) * 8) & ~64'h3f] = 1;
      @(negedge clk);
      hq_valid = 1;
      hq_entry = '{kernel_id: 3'd0, core_id: 3'(h % 8), hint_data: 64'(tb_graph_pkg::WQ + i * 8),
                   hint_arrival_order: 64'(h)};
      @(posedge clk); while (!hq_ready) @(posedge clk);
      @(negedge clk); hq_valid = 0;
    end
    while (slot_busy != '0) @(negedge clk);
    repeat (20) @(negedge clk);
    dn = 0;
    foreach (exp[a]) if (!vis_seen.exists(a)) dn++;
    foreach (vis_seen[a]) if (!exp.exists(a)) dn++;
    check(dn == 0, $sformatf("last-level prefetch set (%0d differences)", dn));
    check(kernels_done == 24 && kernels_illegal == 0, "all kernels completed");
    check(max_busy == NS, "all slots ran at once");
    check(n_disp == 24, "all hints dispatched");
    $display("requests=%0d max_busy=%0d", n_req, max_busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
