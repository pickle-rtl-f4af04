// pickle_request_manager: the prefetch request manager of the Pickle backend.
//
// Holds up to ENTRIES (default 1024) requests as req_entry_t {status, llc, slot_bitmap,
// block_aligned_paddr, block_aligned_vaddr, hint_arrival_order}.
//  * Allocation and coalescing: a request whose block-aligned vaddr matches a live entry is
//    merged into it (its slot's bit is set in slot_bitmap, the older arrival order is kept,
//    llc stays set only if both were last-level); otherwise a free entry is allocated.
//    in_ready is low while no entry is free; the slot then retries.
//  * Translation: the oldest NEW entry (smallest hint_arrival_order, then lowest index) is
//    sent to PickleMMU; one translation is in flight at a time. A page fault drops the entry
//    and tells the slots in its bitmap (fill with dropped=1).
//  * Issue: the oldest READY entry is sent either to the LLC controller as a delegated
//    last-level prefetch (llc=1 and delegation enabled; the entry is then freed) or to
//    PickleCache tagged with its entry index. When PickleCache returns the line, the line is
//    broadcast with the entry's slot_bitmap and the entry is freed.
// Timing: one request accepted, one translation launched and one issue per cycle at most;
// cache responses are always accepted and have priority over MMU responses on the fill bus.
//
// Paper: entry fields and widths, coalescing by block vaddr with a slot bitmap, oldest hint
// first priority, translation through PickleMMU, drop on page fault, last level to the LLC,
// others to PickleCache, data back to the requesting slots. Own choices: the status
// encoding, one translation in flight, one issue per cycle, merge rules for llc/order.
//
// Lint note: verilator reports rst_n as used both synchronously and asynchronously. The
// synchronous use is only the sampling of rst_n by the assertions' disable iff; every flop
// uses rst_n as its asynchronous reset.
module pickle_request_manager
  import pickle_pkg::*;
#(
  parameter int unsigned ENTRIES = 1024
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  delegate_en,
  // from the prefetch generator
  input  logic                  in_valid,
  output logic                  in_ready,
  input  pf_req_t               in_req,
  // PickleMMU
  output logic                  mmu_req_valid,
  input  logic                  mmu_req_ready,
  output word_t                 mmu_req_vaddr,
  input  logic                  mmu_resp_valid,
  output logic                  mmu_resp_ready,
  input  word_t                 mmu_resp_paddr,
  input  logic                  mmu_resp_fault,
  // PickleCache
  output logic                  c_req_valid,
  input  logic                  c_req_ready,
  output word_t                 c_req_paddr,
  output logic [15:0]           c_req_tag,
  input  logic                  c_resp_valid,
  input  logic [15:0]           c_resp_tag,
  input  line_t                 c_resp_data,
  // LLC delegation (FETCH_IF_NOT_PRESENT)
  output logic                  llc_valid,
  input  logic                  llc_ready,
  output word_t                 llc_paddr,
  // completions to the slots
  output logic                  fill_valid,
  output pf_fill_t              fill,
  // statistics
  output logic [31:0]           n_alloc,
  output logic [31:0]           n_coalesced,
  output logic [31:0]           n_fault_drops,
  output logic [31:0]           n_llc,
  output logic [31:0]           n_cache,
  output logic [31:0]           n_full_stalls,
  output logic [$clog2(ENTRIES):0] occupancy
);
  localparam int unsigned IW = $clog2(ENTRIES);

  req_entry_t  ent [ENTRIES];

  logic [IW-1:0] xl_idx;       // entry in translation
  logic          xl_busy;

  // ---- combinational searches ----
  logic          free_any, match_any, new_any, rdy_any;
  logic [IW-1:0] free_idx, match_idx, new_idx, rdy_idx;
  word_t         new_ord, rdy_ord;

  logic          do_resp, do_fault_resp, do_xl_resp, do_llc, do_cache;

  always_comb begin
    free_any = 1'b0; free_idx = '0;
    match_any = 1'b0; match_idx = '0;
    new_any = 1'b0; new_idx = '0; new_ord = '1;
    rdy_any = 1'b0; rdy_idx = '0; rdy_ord = '1;
    for (int i = 0; i < ENTRIES; i++) begin
      if (ent[i].status == RQ_FREE) begin
        if (!free_any) begin free_any = 1'b1; free_idx = IW'(i); end
      end else begin
        if (!match_any && ent[i].block_aligned_vaddr == in_req.block_aligned_vaddr) begin
          match_any = 1'b1; match_idx = IW'(i);
        end
      end
      if (ent[i].status == RQ_NEW && (!new_any || ent[i].hint_arrival_order < new_ord)) begin
        new_any = 1'b1; new_idx = IW'(i); new_ord = ent[i].hint_arrival_order;
      end
      if (ent[i].status == RQ_READY && (!rdy_any || ent[i].hint_arrival_order < rdy_ord)) begin
        rdy_any = 1'b1; rdy_idx = IW'(i); rdy_ord = ent[i].hint_arrival_order;
      end
    end
  end

  // ---- translation ----
  assign mmu_req_valid  = new_any && !xl_busy;
  assign mmu_req_vaddr  = ent[new_idx].block_aligned_vaddr;
  assign mmu_resp_ready = !c_resp_valid;
  assign do_xl_resp     = mmu_resp_valid && mmu_resp_ready && xl_busy;
  assign do_fault_resp  = do_xl_resp && mmu_resp_fault;

  // ---- issue ----
  logic rdy_to_llc;
  assign rdy_to_llc  = ent[rdy_idx].llc && delegate_en;
  assign llc_valid   = rdy_any && rdy_to_llc;
  assign llc_paddr   = ent[rdy_idx].block_aligned_paddr;
  assign c_req_valid = rdy_any && !rdy_to_llc;
  assign c_req_paddr = ent[rdy_idx].block_aligned_paddr;
  assign c_req_tag   = 16'(rdy_idx);
  assign do_llc      = llc_valid && llc_ready;
  assign do_cache    = c_req_valid && c_req_ready;
  assign do_resp     = c_resp_valid;

  // ---- coalescing: never merge into an entry that leaves this cycle ----
  logic leaving, do_merge, do_alloc;
  always_comb begin
    leaving = 1'b0;
    if (do_resp && match_idx == IW'(c_resp_tag))     leaving = 1'b1;
    if (do_fault_resp && match_idx == xl_idx)        leaving = 1'b1;
    if (do_llc && match_idx == rdy_idx)              leaving = 1'b1;
  end
  assign in_ready = free_any;
  assign do_merge = in_valid && in_ready && match_any && !leaving;
  assign do_alloc = in_valid && in_ready && !(match_any && !leaving);

  // ---- completions ----
  always_comb begin
    fill_valid = 1'b0;
    fill       = '0;
    if (do_resp) begin
      fill_valid               = 1'b1;
      fill.slot_bitmap         = ent[IW'(c_resp_tag)].slot_bitmap;
      fill.block_aligned_vaddr = ent[IW'(c_resp_tag)].block_aligned_vaddr;
      fill.data                = c_resp_data;
    end else if (do_fault_resp) begin
      fill_valid               = 1'b1;
      fill.slot_bitmap         = ent[xl_idx].slot_bitmap;
      fill.block_aligned_vaddr = ent[xl_idx].block_aligned_vaddr;
      fill.dropped             = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) ent[i] <= '0;
      xl_busy       <= 1'b0;
      xl_idx        <= '0;
      n_alloc       <= '0;
      n_coalesced   <= '0;
      n_fault_drops <= '0;
      n_llc         <= '0;
      n_cache       <= '0;
      n_full_stalls <= '0;
      occupancy     <= '0;
    end else begin
      // translation launch / return
      if (mmu_req_valid && mmu_req_ready) begin
        ent[new_idx].status <= RQ_XLATE;
        xl_busy <= 1'b1;
        xl_idx  <= new_idx;
      end
      if (do_xl_resp) begin
        xl_busy <= 1'b0;
        if (mmu_resp_fault) begin
          ent[xl_idx].status <= RQ_FREE;
          n_fault_drops <= n_fault_drops + 1'b1;
        end else begin
          ent[xl_idx].status <= RQ_READY;
          ent[xl_idx].block_aligned_paddr <= {mmu_resp_paddr[63:OFFSET_BITS], {OFFSET_BITS{1'b0}}};
        end
      end
      // issue
      if (do_llc) begin
        ent[rdy_idx].status <= RQ_FREE;
        n_llc <= n_llc + 1'b1;
      end
      if (do_cache) begin
        ent[rdy_idx].status <= RQ_ISSUED;
        n_cache <= n_cache + 1'b1;
      end
      if (do_resp) ent[IW'(c_resp_tag)].status <= RQ_FREE;
      // input
      if (do_merge) begin
        ent[match_idx].slot_bitmap[in_req.slot_id] <= 1'b1;
        ent[match_idx].llc <= ent[match_idx].llc && in_req.llc;
        if (in_req.hint_arrival_order < ent[match_idx].hint_arrival_order)
          ent[match_idx].hint_arrival_order <= in_req.hint_arrival_order;
        n_coalesced <= n_coalesced + 1'b1;
      end
      if (do_alloc) begin
        ent[free_idx] <= '{status: RQ_NEW, llc: in_req.llc,
                           slot_bitmap: SLOTS_MAX'(1) << in_req.slot_id,
                           block_aligned_paddr: '0,
                           block_aligned_vaddr: in_req.block_aligned_vaddr,
                           hint_arrival_order: in_req.hint_arrival_order};
        n_alloc <= n_alloc + 1'b1;
      end
      if (in_valid && !in_ready) n_full_stalls <= n_full_stalls + 1'b1;
      occupancy <= occupancy + (IW+1)'(do_alloc)
                   - ((IW+1)'(do_llc) + (IW+1)'(do_resp) + (IW+1)'(do_fault_resp));
    end
  end

  a_resp_issued: assert property (@(posedge clk) disable iff (!rst_n)
                   c_resp_valid |-> ent[IW'(c_resp_tag)].status == RQ_ISSUED);
  a_merge_alloc: assert property (@(posedge clk) disable iff (!rst_n) !(do_merge && do_alloc));

endmodule
