// pickle_top: the Pickle prefetcher tile together with the LLC-side delegation units.
//
// Data flow (numbers as in the prefetcher's block diagram):
//   (1) hint stores from the cores enter the hint queue, which also updates the per-kernel
//       latest-hint context at once;
//   (2) the queue head is assigned to a free generator slot, whose RV64E core runs the
//       kernel selected by kernel_id with hint_data as input;
//   (13)(14) kernels read and write the prefetch context scratchpad;
//   (3) kernels send prefetch requests to the request manager, which coalesces them;
//   (5)(6) the request manager translates them through PickleMMU, whose page walks
//   (7)(8) read page-table lines through PickleCache;
//   (11)(12) non-last-level requests are fetched through PickleCache and the line comes
//       back (4) to the slots that asked for it;
//   (9)(10) PickleCache misses and victim writes use the network port of the tile;
//   last-level requests go, with the translated address, to the FETCH_IF_NOT_PRESENT unit
//   of the LLC slice that holds the line (NUM_LLC_SLICES units, line-interleaved).
//
// Configuration (sent by software before use): kernel code into every slot's instruction
// memory (cfg_imem_*), context words such as prefetch distance, drop distance and array
// bases (cfg_ctx_*, through the context's last port, cfg_ctx_ready = granted), the page
// table root, the delegation enable and the delegation timeout. inv_* is the TLB shootdown.
//
// Default sizes are those of the evaluated configuration: 64 slots with 1KiB instruction
// memory, 256-entry hint queue, 256KiB context, 1024-entry request manager, 64-entry L1 and
// 1024-entry 8-way L2 TLB, 256KiB 16-way PickleCache with 64 outstanding misses, 8 LLC slices
// and a 10,000-cycle delegation timeout. The slice interleaving, the configuration port
// and the network port format are this design's own choices.
//
// Lint note: verilator reports rst_n as used both synchronously and asynchronously. The
// synchronous use is only the sampling of rst_n by the submodules' assertions (disable iff); every flop
// uses rst_n as its asynchronous reset.
module pickle_top
  import pickle_pkg::*;
#(
  parameter int unsigned NUM_SLOTS      = 64,
  parameter int unsigned IMEM_BYTES     = 1024,
  parameter int unsigned FILL_ENTRIES   = 8,
  parameter int unsigned HQ_DEPTH       = 256,
  parameter logic [63:0] HINT_BASE      = 64'h1000,
  parameter int unsigned CTX_BYTES      = 262144,
  parameter int unsigned RM_ENTRIES     = 1024,
  parameter int unsigned L1_TLB_ENTRIES = 64,
  parameter int unsigned L2_TLB_ENTRIES = 1024,
  parameter int unsigned L2_TLB_WAYS    = 8,
  parameter int unsigned PC_BYTES       = 262144,
  parameter int unsigned PC_WAYS        = 16,
  parameter int unsigned PC_MSHRS       = 64,
  parameter int unsigned NUM_LLC_SLICES = 8,
  parameter int unsigned LLC_QDEPTH     = 16,
  parameter int unsigned LLC_TIMEOUT    = 10000
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // hint stores from the cores
  input  logic                  st_valid,
  output logic                  st_ready,
  input  logic [63:0]           st_addr,
  input  logic [CORE_ID_W-1:0]  st_core,
  input  word_t                 st_data,
  // configuration
  input  logic                  cfg_imem_we,
  input  logic [31:0]           cfg_imem_addr,
  input  logic [31:0]           cfg_imem_data,
  input  logic                  cfg_ctx_we,
  output logic                  cfg_ctx_ready,
  input  logic [31:0]           cfg_ctx_addr,
  input  word_t                 cfg_ctx_data,
  input  word_t                 cfg_root,
  input  logic                  cfg_delegate_en,
  input  logic                  cfg_timeout_we,
  input  logic [31:0]           cfg_timeout,
  input  logic                  inv_valid,
  input  logic                  inv_all,
  input  word_t                 inv_vaddr,
  // network port of PickleCache
  output logic                  noc_req_valid,
  input  logic                  noc_req_ready,
  output logic                  noc_req_victim,
  output word_t                 noc_req_paddr,
  output logic [15:0]           noc_req_id,
  output line_t                 noc_req_data,
  input  logic                  noc_resp_valid,
  output logic                  noc_resp_ready,
  input  logic [15:0]           noc_resp_id,
  input  line_t                 noc_resp_data,
  // LLC slices: directory/tag lookup, MRU refresh, memory fill
  output logic [NUM_LLC_SLICES-1:0] llc_lk_valid,
  output word_t                 llc_lk_paddr    [NUM_LLC_SLICES],
  input  logic [NUM_LLC_SLICES-1:0] llc_lk_resp_valid,
  input  logic [NUM_LLC_SLICES-1:0] llc_lk_in_llc,
  input  logic [NUM_LLC_SLICES-1:0] llc_lk_in_other,
  output logic [NUM_LLC_SLICES-1:0] llc_touch_valid,
  output word_t                 llc_touch_paddr [NUM_LLC_SLICES],
  output logic [NUM_LLC_SLICES-1:0] llc_mem_valid,
  input  logic [NUM_LLC_SLICES-1:0] llc_mem_ready,
  output word_t                 llc_mem_paddr   [NUM_LLC_SLICES],
  output logic [31:0]           llc_n_fills     [NUM_LLC_SLICES],
  output logic [31:0]           llc_n_mru       [NUM_LLC_SLICES],
  output logic [31:0]           llc_n_elsewhere [NUM_LLC_SLICES],
  output logic [31:0]           llc_n_timeouts  [NUM_LLC_SLICES],
  // status
  output logic [NUM_SLOTS-1:0]  slot_busy,
  output logic [$clog2(HQ_DEPTH):0] hq_count,
  output logic [$clog2(RM_ENTRIES):0] rm_occupancy,
  output pickle_stats_t         stats
);
  localparam int unsigned NPORTS = NUM_SLOTS + 1;
  localparam int unsigned LSB    = (NUM_LLC_SLICES > 1) ? $clog2(NUM_LLC_SLICES) : 1;

  // ---------------- hint queue ----------------
  logic                   prog_valid;
  logic [CORE_ID_W-1:0]   prog_core;
  logic [KERNEL_ID_W-1:0] prog_kernel;
  word_t                  prog_data;
  logic                   hq_valid, hq_ready;
  hint_entry_t            hq_entry;

  pickle_hint_queue #(.DEPTH(HQ_DEPTH), .HINT_BASE(HINT_BASE)) u_hq (
    .clk, .rst_n,
    .st_valid, .st_ready, .st_addr, .st_core, .st_data,
    .prog_valid, .prog_core, .prog_kernel, .prog_data,
    .deq_valid(hq_valid), .deq_ready(hq_ready), .deq_entry(hq_entry),
    .count(hq_count), .ignored_cnt(stats.hints_ignored)
  );

  // ---------------- context ----------------
  logic [NPORTS-1:0] cx_req, cx_we, cx_gnt, cx_rvalid;
  logic [31:0]       cx_addr  [NPORTS];
  word_t             cx_wdata [NPORTS];
  logic [7:0]        cx_be    [NPORTS];
  word_t             cx_rdata;
  word_t             latest_hint [NUM_CORES][NUM_KERNELS];

  logic [NUM_SLOTS-1:0] g_req, g_we;
  logic [31:0]          g_addr  [NUM_SLOTS];
  word_t                g_wdata [NUM_SLOTS];
  logic [7:0]           g_be    [NUM_SLOTS];

  always_comb begin
    for (int s = 0; s < NUM_SLOTS; s++) begin
      cx_addr[s]  = g_addr[s];
      cx_wdata[s] = g_wdata[s];
      cx_be[s]    = g_be[s];
    end
    cx_addr[NUM_SLOTS]  = cfg_ctx_addr;
    cx_wdata[NUM_SLOTS] = cfg_ctx_data;
    cx_be[NUM_SLOTS]    = 8'hff;
  end
  assign cx_req        = {cfg_ctx_we, g_req};
  assign cx_we         = {1'b1, g_we};
  assign cfg_ctx_ready = cx_gnt[NUM_SLOTS];

  pickle_prefetch_context #(.BYTES(CTX_BYTES), .NUM_PORTS(NPORTS)) u_ctx (
    .clk, .rst_n,
    .req(cx_req), .we(cx_we), .addr(cx_addr), .wdata(cx_wdata), .be(cx_be),
    .gnt(cx_gnt), .rvalid(cx_rvalid), .rdata(cx_rdata),
    .prog_valid, .prog_core, .prog_kernel, .prog_data,
    .latest_hint
  );

  // ---------------- generator ----------------
  logic     rm_in_valid, rm_in_ready;
  pf_req_t  rm_in_req;
  logic     fill_valid;
  pf_fill_t fill;

  pickle_prefetch_generator #(.NUM_SLOTS(NUM_SLOTS), .IMEM_BYTES(IMEM_BYTES),
                              .FILL_ENTRIES(FILL_ENTRIES)) u_gen (
    .clk, .rst_n,
    .imem_we(cfg_imem_we), .imem_waddr(cfg_imem_addr), .imem_wdata(cfg_imem_data),
    .hq_valid, .hq_ready, .hq_entry,
    .latest_hint,
    .rm_valid(rm_in_valid), .rm_ready(rm_in_ready), .rm_req(rm_in_req),
    .fill_valid, .fill,
    .ctx_req(g_req), .ctx_we(g_we), .ctx_addr(g_addr), .ctx_wdata(g_wdata), .ctx_be(g_be),
    .ctx_gnt(cx_gnt[NUM_SLOTS-1:0]), .ctx_rvalid(cx_rvalid[NUM_SLOTS-1:0]), .ctx_rdata(cx_rdata),
    .slot_busy,
    .kernels_done(stats.kernels_done), .kernels_illegal(stats.kernels_illegal)
  );

  // ---------------- request manager ----------------
  logic        mmu_req_valid, mmu_req_ready, mmu_resp_valid, mmu_resp_ready, mmu_resp_fault;
  word_t       mmu_req_vaddr, mmu_resp_paddr;
  logic        c_req_valid, c_req_ready;
  word_t       c_req_paddr;
  logic [15:0] c_req_tag;
  logic        llc_valid, llc_ready;
  word_t       llc_paddr;

  logic [1:0]  pc_req_valid, pc_req_ready, pc_resp_valid;
  word_t       pc_req_paddr [2];
  logic [15:0] pc_req_tag   [2];
  logic [15:0] pc_resp_tag;
  line_t       pc_resp_data;

  pickle_request_manager #(.ENTRIES(RM_ENTRIES)) u_rm (
    .clk, .rst_n,
    .delegate_en(cfg_delegate_en),
    .in_valid(rm_in_valid), .in_ready(rm_in_ready), .in_req(rm_in_req),
    .mmu_req_valid, .mmu_req_ready, .mmu_req_vaddr,
    .mmu_resp_valid, .mmu_resp_ready, .mmu_resp_paddr, .mmu_resp_fault,
    .c_req_valid, .c_req_ready, .c_req_paddr, .c_req_tag,
    .c_resp_valid(pc_resp_valid[1]), .c_resp_tag(pc_resp_tag), .c_resp_data(pc_resp_data),
    .llc_valid, .llc_ready, .llc_paddr,
    .fill_valid, .fill,
    .n_alloc(stats.rm_alloc), .n_coalesced(stats.rm_coalesced),
    .n_fault_drops(stats.rm_fault_drops), .n_llc(stats.rm_llc), .n_cache(stats.rm_cache),
    .n_full_stalls(stats.rm_full_stalls), .occupancy(rm_occupancy)
  );

  // ---------------- PickleMMU ----------------
  logic  pt_req_valid, pt_req_ready;
  word_t pt_req_paddr;

  pickle_mmu #(.L1_ENTRIES(L1_TLB_ENTRIES), .L2_ENTRIES(L2_TLB_ENTRIES),
               .L2_WAYS(L2_TLB_WAYS)) u_mmu (
    .clk, .rst_n,
    .root(cfg_root),
    .req_valid(mmu_req_valid), .req_ready(mmu_req_ready), .req_vaddr(mmu_req_vaddr),
    .resp_valid(mmu_resp_valid), .resp_ready(mmu_resp_ready),
    .resp_paddr(mmu_resp_paddr), .resp_fault(mmu_resp_fault),
    .pt_req_valid, .pt_req_ready, .pt_req_paddr,
    .pt_resp_valid(pc_resp_valid[0]), .pt_resp_data(pc_resp_data),
    .inv_valid, .inv_all, .inv_vaddr,
    .n_l1_hits(stats.mmu_l1_hits), .n_l2_hits(stats.mmu_l2_hits),
    .n_walks(stats.mmu_walks), .n_faults(stats.mmu_faults)
  );

  // ---------------- PickleCache ----------------
  assign pc_req_valid    = {c_req_valid, pt_req_valid};
  assign pc_req_paddr[0] = pt_req_paddr;
  assign pc_req_paddr[1] = c_req_paddr;
  assign pc_req_tag[0]   = 16'd0;
  assign pc_req_tag[1]   = c_req_tag;
  assign pt_req_ready    = pc_req_ready[0];
  assign c_req_ready     = pc_req_ready[1];

  pickle_cache #(.BYTES(PC_BYTES), .WAYS(PC_WAYS), .MSHRS(PC_MSHRS)) u_pc (
    .clk, .rst_n,
    .req_valid(pc_req_valid), .req_ready(pc_req_ready), .req_paddr(pc_req_paddr),
    .req_tag(pc_req_tag),
    .resp_valid(pc_resp_valid), .resp_tag(pc_resp_tag), .resp_data(pc_resp_data),
    .noc_req_valid, .noc_req_ready, .noc_req_victim, .noc_req_paddr, .noc_req_id,
    .noc_req_data, .noc_resp_valid, .noc_resp_ready, .noc_resp_id, .noc_resp_data,
    .n_hits(stats.pc_hits), .n_misses(stats.pc_misses), .n_victims(stats.pc_victims),
    .n_mshr_waits(stats.pc_mshr_waits)
  );

  // ---------------- LLC delegation ----------------
  logic [31:0]   timeout_q;
  logic [LSB-1:0] slice;
  logic [NUM_LLC_SLICES-1:0] d_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              timeout_q <= 32'(LLC_TIMEOUT);
    else if (cfg_timeout_we) timeout_q <= cfg_timeout;
  end

  assign slice     = (NUM_LLC_SLICES > 1) ? llc_paddr[OFFSET_BITS +: LSB] : '0;
  assign llc_ready = d_ready[slice];

  for (genvar i = 0; i < NUM_LLC_SLICES; i++) begin : g_llc
    pickle_llc_delegate #(.QDEPTH(LLC_QDEPTH)) u_del (
      .clk, .rst_n,
      .cmd_valid(llc_valid && slice == LSB'(i)), .cmd_ready(d_ready[i]),
      .cmd_paddr(llc_paddr), .cmd_timeout(timeout_q),
      .lk_valid(llc_lk_valid[i]), .lk_paddr(llc_lk_paddr[i]),
      .lk_resp_valid(llc_lk_resp_valid[i]), .lk_in_llc(llc_lk_in_llc[i]),
      .lk_in_other(llc_lk_in_other[i]),
      .touch_valid(llc_touch_valid[i]), .touch_paddr(llc_touch_paddr[i]),
      .mem_valid(llc_mem_valid[i]), .mem_ready(llc_mem_ready[i]), .mem_paddr(llc_mem_paddr[i]),
      .n_fills(llc_n_fills[i]), .n_mru(llc_n_mru[i]), .n_elsewhere(llc_n_elsewhere[i]),
      .n_timeouts(llc_n_timeouts[i])
    );
  end

endmodule
