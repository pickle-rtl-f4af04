// pickle_prefetch_generator: the prefetch generator engine, NUM_SLOTS kernel-executing slots.
//
// Dispatch: when the hint queue has a head and some slot is free, the head is popped and
// assigned to the lowest-numbered free slot in the same cycle (one hint per cycle).
// Each slot's prefetch requests go through a round-robin arbiter to the single request
// manager input (one request per cycle). Completions from the request manager are broadcast
// to all slots; each slot picks out its own bit of slot_bitmap. Every slot has its own port
// to the context scratchpad (ctx_* arrays, arbitrated in the context). The latest-hint table
// of the context is muxed per slot by the core/kernel of the hint the slot is running.
// Kernel code is loaded into every slot's instruction memory by the imem_* broadcast.
//
// Paper: K slots of one RV64E core and 1KiB instruction memory each (K = 64), dequeue of the
// hint-queue head into a free slot, requests to the request manager, data back to the slots.
// Own choices: lowest-index slot selection, round-robin request arbitration, broadcast fills.
//
// Lint note: verilator reports rst_n as used both synchronously and asynchronously. The
// synchronous use is only the sampling of rst_n by the submodules' assertions (disable iff);
// every flop uses rst_n as its asynchronous reset.
module pickle_prefetch_generator
  import pickle_pkg::*;
#(
  parameter int unsigned NUM_SLOTS    = 64,
  parameter int unsigned IMEM_BYTES   = 1024,
  parameter int unsigned FILL_ENTRIES = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 imem_we,
  input  logic [31:0]          imem_waddr,
  input  logic [31:0]          imem_wdata,
  // hint queue head
  input  logic                 hq_valid,
  output logic                 hq_ready,
  input  hint_entry_t          hq_entry,
  // latest-hint table from the context
  input  word_t                latest_hint [NUM_CORES][NUM_KERNELS],
  // request manager
  output logic                 rm_valid,
  input  logic                 rm_ready,
  output pf_req_t              rm_req,
  input  logic                 fill_valid,
  input  pf_fill_t             fill,
  // context ports, one per slot
  output logic [NUM_SLOTS-1:0] ctx_req,
  output logic [NUM_SLOTS-1:0] ctx_we,
  output logic [31:0]          ctx_addr  [NUM_SLOTS],
  output word_t                ctx_wdata [NUM_SLOTS],
  output logic [7:0]           ctx_be    [NUM_SLOTS],
  input  logic [NUM_SLOTS-1:0] ctx_gnt,
  input  logic [NUM_SLOTS-1:0] ctx_rvalid,
  input  word_t                ctx_rdata,
  // status
  output logic [NUM_SLOTS-1:0] slot_busy,
  output logic [31:0]          kernels_done,
  output logic [31:0]          kernels_illegal
);
  localparam int unsigned SW = (NUM_SLOTS > 1) ? $clog2(NUM_SLOTS) : 1;

  logic [NUM_SLOTS-1:0]   assign_v, pf_v, pf_gnt, k_done, k_ill;
  pf_req_t                pf_r   [NUM_SLOTS];
  logic [CORE_ID_W-1:0]   s_core [NUM_SLOTS];
  logic [KERNEL_ID_W-1:0] s_kern [NUM_SLOTS];

  // dispatch to the lowest free slot
  logic          free_any;
  logic [SW-1:0] free_idx;
  always_comb begin
    free_any = 1'b0;
    free_idx = '0;
    for (int i = NUM_SLOTS - 1; i >= 0; i--)
      if (!slot_busy[i]) begin free_any = 1'b1; free_idx = SW'(i); end
  end
  assign hq_ready = free_any;
  always_comb begin
    assign_v = '0;
    if (hq_valid && free_any) assign_v[free_idx] = 1'b1;
  end

  // round-robin request arbitration
  logic [SW-1:0] last, sel;
  logic          any;
  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int unsigned i = 1; i <= NUM_SLOTS; i++) begin
      int unsigned p;
      p = (int'(last) + i) % NUM_SLOTS;
      if (!any && pf_v[p]) begin any = 1'b1; sel = SW'(p); end
    end
  end
  assign rm_valid = any;
  assign rm_req   = pf_r[sel];
  always_comb begin
    pf_gnt = '0;
    if (any && rm_ready) pf_gnt[sel] = 1'b1;
  end

  for (genvar s = 0; s < NUM_SLOTS; s++) begin : g_slot
    pickle_slot #(.SLOT_ID(s), .IMEM_BYTES(IMEM_BYTES), .FILL_ENTRIES(FILL_ENTRIES)) u_slot (
      .clk, .rst_n,
      .imem_we, .imem_waddr, .imem_wdata,
      .assign_valid  (assign_v[s]),
      .assign_hint   (hq_entry),
      .busy          (slot_busy[s]),
      .cur_core      (s_core[s]),
      .cur_kernel    (s_kern[s]),
      .latest_hint   (latest_hint[s_core[s]][s_kern[s]]),
      .kernel_done   (k_done[s]),
      .kernel_illegal(k_ill[s]),
      .pf_valid      (pf_v[s]),
      .pf_ready      (pf_gnt[s]),
      .pf_req        (pf_r[s]),
      .fill_valid,
      .fill,
      .ctx_req       (ctx_req[s]),
      .ctx_we        (ctx_we[s]),
      .ctx_addr      (ctx_addr[s]),
      .ctx_wdata     (ctx_wdata[s]),
      .ctx_be        (ctx_be[s]),
      .ctx_gnt       (ctx_gnt[s]),
      .ctx_rvalid    (ctx_rvalid[s]),
      .ctx_rdata
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last            <= SW'(NUM_SLOTS - 1);
      kernels_done    <= '0;
      kernels_illegal <= '0;
    end else begin
      if (any && rm_ready) last <= sel;
      kernels_done    <= kernels_done + 32'($countones(k_done));
      kernels_illegal <= kernels_illegal + 32'($countones(k_done & k_ill));
    end
  end

endmodule
