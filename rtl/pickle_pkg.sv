// pickle_pkg: types and constants shared by the Pickle last-level-cache prefetcher.
//
// The two table entries follow the bit layouts of the prefetcher's data structures:
//   hint queue entry      (134 bits): kernel_id[133:131] core_id[130:128]
//                                     hint_data[127:64] hint_arrival_order[63:0]
//   request manager entry (260 bits): status[259:257] llc[256] slot_bitmap[255:192]
//                                     block_aligned_paddr[191:128]
//                                     block_aligned_vaddr[127:64] hint_arrival_order[63:0]
// The field order and widths are the paper's. The encoding of the 3-bit status field, the
// memory map seen by a generator slot and the page-table entry format are this design's
// own choices (the paper does not give them).
package pickle_pkg;

  localparam int unsigned KERNEL_ID_W = 3;   // up to 8 prefetch kernels
  localparam int unsigned CORE_ID_W   = 3;   // 8 host cores
  localparam int unsigned NUM_KERNELS = 1 << KERNEL_ID_W;
  localparam int unsigned NUM_CORES   = 1 << CORE_ID_W;
  localparam int unsigned SLOTS_MAX   = 64;  // width of slot_bitmap
  localparam int unsigned LINE_BYTES  = 64;
  localparam int unsigned LINE_BITS   = LINE_BYTES * 8;
  localparam int unsigned OFFSET_BITS = 6;

  typedef logic [63:0]          word_t;
  typedef logic [LINE_BITS-1:0] line_t;

  // Prefetch hint queue entry (134 bits).
  typedef struct packed {
    logic [KERNEL_ID_W-1:0] kernel_id;
    logic [CORE_ID_W-1:0]   core_id;
    word_t                  hint_data;
    word_t                  hint_arrival_order;
  } hint_entry_t;

  // Status of a request manager entry (3 bits).
  typedef enum logic [2:0] {
    RQ_FREE   = 3'd0,  // entry unused
    RQ_NEW    = 3'd1,  // waiting for address translation
    RQ_XLATE  = 3'd2,  // translation in flight in PickleMMU
    RQ_READY  = 3'd3,  // translated, waiting to be issued
    RQ_ISSUED = 3'd4   // issued to PickleCache, waiting for data
  } req_status_e;

  // Prefetch request manager entry (260 bits).
  typedef struct packed {
    req_status_e          status;
    logic                 llc;
    logic [SLOTS_MAX-1:0] slot_bitmap;
    word_t                block_aligned_paddr;
    word_t                block_aligned_vaddr;
    word_t                hint_arrival_order;
  } req_entry_t;

  // Prefetch request sent by a generator slot to the request manager.
  typedef struct packed {
    word_t      hint_arrival_order;
    word_t      block_aligned_vaddr;
    logic [5:0] slot_id;
    logic       llc;                  // request of the last level of indirection
  } pf_req_t;

  // Completion broadcast from the request manager to the generator slots.
  typedef struct packed {
    logic [SLOTS_MAX-1:0] slot_bitmap;
    word_t                block_aligned_vaddr;
    logic                 dropped;    // page fault: no data
    line_t                data;
  } pf_fill_t;

  // Event counters brought out of the prefetcher.
  typedef struct packed {
    logic [31:0] hints_ignored;
    logic [31:0] kernels_done;
    logic [31:0] kernels_illegal;
    logic [31:0] rm_alloc;
    logic [31:0] rm_coalesced;
    logic [31:0] rm_fault_drops;
    logic [31:0] rm_llc;
    logic [31:0] rm_cache;
    logic [31:0] rm_full_stalls;
    logic [31:0] mmu_l1_hits;
    logic [31:0] mmu_l2_hits;
    logic [31:0] mmu_walks;
    logic [31:0] mmu_faults;
    logic [31:0] pc_hits;
    logic [31:0] pc_misses;
    logic [31:0] pc_victims;
    logic [31:0] pc_mshr_waits;
  } pickle_stats_t;

  // Slot data address map (byte addresses seen by a slot's RV64E core).
  localparam logic [31:0] MMIO_BASE        = 32'h0010_0000;
  localparam logic [31:0] MMIO_HINT_DATA   = 32'h0010_0000; // R: hint_data
  localparam logic [31:0] MMIO_HINT_META   = 32'h0010_0008; // R: {slot_id, core_id, kernel_id}
  localparam logic [31:0] MMIO_LATEST_HINT = 32'h0010_0010; // R: latest hint_data of core/kernel
  localparam logic [31:0] MMIO_PF_DEST     = 32'h0010_0018; // W: context byte address for fill word
  localparam logic [31:0] MMIO_PF_ISSUE    = 32'h0010_0020; // W: vaddr, fetch and return word
  localparam logic [31:0] MMIO_PF_LAST     = 32'h0010_0028; // W: vaddr, last-level prefetch
  localparam logic [31:0] MMIO_PENDING     = 32'h0010_0030; // R: outstanding fills of the slot
  localparam logic [31:0] MMIO_ARRIVAL     = 32'h0010_0038; // R: hint_arrival_order

  // Page-table entry format used by the page walker: bit 0 valid, bits 47:12 frame number.
  localparam int unsigned PTE_VALID_BIT = 0;

  function automatic word_t line_word(line_t l, logic [2:0] idx);
    return l[idx*64 +: 64];
  endfunction

endpackage
