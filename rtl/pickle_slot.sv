// pickle_slot: one slot of the prefetch generator engine.
//
// A slot is an RV64E core with its own instruction memory (IMEM_BYTES, default 1KiB) holding
// the prefetch kernels. When the generator assigns a hint (assign_valid), the slot latches
// the hint entry and starts the core at kernel_id*4: the first NUM_KERNELS words of the
// instruction memory form a jump table, one jump per kernel. The slot runs one kernel per
// hint; the kernel ends with ECALL/EBREAK.
//
// The core sees a data address space with the context scratchpad at 0..MMIO_BASE-1 (shared,
// through ctx_*) and slot registers at MMIO_BASE (see pickle_pkg):
//   HINT_DATA, HINT_META {slot_id,core_id,kernel_id}, ARRIVAL (hint_arrival_order),
//   LATEST_HINT (latest hint_data of this hint's core and kernel, for the drop test),
//   PF_DEST  (write: context byte address that receives the next fetched word),
//   PF_ISSUE (write vaddr: prefetch and return the 64-bit word at vaddr to PF_DEST),
//   PF_LAST  (write vaddr: prefetch for the last level of indirection, no data back),
//   PENDING  (read: fetches of this slot still outstanding).
// A store to PF_ISSUE/PF_LAST becomes a request to the request manager {arrival order,
// block-aligned vaddr, slot id, llc=last-level}. While the request manager is full (pf_ready
// low) or the slot's fill table is full, the store is not granted and the core retries it.
// Kernels finish one level of indirection before the next by polling PENDING until it is 0.
//
// Fill table: FILL_ENTRIES outstanding PF_ISSUE fetches {vaddr, dest}. A fill broadcast
// whose slot_bitmap has this slot's bit satisfies every entry on that line; the word at
// vaddr[5:3] is then written into the context at dest (writes take the context port ahead
// of the core). A dropped request (page fault) frees its entries without a write.
// The slot is free for a new hint when the core has halted and no fetch is outstanding.
//
// Paper: slot = core + 1KiB instruction memory, kernel selected by kernel_id, one kernel per
// hint, request fields, retry when the request manager is full, level-by-level walk with the
// fetched data written to the context. Own choices: the memory map, the jump table, the
// PF_DEST/PENDING mechanism and the fill table size.
//
// Lint note: verilator reports rst_n as used both synchronously and asynchronously. The
// synchronous use is only the sampling of rst_n by the assertions' disable iff; every flop
// uses rst_n as its asynchronous reset.
module pickle_slot
  import pickle_pkg::*;
#(
  parameter int unsigned SLOT_ID      = 0,
  parameter int unsigned IMEM_BYTES   = 1024,
  parameter int unsigned FILL_ENTRIES = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // instruction memory load
  input  logic                    imem_we,
  input  logic [31:0]             imem_waddr,   // byte address
  input  logic [31:0]             imem_wdata,
  // hint assignment
  input  logic                    assign_valid,
  input  hint_entry_t             assign_hint,
  output logic                    busy,
  output logic [CORE_ID_W-1:0]    cur_core,
  output logic [KERNEL_ID_W-1:0]  cur_kernel,
  input  word_t                   latest_hint,
  output logic                    kernel_done,
  output logic                    kernel_illegal,
  // requests to the request manager
  output logic                    pf_valid,
  input  logic                    pf_ready,
  output pf_req_t                 pf_req,
  // completions from the request manager
  input  logic                    fill_valid,
  input  pf_fill_t                fill,
  // context port
  output logic                    ctx_req,
  output logic                    ctx_we,
  output logic [31:0]             ctx_addr,
  output word_t                   ctx_wdata,
  output logic [7:0]              ctx_be,
  input  logic                    ctx_gnt,
  input  logic                    ctx_rvalid,
  input  word_t                   ctx_rdata
);
  localparam int unsigned IWORDS = IMEM_BYTES / 4;
  localparam int unsigned IAW    = $clog2(IWORDS);
  localparam int unsigned FW     = $clog2(FILL_ENTRIES);

  logic [31:0] imem [IWORDS];
  hint_entry_t hint;

  // core
  logic        c_halted, c_done, c_illegal;
  logic [31:0] c_iaddr;
  logic        c_dreq, c_dwe, c_dgnt, c_drvalid;
  logic [63:0] c_daddr, c_dwdata, c_drdata;
  logic [7:0]  c_dbe;

  pickle_rv64e_core u_core (
    .clk, .rst_n,
    .start     (assign_valid),
    .start_pc  ({{(32-KERNEL_ID_W-2){1'b0}}, assign_hint.kernel_id, 2'b00}),
    .halted    (c_halted),
    .done      (c_done),
    .illegal   (c_illegal),
    .imem_addr (c_iaddr),
    .imem_rdata(imem[c_iaddr[2 +: IAW]]),
    .dreq      (c_dreq),
    .dwe       (c_dwe),
    .daddr     (c_daddr),
    .dwdata    (c_dwdata),
    .dbe       (c_dbe),
    .dgnt      (c_dgnt),
    .drvalid   (c_drvalid),
    .drdata    (c_drdata)
  );

  always_ff @(posedge clk) begin
    if (imem_we) imem[imem_waddr[2 +: IAW]] <= imem_wdata;
  end

  // fill table
  logic [FILL_ENTRIES-1:0] f_valid, f_have;
  word_t                   f_vaddr [FILL_ENTRIES];
  logic [31:0]             f_dest  [FILL_ENTRIES];
  word_t                   f_data  [FILL_ENTRIES];
  logic [31:0]             pf_dest;

  logic          f_free_any, f_wr_any;
  logic [FW-1:0] f_free_idx, f_wr_idx;
  logic [31:0]   pending;
  always_comb begin
    f_free_any = 1'b0; f_free_idx = '0;
    f_wr_any   = 1'b0; f_wr_idx   = '0;
    pending    = '0;
    for (int i = FILL_ENTRIES - 1; i >= 0; i--) begin
      if (!f_valid[i]) begin f_free_any = 1'b1; f_free_idx = FW'(i); end
      if (f_valid[i] && f_have[i]) begin f_wr_any = 1'b1; f_wr_idx = FW'(i); end
    end
    for (int i = 0; i < FILL_ENTRIES; i++) pending += {31'b0, f_valid[i]};
  end

  // address decode of the core's access
  logic is_mmio, is_issue, is_last;
  assign is_mmio  = (c_daddr[31:0] >= MMIO_BASE) || (c_daddr[63:32] != '0);
  assign is_issue = is_mmio && c_dwe && (c_daddr[31:0] == MMIO_PF_ISSUE);
  assign is_last  = is_mmio && c_dwe && (c_daddr[31:0] == MMIO_PF_LAST);

  // prefetch request
  assign pf_valid = c_dreq && ((is_issue && f_free_any) || is_last);
  assign pf_req   = '{hint_arrival_order: hint.hint_arrival_order,
                      block_aligned_vaddr: {c_dwdata[63:OFFSET_BITS], {OFFSET_BITS{1'b0}}},
                      slot_id: 6'(SLOT_ID), llc: is_last};

  // context port: fill write-back has priority over the core
  logic core_ctx;
  assign core_ctx  = c_dreq && !is_mmio && !f_wr_any;
  assign ctx_req   = f_wr_any || (c_dreq && !is_mmio);
  assign ctx_we    = f_wr_any ? 1'b1 : c_dwe;
  assign ctx_addr  = f_wr_any ? f_dest[f_wr_idx] : c_daddr[31:0];
  assign ctx_wdata = f_wr_any ? f_data[f_wr_idx] : c_dwdata;
  assign ctx_be    = f_wr_any ? 8'hff : c_dbe;

  logic        mmio_rvalid;
  word_t       mmio_rdata;
  logic        ctx_rd_pending;

  always_comb begin
    c_dgnt = 1'b0;
    if (c_dreq) begin
      if (!is_mmio)      c_dgnt = core_ctx && ctx_gnt;
      else if (is_issue) c_dgnt = pf_ready && f_free_any;
      else if (is_last)  c_dgnt = pf_ready;
      else               c_dgnt = 1'b1;
    end
  end
  assign c_drvalid = mmio_rvalid || (ctx_rd_pending && ctx_rvalid);
  assign c_drdata  = mmio_rvalid ? mmio_rdata : ctx_rdata;

  assign cur_core       = hint.core_id;
  assign cur_kernel     = hint.kernel_id;
  assign busy           = !c_halted || (f_valid != '0);
  assign kernel_done    = c_done;
  assign kernel_illegal = c_illegal;

  logic fill_hit;
  assign fill_hit = fill_valid && fill.slot_bitmap[SLOT_ID];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hint           <= '0;
      pf_dest        <= '0;
      mmio_rvalid    <= 1'b0;
      mmio_rdata     <= '0;
      ctx_rd_pending <= 1'b0;
      f_valid        <= '0;
      f_have         <= '0;
      for (int i = 0; i < FILL_ENTRIES; i++) begin
        f_vaddr[i] <= '0; f_dest[i] <= '0; f_data[i] <= '0;
      end
    end else begin
      if (assign_valid) hint <= assign_hint;
      mmio_rvalid <= 1'b0;
      if (c_dreq && c_dgnt && !is_mmio && !c_dwe) ctx_rd_pending <= 1'b1;
      else if (ctx_rvalid)                        ctx_rd_pending <= 1'b0;
      if (c_dreq && c_dgnt && is_mmio && !c_dwe) begin
        mmio_rvalid <= 1'b1;
        unique case (c_daddr[31:0])
          MMIO_HINT_DATA:   mmio_rdata <= hint.hint_data;
          MMIO_HINT_META:   mmio_rdata <= 64'({6'(SLOT_ID), hint.core_id, hint.kernel_id});
          MMIO_LATEST_HINT: mmio_rdata <= latest_hint;
          MMIO_PENDING:     mmio_rdata <= 64'(pending);
          MMIO_ARRIVAL:     mmio_rdata <= hint.hint_arrival_order;
          default:          mmio_rdata <= '0;
        endcase
      end
      if (c_dreq && c_dgnt && is_mmio && c_dwe && c_daddr[31:0] == MMIO_PF_DEST)
        pf_dest <= c_dwdata[31:0];
      // fills
      for (int i = 0; i < FILL_ENTRIES; i++) begin
        if (fill_hit && f_valid[i] && !f_have[i] &&
            f_vaddr[i][63:OFFSET_BITS] == fill.block_aligned_vaddr[63:OFFSET_BITS]) begin
          if (fill.dropped) f_valid[i] <= 1'b0;
          else begin
            f_have[i] <= 1'b1;
            f_data[i] <= line_word(fill.data, f_vaddr[i][5:3]);
          end
        end
      end
      if (f_wr_any && ctx_gnt) begin
        f_valid[f_wr_idx] <= 1'b0;
        f_have[f_wr_idx]  <= 1'b0;
      end
      if (c_dreq && c_dgnt && is_issue) begin
        f_valid[f_free_idx] <= 1'b1;
        f_have[f_free_idx]  <= 1'b0;
        f_vaddr[f_free_idx] <= c_dwdata;
        f_dest[f_free_idx]  <= pf_dest;
      end
    end
  end

  a_assign_free: assert property (@(posedge clk) disable iff (!rst_n) assign_valid |-> !busy);

endmodule
