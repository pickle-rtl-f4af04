// pickle_mmu: PickleMMU, the prefetcher's own address translation unit.
//
// Translates the block-aligned virtual address of a prefetch into a physical address using
// the application's page table, so no core MMU is involved. One translation at a time:
//   cycle 1  L1 TLB lookup (L1_ENTRIES, fully associative); hit -> response
//   cycle 2  L2 TLB lookup (L2_ENTRIES, L2_WAYS-way); hit -> refill L1, response
//   walk     four-level page-table walk from root (9 VA bits per level, 4KiB pages): each
//            level reads the 64-byte line holding the PTE through PickleCache (pt_req_*,
//            pt_resp_*), takes the PTE at paddr[5:3], and faults if PTE bit 0 (valid) is 0.
//            The leaf fills both TLBs.
// A fault is reported with resp_fault=1 (the request manager then drops the prefetch).
// inv_valid/inv_all/inv_vaddr invalidate both TLBs (TLB shootdown); a walk in progress is
// not affected. The response is held until resp_ready.
//
// Paper: L1/L2 TLB sizes, page walks through PickleCache, page-fault drop, root page table
// address set at configuration, shootdown participation. Own choices: PTE format (bit 0
// valid, bits 47:12 next-level/frame address), 48-bit 4-level walk, 4KiB pages only, no
// permission bits, a single walker.
module pickle_mmu
  import pickle_pkg::*;
#(
  parameter int unsigned L1_ENTRIES = 64,
  parameter int unsigned L2_ENTRIES = 1024,
  parameter int unsigned L2_WAYS    = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  input  word_t  root,              // physical address of the top-level table
  input  logic   req_valid,
  output logic   req_ready,
  input  word_t  req_vaddr,
  output logic   resp_valid,
  input  logic   resp_ready,
  output word_t  resp_paddr,
  output logic   resp_fault,
  // page-table reads through PickleCache
  output logic   pt_req_valid,
  input  logic   pt_req_ready,
  output word_t  pt_req_paddr,
  input  logic   pt_resp_valid,
  input  line_t  pt_resp_data,
  // TLB shootdown
  input  logic   inv_valid,
  input  logic   inv_all,
  input  word_t  inv_vaddr,
  // statistics
  output logic [31:0] n_l1_hits,
  output logic [31:0] n_l2_hits,
  output logic [31:0] n_walks,
  output logic [31:0] n_faults
);
  typedef enum logic [2:0] {M_IDLE, M_L1, M_L2, M_WREQ, M_WWAIT, M_RESP} mstate_e;
  mstate_e st;

  word_t       va;
  word_t       table_base;
  logic [1:0]  level;        // 3 = top level
  word_t       pte_addr;
  word_t       pte;

  logic        l1_hit, l2_hit;
  logic [51:0] l1_ppn, l2_ppn;
  logic        l1_fill, l2_fill;
  logic [51:0] fill_ppn;

  pickle_tlb #(.ENTRIES(L1_ENTRIES), .WAYS(L1_ENTRIES)) u_l1 (
    .clk, .rst_n,
    .lk_vpn(va[63:12]), .lk_hit(l1_hit), .lk_ppn(l1_ppn),
    .fill_valid(l1_fill), .fill_vpn(va[63:12]), .fill_ppn(fill_ppn),
    .inv_valid, .inv_all, .inv_vpn(inv_vaddr[63:12])
  );
  pickle_tlb #(.ENTRIES(L2_ENTRIES), .WAYS(L2_WAYS)) u_l2 (
    .clk, .rst_n,
    .lk_vpn(va[63:12]), .lk_hit(l2_hit), .lk_ppn(l2_ppn),
    .fill_valid(l2_fill), .fill_vpn(va[63:12]), .fill_ppn(fill_ppn),
    .inv_valid, .inv_all, .inv_vpn(inv_vaddr[63:12])
  );

  logic [8:0] vidx;
  always_comb begin
    unique case (level)
      2'd3:    vidx = va[47:39];
      2'd2:    vidx = va[38:30];
      2'd1:    vidx = va[29:21];
      default: vidx = va[20:12];
    endcase
  end
  assign pte_addr = {table_base[63:12], 12'b0} + {52'b0, vidx, 3'b000};
  assign pte      = line_word(pt_resp_data, pte_addr[5:3]);

  assign req_ready    = (st == M_IDLE);
  assign resp_valid   = (st == M_RESP);
  assign pt_req_valid = (st == M_WREQ);
  assign pt_req_paddr = {pte_addr[63:6], 6'b0};

  always_comb begin
    l1_fill  = 1'b0;
    l2_fill  = 1'b0;
    fill_ppn = '0;
    if (st == M_L2 && l2_hit) begin
      l1_fill  = 1'b1;
      fill_ppn = l2_ppn;
    end
    if (st == M_WWAIT && pt_resp_valid && level == 2'd0 && pte[PTE_VALID_BIT]) begin
      l1_fill  = 1'b1;
      l2_fill  = 1'b1;
      fill_ppn = {16'b0, pte[47:12]};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= M_IDLE;
      va         <= '0;
      table_base <= '0;
      level      <= '0;
      resp_paddr <= '0;
      resp_fault <= 1'b0;
      n_l1_hits  <= '0;
      n_l2_hits  <= '0;
      n_walks    <= '0;
      n_faults   <= '0;
    end else begin
      unique case (st)
        M_IDLE: if (req_valid) begin
          va <= req_vaddr;
          st <= M_L1;
        end
        M_L1: begin
          if (l1_hit) begin
            resp_paddr <= {l1_ppn[51:0], va[11:0]};
            resp_fault <= 1'b0;
            n_l1_hits  <= n_l1_hits + 1'b1;
            st         <= M_RESP;
          end else st <= M_L2;
        end
        M_L2: begin
          if (l2_hit) begin
            resp_paddr <= {l2_ppn[51:0], va[11:0]};
            resp_fault <= 1'b0;
            n_l2_hits  <= n_l2_hits + 1'b1;
            st         <= M_RESP;
          end else begin
            table_base <= root;
            level      <= 2'd3;
            n_walks    <= n_walks + 1'b1;
            st         <= M_WREQ;
          end
        end
        M_WREQ: if (pt_req_ready) st <= M_WWAIT;
        M_WWAIT: if (pt_resp_valid) begin
          if (!pte[PTE_VALID_BIT]) begin
            resp_fault <= 1'b1;
            resp_paddr <= '0;
            n_faults   <= n_faults + 1'b1;
            st         <= M_RESP;
          end else if (level == 2'd0) begin
            resp_fault <= 1'b0;
            resp_paddr <= {16'b0, pte[47:12], va[11:0]};
            st         <= M_RESP;
          end else begin
            table_base <= {16'b0, pte[47:12], 12'b0};
            level      <= level - 2'd1;
            st         <= M_WREQ;
          end
        end
        default: if (resp_ready) st <= M_IDLE;   // M_RESP
      endcase
    end
  end

endmodule
