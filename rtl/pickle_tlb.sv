// pickle_tlb: set-associative translation lookaside buffer for 4KiB pages.
//
// ENTRIES entries in WAYS ways (ENTRIES == WAYS gives a fully associative TLB). An entry maps
// a virtual page number (vaddr[63:12]) to a physical frame number. Lookup is combinational:
// lk_vpn -> lk_hit/lk_ppn in the same cycle. A fill writes one entry at the next clock edge:
// an invalid way of the set if there is one, otherwise the way named by the set's
// round-robin pointer. Invalidation (TLB shootdown) clears the entry of inv_vpn, or every
// entry when inv_all is set. A fill of a page already present overwrites that way.
//
// Paper: sizes of the PickleMMU TLBs (L1: 64 entries fully associative, L2: 1024 entries
// 8-way) and participation in TLB shootdowns. Own choices: 4KiB pages only, set index =
// low VPN bits, round-robin replacement.
module pickle_tlb #(
  parameter int unsigned ENTRIES = 64,
  parameter int unsigned WAYS    = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [51:0] lk_vpn,
  output logic        lk_hit,
  output logic [51:0] lk_ppn,
  input  logic        fill_valid,
  input  logic [51:0] fill_vpn,
  input  logic [51:0] fill_ppn,
  input  logic        inv_valid,
  input  logic        inv_all,
  input  logic [51:0] inv_vpn
);
  localparam int unsigned SETS = ENTRIES / WAYS;
  localparam int unsigned SB   = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WB   = (WAYS > 1) ? $clog2(WAYS) : 1;

  logic [WAYS-1:0] valid [SETS];
  logic [51:0]     vpn   [SETS][WAYS];
  logic [51:0]     ppn   [SETS][WAYS];
  logic [WB-1:0]   rr    [SETS];

  function automatic logic [SB-1:0] set_of(logic [51:0] v);
    return (SETS > 1) ? SB'(v % SETS) : '0;
  endfunction

  logic [SB-1:0] ls, fs, is_;
  assign ls  = set_of(lk_vpn);
  assign fs  = set_of(fill_vpn);
  assign is_ = set_of(inv_vpn);

  always_comb begin
    lk_hit = 1'b0;
    lk_ppn = '0;
    for (int w = 0; w < WAYS; w++)
      if (valid[ls][w] && vpn[ls][w] == lk_vpn) begin
        lk_hit = 1'b1;
        lk_ppn = ppn[ls][w];
      end
  end

  logic          f_found;
  logic [WB-1:0] f_way;
  always_comb begin
    f_found = 1'b0;
    f_way   = rr[fs];
    for (int w = WAYS - 1; w >= 0; w--)
      if (!valid[fs][w]) f_way = WB'(w);
    for (int w = 0; w < WAYS; w++)
      if (valid[fs][w] && vpn[fs][w] == fill_vpn) begin f_found = 1'b1; f_way = WB'(w); end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        valid[s] <= '0;
        rr[s]    <= '0;
      end
    end else begin
      if (inv_valid) begin
        if (inv_all) begin
          for (int s = 0; s < SETS; s++) valid[s] <= '0;
        end else begin
          for (int w = 0; w < WAYS; w++)
            if (vpn[is_][w] == inv_vpn) valid[is_][w] <= 1'b0;
        end
      end else if (fill_valid) begin
        valid[fs][f_way] <= 1'b1;
        if (!f_found && valid[fs] == '1) rr[fs] <= WB'((int'(rr[fs]) + 1) % WAYS);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (fill_valid && !inv_valid) begin
      vpn[fs][f_way] <= fill_vpn;
      ppn[fs][f_way] <= fill_ppn;
    end
  end

endmodule
