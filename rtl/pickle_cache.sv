// pickle_cache: PickleCache, the prefetcher's private cache (default 256KiB, 16-way, 64B lines).
//
// Two requesters read whole lines by physical address: port 0 is the PickleMMU page walker,
// port 1 the request manager. Each request carries a tag that comes back with the response.
// Every fetched line is kept here, so fetching into PickleCache is itself a prefetch into
// the cache hierarchy; an evicted line is sent to the LLC (the LLC is a victim cache).
//
// Operation, at most one new request per cycle (port 0 first):
//   hit   -> response (valid one cycle, always accepted) in the next cycle
//   miss  -> a free MSHR (MSHRS outstanding misses) is allocated and a READ of the line
//            goes out on the network request channel, tagged with the MSHR index
//   a request to a line that already has an MSHR waits (not accepted) until the fill
// Fill: the network response (noc_resp_*, tagged with the MSHR index) is written into an
// invalid way of the set, else into the way of the set's round-robin pointer; a valid
// victim is sent out as a VICTIM write of its line. The fill answers the requester of the
// MSHR. A fill is taken only when the request channel register is empty, and takes the
// cycle's single response slot, so no new request is accepted in that cycle.
//
// Paper: private cache of the prefetcher with L1D-like organisation but larger capacity,
// 256KiB 16-way, 64 concurrent requests, page walks and prefetches through it, victims
// written to the LLC. Not built: coherence (snoops) of the CHI protocol; the network
// channel here is a plain request/response pair. Own choices: round-robin replacement,
// no merging of secondary misses (they wait), one access per cycle.
//
// Lint note: verilator reports rst_n as used both synchronously and asynchronously. The
// synchronous use is only the sampling of rst_n by the assertions' disable iff; every flop
// uses rst_n as its asynchronous reset.
module pickle_cache
  import pickle_pkg::*;
#(
  parameter int unsigned BYTES = 262144,
  parameter int unsigned WAYS  = 16,
  parameter int unsigned MSHRS = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  // requesters: index 0 page walker, 1 request manager
  input  logic [1:0]  req_valid,
  output logic [1:0]  req_ready,
  input  word_t       req_paddr [2],
  input  logic [15:0] req_tag   [2],
  output logic [1:0]  resp_valid,
  output logic [15:0] resp_tag,
  output line_t       resp_data,
  // network: requests (READ / VICTIM) and responses
  output logic        noc_req_valid,
  input  logic        noc_req_ready,
  output logic        noc_req_victim,   // 1: victim write to the LLC, 0: read
  output word_t       noc_req_paddr,
  output logic [15:0] noc_req_id,
  output line_t       noc_req_data,
  input  logic        noc_resp_valid,
  output logic        noc_resp_ready,
  input  logic [15:0] noc_resp_id,
  input  line_t       noc_resp_data,
  // statistics
  output logic [31:0] n_hits,
  output logic [31:0] n_misses,
  output logic [31:0] n_victims,
  output logic [31:0] n_mshr_waits
);
  localparam int unsigned LINES = BYTES / LINE_BYTES;
  localparam int unsigned SETS  = LINES / WAYS;
  localparam int unsigned SB    = $clog2(SETS);
  localparam int unsigned WB    = $clog2(WAYS);
  localparam int unsigned MB    = $clog2(MSHRS);
  localparam int unsigned TB    = 64 - OFFSET_BITS - SB;

  logic [WAYS-1:0] valid [SETS];
  logic [TB-1:0]   tags  [SETS][WAYS];
  logic [WB-1:0]   rr    [SETS];
  line_t           data  [LINES];

  logic [MSHRS-1:0] m_valid;
  word_t            m_line [MSHRS];   // line address
  logic             m_port [MSHRS];
  logic [15:0]      m_tag  [MSHRS];

  // ---- request selection ----
  logic        sel_v;
  logic        sel_p;
  word_t       sp;
  logic [SB-1:0] s_set;
  logic [TB-1:0] s_tag;
  logic        s_hit;
  logic [WB-1:0] s_way;
  logic        s_mshr_match;
  logic        m_free_any;
  logic [MB-1:0] m_free_idx;

  assign sel_p = req_valid[0] ? 1'b0 : 1'b1;
  assign sel_v = |req_valid;
  assign sp    = req_paddr[sel_p];
  assign s_set = sp[OFFSET_BITS +: SB];
  assign s_tag = sp[63 -: TB];

  always_comb begin
    s_hit = 1'b0;
    s_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (valid[s_set][w] && tags[s_set][w] == s_tag) begin s_hit = 1'b1; s_way = WB'(w); end
    s_mshr_match = 1'b0;
    m_free_any   = 1'b0;
    m_free_idx   = '0;
    for (int m = MSHRS - 1; m >= 0; m--) begin
      if (m_valid[m] && m_line[m][63:OFFSET_BITS] == sp[63:OFFSET_BITS]) s_mshr_match = 1'b1;
      if (!m_valid[m]) begin m_free_any = 1'b1; m_free_idx = MB'(m); end
    end
  end

  logic take_fill, out_free, accept, acc_hit, acc_miss;
  assign out_free       = !noc_req_valid || noc_req_ready;
  assign noc_resp_ready = !noc_req_valid;          // room for a possible victim
  assign take_fill      = noc_resp_valid && noc_resp_ready;
  assign acc_hit        = sel_v && !take_fill && s_hit;
  assign acc_miss       = sel_v && !take_fill && !s_hit && !s_mshr_match && m_free_any && out_free;
  assign accept         = acc_hit || acc_miss;
  always_comb begin
    req_ready = '0;
    if (accept) req_ready[sel_p] = 1'b1;
  end

  // ---- fill ----
  logic [MB-1:0] f_m;
  word_t         f_line;
  logic [SB-1:0] f_set;
  logic [WB-1:0] f_way;
  logic          f_victim;
  assign f_m    = noc_resp_id[MB-1:0];
  assign f_line = m_line[f_m];
  assign f_set  = f_line[OFFSET_BITS +: SB];
  always_comb begin
    f_way = rr[f_set];
    for (int w = WAYS - 1; w >= 0; w--)
      if (!valid[f_set][w]) f_way = WB'(w);
  end
  assign f_victim = valid[f_set][f_way];

  always_ff @(posedge clk) begin
    if (take_fill) begin
      data[{f_set, f_way}] <= noc_resp_data;
      tags[f_set][f_way]   <= f_line[63 -: TB];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin valid[s] <= '0; rr[s] <= '0; end
      m_valid        <= '0;
      for (int m = 0; m < MSHRS; m++) begin m_line[m] <= '0; m_port[m] <= 1'b0; m_tag[m] <= '0; end
      resp_valid     <= '0;
      resp_tag       <= '0;
      resp_data      <= '0;
      noc_req_valid  <= 1'b0;
      noc_req_victim <= 1'b0;
      noc_req_paddr  <= '0;
      noc_req_id     <= '0;
      noc_req_data   <= '0;
      n_hits         <= '0;
      n_misses       <= '0;
      n_victims      <= '0;
      n_mshr_waits   <= '0;
    end else begin
      resp_valid <= '0;
      if (noc_req_valid && noc_req_ready) noc_req_valid <= 1'b0;
      if (take_fill) begin
        valid[f_set][f_way] <= 1'b1;
        if (valid[f_set] == '1) rr[f_set] <= rr[f_set] + 1'b1;
        m_valid[f_m] <= 1'b0;
        resp_valid[m_port[f_m]] <= 1'b1;
        resp_tag  <= m_tag[f_m];
        resp_data <= noc_resp_data;
        if (f_victim) begin
          noc_req_valid  <= 1'b1;
          noc_req_victim <= 1'b1;
          noc_req_paddr  <= {tags[f_set][f_way], f_set, {OFFSET_BITS{1'b0}}};
          noc_req_id     <= '0;
          noc_req_data   <= data[{f_set, f_way}];
          n_victims      <= n_victims + 1'b1;
        end
      end else if (acc_hit) begin
        resp_valid[sel_p] <= 1'b1;
        resp_tag  <= req_tag[sel_p];
        resp_data <= data[{s_set, s_way}];
        n_hits    <= n_hits + 1'b1;
      end else if (acc_miss) begin
        m_valid[m_free_idx] <= 1'b1;
        m_line[m_free_idx]  <= {sp[63:OFFSET_BITS], {OFFSET_BITS{1'b0}}};
        m_port[m_free_idx]  <= sel_p;
        m_tag[m_free_idx]   <= req_tag[sel_p];
        noc_req_valid  <= 1'b1;
        noc_req_victim <= 1'b0;
        noc_req_paddr  <= {sp[63:OFFSET_BITS], {OFFSET_BITS{1'b0}}};
        noc_req_id     <= 16'(m_free_idx);
        noc_req_data   <= '0;
        n_misses       <= n_misses + 1'b1;
      end
      if (sel_v && !take_fill && !s_hit && s_mshr_match) n_mshr_waits <= n_mshr_waits + 1'b1;
    end
  end

  a_fill_mshr: assert property (@(posedge clk) disable iff (!rst_n)
                                take_fill |-> m_valid[f_m]);

endmodule
