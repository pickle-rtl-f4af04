// pickle_prefetch_context: the prefetch context scratchpad and the per-kernel progress table.
//
// The scratchpad (BYTES, default 256KiB) holds the state that drives prefetch decisions:
// prefetcher-wide, per-core, per-kernel and per-slot context. The four levels are regions
// of one memory whose layout software chooses; the hardware sees one array of 64-bit words.
// NUM_PORTS requesters (the generator slots plus one configuration port, highest index)
// share one read/write port through a round-robin arbiter: one access per cycle, read data
// valid in the cycle after the grant (rvalid on the granted port).
//
// The per-kernel "latest hint" words (one per core and kernel) are kept in registers beside
// the array: prog_valid writes hint_data there the cycle a hint arrives, and every slot can
// read all of them at once (latest_hint), so a kernel can tell whether its hint is stale.
//
// Paper: 256KiB capacity, four context levels, latest-hint update on arrival. Own choices:
// single shared port with round-robin arbitration, 64-bit words with byte enables,
// latest-hint table outside the array, static layout (no elastic 1KiB allocation).
//
// Lint note: verilator reports rst_n as used both synchronously and asynchronously. The
// synchronous use is only the sampling of rst_n by the assertions' disable iff; every flop
// uses rst_n as its asynchronous reset.
module pickle_prefetch_context
  import pickle_pkg::*;
#(
  parameter int unsigned BYTES     = 262144,
  parameter int unsigned NUM_PORTS = 65
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NUM_PORTS-1:0]   req,
  input  logic [NUM_PORTS-1:0]   we,
  input  logic [31:0]            addr  [NUM_PORTS],   // byte address, 8-byte word granularity
  input  word_t                  wdata [NUM_PORTS],
  input  logic [7:0]             be    [NUM_PORTS],
  output logic [NUM_PORTS-1:0]   gnt,
  output logic [NUM_PORTS-1:0]   rvalid,
  output word_t                  rdata,
  // progress tracking
  input  logic                   prog_valid,
  input  logic [CORE_ID_W-1:0]   prog_core,
  input  logic [KERNEL_ID_W-1:0] prog_kernel,
  input  word_t                  prog_data,
  output word_t                  latest_hint [NUM_CORES][NUM_KERNELS]
);
  localparam int unsigned WORDS = BYTES / 8;
  localparam int unsigned WAW   = $clog2(WORDS);
  localparam int unsigned PW    = (NUM_PORTS > 1) ? $clog2(NUM_PORTS) : 1;

  word_t mem [WORDS];

  // round-robin arbiter
  logic [PW-1:0] last, sel;
  logic          any;
  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int unsigned i = 1; i <= NUM_PORTS; i++) begin
      int unsigned p;
      p = (int'(last) + i) % NUM_PORTS;
      if (!any && req[p]) begin
        any = 1'b1;
        sel = PW'(p);
      end
    end
  end

  always_comb begin
    gnt = '0;
    if (any) gnt[sel] = 1'b1;
  end

  logic [WAW-1:0] waddr;
  assign waddr = addr[sel][3 +: WAW];

  always_ff @(posedge clk) begin
    if (any) begin
      if (we[sel]) begin
        for (int b = 0; b < 8; b++)
          if (be[sel][b]) mem[waddr][b*8 +: 8] <= wdata[sel][b*8 +: 8];
      end else begin
        rdata <= mem[waddr];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last   <= PW'(NUM_PORTS - 1);
      rvalid <= '0;
    end else begin
      rvalid <= '0;
      if (any) begin
        last <= sel;
        if (!we[sel]) rvalid[sel] <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NUM_CORES; c++)
        for (int k = 0; k < NUM_KERNELS; k++) latest_hint[c][k] <= '0;
    end else if (prog_valid) begin
      latest_hint[prog_core][prog_kernel] <= prog_data;
    end
  end

  a_onehot_gnt: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));

endmodule
