// pickle_hint_queue: front door of the prefetcher (hint protocol decode + prefetch hint queue).
//
// A host core sends a prefetch hint as a 64-bit uncacheable store into the prefetcher's
// address window. The store address picks the kernel: HINT_BASE + 8*k triggers kernel k;
// the stored value is the kernel's parameter (hint_data). Each accepted hint is stamped with
// a free-running 64-bit arrival counter (hint_arrival_order, older = smaller = higher
// priority) and pushed into a DEPTH-entry FIFO of hint_entry_t (kernel_id, core_id,
// hint_data, hint_arrival_order). The generator pops the head when a slot is free.
//
// In the same cycle a hint is accepted, prog_valid/prog_core/prog_kernel/prog_data report it
// so the per-kernel context (latest hint of that core and kernel) is updated before the
// hint is assigned to a slot.
//
// Interface: st_valid/st_ready store channel (st_ready low only when the FIFO is full);
// deq_valid/deq_ready pop channel, head shown combinationally. Stores outside the window
// are ignored (accepted, not queued) and counted in ignored_cnt.
// Paper: entry layout, 256 entries, address-selects-kernel, arrival order used for
// priority, immediate progress update. Own choices: back-pressure when full (the paper
// sizes the queue so that it never fills), 8-byte stride decode, counter width 64.
//
// Lint note: verilator reports rst_n as used both synchronously and asynchronously. The
// synchronous use is only the sampling of rst_n by the assertions' disable iff; every flop
// uses rst_n as its asynchronous reset.
module pickle_hint_queue
  import pickle_pkg::*;
#(
  parameter int unsigned DEPTH     = 256,
  parameter logic [63:0] HINT_BASE = 64'h1000
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // uncacheable store from a core
  input  logic                   st_valid,
  output logic                   st_ready,
  input  logic [63:0]            st_addr,
  input  logic [CORE_ID_W-1:0]   st_core,
  input  word_t                  st_data,
  // progress update to the per-kernel context
  output logic                   prog_valid,
  output logic [CORE_ID_W-1:0]   prog_core,
  output logic [KERNEL_ID_W-1:0] prog_kernel,
  output word_t                  prog_data,
  // head of the queue
  output logic                   deq_valid,
  input  logic                   deq_ready,
  output hint_entry_t            deq_entry,
  output logic [$clog2(DEPTH):0] count,
  output logic [31:0]            ignored_cnt
);
  localparam int unsigned AW = $clog2(DEPTH);

  hint_entry_t mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  word_t arrival_ctr;

  logic [63:0] offs;
  logic        in_window;
  logic        push, pop;

  assign offs      = st_addr - HINT_BASE;
  assign in_window = (st_addr >= HINT_BASE) && (offs < 64'(NUM_KERNELS * 8));
  assign st_ready  = (count != DEPTH[AW:0]);
  assign push      = st_valid && st_ready && in_window;
  assign pop       = deq_valid && deq_ready;

  assign deq_valid = (count != '0);
  assign deq_entry = mem[rd_ptr];

  assign prog_valid  = push;
  assign prog_core   = st_core;
  assign prog_kernel = offs[3 +: KERNEL_ID_W];
  assign prog_data   = st_data;

  always_ff @(posedge clk) begin
    if (push) begin
      mem[wr_ptr] <= '{kernel_id: offs[3 +: KERNEL_ID_W], core_id: st_core,
                       hint_data: st_data, hint_arrival_order: arrival_ctr};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr      <= '0;
      rd_ptr      <= '0;
      count       <= '0;
      arrival_ctr <= '0;
      ignored_cnt <= '0;
    end else begin
      if (push) begin
        wr_ptr      <= wr_ptr + 1'b1;
        arrival_ctr <= arrival_ctr + 1'b1;
      end
      if (pop) rd_ptr <= rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
      if (st_valid && st_ready && !in_window) ignored_cnt <= ignored_cnt + 1'b1;
    end
  end

  // Each hint occupies one 8-byte word of the window.
  a_aligned: assert property (@(posedge clk) disable iff (!rst_n)
                              push |-> (st_addr[2:0] == 3'b000))
    else $error("hint store not 8-byte aligned");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
                                   pop |-> count != '0);

endmodule
