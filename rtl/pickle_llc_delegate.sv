// pickle_llc_delegate: FETCH_IF_NOT_PRESENT command unit, an extension of an LLC controller.
//
// Last-level-of-indirection prefetches are delegated by the request manager straight to the
// LLC controller instead of going through PickleCache. This unit executes them:
//   1. the command {physical line address, timeout} is queued (QDEPTH entries) with its
//      arrival time; a timeout of 0 means none;
//   2. for the head, the directory check and the LLC tag lookup are made together through
//      one lookup port (lk_*), which answers whether the line is in the LLC and whether it is
//      in any other cache of the core complex;
//   3. present in the LLC          -> refresh its replacement state to most recently used
//                                     (touch_valid pulse), done;
//      present only in other caches -> done, nothing fetched;
//      present nowhere             -> a fill request to the memory controller (mem_*);
//   4. if the time from arrival exceeds the timeout before the memory controller accepts the
//      fill, the command is dropped.
// Timing: the lookup answer may take any number of cycles; one command is processed at a
// time. Counters report fills, MRU refreshes, lines found elsewhere and timeouts.
//
// Paper: the command, its arguments, the concurrent directory/tag check, the three outcomes
// and the timeout measured from arrival to issue to the memory controller (the prefetcher
// sends 10,000 cycles by default).
// Own choices: the queue, the lookup port handshake, one command at a time.
module pickle_llc_delegate #(
  parameter int unsigned QDEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // FETCH_IF_NOT_PRESENT command
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  logic [63:0] cmd_paddr,
  input  logic [31:0] cmd_timeout,
  // concurrent directory check and tag lookup of the LLC slice
  output logic        lk_valid,
  output logic [63:0] lk_paddr,
  input  logic        lk_resp_valid,
  input  logic        lk_in_llc,
  input  logic        lk_in_other,
  // MRU refresh of a line present in the LLC
  output logic        touch_valid,
  output logic [63:0] touch_paddr,
  // fill request to the memory controller
  output logic        mem_valid,
  input  logic        mem_ready,
  output logic [63:0] mem_paddr,
  // statistics
  output logic [31:0] n_fills,
  output logic [31:0] n_mru,
  output logic [31:0] n_elsewhere,
  output logic [31:0] n_timeouts
);
  localparam int unsigned QW = $clog2(QDEPTH);

  typedef struct packed {
    logic [63:0] paddr;
    logic [63:0] deadline;
    logic        has_to;
  } cmd_t;

  cmd_t          q [QDEPTH];
  logic [QW-1:0] wp, rp;
  logic [QW:0]   cnt;
  logic [63:0]   now;

  typedef enum logic [1:0] {D_IDLE, D_LOOKUP, D_WAIT, D_MEM} dstate_e;
  dstate_e st;
  cmd_t    cur;

  logic push, pop, expired;
  assign cmd_ready = (cnt != QDEPTH[QW:0]);
  assign push      = cmd_valid && cmd_ready;
  assign pop       = (st == D_IDLE) && (cnt != '0);
  assign expired   = cur.has_to && (now > cur.deadline);

  assign lk_valid    = (st == D_LOOKUP);
  assign lk_paddr    = cur.paddr;
  assign mem_valid   = (st == D_MEM) && !expired;
  assign mem_paddr   = cur.paddr;
  assign touch_paddr = cur.paddr;

  always_ff @(posedge clk) begin
    if (push) q[wp] <= '{paddr: cmd_paddr,
                         deadline: now + 64'(cmd_timeout),
                         has_to: (cmd_timeout != '0)};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0; now <= '0;
      st <= D_IDLE;
      cur <= '0;
      touch_valid <= 1'b0;
      n_fills <= '0; n_mru <= '0; n_elsewhere <= '0; n_timeouts <= '0;
    end else begin
      now <= now + 1'b1;
      touch_valid <= 1'b0;
      if (push) wp <= wp + 1'b1;
      if (pop) begin
        rp  <= rp + 1'b1;
        cur <= q[rp];
        st  <= D_LOOKUP;
      end
      cnt <= cnt + (QW+1)'(push) - (QW+1)'(pop);
      unique case (st)
        D_LOOKUP: st <= D_WAIT;
        D_WAIT: if (lk_resp_valid) begin
          if (lk_in_llc) begin
            touch_valid <= 1'b1;
            n_mru <= n_mru + 1'b1;
            st <= D_IDLE;
          end else if (lk_in_other) begin
            n_elsewhere <= n_elsewhere + 1'b1;
            st <= D_IDLE;
          end else begin
            st <= D_MEM;
          end
        end
        D_MEM: begin
          if (expired) begin
            n_timeouts <= n_timeouts + 1'b1;
            st <= D_IDLE;
          end else if (mem_ready) begin
            n_fills <= n_fills + 1'b1;
            st <= D_IDLE;
          end
        end
        default: ;
      endcase
    end
  end

endmodule
