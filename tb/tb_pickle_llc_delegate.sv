// tb_pickle_llc_delegate: checks the FETCH_IF_NOT_PRESENT unit of an LLC slice.
//
// Random commands (line address, timeout) are sent; the LLC slice model answers each lookup
// after a random delay, with "in the LLC" / "in another cache" / "nowhere" chosen from the
// address; the memory controller model accepts fills at random and is sometimes blocked for
// a long time. Commands complete in order, so the testbench predicts, per command: MRU touch
// of that line, no action, or a memory fill of that line accepted no later than its timeout
// after arrival, or a drop no earlier than the timeout. Also checked: back-pressure when
// the command queue is full, and the four counters.
`timescale 1ns/1ps
module tb_pickle_llc_delegate;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  logic cmd_valid, cmd_ready, lk_valid, lk_resp_valid, lk_in_llc, lk_in_other;
  logic touch_valid, mem_valid, mem_ready;
  logic [63:0] cmd_paddr, lk_paddr, touch_paddr, mem_paddr;
  logic [31:0] cmd_timeout, n_fills, n_mru, n_elsewhere, n_timeouts;

  pickle_llc_delegate #(.QDEPTH(4)) dut (.*);

  function automatic int kind_of(logic [63:0] pa);   // 0 in LLC, 1 elsewhere, 2 nowhere
    int k = int'((pa >> 6) % 4);
    return (k == 0) ? 0 : (k == 1) ? 1 : 2;
  endfunction

  typedef struct { logic [63:0] pa; longint t; int to; } cmd_t;
  cmd_t q [$];
  int e_fill = 0, e_mru = 0, e_else = 0, e_to = 0, full_seen = 0;
  bit mem_block = 0;
  int lk_delay = -1;
  logic [63:0] lk_addr = 0;
  logic [31:0] last_to = 0;

  // LLC slice and memory controller models
  always @(negedge clk) begin
    lk_resp_valid <= 1'b0;
    if (lk_valid) begin lk_delay = $urandom_range(0, 4); lk_addr = lk_paddr; end
    else if (lk_delay == 0) begin
      lk_resp_valid <= 1'b1;
      lk_in_llc     <= (kind_of(lk_addr) == 0);
      lk_in_other   <= (kind_of(lk_addr) == 1);
      lk_delay = -1;
    end else if (lk_delay > 0) lk_delay--;
    mem_ready <= !mem_block && ($urandom_range(0, 2) != 0);
  end

  // scoreboard
  always @(posedge clk) if (rst_n) begin
    if (cmd_valid && cmd_ready) q.push_back('{pa: cmd_paddr, t: cyc, to: int'(cmd_timeout)});
    if (cmd_valid && !cmd_ready) full_seen++;
    if (lk_valid) check(q.size() > 0 && lk_paddr == q[0].pa, "lookup of the oldest command");
    if (touch_valid) begin
      check(q.size() > 0 && touch_paddr == q[0].pa && kind_of(q[0].pa) == 0, "MRU touch of an LLC line");
      void'(q.pop_front()); e_mru++;
    end
    if (lk_resp_valid && !lk_in_llc && lk_in_other) begin
      check(q.size() > 0 && kind_of(q[0].pa) == 1, "line elsewhere: nothing fetched");
      void'(q.pop_front()); e_else++;
    end
    if (mem_valid && mem_ready) begin
      check(q.size() > 0 && mem_paddr == q[0].pa && kind_of(q[0].pa) == 2, "memory fill of an absent line");
      if (q.size() > 0 && q[0].to != 0)
        check(cyc - q[0].t <= q[0].to + 1, "fill issued within the timeout");
      void'(q.pop_front()); e_fill++;
    end
    if (n_timeouts != last_to) begin
      // the drop was decided in the previous cycle
      check(q.size() > 0 && q[0].to != 0 && cyc - 1 - q[0].t >= q[0].to, "drop only after the timeout");
      void'(q.pop_front()); e_to++;
    end
    last_to <= n_timeouts;
  end

  initial begin
    #5_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    cmd_valid = 0; cmd_paddr = 0; cmd_timeout = 0;
    lk_resp_valid = 0; lk_in_llc = 0; lk_in_other = 0; mem_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      if ((n % 100) == 50) mem_block = 1;
      if ((n % 100) == 90) mem_block = 0;
      if (!cmd_valid || cmd_ready) begin
        cmd_valid   = ($urandom_range(0, 2) == 0);
        cmd_paddr   = {32'h0, $urandom} & ~64'h3f;
        cmd_timeout = ($urandom_range(0, 3) == 0) ? 0 : 32'($urandom_range(5, 60));
      end
    end
    @(negedge clk); cmd_valid = 0; mem_block = 0;
    repeat (2000) @(negedge clk);
    check(q.size() == 0, "every command completed");
    check(n_fills == e_fill && n_mru == e_mru && n_elsewhere == e_else && n_timeouts == e_to,
          "counters");
    check(e_fill > 0 && e_mru > 0 && e_else > 0 && e_to > 0 && full_seen > 0,
          "all outcomes and a full queue seen");
    $display("fills=%0d mru=%0d elsewhere=%0d timeouts=%0d full=%0d", e_fill, e_mru, e_else, e_to, full_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
