// tb_pickle_hint_queue: checks hint decode, arrival stamping, FIFO order and back-pressure.
//
// Random stores (inside and outside the hint window, random core) are pushed while the
// consumer pops at random. A queue in the testbench holds the expected entries: kernel from
// the store address, core, data and an arrival number that counts accepted hints only.
// Checked: every popped entry, the progress-update port in the cycle of each accepted hint,
// st_ready low exactly when DEPTH entries are held, count, and the ignored-store counter.
`timescale 1ns/1ps
module tb_pickle_hint_queue;
  import pickle_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  localparam int DEPTH = 16;
  logic st_valid, st_ready, prog_valid, deq_valid, deq_ready;
  logic [63:0] st_addr; logic [2:0] st_core, prog_core; logic [2:0] prog_kernel;
  word_t st_data, prog_data; hint_entry_t deq_entry;
  logic [$clog2(DEPTH):0] count; logic [31:0] ignored_cnt;

  pickle_hint_queue #(.DEPTH(DEPTH), .HINT_BASE(64'h1000)) dut (.*);

  hint_entry_t exp_q [$];
  longint arrival = 0;
  int ignored = 0, pops = 0, fulls = 0;

  initial begin
    #2_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    st_valid = 0; st_addr = 0; st_core = 0; st_data = 0; deq_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      bit inwin;
      @(negedge clk);
      // phases: fill up (few pops), then drain, then mixed
      st_valid  = ($urandom_range(0, 99) < ((n / 500) % 2 == 0 ? 80 : 20));
      inwin     = ($urandom_range(0, 9) != 0);
      st_addr   = inwin ? 64'h1000 + 64'($urandom_range(0, 7) * 8)
                        : (($urandom_range(0, 1) != 0) ? 64'h1040 : 64'h0ff8);
      st_core   = 3'($urandom);
      st_data   = {$urandom, $urandom};
      deq_ready = ($urandom_range(0, 99) < ((n / 500) % 2 == 0 ? 25 : 85));
      #1;
      check(st_ready == (exp_q.size() < DEPTH), "st_ready only when not full");
      check(int'(count) == exp_q.size(), "count");
      check(deq_valid == (exp_q.size() > 0), "deq_valid");
      if (exp_q.size() == DEPTH) fulls++;
      if (deq_valid) begin
        check(deq_entry == exp_q[0], "head entry");
      end
      check(prog_valid == (st_valid && st_ready && inwin), "progress update strobe");
      if (prog_valid) begin
        check(prog_core == st_core && prog_data == st_data &&
              prog_kernel == 3'((st_addr - 64'h1000) >> 3), "progress update content");
      end
      @(posedge clk);
      if (deq_valid && deq_ready) begin void'(exp_q.pop_front()); pops++; end
      if (st_valid && st_ready) begin
        if (inwin) begin
          exp_q.push_back('{kernel_id: 3'((st_addr - 64'h1000) >> 3), core_id: st_core,
                            hint_data: st_data, hint_arrival_order: 64'(arrival)});
          arrival++;
        end else ignored++;
      end
    end
    @(negedge clk);
    st_valid = 0;
    #1;
    check(int'(ignored_cnt) == ignored, "ignored store count");
    check(fulls > 0, "queue reached full");
    check(pops > 500, "entries popped");
    $display("hints=%0d pops=%0d ignored=%0d full_cycles=%0d", arrival, pops, ignored, fulls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
