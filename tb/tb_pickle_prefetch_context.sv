// tb_pickle_prefetch_context: checks the shared prefetch-context scratchpad.
//
// Four ports request random reads and byte-masked writes to a small address range; a
// reference memory in the testbench is updated in grant order. Checked: exactly one grant per
// cycle when any port asks, round-robin fairness (no port waits longer than NUM_PORTS cycles),
// read data one cycle after the grant, byte enables, and the per-core/per-kernel latest-hint
// registers written by the progress-update port.
`timescale 1ns/1ps
module tb_pickle_prefetch_context;
  import pickle_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  localparam int NP = 4;
  localparam int BYTES = 1024;
  logic [NP-1:0] req, we, gnt, rvalid;
  logic [31:0] addr [NP]; word_t wdata [NP]; logic [7:0] be [NP];
  word_t rdata;
  logic prog_valid; logic [2:0] prog_core, prog_kernel; word_t prog_data;
  word_t latest_hint [NUM_CORES][NUM_KERNELS];

  pickle_prefetch_context #(.BYTES(BYTES), .NUM_PORTS(NP)) dut (.*);

  word_t ref_mem [BYTES/8];
  word_t ref_latest [NUM_CORES][NUM_KERNELS];
  int wait_cyc [NP];
  bit granted [NP];
  int pending_rd = -1; word_t pending_val;
  int n_reads = 0, n_writes = 0;

  initial begin
    #2_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    req = '0; we = '0;
    for (int p = 0; p < NP; p++) begin granted[p] = 0; addr[p] = 0; wdata[p] = 0; be[p] = 0; wait_cyc[p] = 0; end
    prog_valid = 0; prog_core = 0; prog_kernel = 0; prog_data = 0;
    foreach (ref_mem[i]) ref_mem[i] = 0;
    foreach (ref_latest[c, k]) ref_latest[c][k] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // zero the words used (2-state memory starts random)
    for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      req = 4'b0001; we = 4'b0001; addr[0] = 32'(i * 8); wdata[0] = 0; be[0] = 8'hff;
    end
    @(negedge clk); req = '0; we = '0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      for (int p = 0; p < NP; p++) begin
        if (!req[p] || granted[p]) begin   // new request after a grant
          req[p]   = ($urandom_range(0, 3) != 0);
          we[p]    = ($urandom_range(0, 1) != 0);
          addr[p]  = 32'($urandom_range(0, 15) * 8);
          wdata[p] = {$urandom, $urandom};
          be[p]    = 8'($urandom);
        end
      end
      prog_valid  = ($urandom_range(0, 3) == 0);
      prog_core   = 3'($urandom); prog_kernel = 3'($urandom); prog_data = {$urandom, $urandom};
      #1;
      // read return for the grant of the previous cycle
      for (int p = 0; p < NP; p++) check(rvalid[p] == (pending_rd == p), "rvalid one cycle after read grant");
      if (pending_rd >= 0) begin check(rdata == pending_val, "read data"); if (rdata != pending_val && failures < 3) $display("got %h exp %h", rdata, pending_val); end
      check((req == '0) ? (gnt == '0) : $onehot(gnt), "one grant per cycle");
      check((gnt & ~req) == '0, "grant only to requester");
      pending_rd = -1;
      for (int p = 0; p < NP; p++) begin
        granted[p] = gnt[p];
        if (gnt[p]) begin
          automatic int w = int'(addr[p] >> 3);
          if (we[p]) begin
            for (int b = 0; b < 8; b++) if (be[p][b]) ref_mem[w][b*8 +: 8] = wdata[p][b*8 +: 8];
            n_writes++;
          end else begin
            pending_rd = p; pending_val = ref_mem[w]; n_reads++;
          end
          wait_cyc[p] = 0;
        end else if (req[p]) begin
          wait_cyc[p]++;
          check(wait_cyc[p] < NP, "round-robin wait bounded");
        end
      end
      for (int c = 0; c < NUM_CORES; c++)
        for (int k = 0; k < NUM_KERNELS; k++)
          check(latest_hint[c][k] == ref_latest[c][k], "latest hint register");
      if (prog_valid) ref_latest[prog_core][prog_kernel] = prog_data;
    end
    $display("reads=%0d writes=%0d", n_reads, n_writes);
    check(n_reads > 100 && n_writes > 100, "traffic");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
