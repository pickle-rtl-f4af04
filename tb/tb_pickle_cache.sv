// tb_pickle_cache: checks PickleCache (4KiB, 4-way, 4 MSHRs here).
//
// A memory model answers line reads after a random latency, out of order, with a line whose
// words are computed from its address. Both requester ports send random reads over 128
// lines (twice the capacity), each with a unique tag. Checked: every request gets exactly one
// response on its own port with the right data; every read on the network is for a line not
// already outstanding; every victim carries the right address and data; a repeated access to
// a resident line hits with a one-cycle response and no network traffic; two requests for
// the same missing line cause one read (the second waits for the fill).
`timescale 1ns/1ps
module tb_pickle_cache;
  import pickle_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  logic [1:0] req_valid, req_ready, resp_valid;
  word_t req_paddr [2]; logic [15:0] req_tag [2]; logic [15:0] resp_tag; line_t resp_data;
  logic noc_req_valid, noc_req_ready, noc_req_victim; word_t noc_req_paddr;
  logic [15:0] noc_req_id; line_t noc_req_data;
  logic noc_resp_valid, noc_resp_ready; logic [15:0] noc_resp_id; line_t noc_resp_data;
  logic [31:0] n_hits, n_misses, n_victims, n_mshr_waits;

  pickle_cache #(.BYTES(4096), .WAYS(4), .MSHRS(4)) dut (.*);

  function automatic line_t line_of(word_t pa);
    line_t l;
    for (int w = 0; w < 8; w++) l[w*64 +: 64] = (pa & ~64'h3f) * 3 + 64'(w) + 64'h1234_0000_0000;
    return l;
  endfunction

  // memory model: outstanding reads, answered in random order
  typedef struct { word_t pa; int id; longint due; } rd_t;
  rd_t mq [$];
  bit  resp_taken = 0;
  always @(posedge clk) resp_taken <= noc_resp_valid && noc_resp_ready;
  bit  outstanding [word_t];
  int  n_reads = 0, n_vict = 0;
  always @(posedge clk) if (rst_n && noc_req_valid && noc_req_ready) begin
    if (noc_req_victim) begin
      check(noc_req_data == line_of(noc_req_paddr), "victim data");
      n_vict++;
    end else begin
      check(!outstanding.exists(noc_req_paddr), "no duplicate read of an outstanding line");
      outstanding[noc_req_paddr] = 1;
      mq.push_back('{pa: noc_req_paddr, id: int'(noc_req_id), due: cyc + $urandom_range(3, 30)});
      n_reads++;
    end
  end
  always @(negedge clk) begin
    noc_req_ready = ($urandom_range(0, 3) != 0);
    if (resp_taken) noc_resp_valid = 0;
    if (!noc_resp_valid && mq.size() > 0) begin
      automatic int k = $urandom_range(0, mq.size() - 1);
      if (mq[k].due <= cyc) begin
        noc_resp_valid = 1; noc_resp_id = 16'(mq[k].id); noc_resp_data = line_of(mq[k].pa);
        outstanding.delete(mq[k].pa);
        mq.delete(k);
      end
    end
  end

  // requesters
  word_t tag_pa [int];
  int    tag_port [int];
  int    next_tag = 1;
  int    n_resp = 0;
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < 2; p++)
      if (resp_valid[p]) begin
        check(tag_pa.exists(int'(resp_tag)), "response to an open request");
        if (tag_pa.exists(int'(resp_tag))) begin
          check(tag_port[int'(resp_tag)] == p, "response on the requester's port");
          check(resp_data == line_of(tag_pa[int'(resp_tag)]), "response data");
          tag_pa.delete(int'(resp_tag));
        end
        n_resp++;
      end
    check(!(resp_valid[0] && resp_valid[1]), "one response per cycle");
  end

  task automatic drive(int p, word_t pa);
    req_valid[p] = 1; req_paddr[p] = pa; req_tag[p] = 16'(next_tag);
    tag_pa[next_tag] = pa; tag_port[next_tag] = p; next_tag++;
  endtask

  // one clock: requests accepted at this edge (ready seen before it) are withdrawn
  task automatic step();
    logic [1:0] take;
    #1 take = req_valid & req_ready;
    @(negedge clk);
    req_valid = req_valid & ~take;
  endtask
  task automatic wait_accept();
    while (req_valid != '0) step();
  endtask

  initial begin
    #5_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    req_valid = 0; req_paddr[0] = 0; req_paddr[1] = 0; req_tag[0] = 0; req_tag[1] = 0;
    noc_resp_valid = 0; noc_req_ready = 0; noc_resp_id = 0; noc_resp_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // directed: same missing line from both ports -> one read, one wait
    @(negedge clk);
    drive(0, 64'h8000); drive(1, 64'h8010);
    wait_accept();
    repeat (40) @(negedge clk);
    check(n_reads == 1 && n_mshr_waits > 0, "secondary miss waits, one read");
    // directed: hit latency
    begin
      automatic int r0 = n_reads;
      drive(1, 64'h8020);
      #1; check(req_ready[1], "hit accepted at once");
      step();
      #1; check(resp_valid[1], "hit answered in the next cycle");
      repeat (3) @(negedge clk);
      check(n_reads == r0, "hit makes no network read");
    end

    // random traffic
    for (int n = 0; n < 3000; n++) begin
      for (int p = 0; p < 2; p++)
        if (!req_valid[p] && $urandom_range(0, 2) == 0)
          drive(p, 64'(($urandom_range(0, 127)) * 64 + $urandom_range(0, 63)));
      step();
    end
    wait_accept();
    repeat (200) @(negedge clk);
    check(tag_pa.size() == 0, "every request answered");
    check(n_misses == n_reads, "miss counter equals network reads");
    check(n_victims == n_vict && n_vict > 0, "victims written back");
    check(n_hits > 0, "hits seen");
    $display("resp=%0d hits=%0d misses=%0d victims=%0d waits=%0d", n_resp, n_hits, n_misses, n_victims, n_mshr_waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
