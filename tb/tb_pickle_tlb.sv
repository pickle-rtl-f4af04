// tb_pickle_tlb: checks the TLB array used for both PickleMMU TLB levels.
//
// Two instances: a fully associative 8-entry TLB (the L1 organisation) and a 32-entry
// 4-way TLB (the L2 organisation, 8 sets). A reference model in the testbench keeps the same
// entries (fill an invalid way first, lowest way first; otherwise the set's round-robin
// victim) and every lookup is compared with it: hit and physical page. Also checked:
// refilling a present page updates it in place, single-page and full invalidation.
`timescale 1ns/1ps
module tb_pickle_tlb;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  localparam int NI = 2;
  localparam int ENT [NI] = '{8, 32};
  localparam int WY  [NI] = '{8, 4};

  logic [51:0] lk_vpn [NI], lk_ppn [NI], fill_vpn [NI], fill_ppn [NI], inv_vpn [NI];
  logic        lk_hit [NI], fill_valid [NI], inv_valid [NI], inv_all [NI];

  for (genvar g = 0; g < NI; g++) begin : g_dut
    pickle_tlb #(.ENTRIES(ENT[g]), .WAYS(WY[g])) dut (
      .clk, .rst_n, .lk_vpn(lk_vpn[g]), .lk_hit(lk_hit[g]), .lk_ppn(lk_ppn[g]),
      .fill_valid(fill_valid[g]), .fill_vpn(fill_vpn[g]), .fill_ppn(fill_ppn[g]),
      .inv_valid(inv_valid[g]), .inv_all(inv_all[g]), .inv_vpn(inv_vpn[g]));
  end

  // reference model
  bit          m_v   [NI][32];
  logic [51:0] m_vpn [NI][32], m_ppn [NI][32];
  int          m_rr  [NI][8];

  function automatic int m_find(int g, logic [51:0] v);
    int sets = ENT[g] / WY[g];
    int s = int'(v % 52'(sets));
    for (int w = 0; w < WY[g]; w++) if (m_v[g][s*WY[g]+w] && m_vpn[g][s*WY[g]+w] == v) return s*WY[g]+w;
    return -1;
  endfunction

  task automatic do_fill(int g, logic [51:0] v, logic [51:0] p);
    int sets = ENT[g] / WY[g];
    int s = int'(v % 52'(sets));
    int e = m_find(g, v);
    if (e < 0) begin
      for (int w = WY[g] - 1; w >= 0; w--) if (!m_v[g][s*WY[g]+w]) e = s*WY[g]+w;
      if (e < 0) begin
        e = s*WY[g] + m_rr[g][s];
        m_rr[g][s] = (m_rr[g][s] + 1) % WY[g];
      end
    end
    m_v[g][e] = 1; m_vpn[g][e] = v; m_ppn[g][e] = p;
    @(negedge clk);
    fill_valid[g] = 1; fill_vpn[g] = v; fill_ppn[g] = p;
    @(negedge clk);
    fill_valid[g] = 0;
  endtask

  task automatic do_lookup(int g, logic [51:0] v);
    int e = m_find(g, v);
    @(negedge clk);
    lk_vpn[g] = v;
    #1;
    check(lk_hit[g] == (e >= 0), $sformatf("tlb%0d hit for vpn %0h", g, v));
    if (e >= 0) check(lk_ppn[g] == m_ppn[g][e], $sformatf("tlb%0d ppn for vpn %0h", g, v));
  endtask

  task automatic do_inv(int g, bit all, logic [51:0] v);
    if (all) foreach (m_v[g][i]) m_v[g][i] = 0;
    else begin
      int e = m_find(g, v);
      if (e >= 0) m_v[g][e] = 0;
    end
    @(negedge clk);
    inv_valid[g] = 1; inv_all[g] = all; inv_vpn[g] = v;
    @(negedge clk);
    inv_valid[g] = 0; inv_all[g] = 0;
  endtask

  initial begin
    #2_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int g = 0; g < NI; g++) begin
      lk_vpn[g] = 0; fill_valid[g] = 0; fill_vpn[g] = 0; fill_ppn[g] = 0;
      inv_valid[g] = 0; inv_all[g] = 0; inv_vpn[g] = 0;
      foreach (m_v[g][i]) begin m_v[g][i] = 0; m_vpn[g][i] = 0; m_ppn[g][i] = 0; end
      foreach (m_rr[g][i]) m_rr[g][i] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < NI; g++) begin
      // directed: fill to capacity, all hit; one more evicts the first filled
      for (int i = 0; i < ENT[g]; i++) do_fill(g, 52'(i * 3 + 1), 52'(i + 100));
      for (int i = 0; i < ENT[g]; i++) do_lookup(g, 52'(i * 3 + 1));
      do_fill(g, 52'(1000 * (ENT[g] / WY[g]) + 1), 52'h777);
      do_lookup(g, 52'(1000 * (ENT[g] / WY[g]) + 1));
      do_lookup(g, 52'(1));
      // refill in place
      do_fill(g, 52'(4), 52'h555);
      do_lookup(g, 52'(4));
      do_inv(g, 0, 52'(7));
      do_lookup(g, 52'(7));
      do_lookup(g, 52'(10));
      // random traffic against the model
      for (int n = 0; n < 400; n++) begin
        logic [51:0] v;
        v = 52'($urandom_range(0, 3 * ENT[g]));
        case ($urandom_range(0, 9))
          0, 1, 2: do_fill(g, v, 52'($urandom));
          3:       do_inv(g, 0, v);
          default: do_lookup(g, v);
        endcase
        if (n == 200) do_inv(g, 1, 0);
      end
      do_inv(g, 1, 0);
      for (int i = 0; i < 20; i++) do_lookup(g, 52'(i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
