// tb_pickle_rv64e_core: runs small RV64E programs on the prefetch core.
//
// Programs come from tb_rv_asm_pkg. The data port is served by a word memory model with
// random grant delay and random load latency. Program 1 exercises arithmetic, shifts,
// compares, 32-bit ops, lui, byte/word/double loads and stores with sign and zero extension,
// a counted loop, a call with jal/jalr, and ends with EBREAK; each result is stored and
// compared with the value computed here. Checked also: done pulses once and halted stays
// high; one instruction per cycle when the data port never stalls (cycle count of a loop);
// an instruction naming x16 ends the kernel with illegal; a restart at another PC works.
`timescale 1ns/1ps
module tb_pickle_rv64e_core;
  import tb_rv_asm_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  logic start, halted, done, illegal, dreq, dwe, dgnt, drvalid;
  logic [31:0] start_pc, imem_addr, imem_rdata;
  logic [63:0] daddr, dwdata, drdata;
  logic [7:0] dbe;

  pickle_rv64e_core dut (.*);

  logic [31:0] imem [256];
  logic [63:0] dmem [512];
  assign imem_rdata = imem[imem_addr[9:2]];

  bit stall_en = 1;
  int n_done = 0;
  bit rd_pending = 0;
  logic [63:0] rd_word = 0;
  int rd_delay = 0;
  always @(negedge clk) dgnt = dreq && (!stall_en || $urandom_range(0, 2) != 0);
  always @(posedge clk) begin
    if (done) n_done++;
    drvalid <= 1'b0;
    if (dreq && dgnt) begin
      if (dwe) begin
        for (int b = 0; b < 8; b++) if (dbe[b]) dmem[daddr[11:3]][b*8 +: 8] <= dwdata[b*8 +: 8];
      end else begin
        rd_pending <= 1; rd_word <= dmem[daddr[11:3]]; rd_delay <= stall_en ? $urandom_range(0, 3) : 0;
      end
    end
    if (rd_pending) begin
      if (rd_delay == 0) begin drvalid <= 1'b1; drdata <= rd_word; rd_pending <= 0; end
      else rd_delay <= rd_delay - 1;
    end
  end

  task automatic load(prog_t p);
    foreach (imem[i]) imem[i] = EBREAK;
    foreach (p[i]) imem[i] = p[i];
  endtask

  task automatic run(int pc, output longint cycles);
    longint t0;
    @(negedge clk); start = 1; start_pc = 32'(pc);
    @(negedge clk); start = 0; t0 = cyc;
    while (!halted) @(negedge clk);
    cycles = cyc - t0;
  endtask

  initial begin
    #2_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    prog_t p;
    longint cyc_run;
    longint e [16];
    start = 0; start_pc = 0; drvalid = 0; drdata = 0;
    foreach (dmem[i]) dmem[i] = 0;
    dmem[64] = 64'hfedc_ba98_8765_4321;     // data at 0x200
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(halted && !illegal, "idle after reset");

    // program 1: results stored at 0x100 + 8*k
    p = {};
    p.push_back(addi(1, 0, 5));              // x1 = 5
    p.push_back(addi(2, 0, -3));             // x2 = -3
    p.push_back(add(3, 1, 2));      p.push_back(sd(3, 0, 'h100));   // 2
    p.push_back(sub(3, 1, 2));      p.push_back(sd(3, 0, 'h108));   // 8
    p.push_back(slli(3, 1, 40));    p.push_back(sd(3, 0, 'h110));   // 5<<40
    p.push_back(srai(3, 2, 1));     p.push_back(sd(3, 0, 'h118));   // -2
    p.push_back(srli(3, 2, 60));    p.push_back(sd(3, 0, 'h120));   // 15
    p.push_back(sltu(3, 1, 2));     p.push_back(sd(3, 0, 'h128));   // 1
    p.push_back(xor_(3, 1, 2));     p.push_back(sd(3, 0, 'h130));   // 5 ^ -3
    p.push_back(lui(4, 'h7ffff));
    p.push_back(addw(3, 4, 4));     p.push_back(sd(3, 0, 'h138));   // sext32(0xffffe000)
    p.push_back(ld(5, 0, 'h200));
    p.push_back(lw(3, 0, 'h204));   p.push_back(sd(3, 0, 'h140));   // sext(0xfedcba98)
    p.push_back(lbu(3, 0, 'h207));  p.push_back(sd(3, 0, 'h148));   // 0xfe
    p.push_back(sb(1, 0, 'h14b));                                   // byte 3 of 0x148 = 5
    p.push_back(sw(2, 0, 'h154));                                   // upper half of 0x150
    p.push_back(andi(3, 5, 'hff));  p.push_back(sd(3, 0, 'h158));   // 0x21
    // loop: x6 = sum 1..10
    p.push_back(addi(6, 0, 0));
    p.push_back(addi(7, 0, 10));
    p.push_back(add(6, 6, 7));                                      // L:
    p.push_back(addi(7, 7, -1));
    p.push_back(bne(7, 0, -8));
    p.push_back(sd(6, 0, 'h160));                                   // 55
    // call: jal x8 -> sub routine doubles x6, returns with jalr
    p.push_back(jal(8, 12));
    p.push_back(sd(6, 0, 'h168));                                   // 110
    p.push_back(EBREAK);
    p.push_back(add(6, 6, 6));                                      // sub
    p.push_back(jalr(0, 8, 0));
    load(p);
    run(0, cyc_run);
    @(negedge clk);
    check(!illegal, "program 1 legal");
    check(n_done == 1, "done pulsed once");
    check(dmem[32] == 2, "add");
    check(dmem[33] == 8, "sub");
    check(dmem[34] == 64'd5 << 40, "slli");
    check(dmem[35] == -64'sd2, "srai");
    check(dmem[36] == 15, "srli");
    check(dmem[37] == 1, "sltu");
    check(dmem[38] == (64'd5 ^ -64'sd3), "xor");
    check(dmem[39] == 64'hffff_ffff_ffff_e000, "lui + addw sign extension");
    check(dmem[40] == 64'hffff_ffff_fedc_ba98, "lw sign extension");
    check(dmem[41] == 64'h0000_0000_0500_00fe, "lbu and sb");
    check(dmem[42] == 64'hffff_fffd_0000_0000, "sw to the upper half");
    check(dmem[43] == 64'h21, "andi");
    check(dmem[44] == 55, "loop");
    check(dmem[45] == 110, "jal/jalr call");

    // one instruction per cycle without stalls: 3-instruction loop of 20 iterations
    stall_en = 0;
    p = {};
    p.push_back(addi(7, 0, 20));
    p.push_back(addi(6, 6, 1));
    p.push_back(addi(7, 7, -1));
    p.push_back(bne(7, 0, -8));
    p.push_back(EBREAK);
    load(p);
    run(0, cyc_run);
    check(cyc_run == 1 + 3 * 20 + 1, $sformatf("one instruction per cycle (%0d cycles)", cyc_run));
    stall_en = 1;

    // illegal: register x16
    p = {};
    p.push_back(addi(1, 0, 1));
    p.push_back(addi(16, 0, 1));
    p.push_back(sd(1, 0, 'h170));
    load(p);
    run(0, cyc_run);
    check(illegal, "x16 is illegal in RV64E");
    check(dmem[46] == 0, "nothing executed after an illegal instruction");

    // restart at another PC (jump-table style entry)
    p = {};
    p.push_back(EBREAK);
    p.push_back(addi(1, 0, 77));
    p.push_back(sd(1, 0, 'h178));
    p.push_back(ECALL);
    load(p);
    run(4, cyc_run);
    check(!illegal && dmem[47] == 77, "start at a given PC, ECALL ends");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
