// tb_pickle_top_full: one complete BFS prefetch operation on the prefetcher at its default
// sizes (64 slots, 256-entry hint queue, 256KiB context, 1024-entry request manager,
// 64/1024-entry TLBs, 256KiB PickleCache, 8 LLC slices). Four hints are served one after
// the other; every last-level prefetch must reach the LLC delegation units.
`timescale 1ns/1ps
module tb_pickle_top_full;
  import pickle_pkg::*;
  localparam bit FULL = 1;
  localparam int NSL  = 64;
  localparam int NLLC = 8;

  logic clk, rst_n;
  logic st_valid, st_ready; logic [63:0] st_addr; logic [2:0] st_core; word_t st_data;
  logic cfg_imem_we; logic [31:0] cfg_imem_addr, cfg_imem_data;
  logic cfg_ctx_we, cfg_ctx_ready; logic [31:0] cfg_ctx_addr; word_t cfg_ctx_data;
  word_t cfg_root; logic cfg_delegate_en, cfg_timeout_we; logic [31:0] cfg_timeout;
  logic inv_valid, inv_all; word_t inv_vaddr;
  logic noc_req_valid, noc_req_ready, noc_req_victim; word_t noc_req_paddr;
  logic [15:0] noc_req_id; line_t noc_req_data;
  logic noc_resp_valid, noc_resp_ready; logic [15:0] noc_resp_id; line_t noc_resp_data;
  logic [NLLC-1:0] llc_lk_valid, llc_lk_resp_valid, llc_lk_in_llc, llc_lk_in_other;
  logic [NLLC-1:0] llc_touch_valid, llc_mem_valid, llc_mem_ready;
  word_t llc_lk_paddr [NLLC], llc_touch_paddr [NLLC], llc_mem_paddr [NLLC];
  logic [31:0] llc_n_fills [NLLC], llc_n_mru [NLLC], llc_n_elsewhere [NLLC], llc_n_timeouts [NLLC];
  logic [NSL-1:0] slot_busy;
  logic [8:0] hq_count;
  logic [10:0] rm_occupancy;
  pickle_stats_t stats;

  pickle_top dut (.*);

  initial begin
    #20_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=1 failures=1");
    $finish;
  end

`include "tb_pickle_e2e_body.svh"
endmodule
