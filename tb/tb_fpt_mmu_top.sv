// tb_fpt_mmu_top: end-to-end test of the MMU and cache hierarchy at reduced
// sizes (small TLBs and caches, 64-lookup epochs) so that TLB misses, cache
// evictions and prioritization phases all occur within a short run. The
// stimulus and checks are in mmu_stim.svh; main memory is the behavioural
// mem_model with a 100-cycle latency.
module tb_fpt_mmu_top;
  import fpt_pkg::*;
  localparam int NPAGES = 4096, N_RAND = 3000, N_SEQ = 256, N_L1LOOP = 12;

  logic clk = 0, rst_n = 0, ready, cr3_write = 0;
  node_ptr_t cr3 = '0, h_cr3 = '0;
  logic virt = 0;
  logic ld_valid = 0, ld_ready, ld_resp_valid, ld_resp_fault;
  logic [VA_W-1:0] ld_va = '0;
  logic [PA_W-1:0] ld_resp_pa;
  logic [63:0] ld_resp_data;
  logic mem_req_valid, mem_req_ready, mem_req_is_pt, mem_resp_valid;
  logic [PA_W-1:0] mem_req_addr;
  logic [LINE_W-1:0] mem_resp_line;
  logic prio_en;
  mmu_stats_t stats;
  int checks = 0, failures = 0;

  fpt_mmu_top #(
    .L1T_4K_SETS(4), .L1T_4K_WAYS(2), .L1T_2M_SETS(2), .L1T_2M_WAYS(2),
    .TLB_SETS(16), .TLB_WAYS(4), .L1_SETS(8), .L1_WAYS(2), .L2_SETS(16), .L2_WAYS(4),
    .L3_SETS(64), .L3_WAYS(8), .EPOCH(64), .TLB_MISS_THRESH(8), .DATA_MISS_THRESH(4)
  ) dut (.*);
  mem_model #(.LAT(100)) mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_addr(mem_req_addr), .resp_valid(mem_resp_valid), .resp_line(mem_resp_line));
  always #5 clk = ~clk;

  `include "mmu_stim.svh"

  initial begin
    run_stimulus();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
