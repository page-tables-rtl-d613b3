// tb_fpt_mmu_full: end-to-end test of the MMU and cache hierarchy with every
// parameter at its default (1536-entry TLB, 4/4/24-entry PWCs, 32KB L1D,
// 256KB L2, 16MB L3, 1024-lookup epochs). 8192 mapped pages (32MB) and 7000
// random loads are enough to fill the L2 and enter a prioritization phase. The
// stimulus and checks are in mmu_stim.svh; main memory is the behavioural
// mem_model with a 100-cycle latency.
module tb_fpt_mmu_full;
  import fpt_pkg::*;
  localparam int NPAGES = 8192, N_RAND = 7000, N_SEQ = 256, N_L1LOOP = 100;

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

  fpt_mmu_top dut (.*);
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
    repeat (20000000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
