// tb_workload_random: a GUPS-like random-access workload on the full-size
// design (every parameter at its default), run four times over the same
// virtual pages: natively with flattened page tables (a 2MB L4+L3 root and one
// 2MB L2+L1 node per GB) and with a conventional 4-level table of 4KB nodes,
// then virtualized with guest and host tables both flattened and both
// conventional (the 2D baseline). The host maps guest-physical frame f to
// host frame f + HOFF, and the guest tables are also stored at those host
// addresses.
//
// Footprint: N_PAGES distinct 4KB pages scattered over an 8GB virtual range
// (page i at VA page (i * 0x9E3779B1) mod 2^21, a bijection, so no page
// repeats). Both tables are written in full before the run; the two runs map
// the pages to different physical frames so that neither finds its data in
// the caches. Each run makes N_LOADS loads at random pages and offsets; every
// address and data word is checked. The run reports table reads per walk,
// cycles per load, L2 page-table hit rate and prioritization cycles, and
// checks the properties flattening promises: at most 2 reads per native walk
// (about 1.5 here, as 8 one-GB regions share a 4-entry L3 PWC), fewer reads
// and fewer cycles per load than the conventional table, natively and under
// virtualization.
module tb_workload_random;
  import fpt_pkg::*;
  localparam int N_PAGES = 16384, N_LOADS = 5000;
  localparam logic [VA_W-1:0] VA_BASE = 48'h0080_0000_0000;     // L4 index 1
  localparam logic [FRAME_W-1:0] F_ROOT = 40'h1000, F_LEAF = 40'h2000;   // flattened
  localparam logic [FRAME_W-1:0] C_L4 = 40'h8000, C_L3 = 40'h8001, C_L2 = 40'h8010,
                                 C_L1 = 40'h9000;                        // conventional
  localparam logic [FRAME_W-1:0] HOFF = 40'h1000000;
  localparam logic [FRAME_W-1:0] HF_ROOT = 40'h2000000, HF_LEAF = 40'h2000200;   // host, flattened
  localparam logic [FRAME_W-1:0] HC_L4 = 40'h3000000, HC_L3 = 40'h3000001, HC_L2 = 40'h3000100,
                                 HC_L1 = 40'h3100000;                            // host, 4-level

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
  longint cyc = 0;

  fpt_mmu_top dut (.*);
  mem_model #(.LAT(100)) mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_addr(mem_req_addr), .resp_valid(mem_resp_valid), .resp_line(mem_resp_line));
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  // virtual page number (within the 8GB range) of the i-th touched page
  function automatic logic [20:0] vpage(int i);
    return 21'(longint'(i) * 64'h9E3779B1);
  endfunction
  function automatic logic [FRAME_W-1:0] frame_of(int run, logic [20:0] p);
    return (run % 2 == 0 ? 40'h100000 : 40'h400000) + FRAME_W'(p);
  endfunction

  // guest table entry: at its guest-physical address (native runs) and at
  // the host address the host tables give it (virtualized runs)
  function automatic void gw(logic [PA_W-1:0] a, logic [63:0] d);
    mem.wr64(a, d);
    mem.wr64(a + {HOFF, 12'h0}, d);
  endfunction
  // host entries, in both host tables, for guest-physical frame f
  function automatic void hmap(logic [FRAME_W-1:0] f);
    logic [FRAME_W-1:0] g, q;
    g = f >> 18;   // 1GB region of the guest-physical address
    q = f >> 9;    // 2MB region
    mem.wr64({HF_ROOT, 12'h0} + PA_W'(g) * 8, make_pte(HF_LEAF + (g << 9), 0, NODE_2M));
    mem.wr64({HF_LEAF, 12'h0} + PA_W'(f) * 8, make_pte(f + HOFF, 0, NODE_4K));
    mem.wr64({HC_L4, 12'h0}, make_pte(HC_L3, 0, NODE_4K));
    mem.wr64({HC_L3, 12'h0} + PA_W'(g) * 8, make_pte(HC_L2 + g, 0, NODE_4K));
    mem.wr64({HC_L2 + g, 12'h0} + PA_W'(q[8:0]) * 8, make_pte(HC_L1 + q, 0, NODE_4K));
    mem.wr64({HC_L1 + q, 12'h0} + PA_W'(f[8:0]) * 8, make_pte(f + HOFF, 0, NODE_4K));
  endfunction

  task automatic build();
    // flattened: root entry per 1GB region (VA[47:30] = 512 + r), leaf entry VA[29:12]
    for (int r = 0; r < 8; r++)
      gw({F_ROOT, 12'h0} + PA_W'(512 + r) * 8, make_pte(F_LEAF + FRAME_W'(r * 512), 0, NODE_2M));
    // conventional: L4[1] -> L3, L3[r] -> L2 node r, L2 entries -> L1 node per 2MB region
    gw({C_L4, 12'h0} + 8, make_pte(C_L3, 0, NODE_4K));
    for (int r = 0; r < 8; r++) begin
      gw({C_L3, 12'h0} + PA_W'(r) * 8, make_pte(C_L2 + FRAME_W'(r), 0, NODE_4K));
      hmap(C_L2 + FRAME_W'(r));
    end
    hmap(F_ROOT + 1); hmap(C_L4); hmap(C_L3);
    for (int i = 0; i < N_PAGES; i++) begin
      logic [20:0] p;
      p = vpage(i);
      gw({F_LEAF, 12'h0} + PA_W'(p) * 8, make_pte(frame_of(0, p), 0, NODE_4K));
      gw({C_L2, 12'h0} + PA_W'(p >> 9) * 8, make_pte(C_L1 + FRAME_W'(p >> 9), 0, NODE_4K));
      gw({C_L1 + FRAME_W'(p >> 9), 12'h0} + PA_W'(p[8:0]) * 8,
         make_pte(frame_of(1, p), 0, NODE_4K));
      hmap(F_LEAF + FRAME_W'(p >> 9)); hmap(C_L1 + FRAME_W'(p >> 9));
      hmap(frame_of(0, p)); hmap(frame_of(1, p));
    end
  endtask

  task automatic load(int run, int i, int off);
    logic [20:0] p;
    logic [PA_W-1:0] pa;
    p  = vpage(i);
    pa = {frame_of(run, p) + (run >= 2 ? HOFF : '0), 12'(off)};
    @(negedge clk); ld_valid = 1; ld_va = VA_BASE + {15'd0, p, 12'(off)};
    @(posedge clk); while (!ld_ready) @(posedge clk);
    @(negedge clk); ld_valid = 0;
    @(posedge clk); while (!ld_resp_valid) @(posedge clk);
    checks++;
    if (ld_resp_fault || ld_resp_pa !== pa || ld_resp_data !== mem.rd64(pa)) begin
      failures++;
      if (failures < 10) $display("FAIL run %0d page %0d: fault %0d pa %h expected %h", run, i,
                                  ld_resp_fault, ld_resp_pa, pa);
    end
  endtask

  int rd100 [4];     // reads per walk x 100
  longint cpl [4];   // cycles per load
  const string NAME [4] = '{"native, flattened      ", "native, 4-level        ",
                            "virtualized, both flat ", "virtualized, 2D 4-level"};

  task automatic run(int r);
    longint c0;
    mmu_stats_t s0;
    @(negedge clk);
    cr3   = (r % 2 == 0) ? '{frame: F_ROOT, size: NODE_2M} : '{frame: C_L4, size: NODE_4K};
    h_cr3 = (r % 2 == 0) ? '{frame: HF_ROOT, size: NODE_2M} : '{frame: HC_L4, size: NODE_4K};
    virt  = (r >= 2);
    cr3_write = 1;
    @(negedge clk); cr3_write = 0;
    wait (ready);
    s0 = stats; c0 = cyc;
    for (int k = 0; k < N_LOADS; k++) load(r, $urandom_range(0, N_PAGES - 1), 8 * $urandom_range(0, 511));
    rd100[r] = int'((stats.walk_reads - s0.walk_reads) * 100 / (stats.walks - s0.walks));
    cpl[r] = (cyc - c0) / N_LOADS;
    $display("%s: walks %0d reads/walk %0d.%02d cycles/load %0d L2 page-table hits %0d/%0d prio cycles %0d",
             NAME[r], stats.walks - s0.walks, rd100[r] / 100,
             rd100[r] % 100, cpl[r], stats.l2_pt_hits - s0.l2_pt_hits, stats.l2_pt_acc - s0.l2_pt_acc,
             stats.prio_cycles - s0.prio_cycles);
    checks++;
    if (stats.prio_cycles == s0.prio_cycles) begin
      failures++; $display("FAIL no prioritization phase in run %0d", r);
    end
  endtask

  initial begin
    build();
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 4; r++) run(r);
    checks++;
    if (rd100[0] < 100 || rd100[0] > 200) begin
      failures++; $display("FAIL flattened walks outside 1..2 reads");
    end
    checks++;
    if (rd100[1] <= rd100[0] || rd100[1] > 400) begin
      failures++; $display("FAIL conventional walks do not need more reads than flattened ones");
    end
    checks++;
    if (cpl[0] >= cpl[1]) begin
      failures++; $display("FAIL flattened tables not faster");
    end
    checks++;
    if (rd100[2] >= rd100[3] || cpl[2] >= cpl[3]) begin
      failures++; $display("FAIL flattening both dimensions does not reduce 2D walk reads and time");
    end
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
