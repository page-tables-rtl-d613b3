// mmu_stim.svh: end-to-end stimulus shared by the reduced-size and the
// full-size MMU testbenches. Included inside a testbench module that declares
// the DUT signals, `checks`, `failures`, `mem` (mem_model) and the localparams
// NPAGES (4KB pages mapped), N_RAND (random loads), N_SEQ and N_L1LOOP (a
// page count larger than the first-level TLB holds and smaller than the
// second-level one).
//
// Page tables: a flattened L4+L3 root (2MB node) whose entry (1,2) points to
// a flattened L2+L1 node mapping NPAGES 4KB pages at scattered frames; entry
// (1,9) points to an ordinary 4KB L2 node of 2MB pages (a 1GB region kept
// unflattened for large pages); the self-reference sits at L4 index 500,
// replicated over the 512 following index values. Every load's physical
// address and data are checked against values computed here, and each
// mechanism of the design is counted and must occur at least once.
//
// The last phase runs the same guest tables under virtualization: a
// flattened host table maps every guest-physical frame f used to host frame
// f + HOFF, and the guest tables are also stored at those shifted host
// addresses, so a load only returns the right address and data if both
// dimensions were walked. The first walk after the switch is cold: of the 8
// reads of a 2D walk with both tables flattened, the vPWC saves the host root
// read for the guest leaf node and for the data (all in one 1GB guest-physical
// region), leaving 6. Later walks take 2 reads: the guest leaf entry (guest
// PWC hit; its page found in the nested TLB) and the host leaf entry for the
// data (vPWC hit).

  localparam logic [FRAME_W-1:0] F_ROOT = 40'h00200, F_LEAF = 40'h00400, F_L2 = 40'h00020;
  localparam logic [FRAME_W-1:0] HOFF = 40'h100000, H_ROOT = 40'h300000, H_LEAF = 40'h300200;
  localparam int N_VIRT = 64;
  int n_v_cold = 0, n_v_walk2 = 0, n_v_fault = 0;

  int n_tlb_hit = 0, n_tlb_miss = 0, n_walk1 = 0, n_walk2 = 0, n_2mb = 0, n_fault = 0;
  int n_recursive = 0, n_flush = 0, n_prio_evict_data = 0, n_evict_pt = 0, n_prio_on = 0;
  int n_l1_hit = 0, n_l2tlb_hit = 0;
  int cyc = 0;
  bit prio_seen = 0;

  always @(posedge clk) begin
    cyc++;
    if (prio_en && !prio_seen) begin prio_seen = 1; n_prio_on++; end
  end

  function automatic logic [FRAME_W-1:0] page_frame(int i);
    return FRAME_W'(32'h10000 + ((i * 37) % 65536));
  endfunction
  function automatic logic [VA_W-1:0] page_va(int i, int off);
    return {9'd1, 9'd2, 18'(i), 12'(off)};
  endfunction

  // table entry written at its address and at the host copy of the guest view
  function automatic void gw(logic [PA_W-1:0] a, logic [63:0] d);
    mem.wr64(a, d);
    mem.wr64(a + {HOFF, 12'h0}, d);
  endfunction
  // host (flattened) entry mapping guest-physical frame f to f + HOFF
  function automatic void hmap(logic [FRAME_W-1:0] f);
    mem.wr64({H_LEAF, 12'h0} + PA_W'(f) * 8, make_pte(f + HOFF, 0, NODE_4K));
  endfunction

  task automatic build_tables();
    gw({F_ROOT, 12'h0} + (1 * 512 + 2) * 8, make_pte(F_LEAF, 0, NODE_2M));
    for (int i = 0; i < NPAGES; i++)
      gw({F_LEAF, 12'h0} + PA_W'(i) * 8, make_pte(page_frame(i), 0, NODE_4K));
    gw({F_ROOT, 12'h0} + (1 * 512 + 9) * 8, make_pte(F_L2, 0, NODE_4K));
    for (int j = 0; j < 16; j++)
      gw({F_L2, 12'h0} + PA_W'(j) * 8, make_pte(FRAME_W'(32'h80000 + j * 512), 1, NODE_4K));
    for (int k = 0; k < 512; k++)
      gw({F_ROOT, 12'h0} + PA_W'(500 * 512 + k) * 8, make_pte(F_ROOT, 0, NODE_2M));
    // host table: gPA[47:30] = 0 -> one flattened leaf node; guest table
    // nodes and the first N_VIRT data pages are mapped
    mem.wr64({H_ROOT, 12'h0}, make_pte(H_LEAF, 0, NODE_2M));
    for (int f = 32'h200; f < 32'h600; f++) hmap(FRAME_W'(f));
    for (int i = 0; i < N_VIRT; i++) hmap(page_frame(i));
  endtask

  // issue one load and check it; exp_fault / exp_pa / exp_data are the
  // independently computed expectations
  task automatic load(logic [VA_W-1:0] va, bit exp_fault, logic [PA_W-1:0] exp_pa,
                      logic [63:0] exp_data);
    logic [31:0] misses0, walks0, reads0, pwc0, l1m0;
    l1m0 = stats.l1tlb_misses;
    misses0 = stats.tlb_misses; walks0 = stats.walks; reads0 = stats.walk_reads;
    pwc0 = stats.pwc_hits;
    @(negedge clk); ld_valid = 1; ld_va = va;
    @(posedge clk); while (!ld_ready) @(posedge clk);
    @(negedge clk); ld_valid = 0;
    @(posedge clk); while (!ld_resp_valid) @(posedge clk);
    checks++;
    if (ld_resp_fault !== exp_fault ||
        (!exp_fault && (ld_resp_pa !== exp_pa || ld_resp_data !== exp_data))) begin
      failures++;
      $display("FAIL load %h: fault %0d pa %h data %h; expected %0d %h %h", va, ld_resp_fault,
               ld_resp_pa, ld_resp_data, exp_fault, exp_pa, exp_data);
    end
    @(negedge clk);
    if (stats.tlb_misses == misses0) n_tlb_hit++; else n_tlb_miss++;
    if (stats.l1tlb_misses == l1m0) n_l1_hit++;
    else if (stats.tlb_misses == misses0) n_l2tlb_hit++;
    if (stats.walks != walks0 && !virt) begin
      if (stats.walk_reads - reads0 == 1) n_walk1++;
      if (stats.walk_reads - reads0 == 2) n_walk2++;
    end
    if (exp_fault) n_fault++;
  endtask

  task automatic load_page(int i, int off);
    logic [PA_W-1:0] pa = {page_frame(i), 12'(off)};
    load(page_va(i, off), 0, pa, mem.rd64(pa));
  endtask

  task automatic run_stimulus();
    logic [31:0] ed0;
    build_tables();
    @(negedge clk); cr3 = '{frame: F_ROOT, size: NODE_2M}; cr3_write = 1;
    @(negedge clk); cr3_write = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    wait (ready);
    // A: sequential loads over a few pages: TLB hits after the first walk
    for (int k = 0; k < N_SEQ; k++) load_page(k / 64, (k % 64) * 8 * 8 % 4096);
    // A2: two passes over N_L1LOOP pages: the second pass misses in the
    //     first-level TLB and hits in the second-level one
    for (int k = 0; k < 2 * N_L1LOOP; k++) load_page(16 + k % N_L1LOOP, 24);
    // B: 2MB pages of the unflattened 1GB region
    for (int j = 0; j < 4; j++) begin
      logic [PA_W-1:0] pa = {FRAME_W'(32'h80000 + j * 512), 12'h0} + PA_W'(j * 4096 + 64);
      load({9'd1, 9'd9, 9'(j), 21'(j * 4096 + 64)}, 0, pa, mem.rd64(pa));
      n_2mb++;
    end
    // C: unmapped address: fault
    load({9'd7, 9'd0, 9'd0, 9'd0, 12'h0}, 1, '0, '0);
    // D: recursive load of the root's own entry (1,2): three recursions make
    //    the flattened root readable as a 2MB page
    load({9'd500, 9'd500, 9'd500, 21'((1 * 512 + 2) * 8)}, 0,
         {F_ROOT, 12'h0} + PA_W'((1 * 512 + 2) * 8), make_pte(F_LEAF, 0, NODE_2M));
    n_recursive++;
    // E: random loads over all pages (TLB misses, single-read walks, and a
    //    phase of prioritization once misses are frequent)
    ed0 = 0;
    for (int k = 0; k < N_RAND; k++) begin
      logic [31:0] e0 = stats.l2_evict_data;
      load_page($urandom_range(0, NPAGES - 1), 8 * $urandom_range(0, 511));
      if (prio_en && stats.l2_evict_data != e0) n_prio_evict_data++;
    end
    n_evict_pt = int'(stats.l2_evict_pt);
    // F: root pointer rewritten: PWCs and TLB flushed, next walk is cold
    @(negedge clk); cr3_write = 1; @(negedge clk); cr3_write = 0; n_flush++;
    wait (ready);
    begin
      logic [31:0] r0 = stats.walk_reads;
      load_page(3, 16);
      checks++;
      if (stats.walk_reads - r0 != 2) begin
        failures++; $display("FAIL walk after flush used %0d reads", stats.walk_reads - r0);
      end
    end
    // G: virtualized execution, guest and host tables flattened
    @(negedge clk); virt = 1; h_cr3 = '{frame: H_ROOT, size: NODE_2M}; cr3_write = 1;
    @(negedge clk); cr3_write = 0;
    wait (ready);
    for (int k = 0; k < 400; k++) begin
      logic [31:0] r0 = stats.walk_reads, w0 = stats.virt_walks;
      int i = (k == 0) ? 5 : $urandom_range(0, N_VIRT - 1);
      int off = 8 * $urandom_range(0, 511);
      logic [PA_W-1:0] hpa = {page_frame(i) + HOFF, 12'(off)};
      load(page_va(i, off), 0, hpa, mem.rd64(hpa));
      if (k == 0) begin
        checks++;
        if (stats.walk_reads - r0 != 6) begin
          failures++; $display("FAIL cold 2D walk used %0d reads, expected 6", stats.walk_reads - r0);
        end else n_v_cold++;
      end else if (stats.virt_walks != w0) begin
        checks++;
        if (stats.walk_reads - r0 != 2) begin
          failures++; $display("FAIL warm 2D walk used %0d reads, expected 2", stats.walk_reads - r0);
        end else n_v_walk2++;
      end
    end
    // guest page whose guest-physical frame the host does not map, and an
    // address the guest does not map: both fault
    load(page_va(N_VIRT, 0), 1, '0, '0); n_v_fault++;
    load({9'd7, 9'd0, 9'd0, 9'd0, 12'h0}, 1, '0, '0);

    $display("virtualized: walks %0d host reads %0d cold %0d two-read %0d",
             stats.virt_walks, stats.host_reads, n_v_cold, n_v_walk2);
    $display("l1 tlb hits %0d, l1 miss + l2 tlb hit %0d", n_l1_hit, n_l2tlb_hit);
    $display("loads %0d tlb_hit %0d tlb_miss %0d walk1 %0d walk2 %0d 2mb %0d fault %0d rec %0d",
             stats.loads, n_tlb_hit, n_tlb_miss, n_walk1, n_walk2, n_2mb, n_fault, n_recursive);
    $display("prio_on %0d prio_cycles %0d prio_evict_data %0d l2_evict_pt %0d l2_evict_data %0d",
             n_prio_on, stats.prio_cycles, n_prio_evict_data, stats.l2_evict_pt, stats.l2_evict_data);
    $display("walks %0d walk_reads %0d (%0d.%02d per walk) pwc_hits %0d l2 pt hits %0d/%0d mem_reads %0d cycles %0d",
             stats.walks, stats.walk_reads, stats.walk_reads / stats.walks,
             (stats.walk_reads * 100 / stats.walks) % 100, stats.pwc_hits,
             stats.l2_pt_hits, stats.l2_pt_acc, stats.mem_reads, cyc);
    // every mechanism must have happened
    begin
      int seen [string];
      seen["first-level tlb hit"] = n_l1_hit;
      seen["first-level miss, second-level hit"] = n_l2tlb_hit;
      seen["tlb hit"] = n_tlb_hit;          seen["tlb miss / walk"] = n_tlb_miss;
      seen["single-read walk (PWC)"] = n_walk1; seen["two-read flattened walk"] = n_walk2;
      seen["2MB page"] = n_2mb;             seen["fault"] = n_fault;
      seen["recursive access"] = n_recursive; seen["flush"] = n_flush;
      seen["prioritization phase"] = n_prio_on;
      seen["data evicted while prioritizing"] = n_prio_evict_data;
      seen["page-table line evicted"] = n_evict_pt;
      seen["cold 2D walk"] = n_v_cold;
      seen["2D walk with guest PWC, nested TLB and vPWC hits"] = n_v_walk2;
      seen["host translation fault"] = n_v_fault;
      foreach (seen[m]) begin
        checks++;
        if (seen[m] == 0) begin failures++; $display("FAIL mechanism never happened: %s", m); end
      end
    end
  endtask
