// fpt_mmu_top: address translation and load path with flattened page tables
// and page-table-prioritizing caches.
//
// A load's virtual address goes to the first-level TLB (separate 4KB and 2MB
// banks looked up in parallel, one cycle) and on a miss to the second-level
// TLB (9 cycles). On a miss there the page walker
// translates it: it looks up its three page walker caches and reads page
// table entries through the L1 data cache, following the node size recorded
// in the root pointer and in each entry, so flattened 2MB nodes, 4KB nodes and
// recursive self references are all walked by the same logic. The result is
// written into both TLBs, and the load then reads its 64-bit word through the
// same L1D. The L1D misses into L2 and L2 into L3; L2 and L3 mark lines filled
// by walks as page-table lines and, while the phase detector reports a phase
// of high TLB and data miss rates, evict data lines in preference to them (99
// evictions in 100). L3 misses leave through the line-wide memory port.
//
// One load is in flight at a time, and the walker and the load's data access
// share the L1D port in turn. This in-order, blocking organisation is this
// design's; the structures, their sizes and latencies (the evaluated server
// configuration: first-level TLBs of 64 4KB and 32 2MB entries, 4-way,
// 1 cycle; 1536-entry 12-way 9-cycle second-level TLB; PWCs of 4/4/24
// entries; L1D 32KB 8-way 4 cycles, L2 256KB 8-way 12 cycles, L3 16MB 8-way
// 42 cycles, 64-byte lines) follow the evaluated system. Writing `cr3` with
// `cr3_write` flushes the PWCs and both TLBs.
//
// Virtualized execution: with `virt` set, `cr3` is the guest root (a
// guest-physical pointer), `h_cr3` the host root, and TLB misses are walked
// by the two-dimensional nested walker (guest PWCs, host PWCs acting as the
// vPWC, and a 16-entry nested TLB); the TLB then holds guest-virtual to
// host-physical translations. Either table may be flattened. `virt` and
// `h_cr3` may only change together with a `cr3_write`, which flushes all
// translation state. The native and the nested walker are separate instances
// that take turns on the L1D port; all their reads are marked page-table
// reads, so guest and host table lines are both prioritized.
//
// Interface: `ld_*` valid/ready loads and a one-cycle response with the
// physical address and data (or a fault); `mem_*` line reads to main memory
// with valid/ready request and a response pulse; `ready` rises once the
// caches and TLB have cleared their arrays after reset (L3: 32768 cycles).
module fpt_mmu_top
  import fpt_pkg::*;
#(
  parameter int unsigned L1T_4K_SETS = 16,
  parameter int unsigned L1T_4K_WAYS = 4,
  parameter int unsigned L1T_2M_SETS = 8,
  parameter int unsigned L1T_2M_WAYS = 4,
  parameter int unsigned TLB_SETS   = 128,
  parameter int unsigned TLB_WAYS   = 12,
  parameter int unsigned TLB_LAT    = 9,
  parameter int unsigned PWC_L4     = 4,
  parameter int unsigned PWC_L3     = 4,
  parameter int unsigned PWC_L2     = 24,
  parameter int unsigned NTLB_ENTRIES = 16,
  parameter int unsigned L1_SETS    = 64,
  parameter int unsigned L1_WAYS    = 8,
  parameter int unsigned L1_LAT     = 4,
  parameter int unsigned L2_SETS    = 512,
  parameter int unsigned L2_WAYS    = 8,
  parameter int unsigned L2_LAT     = 12,
  parameter int unsigned L3_SETS    = 32768,
  parameter int unsigned L3_WAYS    = 8,
  parameter int unsigned L3_LAT     = 42,
  parameter int unsigned KEEP_PT_PCT = 99,
  parameter int unsigned EPOCH      = 1024,
  parameter int unsigned TLB_MISS_THRESH  = 32,
  parameter int unsigned DATA_MISS_THRESH = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              ready,
  input  node_ptr_t         cr3,
  input  logic              cr3_write,
  input  logic              virt,
  input  node_ptr_t         h_cr3,
  // loads from the core
  input  logic              ld_valid,
  output logic              ld_ready,
  input  logic [VA_W-1:0]   ld_va,
  output logic              ld_resp_valid,
  output logic              ld_resp_fault,
  output logic [PA_W-1:0]   ld_resp_pa,
  output logic [63:0]       ld_resp_data,
  // main memory (line reads)
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [PA_W-1:0]   mem_req_addr,
  output logic              mem_req_is_pt,
  input  logic              mem_resp_valid,
  input  logic [LINE_W-1:0] mem_resp_line,
  // status
  output logic              prio_en,
  output mmu_stats_t        stats
);

  typedef enum logic [2:0] {L_IDLE, L_L1T, L_TLB, L_WALK, L_FILL, L_DREQ, L_DWAIT, L_RESP} lstate_e;
  lstate_e st;

  logic [VA_W-1:0] va_q;
  xlat_t           xl_q;
  logic            fault_q;
  logic [63:0]     data_q;

  // ---------------- first-level TLB (4KB and 2MB banks, parallel lookup) ----------------
  logic  l1t_rsp_valid, l1t_rsp_hit;
  xlat_t l1t_rsp_xlat;
  l1_tlb #(.SETS_4K(L1T_4K_SETS), .WAYS_4K(L1T_4K_WAYS), .SETS_2M(L1T_2M_SETS),
           .WAYS_2M(L1T_2M_WAYS)) u_l1tlb (
    .clk, .rst_n, .flush(cr3_write), .lk_valid(ld_valid && ld_ready), .lk_va(ld_va),
    .rsp_valid(l1t_rsp_valid), .rsp_hit(l1t_rsp_hit), .rsp_xlat(l1t_rsp_xlat),
    .fill_valid(st == L_FILL), .fill_va(va_q), .fill_xlat(xl_q));

  // ---------------- second-level TLB ----------------
  logic  tlb_issued;   // lookup of this load accepted
  logic  tlb_init, tlb_lk_ready, tlb_rsp_valid, tlb_rsp_hit;
  xlat_t tlb_rsp_xlat;
  tlb #(.SETS(TLB_SETS), .WAYS(TLB_WAYS), .LAT(TLB_LAT)) u_tlb (
    .clk, .rst_n, .flush(cr3_write), .init_done(tlb_init),
    .lk_valid(st == L_TLB && !tlb_issued), .lk_ready(tlb_lk_ready), .lk_va(va_q),
    .rsp_valid(tlb_rsp_valid), .rsp_hit(tlb_rsp_hit), .rsp_xlat(tlb_rsp_xlat),
    .fill_valid(st == L_FILL), .fill_va(va_q), .fill_xlat(xl_q));

  // ---------------- page walker ----------------
  logic              walk_issued;  // walk of this load accepted
  logic              w_req_ready, w_resp_valid, w_resp_fault;
  xlat_t             w_resp_xlat;
  logic [2:0]        w_resp_acc;
  logic [1:0]        w_resp_lvl;
  logic              w_mreq_valid, w_mreq_ready;
  logic [PA_W-1:0]   w_mreq_addr;

  // ---------------- L1D port (shared by walker and load) ----------------
  logic              l1_req_valid, l1_req_ready, l1_req_is_pt, l1_resp_valid;
  logic [PA_W-1:0]   l1_req_addr;
  logic [LINE_W-1:0] l1_resp_line;
  logic [PA_W-1:0]   pa;

  page_walker #(.L4_ENTRIES(PWC_L4), .L3_ENTRIES(PWC_L3), .L2_ENTRIES(PWC_L2)) u_walker (
    .clk, .rst_n, .cr3, .flush(cr3_write),
    .req_valid(st == L_WALK && !walk_issued && !virt), .req_ready(w_req_ready), .req_va(va_q),
    .resp_valid(w_resp_valid), .resp_fault(w_resp_fault), .resp_xlat(w_resp_xlat),
    .resp_accesses(w_resp_acc), .resp_pwc_level(w_resp_lvl),
    .mem_req_valid(w_mreq_valid), .mem_req_ready(w_mreq_ready), .mem_req_addr(w_mreq_addr),
    .mem_resp_valid(l1_resp_valid && st == L_WALK && !virt), .mem_resp_line(l1_resp_line));

  // ---------------- nested (2D) walker, used while `virt` is set ----------------
  logic              n_req_ready, n_resp_valid, n_resp_fault;
  xlat_t             n_resp_xlat;
  logic [4:0]        n_resp_gr, n_resp_hr;
  logic              n_mreq_valid;
  logic [PA_W-1:0]   n_mreq_addr;
  nested_walker #(.PWC_L4(PWC_L4), .PWC_L3(PWC_L3), .PWC_L2(PWC_L2),
                  .NTLB_ENTRIES(NTLB_ENTRIES)) u_nested (
    .clk, .rst_n, .g_cr3(cr3), .h_cr3, .flush(cr3_write),
    .req_valid(st == L_WALK && !walk_issued && virt), .req_ready(n_req_ready), .req_va(va_q),
    .resp_valid(n_resp_valid), .resp_fault(n_resp_fault), .resp_xlat(n_resp_xlat),
    .resp_guest_reads(n_resp_gr), .resp_host_reads(n_resp_hr),
    .mem_req_valid(n_mreq_valid), .mem_req_ready(st == L_WALK && virt && l1_req_ready),
    .mem_req_addr(n_mreq_addr),
    .mem_resp_valid(l1_resp_valid && st == L_WALK && virt), .mem_resp_line(l1_resp_line));

  // walk result of whichever walker is in use
  logic  wk_req_ready, wk_resp_valid, wk_resp_fault;
  xlat_t wk_resp_xlat;
  always_comb begin
    wk_req_ready  = virt ? n_req_ready  : w_req_ready;
    wk_resp_valid = virt ? n_resp_valid : w_resp_valid;
    wk_resp_fault = virt ? n_resp_fault : w_resp_fault;
    wk_resp_xlat  = virt ? n_resp_xlat  : w_resp_xlat;
  end

  always_comb begin
    if (st == L_WALK) begin
      l1_req_valid = virt ? n_mreq_valid : w_mreq_valid;
      l1_req_addr  = virt ? n_mreq_addr  : w_mreq_addr;
      l1_req_is_pt = 1'b1;
    end else begin
      l1_req_valid = (st == L_DREQ);
      l1_req_addr  = pa;
      l1_req_is_pt = 1'b0;
    end
    w_mreq_ready = (st == L_WALK) && !virt && l1_req_ready;
  end

  // physical address of the load: frame, plus the VA's page offset bits
  always_comb begin
    logic [PA_W-1:0] mask;
    mask = (PA_W'(1) << xl_q.page_bits) - PA_W'(1);
    pa   = ({xl_q.frame, 12'h000} & ~mask) | (PA_W'(va_q) & mask);
  end

  // ---------------- caches ----------------
  logic              l1_init, l2_init, l3_init;
  // one context: the L2/L3 context identifiers are constant (see prio_cache)
  logic [3:0]        l2_req_ctx, l3_req_ctx;
  logic              l2_req_valid, l2_req_ready, l2_req_is_pt, l2_resp_valid;
  logic [PA_W-1:0]   l2_req_addr;
  logic [LINE_W-1:0] l2_resp_line;
  logic              l3_req_valid, l3_req_ready, l3_req_is_pt, l3_resp_valid;
  logic [PA_W-1:0]   l3_req_addr;
  logic [LINE_W-1:0] l3_resp_line;
  logic l1_ev_acc, l1_ev_hit, l1_ev_pt, l1_ev_ept, l1_ev_edata;
  logic l2_ev_acc, l2_ev_hit, l2_ev_pt, l2_ev_ept, l2_ev_edata;
  logic l3_ev_acc, l3_ev_hit, l3_ev_pt, l3_ev_ept, l3_ev_edata;

  prio_cache #(.SETS(L1_SETS), .WAYS(L1_WAYS), .HIT_LAT(L1_LAT), .PRIO(1'b0),
               .KEEP_PT_PCT(KEEP_PT_PCT)) u_l1d (
    .clk, .rst_n, .prio_en, .init_done(l1_init),
    .req_valid(l1_req_valid), .req_ready(l1_req_ready), .req_addr(l1_req_addr),
    .req_is_pt(l1_req_is_pt), .req_ctx(4'd0), .dn_req_ctx(l2_req_ctx),
    .resp_valid(l1_resp_valid), .resp_line(l1_resp_line),
    .dn_req_valid(l2_req_valid), .dn_req_ready(l2_req_ready), .dn_req_addr(l2_req_addr),
    .dn_req_is_pt(l2_req_is_pt), .dn_resp_valid(l2_resp_valid), .dn_resp_line(l2_resp_line),
    .ev_access(l1_ev_acc), .ev_hit(l1_ev_hit), .ev_is_pt(l1_ev_pt),
    .ev_evict_pt(l1_ev_ept), .ev_evict_data(l1_ev_edata));

  prio_cache #(.SETS(L2_SETS), .WAYS(L2_WAYS), .HIT_LAT(L2_LAT), .PRIO(1'b1),
               .KEEP_PT_PCT(KEEP_PT_PCT)) u_l2 (
    .clk, .rst_n, .prio_en, .init_done(l2_init),
    .req_valid(l2_req_valid), .req_ready(l2_req_ready), .req_addr(l2_req_addr),
    .req_is_pt(l2_req_is_pt), .req_ctx(l2_req_ctx), .dn_req_ctx(l3_req_ctx),
    .resp_valid(l2_resp_valid), .resp_line(l2_resp_line),
    .dn_req_valid(l3_req_valid), .dn_req_ready(l3_req_ready), .dn_req_addr(l3_req_addr),
    .dn_req_is_pt(l3_req_is_pt), .dn_resp_valid(l3_resp_valid), .dn_resp_line(l3_resp_line),
    .ev_access(l2_ev_acc), .ev_hit(l2_ev_hit), .ev_is_pt(l2_ev_pt),
    .ev_evict_pt(l2_ev_ept), .ev_evict_data(l2_ev_edata));

  prio_cache #(.SETS(L3_SETS), .WAYS(L3_WAYS), .HIT_LAT(L3_LAT), .PRIO(1'b1),
               .KEEP_PT_PCT(KEEP_PT_PCT)) u_l3 (
    .clk, .rst_n, .prio_en, .init_done(l3_init),
    .req_valid(l3_req_valid), .req_ready(l3_req_ready), .req_addr(l3_req_addr),
    .req_is_pt(l3_req_is_pt), .req_ctx(l3_req_ctx), .dn_req_ctx(),
    .resp_valid(l3_resp_valid), .resp_line(l3_resp_line),
    .dn_req_valid(mem_req_valid), .dn_req_ready(mem_req_ready), .dn_req_addr(mem_req_addr),
    .dn_req_is_pt(mem_req_is_pt), .dn_resp_valid(mem_resp_valid), .dn_resp_line(mem_resp_line),
    .ev_access(l3_ev_acc), .ev_hit(l3_ev_hit), .ev_is_pt(l3_ev_pt),
    .ev_evict_pt(l3_ev_ept), .ev_evict_data(l3_ev_edata));

  // ---------------- phase detection ----------------
  miss_phase_detector #(.EPOCH(EPOCH), .TLB_MISS_THRESH(TLB_MISS_THRESH),
                        .DATA_MISS_THRESH(DATA_MISS_THRESH)) u_phase (
    .clk, .rst_n,
    .ev_tlb_access(l1t_rsp_valid), .ev_tlb_miss(tlb_rsp_valid && !tlb_rsp_hit),
    .ev_l2_data_miss(l2_ev_acc && !l2_ev_hit && !l2_ev_pt),
    .prio_en, .last_tlb_misses(), .last_data_misses());

  // ---------------- load sequencing ----------------
  assign ready    = tlb_init && l1_init && l2_init && l3_init;
  assign ld_ready = ready && (st == L_IDLE) && !cr3_write;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= L_IDLE; va_q <= '0; xl_q <= '0; fault_q <= 1'b0; data_q <= '0;
      tlb_issued <= 1'b0; walk_issued <= 1'b0;
    end else begin
      case (st)
        L_IDLE: if (ld_valid && ld_ready) begin
          va_q <= ld_va; fault_q <= 1'b0; tlb_issued <= 1'b0; st <= L_L1T;
        end
        L_L1T: begin
          if (l1t_rsp_hit) begin
            xl_q <= l1t_rsp_xlat; st <= L_DREQ;
          end else st <= L_TLB;
        end
        L_TLB: begin
          if (tlb_lk_ready) tlb_issued <= 1'b1;
          if (tlb_rsp_valid) begin
            if (tlb_rsp_hit) begin
              xl_q <= tlb_rsp_xlat; st <= L_FILL;   // refill the first-level TLB
            end else begin
              walk_issued <= 1'b0; st <= L_WALK;
            end
          end
        end
        L_WALK: begin
          if (wk_req_ready) walk_issued <= 1'b1;
          if (wk_resp_valid) begin
            xl_q <= wk_resp_xlat;
            if (wk_resp_fault) begin
              fault_q <= 1'b1; st <= L_RESP;
            end else st <= L_FILL;
          end
        end
        L_FILL:  st <= L_DREQ;
        L_DREQ:  if (l1_req_ready) st <= L_DWAIT;
        L_DWAIT: if (l1_resp_valid) begin
          data_q <= l1_resp_line[{pa[5:3], 6'b000000} +: 64];
          st     <= L_RESP;
        end
        default: st <= L_IDLE;   // L_RESP
      endcase
    end
  end

  assign ld_resp_valid = (st == L_RESP);
  assign ld_resp_fault = fault_q;
  assign ld_resp_pa    = pa;
  assign ld_resp_data  = data_q;

  // ---------------- counters ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) stats <= '0;
    else begin
      if (ld_resp_valid)                  stats.loads       <= stats.loads + 32'd1;
      if (tlb_rsp_valid && !tlb_rsp_hit)  stats.tlb_misses  <= stats.tlb_misses + 32'd1;
      if (l1t_rsp_valid && !l1t_rsp_hit)  stats.l1tlb_misses <= stats.l1tlb_misses + 32'd1;
      if (w_resp_valid && !virt) begin
        stats.walks      <= stats.walks + 32'd1;
        stats.walk_reads <= stats.walk_reads + 32'(w_resp_acc);
        if (w_resp_lvl != 2'd0) stats.pwc_hits <= stats.pwc_hits + 32'd1;
      end
      if (n_resp_valid && virt) begin
        stats.walks      <= stats.walks + 32'd1;
        stats.walk_reads <= stats.walk_reads + 32'(n_resp_gr) + 32'(n_resp_hr);
        stats.virt_walks <= stats.virt_walks + 32'd1;
        stats.host_reads <= stats.host_reads + 32'(n_resp_hr);
      end
      if (st == L_WALK)                   stats.walk_cycles <= stats.walk_cycles + 32'd1;
      if (l2_ev_acc && l2_ev_pt)          stats.l2_pt_acc   <= stats.l2_pt_acc + 32'd1;
      if (l2_ev_hit && l2_ev_pt)          stats.l2_pt_hits  <= stats.l2_pt_hits + 32'd1;
      if (l2_ev_ept)                      stats.l2_evict_pt <= stats.l2_evict_pt + 32'd1;
      if (l2_ev_edata)                    stats.l2_evict_data <= stats.l2_evict_data + 32'd1;
      if (l3_ev_ept)                      stats.l3_evict_pt <= stats.l3_evict_pt + 32'd1;
      if (l3_ev_edata)                    stats.l3_evict_data <= stats.l3_evict_data + 32'd1;
      if (prio_en)                        stats.prio_cycles <= stats.prio_cycles + 32'd1;
      if (mem_req_valid && mem_req_ready) stats.mem_reads   <= stats.mem_reads + 32'd1;
    end
  end

endmodule
