// fpt_pkg: types and constants shared by the flattened-page-table MMU.
//
// Addresses follow 64-bit x86/Arm: a 48-bit virtual address, a 52-bit physical
// address, 4KB base pages, 8-byte page table entries and 9 index bits per 4KB
// table node (a 512-ary radix tree). A table node may instead be a 2MB node
// (two levels merged, 18 index bits) or a 1GB node (three levels merged, 27
// index bits). The node size of the root is held next to the root pointer
// (CR3/TTBR) and the size of every lower node in the entry that points to it.
//
// PTE layout used here (x86-like): bit 0 present, bit 7 page-size (leaf of a
// large page), bits 10:9 size of the node this entry points to, bits 51:12 the
// physical frame / node address. The choice of bits 10:9 for the size code is
// this design's: the architecture only says "possibly in the unused bits".
package fpt_pkg;

  localparam int unsigned VA_W      = 48;   // virtual address bits
  localparam int unsigned PA_W      = 52;   // physical address bits
  localparam int unsigned PG_BITS   = 12;   // 4KB page offset
  localparam int unsigned IDX_BITS  = 9;    // index bits of a 4KB node
  localparam int unsigned LINE_BYTES = 64;  // cache line
  localparam int unsigned LINE_W    = LINE_BYTES * 8;
  localparam int unsigned LOFF_BITS = 6;    // log2(LINE_BYTES)
  localparam int unsigned POS_W     = 6;    // holds a VA bit position 0..48
  localparam int unsigned FRAME_W   = PA_W - PG_BITS;

  // Size of a page table node (and, equally, of the page an entry maps).
  typedef enum logic [1:0] {
    NODE_4K = 2'd0,   // 512 entries, 9 index bits
    NODE_2M = 2'd1,   // 262144 entries, 18 index bits (two levels merged)
    NODE_1G = 2'd2    // 2^27 entries, 27 index bits (three levels merged)
  } node_size_e;

  // PTE bit positions
  localparam int unsigned PTE_P     = 0;
  localparam int unsigned PTE_PS    = 7;
  localparam int unsigned PTE_SZ_LO = 9;

  typedef struct packed {
    logic [FRAME_W-1:0] frame;   // 4KB-aligned physical address of node or page
    node_size_e         size;    // size of the node this root points to
  } node_ptr_t;

  // Number of VA index bits used by a node of the given size.
  function automatic logic [POS_W-1:0] idx_width(node_size_e s);
    case (s)
      NODE_4K: idx_width = POS_W'(9);
      NODE_2M: idx_width = POS_W'(18);
      default: idx_width = POS_W'(27);
    endcase
  endfunction

  // Fields of a 64-bit PTE.
  function automatic logic pte_present(logic [63:0] pte);
    pte_present = pte[PTE_P];
  endfunction
  function automatic logic pte_leaf(logic [63:0] pte);
    pte_leaf = pte[PTE_PS];
  endfunction
  function automatic node_size_e pte_next_size(logic [63:0] pte);
    pte_next_size = node_size_e'(pte[PTE_SZ_LO +: 2]);
  endfunction
  function automatic logic [FRAME_W-1:0] pte_frame(logic [63:0] pte);
    pte_frame = pte[PA_W-1:PG_BITS];
  endfunction

  // Build a PTE (used by testbenches and by software models).
  function automatic logic [63:0] make_pte(logic [FRAME_W-1:0] frame, logic leaf,
                                           node_size_e next_size);
    logic [63:0] p;
    p = '0;
    p[PA_W-1:PG_BITS]    = frame;
    p[PTE_P]             = 1'b1;
    p[PTE_PS]            = leaf;
    p[PTE_SZ_LO +: 2]    = next_size;
    return p;
  endfunction

  // Result of a page walk: frame and number of page-offset bits (12, 21, 30).
  typedef struct packed {
    logic [FRAME_W-1:0] frame;      // low (page_bits-12) bits are zero
    logic [POS_W-1:0]   page_bits;  // 12 = 4KB, 21 = 2MB, 30 = 1GB
  } xlat_t;

  // Event counters of the MMU and cache hierarchy (all 32-bit, from reset).
  typedef struct packed {
    logic [31:0] loads;          // loads completed
    logic [31:0] tlb_misses;     // lookups that needed a walk
    logic [31:0] walks;          // walks completed (incl. faults)
    logic [31:0] walk_reads;     // page table entries read by walks
    logic [31:0] walk_cycles;    // cycles spent in walks
    logic [31:0] pwc_hits;       // walks that started from a PWC hit
    logic [31:0] l2_pt_acc;      // page table accesses reaching L2
    logic [31:0] l2_pt_hits;
    logic [31:0] l2_evict_pt;    // L2 evictions of page table lines
    logic [31:0] l2_evict_data;  // L2 evictions of data lines
    logic [31:0] l3_evict_pt;
    logic [31:0] l3_evict_data;
    logic [31:0] prio_cycles;    // cycles with prioritization enabled
    logic [31:0] mem_reads;      // line reads sent to memory
    logic [31:0] virt_walks;     // two-dimensional (guest + host) walks
    logic [31:0] host_reads;     // host table reads made by those walks
    logic [31:0] l1tlb_misses;   // first-level TLB misses (second-level lookups)
  } mmu_stats_t;

endpackage
