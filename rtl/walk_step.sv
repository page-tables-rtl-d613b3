// walk_step: one step of a flattening-aware page table walk (combinational).
//
// What it does. The walker keeps a position `pos` in the virtual address: the
// number of VA bits not yet used for indexing (48 at the root). A node of size
// 4KB, 2MB or 1GB takes 9, 18 or 27 index bits, VA[pos-1 -: width], so the
// entry address is node_base + 8*index. The same VA field split thus covers a
// conventional 4-level table, a table with L4+L3 and L2+L1 merged into 2MB
// nodes, or any per-node mix, which is what makes flattening optional node by
// node.
//
// Given the entry read back, the step decides what comes next:
//  * not present, or a node that cannot be indexed in the bits left: fault;
//  * page-size bit set: a large-page leaf, the page offset is the bits left;
//  * a pointer: the position moves down by the node's width, except that a
//    pointer back to the node itself (a recursive self-reference) moves down by
//    9 bits only, so the next step reuses the low 9 index bits as its high 9
//    (the "overlapped index" that makes recursive access work with 2MB nodes);
//    - position reaches 12: the pointer itself is the 4KB translation;
//    - the next node needs more index bits than remain: the pointed-to node is
//      returned as a page of (pos) offset bits, which is how a recursive walk
//      returns a flattened 2MB table node;
//    - otherwise the walk continues at the pointed-to node.
// The pointer-is-translation and node-as-large-page rules, the 9-bit advance
// on self reference and the size code in the entry follow the paper; detecting
// the self reference by comparing the pointer with the current node address is
// this design's choice. `fill_pwc` flags pointers that may be cached in a page
// walk cache (never a self-reference, whose tag would not cover the index bits
// that were used).
//
// Interface: purely combinational, no clock. pte_addr depends only on the
// current state; the decision outputs depend on `pte` as well.
module walk_step
  import fpt_pkg::*;
(
  input  logic [VA_W-1:0]    va,
  input  logic [POS_W-1:0]   pos,        // VA bits not yet consumed (48..21)
  input  node_ptr_t          node,       // node being indexed
  output logic [PA_W-1:0]    pte_addr,   // address of the entry to read
  output logic               idx_ok,     // node can be indexed at this position
  input  logic [63:0]        pte,        // entry read from pte_addr
  output logic               done,       // walk ends with a translation
  output logic               fault,      // walk ends with a fault
  output xlat_t              result,     // valid when done
  output logic [POS_W-1:0]   next_pos,   // valid when !done && !fault
  output node_ptr_t          next_node,
  output logic               self_ref,   // pointer back to the same node
  output logic               fill_pwc    // pointer may be cached in a PWC
);

  logic [POS_W-1:0] w, w_next, adv, rest;
  logic [26:0]      index;
  logic [FRAME_W-1:0] frame;
  node_size_e       nsz;

  always_comb begin
    w      = idx_width(node.size);
    idx_ok = (pos >= w + POS_W'(PG_BITS));
    // VA[pos-1 -: w], computed as a shift so that pos may vary
    index  = 27'((va >> (pos - w)) & ((48'd1 << w) - 48'd1));
    pte_addr = {node.frame, 12'h000} + {22'd0, index, 3'b000};
  end

  always_comb begin
    frame     = pte_frame(pte);
    nsz       = pte_next_size(pte);
    self_ref  = (frame == node.frame);
    adv       = self_ref ? POS_W'(IDX_BITS) : w;
    rest      = pos - w;                     // bits left after a leaf here
    w_next    = idx_width(nsz);
    next_pos  = pos - adv;
    next_node = '{frame: frame, size: nsz};
    done      = 1'b0;
    fault     = 1'b0;
    fill_pwc  = 1'b0;
    result    = '{frame: frame, page_bits: POS_W'(PG_BITS)};
    if (!idx_ok || !pte_present(pte) || nsz == node_size_e'(2'd3)) begin
      fault = 1'b1;
    end else if (pte_leaf(pte)) begin
      done             = 1'b1;
      result.page_bits = rest;
      if (rest != POS_W'(12) && rest != POS_W'(21) && rest != POS_W'(30)) fault = 1'b1;
    end else if (next_pos == POS_W'(PG_BITS)) begin
      done             = 1'b1;                // the pointer is the 4KB frame
      result.page_bits = POS_W'(PG_BITS);
    end else if (next_pos < w_next + POS_W'(PG_BITS)) begin
      done             = 1'b1;                // node returned as a large page
      result.page_bits = next_pos;
      if (next_pos != POS_W'(21) && next_pos != POS_W'(30)) fault = 1'b1;
    end else begin
      fill_pwc = !self_ref;
    end
    // clear the frame bits that belong to the page offset of a large page
    if (result.page_bits == POS_W'(21)) result.frame[8:0]  = '0;
    if (result.page_bits == POS_W'(30)) result.frame[17:0] = '0;
    if (fault) done = 1'b0;
  end

endmodule
