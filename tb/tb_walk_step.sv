// tb_walk_step: directed checks of one walk step against hand-computed
// results: index selection for 4KB, 2MB and 1GB nodes, entry addresses,
// leaf / pointer-as-translation / node-as-large-page endings, the 9-bit
// advance on a self reference, and the fault cases.
module tb_walk_step;
  import fpt_pkg::*;

  logic [VA_W-1:0]  va;
  logic [POS_W-1:0] pos;
  node_ptr_t        node;
  logic [PA_W-1:0]  pte_addr;
  logic             idx_ok, done, fault, self_ref, fill_pwc;
  logic [63:0]      pte;
  xlat_t            result;
  logic [POS_W-1:0] next_pos;
  node_ptr_t        next_node;

  int checks = 0, failures = 0;

  walk_step dut (.*);

  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  // VA from its four 9-bit fields and the page offset
  function automatic logic [VA_W-1:0] mkva(int l4, int l3, int l2, int l1, int off);
    return {9'(l4), 9'(l3), 9'(l2), 9'(l1), 12'(off)};
  endfunction

  localparam logic [FRAME_W-1:0] ROOT = 40'h00100;  // 4KB-aligned frames
  localparam logic [FRAME_W-1:0] N2M  = 40'h00400;  // 2MB-aligned (low 9 bits 0)

  initial begin
    va = mkva(3, 5, 7, 11, 12'h345);

    // 1. conventional 4KB root at 48: index = L4 field
    pos = 48; node = '{frame: ROOT, size: NODE_4K};
    pte = make_pte(40'h00200, 1'b0, NODE_4K); #1;
    chk("4K root addr", pte_addr, {ROOT, 12'h0} + 3 * 8);
    chk("4K root idx_ok", idx_ok, 1);
    chk("4K root continue", {done, fault}, 0);
    chk("4K root next_pos", next_pos, 39);
    chk("4K root fill", fill_pwc, 1);
    chk("4K root next frame", next_node.frame, 40'h00200);

    // 2. flattened 2MB root at 48: index = L4:L3 (18 bits)
    node = '{frame: N2M, size: NODE_2M};
    pte = make_pte(40'h00800, 1'b0, NODE_2M); #1;
    chk("2M root addr", pte_addr, {N2M, 12'h0} + (3 * 512 + 5) * 8);
    chk("2M root next_pos", next_pos, 30);
    chk("2M root next size", next_node.size, NODE_2M);
    chk("2M root continue", {done, fault}, 0);

    // 3. flattened L2+L1 node at 30: pointer reaches position 12 -> 4KB page
    pos = 30; node = '{frame: 40'h00800, size: NODE_2M};
    pte = make_pte(40'hABCDE, 1'b0, NODE_4K); #1;
    chk("2M leaf addr", pte_addr, {40'h00800, 12'h0} + (7 * 512 + 11) * 8);
    chk("2M leaf done", {done, fault}, 2'b10);
    chk("2M leaf bits", result.page_bits, 12);
    chk("2M leaf frame", result.frame, 40'hABCDE);
    chk("2M leaf no fill", fill_pwc, 0);

    // 4. 4KB L2 node at 30 with a 2MB leaf (PS): offset 21 bits, frame aligned
    node = '{frame: 40'h00300, size: NODE_4K};
    pte = make_pte(40'h12345, 1'b1, NODE_4K); #1;
    chk("2MB leaf addr", pte_addr, {40'h00300, 12'h0} + 7 * 8);
    chk("2MB leaf done", {done, fault}, 2'b10);
    chk("2MB leaf bits", result.page_bits, 21);
    chk("2MB leaf frame", result.frame, 40'h12200);

    // 5. self reference in a 2MB root at 48: advance by 9 only, no PWC fill
    pos = 48; node = '{frame: N2M, size: NODE_2M};
    pte = make_pte(N2M, 1'b0, NODE_2M); #1;
    chk("self ref", self_ref, 1);
    chk("self next_pos", next_pos, 39);
    chk("self continue", {done, fault}, 0);
    chk("self no fill", fill_pwc, 0);

    // 6. third recursion at 30 in the 2MB root: the root comes back as a
    //    2MB page (three recursions make the whole 2MB node readable)
    pos = 30; #1;
    chk("3rd rec addr", pte_addr, {N2M, 12'h0} + (7 * 512 + 11) * 8);
    chk("3rd rec done", {done, fault}, 2'b10);
    chk("3rd rec bits", result.page_bits, 21);
    chk("3rd rec frame", result.frame, N2M);

    // 7. self reference at 39 (second recursion) continues at 30
    pos = 39; #1;
    chk("2nd rec addr", pte_addr, {N2M, 12'h0} + (5 * 512 + 7) * 8);
    chk("2nd rec next_pos", next_pos, 30);
    chk("2nd rec continue", {done, fault}, 0);

    // 8. 4KB L4 at 39 (after one recursion) points to flattened L3+L2: continue
    pos = 39; node = '{frame: ROOT, size: NODE_4K};
    pte = make_pte(N2M, 1'b0, NODE_2M); #1;
    chk("L4->L3L2 next_pos", next_pos, 30);
    chk("L4->L3L2 continue", {done, fault}, 0);

    // 9. 4KB L4 at 30 (two recursions) points to L3+L2: returned as 2MB page
    pos = 30; #1;
    chk("L3L2 as page done", {done, fault}, 2'b10);
    chk("L3L2 as page bits", result.page_bits, 21);
    chk("L3L2 as page frame", result.frame, N2M);

    // 10. not present
    pte = 64'h0; #1;
    chk("not present", {done, fault}, 2'b01);

    // 11. 2MB node at 21 cannot be indexed
    pos = 21; node = '{frame: N2M, size: NODE_2M};
    pte = make_pte(40'h1, 1'b0, NODE_4K); #1;
    chk("idx_ok low", idx_ok, 0);
    chk("idx fault", fault, 1);

    // 12. 1GB node at 39: 27 index bits, pointer is the 4KB frame
    pos = 39; node = '{frame: 40'h40000, size: NODE_1G};
    pte = make_pte(40'h77777, 1'b0, NODE_4K); #1;
    chk("1G addr", pte_addr, {40'h40000, 12'h0} + ((5 * 512 + 7) * 512 + 11) * 8);
    chk("1G done", {done, fault}, 2'b10);
    chk("1G bits", result.page_bits, 12);

    // 13. reserved size code faults
    pos = 48; node = '{frame: ROOT, size: NODE_4K};
    pte = make_pte(40'h2, 1'b0, NODE_4K); pte[10:9] = 2'b11; #1;
    chk("bad size fault", fault, 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
