// tb_page_walker: the walker on a memory model holding page tables built the
// way an OS would build them. Checked for each walk: translation, page size,
// number of table reads, which PWC it started from, and its cycle count
// (2 + reads * (ML + 1) with a memory of latency ML: accept and PWC lookup, then per read one request cycle and ML memory cycles, as worked out from the
// handshake). Cases: conventional 4-level table, flattened L4+L3 / L2+L1
// table, a 1GB region left unflattened for 2MB pages, the L4 / L3+L2 / L1
// organisation, recursive self-referencing access with 1, 2 and 3 recursions
// (overlapped index bits in a flattened root), a fault, and PWC flush.
module tb_page_walker;
  import fpt_pkg::*;
  localparam int unsigned ML = 6;

  logic clk = 0, rst_n = 0, flush = 0;
  node_ptr_t cr3 = '0;
  logic req_valid = 0, req_ready, resp_valid, resp_fault;
  logic [VA_W-1:0] req_va = '0;
  xlat_t resp_xlat;
  logic [2:0] resp_accesses;
  logic [1:0] resp_pwc_level;
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  logic [PA_W-1:0] mem_req_addr;
  logic [LINE_W-1:0] mem_resp_line;
  int checks = 0, failures = 0, cyc = 0;

  page_walker dut (.*);
  mem_model #(.LAT(ML)) mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_addr(mem_req_addr), .resp_valid(mem_resp_valid), .resp_line(mem_resp_line));
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  function automatic logic [VA_W-1:0] mkva(int a, int b, int c, int d, int off);
    return {9'(a), 9'(b), 9'(c), 9'(d), 12'(off)};
  endfunction
  // write entry `idx` of the node at `frame`
  function automatic void set_e(logic [FRAME_W-1:0] frame, int idx, logic [63:0] pte);
    mem.wr64({frame, 12'h0} + PA_W'(idx) * 8, pte);
  endfunction

  task automatic walk(string name, logic [VA_W-1:0] va, bit exp_fault,
                      logic [FRAME_W-1:0] exp_frame, int exp_bits, int exp_reads, int exp_lvl);
    int t0;
    @(negedge clk); req_valid = 1; req_va = va;
    @(posedge clk); while (!req_ready) @(posedge clk);
    t0 = cyc;
    @(negedge clk); req_valid = 0;
    @(posedge clk); while (!resp_valid) @(posedge clk);
    checks++;
    if (resp_fault !== exp_fault ||
        (!exp_fault && (resp_xlat.frame !== exp_frame || int'(resp_xlat.page_bits) != exp_bits))) begin
      failures++;
      $display("FAIL %s: fault %0d frame %h bits %0d; expected %0d %h %0d", name, resp_fault,
               resp_xlat.frame, resp_xlat.page_bits, exp_fault, exp_frame, exp_bits);
    end
    checks++;
    if (int'(resp_accesses) != exp_reads || int'(resp_pwc_level) != exp_lvl) begin
      failures++;
      $display("FAIL %s: %0d reads from PWC level %0d; expected %0d from %0d", name,
               resp_accesses, resp_pwc_level, exp_reads, exp_lvl);
    end
    checks++;
    if (cyc - t0 != 2 + exp_reads * (int'(ML) + 1)) begin
      failures++;
      $display("FAIL %s: %0d cycles, expected %0d", name, cyc - t0, 2 + exp_reads * (ML + 1));
    end
  endtask

  task automatic set_root(logic [FRAME_W-1:0] f, node_size_e s);
    @(negedge clk); cr3 = '{frame: f, size: s}; flush = 1;
    @(negedge clk); flush = 0;
  endtask

  // frames used for table nodes (2MB nodes are 2MB aligned)
  localparam logic [FRAME_W-1:0] C_L4 = 40'h00010, C_L3 = 40'h00011, C_L2 = 40'h00012,
                                 C_L1 = 40'h00013, C_L1B = 40'h00014;
  localparam logic [FRAME_W-1:0] F_ROOT = 40'h00200, F_LEAF = 40'h00400, F_L2 = 40'h00020,
                                 F_L1 = 40'h00021, M_L3L2 = 40'h00600;

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;

    // ---- 1. conventional 4-level table, 4KB nodes ----
    set_e(C_L4, 1, make_pte(C_L3, 0, NODE_4K));
    set_e(C_L3, 2, make_pte(C_L2, 0, NODE_4K));
    set_e(C_L2, 3, make_pte(C_L1, 0, NODE_4K));
    set_e(C_L2, 4, make_pte(C_L1B, 0, NODE_4K));
    set_e(C_L2, 5, make_pte(40'h12200, 1, NODE_4K));       // 2MB page
    set_e(C_L1, 7, make_pte(40'hAAAA7, 0, NODE_4K));
    set_e(C_L1, 8, make_pte(40'hAAAA8, 0, NODE_4K));
    set_e(C_L1B, 9, make_pte(40'hBBBB9, 0, NODE_4K));
    set_root(C_L4, NODE_4K);
    walk("conv cold",    mkva(1, 2, 3, 7, 5), 0, 40'hAAAA7, 12, 4, 0);
    walk("conv L2 PWC",  mkva(1, 2, 3, 8, 5), 0, 40'hAAAA8, 12, 1, 3);
    walk("conv L3 PWC",  mkva(1, 2, 4, 9, 5), 0, 40'hBBBB9, 12, 2, 2);
    walk("conv 2MB",     mkva(1, 2, 5, 77, 5), 0, 40'h12200, 21, 1, 2);
    walk("conv L4 PWC fault", mkva(1, 3, 0, 0, 0), 1, '0, 0, 1, 1);
    walk("conv fault",   mkva(9, 0, 0, 0, 0), 1, '0, 0, 1, 0);

    // ---- 2. flattened L4+L3 and L2+L1 (2MB nodes) ----
    set_e(F_ROOT, 1 * 512 + 2, make_pte(F_LEAF, 0, NODE_2M));
    set_e(F_LEAF, 3 * 512 + 7, make_pte(40'hCCCC7, 0, NODE_4K));
    set_e(F_LEAF, 300 * 512 + 1, make_pte(40'hCCCC1, 0, NODE_4K));
    // a 1GB region with 2MB pages keeps a 4KB L2 node (not flattened)
    set_e(F_ROOT, 1 * 512 + 9, make_pte(F_L2, 0, NODE_4K));
    set_e(F_L2, 6, make_pte(40'h44400, 1, NODE_4K));
    set_e(F_L2, 7, make_pte(F_L1, 0, NODE_4K));
    set_e(F_L1, 2, make_pte(40'hDDDD2, 0, NODE_4K));
    set_root(F_ROOT, NODE_2M);
    walk("flat cold",        mkva(1, 2, 3, 7, 9), 0, 40'hCCCC7, 12, 2, 0);
    walk("flat L3 PWC",      mkva(1, 2, 300, 1, 9), 0, 40'hCCCC1, 12, 1, 2);
    walk("flat NF 2MB",      mkva(1, 9, 6, 100, 9), 0, 40'h44400, 21, 2, 0);
    walk("flat NF 2MB again", mkva(1, 9, 6, 3, 1), 0, 40'h44400, 21, 1, 2);
    walk("flat NF 4KB",      mkva(1, 9, 7, 2, 1), 0, 40'hDDDD2, 12, 2, 2);
    walk("flat NF 4KB L2 PWC", mkva(1, 9, 7, 2, 2), 0, 40'hDDDD2, 12, 1, 3);

    // recursion: self reference at L4 field 500, replicated over all 512
    // values of the next 9 bits (overlapped index bits)
    for (int k = 0; k < 512; k++) set_e(F_ROOT, 500 * 512 + k, make_pte(F_ROOT, 0, NODE_2M));
    // 3 recursions: the flattened root itself as a 2MB page
    walk("flat 3 recursions", {9'd500, 9'd500, 9'd500, 21'h1abcd}, 0, F_ROOT, 21, 3, 0);
    // 1 recursion, target VA (1, 9, 7, ...): returns the 4KB L1 node of the
    // unflattened region (L1 page table reachable thanks to the overlap)
    walk("flat 1 recursion", {9'd500, 9'd1, 9'd9, 9'd7, 12'h010}, 0, F_L1, 12, 3, 0);
    // 2 recursions: the L2 node of that region
    walk("flat 2 recursions", {9'd500, 9'd500, 9'd1, 9'd9, 12'h010}, 0, F_L2, 12, 3, 0);

    // ---- 3. L4, flattened L3+L2, L1 (the prototype OS organisation) ----
    set_e(C_L4, 4, make_pte(M_L3L2, 0, NODE_2M));
    set_e(M_L3L2, 5 * 512 + 6, make_pte(C_L1, 0, NODE_4K));
    set_e(M_L3L2, 5 * 512 + 7, make_pte(40'h55400, 1, NODE_4K));   // 2MB page in L3+L2
    set_e(C_L4, 511, make_pte(C_L4, 0, NODE_4K));                  // recursion entry
    set_root(C_L4, NODE_4K);
    walk("L3L2 data 4KB",  mkva(4, 5, 6, 7, 3), 0, 40'hAAAA7, 12, 3, 0);
    walk("L3L2 data 2MB",  mkva(4, 5, 7, 1, 3), 0, 40'h55400, 21, 1, 1);
    walk("L3L2 1 recursion -> L1 PT", mkva(511, 4, 5, 6, 0), 0, C_L1, 12, 3, 0);
    walk("L3L2 2 recursions -> L3+L2 PT", {9'd511, 9'd511, 9'd4, 21'h12345}, 0, M_L3L2, 21, 3, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
