// tb_nested_walker: 2D walks for the four combinations of flattened / 4-level
// guest and host tables. A software model of the hypervisor and guest OS
// builds the tables: host tables map guest-physical pages to host frames;
// guest tables live in guest-physical memory (written through the host
// mapping). Every guest table node and the data sit in separate 512GB
// guest-physical regions, so a cold walk gets no help from PWCs or the nested
// TLB and must make exactly G*(H+1)+H table reads (G, H = guest and host
// levels: 24, 14, 14, 8). A second walk to the next page then needs one guest
// read (guest PWC hit, nested TLB hit for its table page) and one host read
// (vPWC hit) = 2. Translations are checked against the model, and an
// unmapped guest-physical data page must fault.
module tb_nested_walker;
  import fpt_pkg::*;
  localparam int unsigned ML = 4;

  logic clk = 0, rst_n = 0, flush = 0;
  node_ptr_t g_cr3 = '0, h_cr3 = '0;
  logic req_valid = 0, req_ready, resp_valid, resp_fault;
  logic [VA_W-1:0] req_va = '0;
  xlat_t resp_xlat;
  logic [4:0] resp_guest_reads, resp_host_reads;
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  logic [PA_W-1:0] mem_req_addr;
  logic [LINE_W-1:0] mem_resp_line;
  int checks = 0, failures = 0;

  nested_walker dut (.*);
  mem_model #(.LAT(ML)) mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_addr(mem_req_addr), .resp_valid(mem_resp_valid), .resp_line(mem_resp_line));
  always #5 clk = ~clk;

  // ---------------- software model ----------------
  logic [FRAME_W-1:0] h_next = 40'h1000;        // host frame allocator
  int                 g_region = 1;             // guest node regions (512GB each)
  logic [FRAME_W-1:0] gpage2h [logic [FRAME_W-1:0]];
  logic [FRAME_W-1:0] h_nodes [logic [63:0]];
  logic [FRAME_W-1:0] g_nodes [logic [63:0]];
  bit hflat, gflat;

  function automatic logic [FRAME_W-1:0] alloc_h(bit big);
    logic [FRAME_W-1:0] f;
    if (big) h_next = (h_next + 511) & ~FRAME_W'(511);
    f = h_next;
    h_next += big ? 512 : 1;
    return f;
  endfunction
  function automatic logic [FRAME_W-1:0] alloc_g();
    logic [FRAME_W-1:0] f = FRAME_W'(g_region) << 27;
    g_region++;
    return f;
  endfunction

  // write a 64-bit word at a host-physical or guest-physical address
  function automatic void hwr(logic [PA_W-1:0] hpa, logic [63:0] d); mem.wr64(hpa, d); endfunction
  function automatic logic [PA_W-1:0] h_of(logic [PA_W-1:0] gpa);
    return {gpage2h[gpa[PA_W-1:12]], gpa[11:0]};
  endfunction

  // generic table builder: walks/creates nodes for `va` and writes the leaf
  // entry; `guest` selects guest-physical node storage
  function automatic void map(bit guest, logic [VA_W-1:0] va, logic [FRAME_W-1:0] frame);
    bit flat = guest ? gflat : hflat;
    int nlev = flat ? 2 : 4;
    int w = flat ? 18 : 9;
    logic [FRAME_W-1:0] node = guest ? g_cr3.frame : h_cr3.frame;
    for (int l = 0; l < nlev; l++) begin
      int pos = 48 - l * w;
      logic [63:0] idx = 64'((va >> (pos - w)) & ((48'd1 << w) - 1));
      logic [PA_W-1:0] ea = {node, 12'h0} + PA_W'(idx * 8);
      logic [63:0] pte;
      logic [FRAME_W-1:0] child = '0;
      if (l == nlev - 1) pte = make_pte(frame, 0, NODE_4K);
      else begin
        logic [63:0] key = {8'(l + 1), 56'(va >> (pos - w))};
        if (guest) begin
          if (!g_nodes.exists(key)) g_nodes[key] = alloc_g();
          child = g_nodes[key];
        end else begin
          if (!h_nodes.exists(key)) h_nodes[key] = alloc_h(flat);
          child = h_nodes[key];
        end
        pte = make_pte(child, 0, flat ? NODE_2M : NODE_4K);
      end
      if (guest) gwr(ea, pte); else hwr(ea, pte);
      node = child;
    end
  endfunction

  // make sure a guest-physical page is backed by a host frame
  function automatic void back(logic [PA_W-1:0] gpa);
    if (!gpage2h.exists(gpa[PA_W-1:12])) begin
      logic [FRAME_W-1:0] f = alloc_h(0);
      gpage2h[gpa[PA_W-1:12]] = f;
      map(0, VA_W'(gpa[PA_W-1:12]) << 12, f);
    end
  endfunction
  function automatic void gwr(logic [PA_W-1:0] gpa, logic [63:0] d);
    back(gpa);
    mem.wr64(h_of(gpa), d);
  endfunction

  task automatic walk(string name, logic [VA_W-1:0] va, bit exp_fault,
                      logic [FRAME_W-1:0] exp_frame, int exp_g, int exp_h);
    @(negedge clk); req_valid = 1; req_va = va;
    @(posedge clk); while (!req_ready) @(posedge clk);
    @(negedge clk); req_valid = 0;
    @(posedge clk); while (!resp_valid) @(posedge clk);
    checks++;
    if (resp_fault !== exp_fault || (!exp_fault && resp_xlat.frame !== exp_frame)) begin
      failures++;
      $display("FAIL %s: fault %0d frame %h, expected %0d %h", name, resp_fault, resp_xlat.frame,
               exp_fault, exp_frame);
    end
    checks++;
    if (int'(resp_guest_reads) != exp_g || int'(resp_host_reads) != exp_h) begin
      failures++;
      $display("FAIL %s: %0d guest + %0d host reads, expected %0d + %0d", name,
               resp_guest_reads, resp_host_reads, exp_g, exp_h);
    end
    $display("%-28s guest %0d host %0d total %0d", name, resp_guest_reads, resp_host_reads,
             resp_guest_reads + resp_host_reads);
  endtask

  task automatic config_run(bit gf, bit hf);
    int G = gf ? 2 : 4, H = hf ? 2 : 4;
    logic [VA_W-1:0] va0 = {9'd3, 9'd4, 9'd5, 9'd6, 12'h0};
    logic [PA_W-1:0] dgpa;
    string tag = $sformatf("%s guest / %s host", gf ? "flat" : "4-level", hf ? "flat" : "4-level");
    gflat = gf; hflat = hf;
    gpage2h.delete(); h_nodes.delete(); g_nodes.delete();
    h_cr3 = '{frame: alloc_h(hf), size: hf ? NODE_2M : NODE_4K};
    g_cr3 = '{frame: alloc_g(), size: gf ? NODE_2M : NODE_4K};
    back({g_cr3.frame, 12'h0});
    dgpa = PA_W'(g_region) << 39; g_region++;
    for (int i = 0; i < 2; i++) begin
      map(1, va0 + VA_W'(i * 4096), dgpa[PA_W-1:12] + FRAME_W'(i));
      back(dgpa + PA_W'(i * 4096));
    end
    // a guest page whose guest-physical frame the host does not map
    map(1, va0 + VA_W'(2 * 4096), dgpa[PA_W-1:12] + FRAME_W'(7));
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    walk({tag, " cold"}, va0 + 12'h10, 0, gpage2h[dgpa[PA_W-1:12]], G, G * H + H);
    walk({tag, " next page"}, va0 + VA_W'(4096 + 8), 0, gpage2h[dgpa[PA_W-1:12] + 1], 1, 1);
    walk({tag, " host fault"}, va0 + VA_W'(2 * 4096), 1, '0, 1, 1);
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    config_run(0, 0);
    config_run(1, 0);
    config_run(0, 1);
    config_run(1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
