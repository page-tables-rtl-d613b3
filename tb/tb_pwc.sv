// tb_pwc: checks the page walker cache against a software model: misses on
// an empty cache, hits after insertion, in-place update of an existing tag,
// LRU replacement (with touches changing the order) and flush.
module tb_pwc;
  import fpt_pkg::*;
  localparam int unsigned N = 4, TW = 18;

  logic clk = 0, rst_n = 0, flush = 0, touch = 0, ins = 0;
  logic [TW-1:0] lk_tag = '0, ins_tag = '0;
  logic          lk_hit;
  node_ptr_t     lk_node, ins_node = '0;
  int checks = 0, failures = 0;

  pwc #(.ENTRIES(N), .TAG_W(TW)) dut (.*);
  always #5 clk = ~clk;

  // reference model: list of (tag, frame) in LRU order, index 0 = MRU
  logic [TW-1:0]      m_tag [$];
  logic [FRAME_W-1:0] m_frm [$];

  function automatic int m_find(logic [TW-1:0] t);
    foreach (m_tag[i]) if (m_tag[i] == t) return i;
    return -1;
  endfunction
  function automatic void m_use(int i);
    logic [TW-1:0] t = m_tag[i];
    logic [FRAME_W-1:0] f = m_frm[i];
    m_tag.delete(i); m_frm.delete(i);
    m_tag.push_front(t); m_frm.push_front(f);
  endfunction

  task automatic do_ins(logic [TW-1:0] t, logic [FRAME_W-1:0] f);
    int i;
    @(negedge clk); ins = 1; ins_tag = t; ins_node = '{frame: f, size: NODE_2M};
    @(negedge clk); ins = 0;
    i = m_find(t);
    if (i >= 0) begin m_frm[i] = f; m_use(i); end
    else begin
      if (m_tag.size() == N) begin void'(m_tag.pop_back()); void'(m_frm.pop_back()); end
      m_tag.push_front(t); m_frm.push_front(f);
    end
  endtask

  task automatic do_lookup(logic [TW-1:0] t, logic use_it);
    int i;
    @(negedge clk); lk_tag = t; touch = use_it; #1;
    i = m_find(t);
    checks++;
    if (lk_hit !== (i >= 0) || (i >= 0 && lk_node.frame !== m_frm[i])) begin
      failures++;
      $display("FAIL lookup %h: hit %0d frame %h, model %0d", t, lk_hit, lk_node.frame, i);
    end
    if (i >= 0 && use_it) m_use(i);
    @(negedge clk); touch = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    do_lookup(18'h1, 0);
    do_ins(18'h1, 40'h100); do_ins(18'h2, 40'h200); do_ins(18'h3, 40'h300);
    do_lookup(18'h1, 1); do_lookup(18'h2, 0); do_lookup(18'h4, 0);
    do_ins(18'h4, 40'h400);
    do_ins(18'h5, 40'h500);              // evicts LRU (tag 2, since 1 was touched)
    do_lookup(18'h2, 0); do_lookup(18'h1, 0); do_lookup(18'h5, 0); do_lookup(18'h3, 0);
    do_ins(18'h3, 40'h333);              // update in place
    do_lookup(18'h3, 1);
    // random traffic against the model
    for (int k = 0; k < 400; k++) begin
      logic [TW-1:0] t = TW'($urandom_range(0, 9));
      if ($urandom_range(0, 1) == 0) do_ins(t, FRAME_W'($urandom));
      else do_lookup(t, 1'($urandom_range(0, 1)));
    end
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    m_tag.delete(); m_frm.delete();
    for (int t = 0; t < 10; t++) do_lookup(TW'(t), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
