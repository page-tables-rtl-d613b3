// tb_tlb: checks the TLB against a reference model with small geometry
// (8 sets x 4 ways): misses when empty, hits for 4KB, 2MB and 1GB entries at
// any address inside the page, a fixed answer latency of LAT cycles for hits
// and misses, LRU replacement within a set, and flush.
module tb_tlb;
  import fpt_pkg::*;
  localparam int unsigned SETS = 8, WAYS = 4, LAT = 9;
  logic clk = 0, rst_n = 0, flush = 0, init_done;
  logic lk_valid = 0, lk_ready, rsp_valid, rsp_hit, fill_valid = 0;
  logic [VA_W-1:0] lk_va = '0, fill_va = '0;
  xlat_t rsp_xlat, fill_xlat = '0;
  int checks = 0, failures = 0, cyc = 0;

  tlb #(.SETS(SETS), .WAYS(WAYS), .LAT(LAT)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  // model: per (size, set) an LRU list of (vpn, frame); MRU first
  typedef struct { logic [VA_W-1:0] vpn; logic [FRAME_W-1:0] frame; } ent_t;
  ent_t m [3][SETS][$];

  function automatic int pb(int s); return 12 + 9 * s; endfunction

  // sets are shared by the sizes in the RTL, so the model keeps one LRU list
  // per set holding entries of all sizes
  typedef struct { int sz; logic [VA_W-1:0] vpn; logic [FRAME_W-1:0] frame; } sent_t;
  sent_t q [SETS][$];

  function automatic int set_of(logic [VA_W-1:0] va, int s); return int'((va >> pb(s)) % SETS); endfunction

  function automatic bit m_lookup(logic [VA_W-1:0] va, output xlat_t x);
    for (int s = 0; s < 3; s++) begin
      int st = set_of(va, s);
      foreach (q[st][i])
        if (q[st][i].sz == s && q[st][i].vpn == (va >> pb(s))) begin
          sent_t e = q[st][i];
          x.frame = e.frame; x.page_bits = POS_W'(pb(s));
          q[st].delete(i); q[st].push_front(e);
          return 1;
        end
    end
    return 0;
  endfunction

  function automatic void m_fill(logic [VA_W-1:0] va, int s, logic [FRAME_W-1:0] f);
    int st = set_of(va, s);
    sent_t e;
    foreach (q[st][i])
      if (q[st][i].sz == s && q[st][i].vpn == (va >> pb(s))) begin
        q[st].delete(i); break;
      end
    if (q[st].size() == WAYS) void'(q[st].pop_back());
    e.sz = s; e.vpn = va >> pb(s); e.frame = f;
    q[st].push_front(e);
  endfunction

  task automatic fill(logic [VA_W-1:0] va, int s, logic [FRAME_W-1:0] f);
    @(negedge clk);
    fill_valid = 1; fill_va = va; fill_xlat = '{frame: f, page_bits: POS_W'(pb(s))};
    @(negedge clk); fill_valid = 0;
    m_fill(va, s, f);
  endtask

  task automatic lookup(logic [VA_W-1:0] va);
    int t0; xlat_t x; bit h;
    @(negedge clk); lk_valid = 1; lk_va = va;
    @(posedge clk); while (!lk_ready) @(posedge clk);
    t0 = cyc;
    @(negedge clk); lk_valid = 0;
    @(posedge clk); while (!rsp_valid) @(posedge clk);
    h = m_lookup(va, x);
    checks++;
    if (cyc - t0 != LAT) begin failures++; $display("FAIL latency %0d", cyc - t0); end
    checks++;
    if (rsp_hit !== h || (h && rsp_xlat !== x)) begin
      failures++;
      $display("FAIL lookup %h: hit %0d %h / model %0d %h", va, rsp_hit, rsp_xlat, h, x);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    wait (init_done);
    lookup(48'h0000_1234_5678);
    fill(48'h0000_1234_5678, 0, 40'hAAAA1);
    fill(48'h0000_4020_0000, 1, 40'hBB200);
    fill(48'h0080_4000_0000, 2, 40'hC0000);
    lookup(48'h0000_1234_5FFF);          // same 4KB page
    lookup(48'h0000_1234_6000);          // next page: miss
    lookup(48'h0000_403F_FFF8);          // inside the 2MB page
    lookup(48'h0080_7FFF_0000);          // inside the 1GB page
    for (int k = 0; k < 600; k++) begin
      logic [VA_W-1:0] va = {8'h0, 22'($urandom_range(0, 63)), 18'($urandom)};
      if ($urandom_range(0, 2) == 0) fill(va, $urandom_range(0, 2), FRAME_W'($urandom) << 18);
      else lookup(va);
    end
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    foreach (q[i]) q[i].delete();
    wait (init_done);
    lookup(48'h0000_1234_5678);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (30000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
