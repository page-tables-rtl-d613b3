// tb_prio_cache: checks a small prio_cache (4 sets x 4 ways) in front of the
// memory model. Every response is compared with the memory contents; every
// access is classified hit or miss by its latency (HIT_LAT for a hit,
// HIT_LAT + memory latency + 1 for a miss) and compared with a reference
// model of the replacement policy: LRU, except that while prioritizing the LRU
// data line is evicted, with every 100th eviction and data-free sets falling
// back to LRU, and never taking another context's page-table line while the
// set holds a data line or one of the requester's own page-table lines. A
// directed phase shows page table lines surviving a stream of data misses
// only while prioritization is on; another shows one context's page-table
// lines surviving a second context's misses.
module tb_prio_cache;
  import fpt_pkg::*;
  localparam int unsigned SETS = 4, WAYS = 4, HL = 5, ML = 10;

  logic clk = 0, rst_n = 0, prio_en = 0;
  logic init_done, req_valid = 0, req_ready, req_is_pt = 0, resp_valid;
  logic [PA_W-1:0] req_addr = '0;
  logic [3:0] req_ctx = '0, dn_req_ctx;
  logic [LINE_W-1:0] resp_line;
  logic dn_req_valid, dn_req_ready, dn_req_is_pt, dn_resp_valid;
  logic [PA_W-1:0] dn_req_addr;
  logic [LINE_W-1:0] dn_resp_line;
  logic ev_access, ev_hit, ev_is_pt, ev_evict_pt, ev_evict_data;
  int checks = 0, failures = 0, cyc = 0;
  int n_evict_pt = 0, n_evict_data = 0;
  bit last_hit;   // last access hit, judged by latency alone

  prio_cache #(.SETS(SETS), .WAYS(WAYS), .HIT_LAT(HL), .PRIO(1'b1)) dut (.*);
  mem_model #(.LAT(ML)) mem (.clk, .rst_n, .req_valid(dn_req_valid), .req_ready(dn_req_ready),
    .req_addr(dn_req_addr), .resp_valid(dn_resp_valid), .resp_line(dn_resp_line));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (ev_evict_pt) n_evict_pt++;
    if (ev_evict_data) n_evict_data++;
  end

  // ---- reference model ----
  typedef struct { logic [PA_W-1:0] tag; bit pt; logic [3:0] ctx; } ent_t;
  ent_t m [SETS][$];
  int   m_cnt = 0;

  function automatic bit model_access(logic [PA_W-1:0] a, bit is_pt, logic [3:0] c, bit pe);
    int s = int'(a[6 +: 2]);
    logic [PA_W-1:0] t = a >> 8;
    ent_t e;
    foreach (m[s][i]) if (m[s][i].tag == t) begin
      e = m[s][i]; e.pt = e.pt | is_pt;
      m[s].delete(i); m[s].push_front(e);
      return 1;
    end
    if (m[s].size() == WAYS) begin
      int v = WAYS - 1;
      if (pe) begin
        bit found = 0;
        if (m_cnt != 99)
          for (int i = WAYS - 1; i >= 0; i--) if (!m[s][i].pt) begin v = i; found = 1; break; end
        if (!found)
          for (int i = WAYS - 1; i >= 0; i--)
            if (!m[s][i].pt || m[s][i].ctx == c) begin v = i; break; end
        m_cnt = (m_cnt == 99) ? 0 : m_cnt + 1;
      end
      m[s].delete(v);
    end
    e.tag = t; e.pt = is_pt; e.ctx = c;
    m[s].push_front(e);
    return 0;
  endfunction

  function automatic logic [63:0] pattern(logic [PA_W-1:0] a);
    return {a[31:0], ~a[31:0]} ^ 64'h5a5a_0000_0000_a5a5;
  endfunction

  // one access; returns 1 if the cache hit (by latency)
  task automatic access(logic [PA_W-1:0] a, bit is_pt, logic [3:0] c = 0);
    int t0, lat;
    bit exp_hit;
    @(negedge clk);
    req_valid = 1; req_addr = a; req_is_pt = is_pt; req_ctx = c;
    @(posedge clk); while (!req_ready) @(posedge clk);
    t0 = cyc;
    @(negedge clk); req_valid = 0;
    @(posedge clk); while (!resp_valid) @(posedge clk);
    lat = cyc - t0;
    last_hit = (lat == HL);
    exp_hit = model_access(a, is_pt, c, prio_en);
    checks++;
    if (lat != (exp_hit ? HL : HL + ML + 1)) begin
      failures++;
      $display("FAIL %h pt=%0d ctx=%0d prio=%0d: latency %0d, model says %s", a, is_pt, c, prio_en, lat,
               exp_hit ? "hit" : "miss");
    end
    checks++;
    for (int i = 0; i < 8; i++)
      if (resp_line[i*64 +: 64] !== pattern({a[PA_W-1:6], 6'd0} + PA_W'(8 * i))) begin
        failures++; checks--;   // one failure for the line
        $display("FAIL data %h word %0d", a, i);
        break;
      end
  endtask

  function automatic logic [PA_W-1:0] line_addr(int set, int tag);
    return PA_W'((tag << 8) | (set << 6) | 8 * (tag % 8));
  endfunction

  initial begin
    for (int i = 0; i < 4096; i++) mem.wr64(PA_W'(i * 8), pattern(PA_W'(i * 8)));
    repeat (2) @(negedge clk); rst_n = 1;
    wait (init_done);

    // Phase A: prioritization off: plain LRU. PT lines in set 0 get evicted.
    for (int t = 0; t < 3; t++) access(line_addr(0, t), 1);
    for (int t = 3; t < 8; t++) access(line_addr(0, t), 0);
    for (int t = 0; t < 3; t++) access(line_addr(0, t), 1);   // all misses
    // Phase B: prioritization on: PT lines of set 1 stay through data misses
    prio_en = 1;
    for (int t = 0; t < 3; t++) access(line_addr(1, t), 1);
    for (int t = 3; t < 20; t++) access(line_addr(1, t), 0);
    for (int t = 0; t < 3; t++) access(line_addr(1, t), 1);   // all hits
    checks++;
    if (n_evict_data == 0) begin failures++; $display("FAIL no data eviction seen"); end
    // Phase C: set full of PT lines: falls back to LRU
    for (int t = 40; t < 46; t++) access(line_addr(2, t), 1);
    // Phase E: two contexts, prioritizing. Context 1 holds three page-table
    // lines of set 3, context 2 one; context 2's page-table and data misses
    // take only its own lines, so context 1's lines all hit afterwards.
    for (int t = 60; t < 63; t++) access(line_addr(3, t), 1, 4'd1);
    access(line_addr(3, 63), 1, 4'd2);
    for (int t = 64; t < 70; t++) access(line_addr(3, t), t % 2 == 0, 4'd2);
    for (int t = 60; t < 63; t++) begin
      access(line_addr(3, t), 1, 4'd1);
      checks++;
      if (!last_hit) begin failures++; $display("FAIL context 1 line %0d evicted by context 2", t); end
    end
    // Phase D: random mixed traffic from three contexts, long enough to cross
    // the 1-in-100 slot
    for (int k = 0; k < 1500; k++) begin
      if (k % 300 == 0) prio_en = (k / 300) % 2 == 0;
      access(line_addr($urandom_range(0, 3), $urandom_range(0, 12)), 1'($urandom_range(0, 3) == 0),
             4'($urandom_range(0, 2)));
    end
    checks++;
    if (n_evict_pt == 0) begin failures++; $display("FAIL no PT eviction seen"); end
    $display("evictions: pt %0d data %0d", n_evict_pt, n_evict_data);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
