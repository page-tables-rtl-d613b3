// tb_l1_tlb: random fills (4KB, 2MB and 1GB translations), lookups and
// flushes on a small first-level TLB (4KB bank 4 sets x 2 ways, 2MB bank
// 2 sets x 2 ways) against a reference model that keeps each set as a list in
// recency order. Checked on every lookup: the response arrives exactly one
// cycle later, hit/miss, frame and page size (4KB preferred when both banks
// hit); 1GB fills must never hit.
module tb_l1_tlb;
  import fpt_pkg::*;
  localparam int S4 = 4, W4 = 2, S2 = 2, W2 = 2;

  logic clk = 0, rst_n = 0, flush = 0, lk_valid = 0, fill_valid = 0;
  logic [VA_W-1:0] lk_va = '0, fill_va = '0;
  logic rsp_valid, rsp_hit;
  xlat_t rsp_xlat, fill_xlat = '0;
  int checks = 0, failures = 0;

  l1_tlb #(.SETS_4K(S4), .WAYS_4K(W4), .SETS_2M(S2), .WAYS_2M(W2)) dut (.*);
  always #5 clk = ~clk;

  // reference: per bank and set, a queue of {vpn, frame}, most recent first
  typedef struct { logic [47:0] vpn; logic [FRAME_W-1:0] frame; } ent_t;
  ent_t m4 [S4][$];
  ent_t m2 [S2][$];

  // bank 0 = 4KB, 1 = 2MB
  function automatic int find(int bank, int set, logic [47:0] vpn);
    if (bank == 0) begin foreach (m4[set][i]) if (m4[set][i].vpn == vpn) return i; end
    else begin foreach (m2[set][i]) if (m2[set][i].vpn == vpn) return i; end
    return -1;
  endfunction
  function automatic void put(int bank, int set, logic [47:0] vpn, logic [FRAME_W-1:0] f);
    int i;
    ent_t e;
    i = find(bank, set, vpn);
    e.vpn = vpn; e.frame = f;
    if (bank == 0) begin
      if (i >= 0) m4[set].delete(i); else if (m4[set].size() == W4) void'(m4[set].pop_back());
      m4[set].push_front(e);
    end else begin
      if (i >= 0) m2[set].delete(i); else if (m2[set].size() == W2) void'(m2[set].pop_back());
      m2[set].push_front(e);
    end
  endfunction

  int n_hit4 = 0, n_hit2 = 0, n_miss = 0;

  task automatic lookup(logic [VA_W-1:0] va);
    logic [47:0] v4, v2;
    int s4, s2, i4, i2;
    bit eh; xlat_t ex;
    v4 = 48'(va >> 12); v2 = 48'(va >> 21);
    s4 = int'(v4 % S4); s2 = int'(v2 % S2);
    i4 = find(0, s4, v4); i2 = find(1, s2, v2);
    eh = (i4 >= 0) || (i2 >= 0);
    ex = '0;
    if (i4 >= 0) begin
      ex = '{frame: m4[s4][i4].frame, page_bits: 12};
      put(0, s4, v4, m4[s4][i4].frame); n_hit4++;
    end else if (i2 >= 0) begin
      ex = '{frame: m2[s2][i2].frame, page_bits: 21};
      put(1, s2, v2, m2[s2][i2].frame); n_hit2++;
    end else n_miss++;
    @(negedge clk); lk_valid = 1; lk_va = va;
    @(negedge clk); lk_valid = 0;
    checks++;
    if (!rsp_valid || rsp_hit !== eh || (eh && rsp_xlat !== ex)) begin
      failures++;
      $display("FAIL lookup %h: valid %0d hit %0d %h/%0d, expected hit %0d %h/%0d", va, rsp_valid,
               rsp_hit, rsp_xlat.frame, rsp_xlat.page_bits, eh, ex.frame, ex.page_bits);
    end
  endtask

  task automatic fill(logic [VA_W-1:0] va, int bits, logic [FRAME_W-1:0] f);
    if (bits == 12) put(0, int'((va >> 12) % S4), 48'(va >> 12), f);
    if (bits == 21) put(1, int'((va >> 21) % S2), 48'(va >> 21), f);
    @(negedge clk); fill_valid = 1; fill_va = va; fill_xlat = '{frame: f, page_bits: 6'(bits)};
    @(negedge clk); fill_valid = 0;
  endtask

  function automatic logic [VA_W-1:0] rva();
    return {18'd0, 9'($urandom_range(0, 3)), 9'($urandom_range(0, 5)) , 12'($urandom_range(0, 4095))};
  endfunction

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      int r, b;
      r = $urandom_range(0, 99);
      b = $urandom_range(0, 9);
      if (r < 30) begin
        fill(rva(), b < 6 ? 12 : b < 9 ? 21 : 30, FRAME_W'($urandom()));
      end else if (r < 99) lookup(rva());
      else begin
        @(negedge clk); flush = 1; @(negedge clk); flush = 0;
        foreach (m4[s]) m4[s].delete();
        foreach (m2[s]) m2[s].delete();
      end
    end
    // response timing with no lookup: rsp_valid must stay low
    @(negedge clk); checks++;
    if (rsp_valid) begin failures++; $display("FAIL spurious rsp_valid"); end
    $display("hits 4KB %0d 2MB %0d misses %0d", n_hit4, n_hit2, n_miss);
    checks++;
    if (n_hit4 == 0 || n_hit2 == 0 || n_miss == 0) begin failures++; $display("FAIL a case never occurred"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
