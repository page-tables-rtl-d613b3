// prio_cache: set-associative, read-only cache level with page-table priority.
//
// Every line carries one tag bit saying whether it was filled by a page table
// walk. When `prio_en` is high (a phase of high TLB miss rate) and PRIO is
// set, the victim on a miss is the least recently used *data* line 99 times in
// 100; on the 100th eviction, or when the set holds no data line, it is the
// plain LRU line. With `prio_en` low, or PRIO = 0 (the L1D), the cache is an
// ordinary LRU cache.
//
// Each line also records the context (core or process) identifier of the
// request that filled it. While prioritizing, a request never evicts another
// context's page-table line when a line of its own or a data line is
// available: the 1-in-100 and no-data cases take the LRU line among the data
// lines and the requester's own page-table lines, and only a set holding
// nothing but other contexts' page-table lines falls back to plain LRU. With
// one context this is exactly the single-context policy. This keeps the (small) page table resident in L2 and L3
// while TLB misses are frequent, at the cost of some data lines, which in such
// phases mostly miss anyway.
//
// Organisation: SETS x WAYS lines of 64 bytes, true LRU kept as per-way ages,
// a per-set metadata row (valid, page-table bit, ages, tags) and a separate
// line array. After reset the cache clears one set per cycle (SETS cycles)
// before `init_done` rises and requests are taken. Stores are not modelled:
// the hierarchy carries reads of page table entries and of data only.
//
// Interface: upstream valid/ready request (line address, is_pt, ctx) and a
// one-cycle `resp_valid` with the whole line; downstream the same, one miss
// outstanding. `ev_*` are one-cycle event pulses for counters.
//
// Timing: a hit answers HIT_LAT cycles after the request is accepted (the
// tag/data latency of the level); a miss issues its downstream request after
// the same HIT_LAT-1 cycles of lookup and answers the cycle after the line
// returns. Sizes and latencies default to the evaluated L2 (256KB, 8-way,
// 12 cycles); the 99% ratio and "evict LRU otherwise" follow the paper. The
// deterministic 1-in-100 counter (rather than a random draw), marking a line
// as page-table by the request that fills it, and the read-only, blocking
// organisation are this design's. The paper names identifiers in the tags
// for keeping co-runners apart but not their width or exact rule: CTX_W and
// the rule above are this design's.
module prio_cache
  import fpt_pkg::*;
#(
  parameter int unsigned SETS        = 512,
  parameter int unsigned WAYS        = 8,
  parameter int unsigned HIT_LAT     = 12,
  parameter bit          PRIO        = 1'b1,
  parameter int unsigned KEEP_PT_PCT = 99,
  parameter int unsigned CTX_W       = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               prio_en,
  output logic               init_done,
  // upstream
  input  logic               req_valid,
  output logic               req_ready,
  input  logic [PA_W-1:0]    req_addr,
  input  logic               req_is_pt,
  input  logic [CTX_W-1:0]   req_ctx,
  output logic               resp_valid,
  output logic [LINE_W-1:0]  resp_line,
  // downstream
  output logic               dn_req_valid,
  input  logic               dn_req_ready,
  output logic [PA_W-1:0]    dn_req_addr,
  output logic               dn_req_is_pt,
  output logic [CTX_W-1:0]   dn_req_ctx,
  input  logic               dn_resp_valid,
  input  logic [LINE_W-1:0]  dn_resp_line,
  // events (one-cycle pulses)
  output logic               ev_access,
  output logic               ev_hit,
  output logic               ev_is_pt,
  output logic               ev_evict_pt,
  output logic               ev_evict_data
);
  localparam int unsigned SW = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned AW = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned WW = $clog2(WAYS + 1);
  localparam int unsigned TW = PA_W - LOFF_BITS - SW;
  localparam int unsigned CW = 7;   // eviction counter 0..99

  typedef struct packed {
    logic [WAYS-1:0]          valid;
    logic [WAYS-1:0]          pt;
    logic [WAYS-1:0][CTX_W-1:0] ctx;  // context that filled the line
    logic [WAYS-1:0][AW-1:0]  age;    // 0 = most recently used
    logic [WAYS-1:0][TW-1:0]  tag;
  } row_t;

  row_t               meta [SETS];
  logic [LINE_W-1:0]  lines [SETS*WAYS];

  typedef enum logic [2:0] {S_INIT, S_IDLE, S_LOOK, S_DNREQ, S_DNWAIT, S_RESP} state_e;
  state_e state;

  logic [PA_W-1:0]   addr_q;
  logic              is_pt_q;
  logic [CTX_W-1:0]  ctx_q;
  logic [15:0]       cnt_q;
  logic [SW-1:0]     init_idx;
  logic [AW-1:0]     way_q;
  logic [CW-1:0]     evict_cnt;
  logic [LINE_W-1:0] line_q;

  logic [SW-1:0] set_idx;
  logic [TW-1:0] tag_q;
  row_t          row;
  assign set_idx = addr_q[LOFF_BITS +: SW];
  assign tag_q   = addr_q[PA_W-1 -: TW];
  assign row     = meta[set_idx];

  // ---------------- hit detection and victim choice ----------------
  logic           hit;
  logic [AW-1:0]  hit_way, victim;
  logic           any_inv, any_data, any_own, use_prio;
  logic [AW-1:0]  inv_way, lru_way, lru_data_way, lru_own_way, best_age, own_age;

  always_comb begin
    hit = 1'b0; hit_way = '0;
    for (int w = 0; w < int'(WAYS); w++)
      if (row.valid[w] && row.tag[w] == tag_q) begin
        hit = 1'b1; hit_way = AW'(w);
      end
    any_inv = 1'b0; inv_way = '0;
    for (int w = int'(WAYS) - 1; w >= 0; w--)
      if (!row.valid[w]) begin
        any_inv = 1'b1; inv_way = AW'(w);
      end
    lru_way = '0;
    for (int w = 0; w < int'(WAYS); w++)
      if (row.age[w] == AW'(WAYS - 1)) lru_way = AW'(w);
    any_data = 1'b0; lru_data_way = '0; best_age = '0;
    for (int w = 0; w < int'(WAYS); w++)
      if (!row.pt[w] && (!any_data || row.age[w] > best_age)) begin
        any_data = 1'b1; lru_data_way = AW'(w); best_age = row.age[w];
      end
    // lines this request may take: data lines and its own page-table lines
    any_own = 1'b0; lru_own_way = '0; own_age = '0;
    for (int w = 0; w < int'(WAYS); w++)
      if ((!row.pt[w] || row.ctx[w] == ctx_q) && (!any_own || row.age[w] > own_age)) begin
        any_own = 1'b1; lru_own_way = AW'(w); own_age = row.age[w];
      end
    use_prio = PRIO && prio_en && any_data && (evict_cnt != CW'(KEEP_PT_PCT));
    if (any_inv)                            victim = inv_way;
    else if (use_prio)                      victim = lru_data_way;
    else if (PRIO && prio_en && any_own)    victim = lru_own_way;
    else                                    victim = lru_way;
  end

  // ---------------- metadata update ----------------
  function automatic row_t touch_row(row_t r, logic [AW-1:0] k);
    row_t n;
    n = r;
    for (int w = 0; w < int'(WAYS); w++)
      if (r.age[w] < r.age[k]) n.age[w] = r.age[w] + AW'(1);
    n.age[k] = '0;
    return n;
  endfunction

  logic look_end;
  assign look_end = (state == S_LOOK) && (cnt_q == '0);

  row_t init_row, hit_row, fill_row;
  always_comb begin
    init_row = '0;
    for (int w = 0; w < int'(WAYS); w++) init_row.age[w] = AW'(w);
    hit_row = touch_row(row, hit_way);
    hit_row.pt[hit_way] = row.pt[hit_way] | is_pt_q;
    fill_row = touch_row(row, way_q);
    fill_row.valid[way_q] = 1'b1;
    fill_row.pt[way_q]    = is_pt_q;
    fill_row.ctx[way_q]   = ctx_q;
    fill_row.tag[way_q]   = tag_q;
  end

  always_ff @(posedge clk) begin
    if (state == S_INIT)                   meta[init_idx] <= init_row;
    else if (look_end && hit)              meta[set_idx]  <= hit_row;
    else if (state == S_DNWAIT && dn_resp_valid) begin
      meta[set_idx] <= fill_row;
      lines[{set_idx, way_q}] <= dn_resp_line;
    end
  end

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_INIT;
      init_idx  <= '0;
      addr_q    <= '0;
      is_pt_q   <= 1'b0;
      ctx_q     <= '0;
      cnt_q     <= '0;
      way_q     <= '0;
      evict_cnt <= '0;
      line_q    <= '0;
    end else begin
      case (state)
        S_INIT: begin
          init_idx <= init_idx + SW'(1);
          if (init_idx == SW'(SETS - 1)) state <= S_IDLE;
        end
        S_IDLE: if (req_valid) begin
          addr_q  <= {req_addr[PA_W-1:LOFF_BITS], {LOFF_BITS{1'b0}}};
          is_pt_q <= req_is_pt;
          ctx_q   <= req_ctx;
          cnt_q   <= 16'(HIT_LAT - 2);
          state   <= S_LOOK;
        end
        S_LOOK: begin
          if (cnt_q != '0) cnt_q <= cnt_q - 16'd1;
          else if (hit) begin
            line_q <= lines[{set_idx, hit_way}];
            state  <= S_RESP;
          end else begin
            way_q <= victim;
            if (!any_inv && PRIO && prio_en)
              evict_cnt <= (evict_cnt == CW'(KEEP_PT_PCT)) ? '0 : evict_cnt + CW'(1);
            state <= S_DNREQ;
          end
        end
        S_DNREQ: if (dn_req_ready) state <= S_DNWAIT;
        S_DNWAIT: if (dn_resp_valid) begin
          line_q <= dn_resp_line;
          state  <= S_RESP;
        end
        default: state <= S_IDLE;   // S_RESP
      endcase
    end
  end

  assign init_done     = (state != S_INIT);
  assign req_ready     = (state == S_IDLE);
  assign resp_valid    = (state == S_RESP);
  assign resp_line     = line_q;
  assign dn_req_valid  = (state == S_DNREQ);
  assign dn_req_addr   = addr_q;
  assign dn_req_is_pt  = is_pt_q;
  assign dn_req_ctx    = ctx_q;

  assign ev_access     = look_end;
  assign ev_hit        = look_end && hit;
  assign ev_is_pt      = is_pt_q;
  assign ev_evict_pt   = look_end && !hit && !any_inv &&  row.pt[victim];
  assign ev_evict_data = look_end && !hit && !any_inv && !row.pt[victim];

  // Replacement rule, checked in simulation: while prioritizing, a page-table
  // line is evicted only if the set holds no data line or on the 1-in-100 slot.
  always_ff @(posedge clk) begin
    if (rst_n && PRIO && prio_en && ev_evict_pt)
      assert (!any_data || evict_cnt == CW'(KEEP_PT_PCT))
        else $error("prio_cache: page-table line evicted while a data line was available");
  end

  initial begin
    assert (HIT_LAT >= 2) else $error("prio_cache: HIT_LAT must be at least 2");
    assert (KEEP_PT_PCT < 128) else $error("prio_cache: KEEP_PT_PCT out of range");
  end

endmodule
