// tlb: set-associative translation lookaside buffer for 4KB, 2MB and 1GB pages.
//
// Each entry holds a virtual page tag, its page size and the physical frame.
// One array serves all three page sizes: a lookup probes the set chosen by the
// 4KB page number, then by the 2MB and then by the 1GB page number, one probe
// per cycle, and an entry matches only if its size equals the probe's. The
// probes fit within the access latency (9 cycles by default), so a hit or a
// miss is always answered LAT cycles after the lookup is accepted. A fill
// replaces an entry with the same tag and size, else an invalid or the LRU
// entry of the set. Reset and `flush` clear one set per cycle.
//
// Geometry and latency (1536 entries, 12-way, 9 cycles) are the evaluated L2
// TLB; the sequential per-size probing, LRU replacement and the fill port are
// this design's.
//
// Interface: `lk_*` valid/ready lookup, answered by a one-cycle `rsp_valid`
// with `rsp_hit` and the translation. `fill_valid` writes one translation in a
// single cycle while the TLB is idle (it takes precedence over a lookup).
module tlb
  import fpt_pkg::*;
#(
  parameter int unsigned SETS = 128,
  parameter int unsigned WAYS = 12,
  parameter int unsigned LAT  = 9
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              flush,
  output logic              init_done,
  input  logic              lk_valid,
  output logic              lk_ready,
  input  logic [VA_W-1:0]   lk_va,
  output logic              rsp_valid,
  output logic              rsp_hit,
  output xlat_t             rsp_xlat,
  input  logic              fill_valid,
  input  logic [VA_W-1:0]   fill_va,
  input  xlat_t             fill_xlat
);
  localparam int unsigned SW = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned AW = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned TW = VA_W - PG_BITS - SW;   // widest tag (4KB)

  typedef struct packed {
    logic [WAYS-1:0]              valid;
    logic [WAYS-1:0][1:0]         size;
    logic [WAYS-1:0][AW-1:0]      age;
    logic [WAYS-1:0][TW-1:0]      tag;
    logic [WAYS-1:0][FRAME_W-1:0] frame;
  } row_t;

  row_t meta [SETS];

  typedef enum logic [2:0] {S_INIT, S_IDLE, S_PROBE, S_WAIT, S_RESP} state_e;
  state_e state;

  logic [VA_W-1:0] va_q;
  logic [1:0]      sz_q;
  logic [7:0]      cnt_q;
  logic [SW-1:0]   init_idx;
  logic            hit_q;
  xlat_t           xlat_q;

  function automatic logic [POS_W-1:0] size_bits(logic [1:0] s);
    return POS_W'(PG_BITS + 9 * int'(s));
  endfunction
  function automatic logic [SW-1:0] set_of(logic [VA_W-1:0] va, logic [1:0] s);
    return SW'(va >> size_bits(s));
  endfunction
  function automatic logic [TW-1:0] tag_of(logic [VA_W-1:0] va, logic [1:0] s);
    return TW'(va >> (size_bits(s) + POS_W'(SW)));
  endfunction

  // ---------------- probe ----------------
  logic [SW-1:0] p_set;
  row_t          p_row, p_row_n;
  logic          p_hit;
  logic [AW-1:0] p_way;
  always_comb begin
    p_set = set_of(va_q, sz_q);
    p_row = meta[p_set];
    p_hit = 1'b0; p_way = '0;
    for (int w = 0; w < int'(WAYS); w++)
      if (p_row.valid[w] && p_row.size[w] == sz_q && p_row.tag[w] == tag_of(va_q, sz_q)) begin
        p_hit = 1'b1; p_way = AW'(w);
      end
    p_row_n = p_row;
    for (int w = 0; w < int'(WAYS); w++)
      if (p_row.age[w] < p_row.age[p_way]) p_row_n.age[w] = p_row.age[w] + AW'(1);
    p_row_n.age[p_way] = '0;
  end

  // ---------------- fill ----------------
  logic [1:0]    f_sz;
  logic [SW-1:0] f_set;
  row_t          f_row, f_row_n;
  logic [AW-1:0] f_way;
  always_comb begin
    f_sz  = (fill_xlat.page_bits == POS_W'(30)) ? 2'd2 :
            (fill_xlat.page_bits == POS_W'(21)) ? 2'd1 : 2'd0;
    f_set = set_of(fill_va, f_sz);
    f_row = meta[f_set];
    f_way = '0;
    for (int w = 0; w < int'(WAYS); w++)
      if (f_row.age[w] == AW'(WAYS - 1)) f_way = AW'(w);
    for (int w = int'(WAYS) - 1; w >= 0; w--)
      if (!f_row.valid[w]) f_way = AW'(w);
    for (int w = 0; w < int'(WAYS); w++)
      if (f_row.valid[w] && f_row.size[w] == f_sz && f_row.tag[w] == tag_of(fill_va, f_sz))
        f_way = AW'(w);
    f_row_n = f_row;
    for (int w = 0; w < int'(WAYS); w++)
      if (f_row.age[w] < f_row.age[f_way]) f_row_n.age[w] = f_row.age[w] + AW'(1);
    f_row_n.age[f_way]   = '0;
    f_row_n.valid[f_way] = 1'b1;
    f_row_n.size[f_way]  = f_sz;
    f_row_n.tag[f_way]   = tag_of(fill_va, f_sz);
    f_row_n.frame[f_way] = fill_xlat.frame;
  end

  row_t init_row;
  always_comb begin
    init_row = '0;
    for (int w = 0; w < int'(WAYS); w++) init_row.age[w] = AW'(w);
  end

  logic do_fill;
  assign do_fill = (state == S_IDLE) && fill_valid && !flush;

  always_ff @(posedge clk) begin
    if (state == S_INIT)                          meta[init_idx] <= init_row;
    else if (do_fill)                             meta[f_set]    <= f_row_n;
    else if (state == S_PROBE && !hit_q && p_hit) meta[p_set]    <= p_row_n;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_INIT; init_idx <= '0; va_q <= '0; sz_q <= '0;
      cnt_q <= '0; hit_q <= 1'b0; xlat_q <= '0;
    end else if (flush) begin
      state <= S_INIT; init_idx <= '0;
    end else begin
      case (state)
        S_INIT: begin
          init_idx <= init_idx + SW'(1);
          if (init_idx == SW'(SETS - 1)) state <= S_IDLE;
        end
        S_IDLE: if (lk_valid && !fill_valid) begin
          va_q  <= lk_va;
          sz_q  <= 2'd0;
          hit_q <= 1'b0;
          cnt_q <= 8'(LAT - 2);
          state <= S_PROBE;
        end
        S_PROBE: begin
          if (cnt_q != '0) cnt_q <= cnt_q - 8'd1;
          if (!hit_q && p_hit) begin
            hit_q  <= 1'b1;
            xlat_q <= '{frame: p_row.frame[p_way], page_bits: size_bits(sz_q)};
          end
          if (sz_q == 2'd2 || (!hit_q && p_hit)) state <= (cnt_q == '0) ? S_RESP : S_WAIT;
          else sz_q <= sz_q + 2'd1;
        end
        S_WAIT: if (cnt_q != '0) cnt_q <= cnt_q - 8'd1; else state <= S_RESP;
        default: state <= S_IDLE;   // S_RESP
      endcase
    end
  end

  assign init_done = (state != S_INIT);
  assign lk_ready  = (state == S_IDLE) && !fill_valid && !flush;
  assign rsp_valid = (state == S_RESP);
  assign rsp_hit   = hit_q;
  assign rsp_xlat  = xlat_q;

  initial assert (LAT >= 4) else $error("tlb: LAT must cover the three probes");

endmodule
