// tlb_bank: one set-associative TLB array for a single page size, with a
// combinational lookup, used twice (4KB and 2MB) by the first-level TLB.
//
// The set is chosen by the low bits of the virtual page number of this
// bank's page size (PG_B offset bits); the tag is the rest of the VA above it.
// A lookup is combinational from `lk_va`; `touch` makes the hit way the most
// recently used at the next edge. A fill overwrites an entry with the same
// tag, else an invalid way, else the least recently used one (true LRU by
// per-way ages). `flush` and reset clear the valid bits in one cycle: the
// bank is small enough to be held in flip-flops.
//
// Interface: `lk_va` -> `lk_hit`, `lk_frame` (same cycle); `fill_valid`,
// `fill_va`, `fill_frame` written at the next rising edge. SETS and WAYS must
// be powers of two of at least 2. The organisation (set index from the page
// number, LRU) is this design's; sizes are set by the instantiating TLB.
module tlb_bank
  import fpt_pkg::*;
#(
  parameter int unsigned SETS = 16,
  parameter int unsigned WAYS = 4,
  parameter int unsigned PG_B = 12
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               flush,
  input  logic [VA_W-1:0]    lk_va,
  output logic               lk_hit,
  output logic [FRAME_W-1:0] lk_frame,
  input  logic               touch,
  input  logic               fill_valid,
  input  logic [VA_W-1:0]    fill_va,
  input  logic [FRAME_W-1:0] fill_frame
);
  localparam int unsigned SB = $clog2(SETS);
  localparam int unsigned AB = $clog2(WAYS);
  localparam int unsigned TW = VA_W - PG_B - SB;

  logic [WAYS-1:0]    valid [SETS];
  logic [TW-1:0]      tag   [SETS][WAYS];
  logic [FRAME_W-1:0] frame [SETS][WAYS];
  logic [AB-1:0]      age   [SETS][WAYS];

  logic [SB-1:0] lk_set, f_set;
  logic [TW-1:0] lk_tag, f_tag;
  assign lk_set = lk_va[PG_B +: SB];
  assign lk_tag = lk_va[VA_W-1 -: TW];
  assign f_set  = fill_va[PG_B +: SB];
  assign f_tag  = fill_va[VA_W-1 -: TW];

  // lookup
  logic [AB-1:0] hit_way;
  always_comb begin
    lk_hit = 1'b0; hit_way = '0; lk_frame = '0;
    for (int w = 0; w < WAYS; w++)
      if (valid[lk_set][w] && tag[lk_set][w] == lk_tag && !lk_hit) begin
        lk_hit = 1'b1; hit_way = AB'(w); lk_frame = frame[lk_set][w];
      end
  end

  // fill victim: same tag, else invalid, else oldest
  logic [AB-1:0] vic;
  always_comb begin
    logic found;
    found = 1'b0; vic = '0;
    for (int w = 0; w < WAYS; w++)
      if (!found && valid[f_set][w] && tag[f_set][w] == f_tag) begin found = 1'b1; vic = AB'(w); end
    for (int w = 0; w < WAYS; w++)
      if (!found && !valid[f_set][w]) begin found = 1'b1; vic = AB'(w); end
    for (int w = 0; w < WAYS; w++)
      if (!found && age[f_set][w] == AB'(WAYS - 1)) begin found = 1'b1; vic = AB'(w); end
  end

  // the way made most recently used this cycle
  logic          upd;
  logic [SB-1:0] upd_set;
  logic [AB-1:0] upd_way;
  always_comb begin
    upd     = fill_valid || (touch && lk_hit);
    upd_set = fill_valid ? f_set : lk_set;
    upd_way = fill_valid ? vic : hit_way;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        valid[s] <= '0;
        for (int w = 0; w < WAYS; w++) age[s][w] <= AB'(w);
      end
    end else if (flush) begin
      for (int s = 0; s < SETS; s++) valid[s] <= '0;
    end else if (upd) begin
      for (int w = 0; w < WAYS; w++)
        if (AB'(w) == upd_way) age[upd_set][w] <= '0;
        else if (age[upd_set][w] < age[upd_set][upd_way]) age[upd_set][w] <= age[upd_set][w] + 1'b1;
      if (fill_valid) begin
        valid[f_set][vic] <= 1'b1;
        tag[f_set][vic]   <= f_tag;
        frame[f_set][vic] <= fill_frame;
      end
    end
  end

endmodule
