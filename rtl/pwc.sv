// pwc: page walker cache (Intel "paging structure cache" style), one depth.
//
// A fully associative table that maps the top TAG_W bits of a virtual address
// to the table node a walk reaches after consuming exactly those bits. A hit
// lets the walker skip every table access above that node. The walker holds
// three of these: L4 (tag VA[47:39]), L3 (tag VA[47:30]) and L2 (tag
// VA[47:21]). With the L4+L3 levels merged into one 2MB node, the walk reaches
// the flattened L2+L1 node after 18 bits, so the L3 cache alone turns every
// walk that hits into a single memory access.
//
// Sizes (4/4/24 entries, fully associative, 1-cycle) follow the evaluated
// configuration. Replacement is true LRU over per-entry ages and a refill of an
// existing tag overwrites it in place; both are this design's choices.
//
// Timing: lookup is combinational (the walker registers the result, giving
// the 1-cycle lookup). `touch` (promote a hit to MRU), `ins` and `flush` take
// effect at the next rising edge; `flush` (on a root-pointer change) wins.
module pwc
  import fpt_pkg::*;
#(
  parameter int unsigned ENTRIES = 4,
  parameter int unsigned TAG_W   = 18
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               flush,
  // lookup
  input  logic [TAG_W-1:0]   lk_tag,
  output logic               lk_hit,
  output node_ptr_t          lk_node,
  input  logic               touch,     // lookup result was used
  // insert
  input  logic               ins,
  input  logic [TAG_W-1:0]   ins_tag,
  input  node_ptr_t          ins_node
);
  localparam int unsigned AW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;
  localparam int unsigned EW = $clog2(ENTRIES + 1);

  logic [ENTRIES-1:0] valid;
  logic [TAG_W-1:0]   tags  [ENTRIES];
  node_ptr_t          nodes [ENTRIES];
  logic [AW-1:0]      age   [ENTRIES];   // 0 = most recently used

  logic [EW-1:0] hit_idx, ins_hit_idx, victim;
  logic          ins_hit;

  always_comb begin
    lk_hit  = 1'b0;
    hit_idx = '0;
    for (int i = 0; i < int'(ENTRIES); i++)
      if (valid[i] && tags[i] == lk_tag) begin
        lk_hit  = 1'b1;
        hit_idx = EW'(i);
      end
    lk_node = nodes[hit_idx[AW-1:0]];

    ins_hit     = 1'b0;
    ins_hit_idx = '0;
    for (int i = 0; i < int'(ENTRIES); i++)
      if (valid[i] && tags[i] == ins_tag) begin
        ins_hit     = 1'b1;
        ins_hit_idx = EW'(i);
      end
    // victim: the same tag, else an invalid entry, else the oldest
    victim = '0;
    for (int i = 0; i < int'(ENTRIES); i++)
      if (age[i] == AW'(ENTRIES - 1)) victim = EW'(i);
    for (int i = int'(ENTRIES) - 1; i >= 0; i--)
      if (!valid[i]) victim = EW'(i);
    if (ins_hit) victim = ins_hit_idx;
  end

  // age update: the used entry becomes 0, younger ones grow by one
  logic [AW-1:0] age_n [ENTRIES];
  logic          use_en;
  logic [EW-1:0] use_idx;
  always_comb begin
    use_en  = ins || (touch && lk_hit);
    use_idx = ins ? victim : hit_idx;
    age_n   = age;
    if (use_en) begin
      for (int i = 0; i < int'(ENTRIES); i++)
        if (age[i] < age[use_idx[AW-1:0]]) age_n[i] = age[i] + AW'(1);
      age_n[use_idx[AW-1:0]] = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      for (int i = 0; i < int'(ENTRIES); i++) age[i] <= AW'(i);
    end else if (flush) begin
      valid <= '0;
      for (int i = 0; i < int'(ENTRIES); i++) age[i] <= AW'(i);
    end else begin
      age <= age_n;
      if (ins) valid[victim[AW-1:0]] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (ins && !flush) begin
      tags [victim[AW-1:0]] <= ins_tag;
      nodes[victim[AW-1:0]] <= ins_node;
    end
  end

endmodule
