// l1_tlb: first-level TLB with separate 4KB and 2MB arrays looked up in
// parallel in one cycle.
//
// A lookup probes both banks with the same virtual address: the 4KB bank by
// the 4KB page number, the 2MB bank by the 2MB page number. At most one can
// hit for a consistent page table; the 4KB entry is preferred if both do. The
// answer is registered: `rsp_valid` follows `lk_valid` by exactly one cycle,
// and a hit also marks the entry most recently used. A fill goes to the bank
// of its page size; 1GB translations are not held here (they stay in the
// second-level TLB). `flush` clears both banks.
//
// Sizes follow the evaluated configuration: 4KB 64 entries 4-way, 2MB 32
// entries 4-way, 1-cycle, parallel lookup. Dropping 1GB translations, the
// LRU replacement and the set indexing are this design's.
//
// Interface: `lk_valid`/`lk_va` (always accepted) -> `rsp_valid`, `rsp_hit`,
// `rsp_xlat` one cycle later; `fill_valid`/`fill_va`/`fill_xlat` written at
// the next edge. A fill and a lookup must not share a cycle.
module l1_tlb
  import fpt_pkg::*;
#(
  parameter int unsigned SETS_4K = 16,
  parameter int unsigned WAYS_4K = 4,
  parameter int unsigned SETS_2M = 8,
  parameter int unsigned WAYS_2M = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            flush,
  input  logic            lk_valid,
  input  logic [VA_W-1:0] lk_va,
  output logic            rsp_valid,
  output logic            rsp_hit,
  output xlat_t           rsp_xlat,
  input  logic            fill_valid,
  input  logic [VA_W-1:0] fill_va,
  input  xlat_t           fill_xlat
);
  logic               h4, h2;
  logic [FRAME_W-1:0] f4, f2;

  tlb_bank #(.SETS(SETS_4K), .WAYS(WAYS_4K), .PG_B(12)) u_4k (
    .clk, .rst_n, .flush, .lk_va, .lk_hit(h4), .lk_frame(f4), .touch(lk_valid),
    .fill_valid(fill_valid && fill_xlat.page_bits == POS_W'(12)), .fill_va,
    .fill_frame(fill_xlat.frame));

  tlb_bank #(.SETS(SETS_2M), .WAYS(WAYS_2M), .PG_B(21)) u_2m (
    .clk, .rst_n, .flush, .lk_va, .lk_hit(h2), .lk_frame(f2), .touch(lk_valid && !h4),
    .fill_valid(fill_valid && fill_xlat.page_bits == POS_W'(21)), .fill_va,
    .fill_frame(fill_xlat.frame));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_valid <= 1'b0; rsp_hit <= 1'b0; rsp_xlat <= '0;
    end else begin
      rsp_valid <= lk_valid && !flush;
      rsp_hit   <= h4 || h2;
      rsp_xlat  <= h4 ? xlat_t'{frame: f4, page_bits: POS_W'(12)}
                      : xlat_t'{frame: f2, page_bits: POS_W'(21)};
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n && fill_valid) assert (!lk_valid)
      else $error("l1_tlb: fill and lookup in the same cycle");
  end

endmodule
