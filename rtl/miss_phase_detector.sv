// miss_phase_detector: decides when the caches should favour page table lines.
//
// Prioritizing page table entries pays off when TLB misses are frequent,
// because such phases also show high data miss rates: the data would mostly
// miss anyway, while the much smaller page table can stay resident. This block
// plays the role of the existing performance counters: over an epoch of EPOCH
// TLB lookups it counts TLB misses and L2 data misses, and at the end of the
// epoch it sets `prio_en` for the next epoch if both reached their
// thresholds. Counting epochs in TLB lookups and the default thresholds
// (32 TLB misses and 16 L2 data misses per 1024 lookups) are this design's:
// only "detect phases of high cache and TLB miss rates with existing
// counters" is given.
//
// Interface: one-cycle event pulses in, `prio_en` out (registered, changes
// only at epoch boundaries), plus the previous epoch's counts.
module miss_phase_detector #(
  parameter int unsigned EPOCH            = 1024,
  parameter int unsigned TLB_MISS_THRESH  = 32,
  parameter int unsigned DATA_MISS_THRESH = 16,
  parameter int unsigned CW               = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          ev_tlb_access,
  input  logic          ev_tlb_miss,
  input  logic          ev_l2_data_miss,
  output logic          prio_en,
  output logic [CW-1:0] last_tlb_misses,
  output logic [CW-1:0] last_data_misses
);
  logic [CW-1:0] n_acc, n_tlb, n_data;
  logic          epoch_end;
  logic [CW-1:0] tlb_now, data_now;

  assign epoch_end = ev_tlb_access && (n_acc == CW'(EPOCH - 1));
  assign tlb_now   = n_tlb  + CW'(ev_tlb_miss);
  assign data_now  = n_data + CW'(ev_l2_data_miss);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_acc <= '0; n_tlb <= '0; n_data <= '0;
      prio_en <= 1'b0;
      last_tlb_misses <= '0; last_data_misses <= '0;
    end else if (epoch_end) begin
      prio_en          <= (tlb_now >= CW'(TLB_MISS_THRESH)) &&
                          (data_now >= CW'(DATA_MISS_THRESH));
      last_tlb_misses  <= tlb_now;
      last_data_misses <= data_now;
      n_acc <= '0; n_tlb <= '0; n_data <= '0;
    end else begin
      if (ev_tlb_access) n_acc <= n_acc + CW'(1);
      n_tlb  <= tlb_now;
      n_data <= data_now;
    end
  end

endmodule
