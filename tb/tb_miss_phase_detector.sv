// tb_miss_phase_detector: drives epochs with chosen numbers of TLB misses and
// L2 data misses and checks that prioritization turns on exactly for the
// epochs after one that reached both thresholds, and that it changes only at
// epoch boundaries.
module tb_miss_phase_detector;
  localparam int unsigned EP = 64, TT = 8, DT = 4;
  logic clk = 0, rst_n = 0, acc = 0, miss = 0, dmiss = 0;
  logic prio_en;
  logic [15:0] last_tlb_misses, last_data_misses;
  int checks = 0, failures = 0;

  miss_phase_detector #(.EPOCH(EP), .TLB_MISS_THRESH(TT), .DATA_MISS_THRESH(DT)) dut (
    .clk, .rst_n, .ev_tlb_access(acc), .ev_tlb_miss(miss), .ev_l2_data_miss(dmiss),
    .prio_en, .last_tlb_misses, .last_data_misses);
  always #5 clk = ~clk;

  task automatic chk(string w, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: %0d expected %0d", w, got, exp); end
  endtask

  // one epoch with n TLB misses and d data misses, spread over the lookups
  task automatic epoch(int n, int d, bit exp_before);
    for (int i = 0; i < int'(EP); i++) begin
      @(negedge clk);
      acc = 1; miss = (i < n); dmiss = (i < d);
      chk("prio stable in epoch", int'(prio_en), int'(exp_before));
      if ($urandom_range(0, 3) == 0) begin   // idle cycles between lookups
        @(negedge clk); acc = 0; miss = 0; dmiss = 0;
      end
    end
    @(negedge clk); acc = 0; miss = 0; dmiss = 0;
    chk("last tlb", int'(last_tlb_misses), n);
    chk("last data", int'(last_data_misses), d);
    chk("prio after epoch", int'(prio_en), int'(n >= int'(TT) && d >= int'(DT)));
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    epoch(2, 10, 0);     // few TLB misses: off
    epoch(8, 4, 0);      // both at threshold: on
    epoch(20, 30, 1);    // stays on
    epoch(30, 3, 1);     // data misses low: off
    epoch(7, 50, 0);     // one below: off
    epoch(64, 64, 0);    // on
    epoch(0, 0, 1);      // off
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
