// mem_model: behavioural main memory for simulation (not synthesizable).
//
// Sparse storage of 64-bit words in an associative array, answered a whole 64-byte line at a time. One request is accepted
// at a time; the line returns LAT cycles after acceptance as a one-cycle
// `resp_valid` pulse. Testbenches fill it through `wr64` and read it back
// through `rd64`; `reads` counts the line reads served. A word never written
// reads as `blank(addr)`: its own address XOR a constant, with bit 0 clear so
// that an unwritten page table entry reads as not present.
module mem_model
  import fpt_pkg::*;
#(
  parameter int unsigned LAT = 20
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [PA_W-1:0]   req_addr,
  output logic              resp_valid,
  output logic [LINE_W-1:0] resp_line
);
  logic [63:0] words [logic [PA_W-4:0]];
  int unsigned reads;
  int unsigned cnt;
  logic        busy;
  logic [PA_W-1:0] addr_q;

  function automatic void wr64(logic [PA_W-1:0] a, logic [63:0] d);
    words[a[PA_W-1:3]] = d;
  endfunction
  function automatic logic [63:0] rd64(logic [PA_W-1:0] a);
    if (words.exists(a[PA_W-1:3])) return words[a[PA_W-1:3]];
    return blank(a);
  endfunction
  function automatic logic [63:0] blank(logic [PA_W-1:0] a);
    return 64'({a[PA_W-1:3], 3'b000}) ^ 64'hFACE_0000_0000_0000;
  endfunction

  assign req_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cnt <= 0; resp_valid <= 1'b0; resp_line <= '0; addr_q <= '0;
      reads <= 0;
    end else begin
      resp_valid <= 1'b0;
      if (!busy && req_valid) begin
        busy <= 1'b1; addr_q <= req_addr; cnt <= LAT - 1;
      end else if (busy) begin
        if (cnt <= 1) begin
          for (int i = 0; i < 8; i++)
            resp_line[i*64 +: 64] <= rd64({addr_q[PA_W-1:6], 6'd0} + PA_W'(i * 8));
          resp_valid <= 1'b1;
          busy       <= 1'b0;
          reads      <= reads + 1;
        end else cnt <= cnt - 1;
      end
    end
  end
endmodule
