// page_walker: hardware page table walker for flattened page tables.
//
// A walk starts from the root pointer (CR3/TTBR) whose size code says whether
// the root is a 4KB node or a flattened 2MB/1GB node. Three page walker caches
// (L4, L3, L2; 4, 4 and 24 entries) are looked up in parallel and the walk
// starts at the deepest hit. Each step then reads one 8-byte entry through the
// data cache, and `walk_step` decides from the node size and the entry whether
// to continue, finish or fault. Pointers found on the way are written into the
// PWC whose tag covers exactly the VA bits consumed so far (39 -> L4, 30 -> L3,
// 21 -> L2). With L4+L3 and L2+L1 flattened, a walk is one access on an L3 PWC
// hit and two on a miss; a conventional 4-level walk is one to four.
//
// Interface: `req_*` valid/ready for a VA to translate; one `resp_valid` pulse
// with the translation or a fault and the number of table reads it made.
// `mem_*` reads one cache line at a time (one request outstanding); the entry
// is picked from the returned line by address bits 5:3. `flush` empties the
// PWCs and must be pulsed when the root pointer changes.
//
// Timing: request accepted in IDLE; one cycle of PWC lookup; then per table
// access one request cycle (or more while mem_req_ready is low) plus the
// memory latency; the response follows one cycle after the last entry
// arrives. PWC sizes follow the evaluated configuration; the handshake and
// the state sequence are this design's.
module page_walker
  import fpt_pkg::*;
#(
  parameter int unsigned L4_ENTRIES = 4,
  parameter int unsigned L3_ENTRIES = 4,
  parameter int unsigned L2_ENTRIES = 24
) (
  input  logic               clk,
  input  logic               rst_n,
  input  node_ptr_t          cr3,
  input  logic               flush,
  // walk request / response
  input  logic               req_valid,
  output logic               req_ready,
  input  logic [VA_W-1:0]    req_va,
  output logic               resp_valid,
  output logic               resp_fault,
  output xlat_t              resp_xlat,
  output logic [2:0]         resp_accesses,   // table entries read
  output logic [1:0]         resp_pwc_level,  // 0 none, 1 L4, 2 L3, 3 L2 hit
  // table reads (line-wide)
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output logic [PA_W-1:0]    mem_req_addr,
  input  logic               mem_resp_valid,
  input  logic [LINE_W-1:0]  mem_resp_line
);

  typedef enum logic [2:0] {S_IDLE, S_LOOKUP, S_REQ, S_WAIT, S_DONE} state_e;
  state_e state;

  logic [VA_W-1:0]  va_q;
  logic [POS_W-1:0] pos_q;
  node_ptr_t        node_q;
  logic [2:0]       acc_q;
  logic [1:0]       lvl_q;
  logic             fault_q;
  xlat_t            xlat_q;

  // step-logic signals
  logic [PA_W-1:0]  st_addr;
  logic             st_idx_ok, st_done, st_fault, st_self, st_fill;
  logic [63:0]      st_pte;
  xlat_t            st_result;
  logic [POS_W-1:0] st_next_pos;
  node_ptr_t        st_next_node;

  // ---------------- PWCs ----------------
  logic      h4, h3, h2;
  node_ptr_t n4, n3, n2;
  logic      t4, t3, t2, i4, i3, i2;

  pwc #(.ENTRIES(L4_ENTRIES), .TAG_W(9)) u_pwc_l4 (
    .clk, .rst_n, .flush,
    .lk_tag(va_q[47:39]), .lk_hit(h4), .lk_node(n4), .touch(t4),
    .ins(i4), .ins_tag(va_q[47:39]), .ins_node(st_next_node));
  pwc #(.ENTRIES(L3_ENTRIES), .TAG_W(18)) u_pwc_l3 (
    .clk, .rst_n, .flush,
    .lk_tag(va_q[47:30]), .lk_hit(h3), .lk_node(n3), .touch(t3),
    .ins(i3), .ins_tag(va_q[47:30]), .ins_node(st_next_node));
  pwc #(.ENTRIES(L2_ENTRIES), .TAG_W(27)) u_pwc_l2 (
    .clk, .rst_n, .flush,
    .lk_tag(va_q[47:21]), .lk_hit(h2), .lk_node(n2), .touch(t2),
    .ins(i2), .ins_tag(va_q[47:21]), .ins_node(st_next_node));

  // ---------------- step logic ----------------

  assign st_pte = mem_resp_line[{st_addr[5:3], 6'b000000} +: 64];

  walk_step u_step (
    .va(va_q), .pos(pos_q), .node(node_q),
    .pte_addr(st_addr), .idx_ok(st_idx_ok),
    .pte(st_pte), .done(st_done), .fault(st_fault), .result(st_result),
    .next_pos(st_next_pos), .next_node(st_next_node),
    .self_ref(st_self), .fill_pwc(st_fill));

  logic step_now;
  assign step_now = (state == S_WAIT) && mem_resp_valid;

  always_comb begin
    t2 = (state == S_LOOKUP) && h2;
    t3 = (state == S_LOOKUP) && !h2 && h3;
    t4 = (state == S_LOOKUP) && !h2 && !h3 && h4;
    i4 = step_now && !st_done && !st_fault && st_fill && st_next_pos == POS_W'(39);
    i3 = step_now && !st_done && !st_fault && st_fill && st_next_pos == POS_W'(30);
    i2 = step_now && !st_done && !st_fault && st_fill && st_next_pos == POS_W'(21);
  end

  assign req_ready      = (state == S_IDLE);
  assign mem_req_valid  = (state == S_REQ) && st_idx_ok;
  assign mem_req_addr   = st_addr;
  assign resp_valid     = (state == S_DONE);
  assign resp_fault     = fault_q;
  assign resp_xlat      = xlat_q;
  assign resp_accesses  = acc_q;
  assign resp_pwc_level = lvl_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      va_q    <= '0;
      pos_q   <= POS_W'(VA_W);
      node_q  <= '0;
      acc_q   <= '0;
      lvl_q   <= '0;
      fault_q <= 1'b0;
      xlat_q  <= '0;
    end else begin
      case (state)
        S_IDLE: if (req_valid) begin
          va_q    <= req_va;
          acc_q   <= '0;
          fault_q <= 1'b0;
          state   <= S_LOOKUP;
        end
        S_LOOKUP: begin
          if (h2 && !flush) begin
            pos_q <= POS_W'(21); node_q <= n2; lvl_q <= 2'd3;
          end else if (h3 && !flush) begin
            pos_q <= POS_W'(30); node_q <= n3; lvl_q <= 2'd2;
          end else if (h4 && !flush) begin
            pos_q <= POS_W'(39); node_q <= n4; lvl_q <= 2'd1;
          end else begin
            pos_q <= POS_W'(VA_W); node_q <= cr3; lvl_q <= 2'd0;
          end
          state <= S_REQ;
        end
        S_REQ: begin
          if (!st_idx_ok) begin
            fault_q <= 1'b1;
            state   <= S_DONE;
          end else if (mem_req_ready) begin
            state <= S_WAIT;
          end
        end
        S_WAIT: if (mem_resp_valid) begin
          acc_q <= acc_q + 3'd1;
          if (st_fault) begin
            fault_q <= 1'b1;
            state   <= S_DONE;
          end else if (st_done) begin
            xlat_q <= st_result;
            state  <= S_DONE;
          end else begin
            pos_q  <= st_next_pos;
            node_q <= st_next_node;
            state  <= S_REQ;
          end
        end
        default: state <= S_IDLE;   // S_DONE
      endcase
    end
  end

  // Handshake rules, checked in simulation: a table read request stays up,
  // unchanged, until accepted; the walk position stays within 48..12.
  logic            req_wait_q;
  logic [PA_W-1:0] req_addr_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_wait_q <= 1'b0;
      req_addr_q <= '0;
    end else begin
      req_wait_q <= mem_req_valid && !mem_req_ready;
      req_addr_q <= mem_req_addr;
      if (req_wait_q)
        assert (mem_req_valid && mem_req_addr == req_addr_q)
          else $error("page_walker: table read dropped or changed before accept");
      assert (pos_q <= POS_W'(VA_W) && pos_q >= POS_W'(PG_BITS))
        else $error("page_walker: walk position out of range");
    end
  end

endmodule
