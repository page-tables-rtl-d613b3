// nested_walker: two-dimensional (guest + host) page walk for virtualized
// execution, with flattening allowed in either dimension.
//
// A guest virtual address is translated by a guest page walker whose table
// addresses are guest-physical. Every guest table read, and finally the
// guest-physical address of the data, is itself translated to a host-physical
// address: first through a 16-entry fully associative nested TLB, and on a miss
// by a host page walker whose own PWCs play the role of the vPWC. Both walkers
// are the flattening-aware `page_walker`, so the guest table, the host table,
// both or neither may use flattened 2MB nodes. Without PWC or nested TLB hits
// a walk costs 24 table reads with two 4-level tables, 14 with one of them
// flattened (L4+L3, L2+L1) and 8 with both flattened; the caches bring this
// down to a few reads.
//
// Interface: `req_*` valid/ready guest VA; one `resp_valid` pulse with the
// host-physical frame, the page size (the smaller of the guest and host page),
// a fault flag and the guest and host table reads made. `mem_*` reads lines
// at host-physical addresses, one request outstanding; guest table reads and
// host walks take turns on it. `flush` empties both walkers' PWCs and the
// nested TLB and must be pulsed when either root pointer changes.
//
// Timing: a nested TLB lookup costs one cycle per guest-physical address;
// host walks and table reads follow the page_walker timing. The 2D walk order,
// the guest PWC / host vPWC split and the nested TLB size follow the evaluated
// configuration; the nested TLB holding 4KB-granular host frames with the
// host page size, and the sequencing, are this design's.
module nested_walker
  import fpt_pkg::*;
#(
  parameter int unsigned PWC_L4       = 4,
  parameter int unsigned PWC_L3       = 4,
  parameter int unsigned PWC_L2       = 24,
  parameter int unsigned NTLB_ENTRIES = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  node_ptr_t          g_cr3,      // guest root (guest-physical)
  input  node_ptr_t          h_cr3,      // host root (host-physical)
  input  logic               flush,
  input  logic               req_valid,
  output logic               req_ready,
  input  logic [VA_W-1:0]    req_va,
  output logic               resp_valid,
  output logic               resp_fault,
  output xlat_t              resp_xlat,
  output logic [4:0]         resp_guest_reads,
  output logic [4:0]         resp_host_reads,
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output logic [PA_W-1:0]    mem_req_addr,
  input  logic               mem_resp_valid,
  input  logic [LINE_W-1:0]  mem_resp_line
);
  typedef enum logic [2:0] {S_IDLE, S_GUEST, S_NT, S_HWALK, S_GREQ, S_GWAIT, S_DONE} state_e;
  state_e state;

  logic [VA_W-1:0]  gva_q;
  logic [PA_W-1:0]  gpa_q, hpa_q;
  logic             final_q, fault_q, g_issued, h_issued;
  logic [POS_W-1:0] gbits_q, hbits_q;
  logic [4:0]       gr_q, hr_q;

  // ---------------- guest walker ----------------
  logic              g_req_ready, g_resp_valid, g_resp_fault, g_mreq_valid;
  xlat_t             g_resp_xlat;
  logic [2:0]        g_resp_acc;
  logic [PA_W-1:0]   g_mreq_addr;
  page_walker #(.L4_ENTRIES(PWC_L4), .L3_ENTRIES(PWC_L3), .L2_ENTRIES(PWC_L2)) u_guest (
    .clk, .rst_n, .cr3(g_cr3), .flush,
    .req_valid(state == S_GUEST && !g_issued), .req_ready(g_req_ready), .req_va(gva_q),
    .resp_valid(g_resp_valid), .resp_fault(g_resp_fault), .resp_xlat(g_resp_xlat),
    .resp_accesses(g_resp_acc), .resp_pwc_level(),
    .mem_req_valid(g_mreq_valid), .mem_req_ready(state == S_GREQ && mem_req_ready),
    .mem_req_addr(g_mreq_addr),
    .mem_resp_valid(state == S_GWAIT && mem_resp_valid), .mem_resp_line(mem_resp_line));

  // ---------------- host walker (its PWCs are the vPWC) ----------------
  logic              h_req_ready, h_resp_valid, h_resp_fault, h_mreq_valid;
  xlat_t             h_resp_xlat;
  logic [2:0]        h_resp_acc;
  logic [PA_W-1:0]   h_mreq_addr;
  page_walker #(.L4_ENTRIES(PWC_L4), .L3_ENTRIES(PWC_L3), .L2_ENTRIES(PWC_L2)) u_host (
    .clk, .rst_n, .cr3(h_cr3), .flush,
    .req_valid(state == S_HWALK && !h_issued), .req_ready(h_req_ready), .req_va(gpa_q[VA_W-1:0]),
    .resp_valid(h_resp_valid), .resp_fault(h_resp_fault), .resp_xlat(h_resp_xlat),
    .resp_accesses(h_resp_acc), .resp_pwc_level(),
    .mem_req_valid(h_mreq_valid), .mem_req_ready(state == S_HWALK && mem_req_ready),
    .mem_req_addr(h_mreq_addr),
    .mem_resp_valid(state == S_HWALK && mem_resp_valid), .mem_resp_line(mem_resp_line));

  // ---------------- nested TLB: gPA 4KB page -> hPA 4KB frame + host page size ----------------
  localparam int unsigned NT_TAG = VA_W - PG_BITS;
  logic      nt_hit, nt_ins;
  node_ptr_t nt_node, nt_ins_node;
  pwc #(.ENTRIES(NTLB_ENTRIES), .TAG_W(NT_TAG)) u_ntlb (
    .clk, .rst_n, .flush,
    .lk_tag(gpa_q[VA_W-1:PG_BITS]), .lk_hit(nt_hit), .lk_node(nt_node), .touch(state == S_NT),
    .ins(nt_ins), .ins_tag(gpa_q[VA_W-1:PG_BITS]), .ins_node(nt_ins_node));

  function automatic logic [POS_W-1:0] bits_of(node_size_e s);
    return POS_W'(PG_BITS) + idx_width(s) - POS_W'(IDX_BITS);
  endfunction
  function automatic node_size_e size_of(logic [POS_W-1:0] b);
    return (b == POS_W'(30)) ? NODE_1G : (b == POS_W'(21)) ? NODE_2M : NODE_4K;
  endfunction
  function automatic logic [PA_W-1:0] page_mask(logic [POS_W-1:0] b);
    return (PA_W'(1) << b) - PA_W'(1);
  endfunction

  // host walk result for the whole gPA
  logic [PA_W-1:0] h_pa;
  always_comb begin
    h_pa        = ({h_resp_xlat.frame, 12'h000} & ~page_mask(h_resp_xlat.page_bits)) |
                  (gpa_q & page_mask(h_resp_xlat.page_bits));
    nt_ins      = (state == S_HWALK) && h_resp_valid && !h_resp_fault;
    nt_ins_node = '{frame: h_pa[PA_W-1:PG_BITS], size: size_of(h_resp_xlat.page_bits)};
  end

  // guest result as a full guest-physical address of the data
  logic [PA_W-1:0] g_pa;
  assign g_pa = ({g_resp_xlat.frame, 12'h000} & ~page_mask(g_resp_xlat.page_bits)) |
                (PA_W'(gva_q) & page_mask(g_resp_xlat.page_bits));

  logic [POS_W-1:0] min_bits;
  assign min_bits = (gbits_q < hbits_q) ? gbits_q : hbits_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; gva_q <= '0; gpa_q <= '0; hpa_q <= '0; final_q <= 1'b0;
      fault_q <= 1'b0; g_issued <= 1'b0; h_issued <= 1'b0;
      gbits_q <= POS_W'(PG_BITS); hbits_q <= POS_W'(PG_BITS); gr_q <= '0; hr_q <= '0;
    end else begin
      case (state)
        S_IDLE: if (req_valid) begin
          gva_q <= req_va; fault_q <= 1'b0; final_q <= 1'b0; g_issued <= 1'b0;
          gr_q <= '0; hr_q <= '0; state <= S_GUEST;
        end
        S_GUEST: begin
          if (g_req_ready && !g_issued) g_issued <= 1'b1;
          if (g_resp_valid) begin
            gr_q <= 5'(g_resp_acc);
            if (g_resp_fault) begin
              fault_q <= 1'b1; state <= S_DONE;
            end else begin
              gpa_q <= g_pa; gbits_q <= g_resp_xlat.page_bits; final_q <= 1'b1; state <= S_NT;
            end
          end else if (g_issued && g_mreq_valid) begin
            gpa_q <= g_mreq_addr; state <= S_NT;
          end
        end
        S_NT: begin
          if (gpa_q[PA_W-1:VA_W] != '0) begin          // beyond the host VA range
            fault_q <= 1'b1; state <= S_DONE;
          end else if (nt_hit) begin
            hpa_q   <= {nt_node.frame, gpa_q[PG_BITS-1:0]};
            hbits_q <= bits_of(nt_node.size);
            state   <= final_q ? S_DONE : S_GREQ;
          end else begin
            h_issued <= 1'b0; state <= S_HWALK;
          end
        end
        S_HWALK: begin
          if (h_req_ready && !h_issued) h_issued <= 1'b1;
          if (h_resp_valid) begin
            hr_q <= hr_q + 5'(h_resp_acc);
            if (h_resp_fault) begin
              fault_q <= 1'b1; state <= S_DONE;
            end else begin
              hpa_q   <= h_pa;
              hbits_q <= h_resp_xlat.page_bits;
              state   <= final_q ? S_DONE : S_GREQ;
            end
          end
        end
        S_GREQ:  if (mem_req_ready) state <= S_GWAIT;
        S_GWAIT: if (mem_resp_valid) state <= S_GUEST;
        default: state <= S_IDLE;   // S_DONE
      endcase
    end
  end

  always_comb begin
    mem_req_valid = 1'b0;
    mem_req_addr  = hpa_q;
    if (state == S_HWALK) begin
      mem_req_valid = h_mreq_valid;
      mem_req_addr  = h_mreq_addr;
    end else if (state == S_GREQ) begin
      mem_req_valid = 1'b1;
    end
  end

  assign req_ready        = (state == S_IDLE);
  assign resp_valid       = (state == S_DONE);
  assign resp_fault       = fault_q;
  assign resp_guest_reads = gr_q;
  assign resp_host_reads  = hr_q;
  always_comb begin
    resp_xlat.page_bits = min_bits;
    resp_xlat.frame     = hpa_q[PA_W-1:PG_BITS] & ~FRAME_W'(page_mask(min_bits) >> PG_BITS);
  end

endmodule
