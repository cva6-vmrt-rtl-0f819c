// ptw: Sv39 hardware page-table walker.
//
// On a TLB miss the MMU hands the missing VPN, the address-space tags and
// the root page-table PPN (from satp) to the walker. The walker reads one
// 8-byte PTE per level, starting at level 2, through the data-cache port:
//   PTE address = {a, VPN[level], 3'b000}, a = root PPN, then PTE.PPN.
// A PTE with V = 0, or W = 1 without R, ends the walk with a page fault. A
// PTE with R or X set is a leaf: a misaligned super page faults, anything
// else becomes a TLB entry of page size 1 GiB / 2 MiB / 4 KiB for a leaf at
// level 2 / 1 / 0. A pointer PTE at level 0 faults.
//
// Timing: one request to the cache per level, each waiting for its
// response; the refill (upd_valid_o, one cycle) or the fault (fault_o, one
// cycle) follows the cycle after the last response. req_ready_o is high
// only while idle.
//
// The published design only names the walker and its TLB update path; the
// walk itself is the standard one of the RISC-V privileged specification.
// Not built: G-stage (two-stage, Sv39x4) translation and A/D bit updates.
module ptw
  import vmrt_pkg::*;
(
  input  logic              clk_i,
  input  logic              rst_ni,
  // walk request
  input  logic              req_valid_i,
  output logic              req_ready_o,
  input  logic [VPN_W-1:0]  req_vpn_i,
  input  logic              req_is_itlb_i,
  input  logic [ASID_W-1:0] asid_i,
  input  logic [VMID_W-1:0] vmid_i,
  input  logic [PPN_W-1:0]  satp_ppn_i,
  // PTE reads through the data cache
  output logic              mem_req_valid_o,
  input  logic              mem_req_ready_i,
  output cache_req_t        mem_req_o,
  input  logic              mem_rsp_valid_i,
  input  logic [XLEN-1:0]   mem_rsp_rdata_i,
  // result
  output logic              upd_valid_o,
  output logic              upd_is_itlb_o,
  output tlb_entry_t        upd_entry_o,
  output logic              fault_o,
  output logic              busy_o
);
  typedef enum logic [1:0] { IDLE, REQ, WAIT } state_e;

  state_e            state_q;
  logic [1:0]        lvl_q;
  logic [PPN_W-1:0]  a_q;
  logic [VPN_W-1:0]  vpn_q;
  logic              is_itlb_q;
  logic [ASID_W-1:0] asid_q;
  logic [VMID_W-1:0] vmid_q;
  logic              upd_q, fault_q;
  tlb_entry_t        entry_q;

  pte_t       pte;
  logic [8:0] vpn_slice;

  assign pte       = pte_t'(mem_rsp_rdata_i[53:0]);
  assign vpn_slice = vpn_q[9*lvl_q +: 9];

  assign req_ready_o     = (state_q == IDLE);
  assign mem_req_valid_o = (state_q == REQ);
  assign mem_req_o.addr  = {a_q, vpn_slice, 3'b000};
  assign mem_req_o.we    = 1'b0;
  assign mem_req_o.wdata = '0;
  assign mem_req_o.be    = '1;
  assign busy_o          = (state_q != IDLE);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q   <= IDLE;
      lvl_q     <= 2'd2;
      a_q       <= '0;
      vpn_q     <= '0;
      is_itlb_q <= 1'b0;
      asid_q    <= '0;
      vmid_q    <= '0;
      upd_q     <= 1'b0;
      fault_q   <= 1'b0;
      entry_q   <= '0;
    end else begin
      upd_q   <= 1'b0;
      fault_q <= 1'b0;
      unique case (state_q)
        IDLE: if (req_valid_i) begin
          state_q   <= REQ;
          lvl_q     <= 2'd2;
          a_q       <= satp_ppn_i;
          vpn_q     <= req_vpn_i;
          is_itlb_q <= req_is_itlb_i;
          asid_q    <= asid_i;
          vmid_q    <= vmid_i;
        end
        REQ: if (mem_req_ready_i) state_q <= WAIT;
        WAIT: if (mem_rsp_valid_i) begin
          if (!pte.v || (!pte.r && pte.w)) begin
            fault_q <= 1'b1;
            state_q <= IDLE;
          end else if (pte.r || pte.x) begin
            state_q <= IDLE;
            if ((lvl_q == 2'd2 && pte.ppn[17:0] != '0) ||
                (lvl_q == 2'd1 && pte.ppn[8:0]  != '0)) begin
              fault_q <= 1'b1;
            end else begin
              upd_q         <= 1'b1;
              entry_q.valid <= 1'b1;
              entry_q.asid  <= asid_q;
              entry_q.vmid  <= vmid_q;
              entry_q.vpn   <= vpn_q;
              entry_q.size  <= (lvl_q == 2'd2) ? PG_1G : (lvl_q == 2'd1) ? PG_2M : PG_4K;
              entry_q.pte   <= pte;
            end
          end else if (lvl_q == 2'd0) begin
            fault_q <= 1'b1;
            state_q <= IDLE;
          end else begin
            a_q     <= pte.ppn;
            lvl_q   <= lvl_q - 2'd1;
            state_q <= REQ;
          end
        end
        default: state_q <= IDLE;
      endcase
    end
  end

  assign upd_valid_o   = upd_q;
  assign upd_is_itlb_o = is_itlb_q;
  assign upd_entry_o   = entry_q;
  assign fault_o       = fault_q;

endmodule
