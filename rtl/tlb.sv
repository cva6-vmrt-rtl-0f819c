// tlb: fully associative, register-based translation lookaside buffer with
// partitioned PLRU refill and software-locked entries. One instance serves
// instruction fetches (ITLB), one loads and stores (DTLB).
//
// Lookup is purely combinational: lu_hit_o and lu_entry_o are valid in the
// cycle lu_valid_i is raised, so a hit costs no extra cycle. An entry
// matches when it is valid, its VPN agrees with the request on the bits its
// page size covers, the VMID agrees, and the ASID agrees or the PTE is
// global.
//
// Lock slots overlay entries: while slot k holds a valid lock (all three of
// its CSRs valid) entry k reads the slot's contents instead of its own
// register, and part_plru treats entry k as unreachable, so a refill can
// never evict it. Refills from the page-table walker (upd_valid_i) go into
// the PLRU victim, which is restricted to the partitions enabled in
// part_en_i (CUR_PART). If no entry is reachable the refill is dropped.
// flush_i (sfence.vma) invalidates every entry register; locked entries
// stay, since their contents live in the CSRs.
//
// Following the published design: partition-restricted PLRU, CSR-provided
// locked entries, 16 entries. This design's choices: slot k overlays entry
// k, the same lock slots feed both TLBs, entries carry single-stage Sv39
// translations tagged with ASID and VMID.
module tlb
  import vmrt_pkg::*;
#(
  parameter int unsigned ENTRIES = TLB_ENTRIES,
  parameter int unsigned PARTS   = TLB_PARTS,
  parameter int unsigned LOCKS   = TLB_LOCKS
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     flush_i,
  // lookup
  input  logic                     lu_valid_i,
  input  logic [VPN_W-1:0]         lu_vpn_i,
  input  logic [ASID_W-1:0]        lu_asid_i,
  input  logic [VMID_W-1:0]        lu_vmid_i,
  output logic                     lu_hit_o,
  output tlb_entry_t               lu_entry_o,
  // refill
  input  logic                     upd_valid_i,
  input  tlb_entry_t               upd_entry_i,
  // configuration
  input  logic [PARTS-1:0]         part_en_i,
  input  tlb_entry_t [LOCKS-1:0]   lock_i
);
  tlb_entry_t [ENTRIES-1:0] regs_q;
  tlb_entry_t [ENTRIES-1:0] view;      // registers with lock slots overlaid
  logic       [ENTRIES-1:0] locked;
  logic       [ENTRIES-1:0] hit_vec;
  logic       [ENTRIES-1:0] victim;
  logic                     victim_valid;

  always_comb begin
    for (int unsigned i = 0; i < ENTRIES; i++) begin
      locked[i] = 1'b0;
      view[i]   = regs_q[i];
      if (i < LOCKS) begin
        locked[i] = lock_i[i].valid;
        if (lock_i[i].valid) view[i] = lock_i[i];
      end
    end
  end

  always_comb begin
    lu_entry_o = '0;
    for (int unsigned i = 0; i < ENTRIES; i++) begin
      hit_vec[i] = lu_valid_i && tlb_match(view[i], lu_vpn_i, lu_asid_i, lu_vmid_i);
      if (hit_vec[i]) lu_entry_o = view[i];
    end
  end
  assign lu_hit_o = |hit_vec;

  part_plru #(
    .ENTRIES (ENTRIES),
    .PARTS   (PARTS)
  ) i_plru (
    .clk_i,
    .rst_ni,
    .hit_i          (hit_vec & ~locked),
    .repl_i         (upd_valid_i && victim_valid),
    .part_en_i      (part_en_i),
    .locked_i       (locked),
    .victim_o       (victim),
    .victim_valid_o (victim_valid)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      regs_q <= '0;
    end else if (flush_i) begin
      for (int unsigned i = 0; i < ENTRIES; i++) regs_q[i].valid <= 1'b0;
    end else if (upd_valid_i) begin
      for (int unsigned i = 0; i < ENTRIES; i++)
        if (victim[i]) regs_q[i] <= upd_entry_i;
    end
  end

endmodule
