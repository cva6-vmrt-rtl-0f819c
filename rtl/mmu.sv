// mmu: memory management unit with partitioned and lockable TLBs.
//
// (The walker's busy_o status output is left open here: the MMU tracks
// its own walk through its held-request state.)
//
// Two request paths pass through the MMU: the instruction interface
// (fetches from the frontend, forwarded to the instruction cache) and the
// data interface (loads and stores from the load/store unit, forwarded to
// the data cache). Each path looks up its own TLB (ITLB, DTLB) in the cycle
// the request arrives. On a hit the request leaves towards its cache in the
// same cycle with the physical address, so translation through a TLB hit or
// a locked entry adds no cycle. On a miss the request is held (ready low)
// and the page-table walker is started; when the walker refills the TLB the
// held request hits on the following cycle. A walk that faults, or a hit
// whose PTE lacks the needed permission (X for fetch, R for load, W for
// store), consumes the request with a one-cycle *_fault_o pulse and sends
// nothing to the cache. With en_translation_i low, addresses pass
// untranslated (bare mode).
//
// Both TLBs use the same CUR_PART bitmap and the same lock slots. The walker
// reads PTEs through a port of the data cache (ptw_req_*). Only one walk runs
// at a time; an ITLB miss is served before a DTLB miss.
//
// Following the published design: two TLBs with partitioned PLRU and
// CSR-locked entries, a walker and a TLB update path inside the MMU. This
// design's choices: permission checks without privilege modes, ITLB
// priority, single-stage translation.
module mmu
  import vmrt_pkg::*;
#(
  parameter int unsigned ENTRIES = TLB_ENTRIES,
  parameter int unsigned PARTS   = TLB_PARTS,
  parameter int unsigned LOCKS   = TLB_LOCKS
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  // configuration
  input  logic                    en_translation_i,
  input  logic [PPN_W-1:0]        satp_ppn_i,
  input  logic [ASID_W-1:0]       asid_i,
  input  logic [VMID_W-1:0]       vmid_i,
  input  logic                    flush_i,
  input  logic [PARTS-1:0]        cur_part_i,
  input  tlb_entry_t [LOCKS-1:0]  lock_i,
  // instruction interface
  input  logic                    fetch_valid_i,
  input  logic [VLEN-1:0]         fetch_vaddr_i,
  output logic                    fetch_ready_o,
  output logic                    fetch_fault_o,
  output logic                    ic_req_valid_o,
  output cache_req_t              ic_req_o,
  input  logic                    ic_req_ready_i,
  // data interface
  input  logic                    lsu_valid_i,
  input  lsu_req_t                lsu_req_i,
  output logic                    lsu_ready_o,
  output logic                    lsu_fault_o,
  output logic                    dc_req_valid_o,
  output cache_req_t              dc_req_o,
  input  logic                    dc_req_ready_i,
  // walker port into the data cache
  output logic                    ptw_req_valid_o,
  output cache_req_t              ptw_req_o,
  input  logic                    ptw_req_ready_i,
  input  logic                    ptw_rsp_valid_i,
  input  logic [XLEN-1:0]         ptw_rsp_rdata_i,
  // events
  output logic                    itlb_miss_o,
  output logic                    dtlb_miss_o
);
  logic       itlb_hit, dtlb_hit;
  tlb_entry_t itlb_e, dtlb_e;
  logic       ptw_upd, ptw_upd_itlb, ptw_fault, ptw_ready;
  tlb_entry_t ptw_entry;
  logic       ifault_q, dfault_q;      // walk for this side ended in a fault
  logic       imiss, dmiss, ptw_start, ptw_for_itlb;

  tlb #(.ENTRIES(ENTRIES), .PARTS(PARTS), .LOCKS(LOCKS)) i_itlb (
    .clk_i, .rst_ni, .flush_i,
    .lu_valid_i  (fetch_valid_i && en_translation_i),
    .lu_vpn_i    (fetch_vaddr_i[38:12]),
    .lu_asid_i   (asid_i),
    .lu_vmid_i   (vmid_i),
    .lu_hit_o    (itlb_hit),
    .lu_entry_o  (itlb_e),
    .upd_valid_i (ptw_upd && ptw_upd_itlb),
    .upd_entry_i (ptw_entry),
    .part_en_i   (cur_part_i),
    .lock_i      (lock_i)
  );

  tlb #(.ENTRIES(ENTRIES), .PARTS(PARTS), .LOCKS(LOCKS)) i_dtlb (
    .clk_i, .rst_ni, .flush_i,
    .lu_valid_i  (lsu_valid_i && en_translation_i),
    .lu_vpn_i    (lsu_req_i.vaddr[38:12]),
    .lu_asid_i   (asid_i),
    .lu_vmid_i   (vmid_i),
    .lu_hit_o    (dtlb_hit),
    .lu_entry_o  (dtlb_e),
    .upd_valid_i (ptw_upd && !ptw_upd_itlb),
    .upd_entry_i (ptw_entry),
    .part_en_i   (cur_part_i),
    .lock_i      (lock_i)
  );

  assign imiss = fetch_valid_i && en_translation_i && !itlb_hit;
  assign dmiss = lsu_valid_i   && en_translation_i && !dtlb_hit;
  // no new walk in the cycle a walk reports its result
  assign ptw_for_itlb = imiss && !ifault_q;
  assign ptw_start    = (ptw_for_itlb || (dmiss && !dfault_q)) && !ptw_upd && !ptw_fault;

  ptw i_ptw (
    .clk_i, .rst_ni,
    .req_valid_i     (ptw_start),
    .req_ready_o     (ptw_ready),
    .req_vpn_i       (ptw_for_itlb ? fetch_vaddr_i[38:12] : lsu_req_i.vaddr[38:12]),
    .req_is_itlb_i   (ptw_for_itlb),
    .asid_i, .vmid_i, .satp_ppn_i,
    .mem_req_valid_o (ptw_req_valid_o),
    .mem_req_ready_i (ptw_req_ready_i),
    .mem_req_o       (ptw_req_o),
    .mem_rsp_valid_i (ptw_rsp_valid_i),
    .mem_rsp_rdata_i (ptw_rsp_rdata_i),
    .upd_valid_o     (ptw_upd),
    .upd_is_itlb_o   (ptw_upd_itlb),
    .upd_entry_o     (ptw_entry),
    .fault_o         (ptw_fault),
    .busy_o          ()
  );

  assign itlb_miss_o = ptw_start && ptw_ready && ptw_for_itlb;
  assign dtlb_miss_o = ptw_start && ptw_ready && !ptw_for_itlb;

  // ------------------------------------------------ instruction interface
  logic i_perm_ok;
  assign i_perm_ok = itlb_e.pte.x;
  always_comb begin
    ic_req_valid_o = 1'b0;
    fetch_ready_o  = 1'b0;
    fetch_fault_o  = 1'b0;
    ic_req_o.we    = 1'b0;
    ic_req_o.wdata = '0;
    ic_req_o.be    = '1;
    ic_req_o.addr  = PLEN'(fetch_vaddr_i);
    if (fetch_valid_i) begin
      if (!en_translation_i) begin
        ic_req_valid_o = 1'b1;
        fetch_ready_o  = ic_req_ready_i;
      end else if (itlb_hit) begin
        ic_req_o.addr = tlb_paddr(itlb_e, fetch_vaddr_i);
        if (i_perm_ok) begin
          ic_req_valid_o = 1'b1;
          fetch_ready_o  = ic_req_ready_i;
        end else begin
          fetch_fault_o = 1'b1;
          fetch_ready_o = 1'b1;
        end
      end else if (ifault_q) begin
        fetch_fault_o = 1'b1;
        fetch_ready_o = 1'b1;
      end
    end
  end

  // ------------------------------------------------------- data interface
  logic d_perm_ok;
  assign d_perm_ok = lsu_req_i.we ? dtlb_e.pte.w : dtlb_e.pte.r;
  always_comb begin
    dc_req_valid_o = 1'b0;
    lsu_ready_o    = 1'b0;
    lsu_fault_o    = 1'b0;
    dc_req_o.we    = lsu_req_i.we;
    dc_req_o.wdata = lsu_req_i.wdata;
    dc_req_o.be    = lsu_req_i.be;
    dc_req_o.addr  = PLEN'(lsu_req_i.vaddr);
    if (lsu_valid_i) begin
      if (!en_translation_i) begin
        dc_req_valid_o = 1'b1;
        lsu_ready_o    = dc_req_ready_i;
      end else if (dtlb_hit) begin
        dc_req_o.addr = tlb_paddr(dtlb_e, lsu_req_i.vaddr);
        if (d_perm_ok) begin
          dc_req_valid_o = 1'b1;
          lsu_ready_o    = dc_req_ready_i;
        end else begin
          lsu_fault_o = 1'b1;
          lsu_ready_o = 1'b1;
        end
      end else if (dfault_q) begin
        lsu_fault_o = 1'b1;
        lsu_ready_o = 1'b1;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ifault_q <= 1'b0;
      dfault_q <= 1'b0;
    end else begin
      if (ptw_fault &&  ptw_upd_itlb) ifault_q <= 1'b1;
      else if (fetch_fault_o)         ifault_q <= 1'b0;
      if (ptw_fault && !ptw_upd_itlb) dfault_q <= 1'b1;
      else if (lsu_fault_o)           dfault_q <= 1'b0;
    end
  end

  // a request is forwarded only with a translation
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   dc_req_valid_o |-> (!en_translation_i || dtlb_hit));
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   ic_req_valid_o |-> (!en_translation_i || itlb_hit));

endmodule
