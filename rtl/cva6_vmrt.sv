// cva6_vmrt: the memory side of a time-predictable 64-bit RISC-V core:
// MMU with partitioned, lockable ITLB and DTLB, the custom control
// registers, and hybrid cache/scratchpad L1 instruction and data caches.
// The pipeline of the core (frontend, load/store unit, CSR instructions)
// sits outside and connects through the ports below.
//
// Data flow:
//   fetch (virtual) -> MMU/ITLB -> I$ arbiter -> hybrid I$ -> imem
//   load/store (virtual) -> MMU/DTLB -> D$ arbiter -> hybrid D$ -> dmem
//   MMU page-table walker -> D$ arbiter (priority over loads/stores)
// A load or store whose physical address falls in the instruction
// scratchpad window is sent to the I$ port instead of the D$, so software
// can place code in the instruction scratchpad (fetches have priority
// there). This routing is this design's choice; how the instruction
// scratchpad is filled is not specified by the published design.
//
// Interfaces: fetch and load/store use valid/ready requests; faults are
// reported with a one-cycle *_fault_o pulse in the cycle the request is
// consumed; data returns in order with *_rsp_valid_o. CSR writes take
// effect on the next edge, CSR reads are combinational. Memory ports carry
// 16-byte line reads and 8-byte word writes with a valid/ready request and
// a rsp_valid answer. The event outputs pulse once per TLB miss, cache
// hit/miss and scratchpad access (for performance counters).
//
// Parameter defaults are the reference configuration: 16-entry TLBs, 16
// partitions, 8 lock slots, 16 KiB 4-way I$, 32 KiB 8-way D$.
//
// Lint note: rst_ni is flagged as used both as an asynchronous reset and
// synchronously; the synchronous use is only the `disable iff` of the
// handshake assertions in the sub-blocks, not logic.
module cva6_vmrt
  import vmrt_pkg::*;
#(
  parameter int unsigned ENTRIES = TLB_ENTRIES,
  parameter int unsigned PARTS   = TLB_PARTS,
  parameter int unsigned LOCKS   = TLB_LOCKS,
  parameter int unsigned IC_NWAY = IC_WAYS,
  parameter int unsigned DC_NWAY = DC_WAYS,
  parameter int unsigned SETS    = CACHE_SETS
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  // translation control from the core's standard CSRs (satp, hgatp, sfence)
  input  logic              en_translation_i,
  input  logic [PPN_W-1:0]  satp_ppn_i,
  input  logic [ASID_W-1:0] asid_i,
  input  logic [VMID_W-1:0] vmid_i,
  input  logic              flush_tlb_i,
  // custom CSR port
  input  logic              csr_we_i,
  input  logic [11:0]       csr_addr_i,
  input  logic [XLEN-1:0]   csr_wdata_i,
  output logic [XLEN-1:0]   csr_rdata_o,
  // instruction fetch
  input  logic              fetch_valid_i,
  input  logic [VLEN-1:0]   fetch_vaddr_i,
  output logic              fetch_ready_o,
  output logic              fetch_fault_o,
  output logic              fetch_rsp_valid_o,
  output logic [XLEN-1:0]   fetch_rdata_o,
  // load / store
  input  logic              lsu_valid_i,
  input  lsu_req_t          lsu_req_i,
  output logic              lsu_ready_o,
  output logic              lsu_fault_o,
  output logic              lsu_rsp_valid_o,
  output logic [XLEN-1:0]   lsu_rdata_o,
  // instruction memory
  output logic              imem_req_valid_o,
  input  logic              imem_req_ready_i,
  output mem_req_t          imem_req_o,
  input  logic              imem_rsp_valid_i,
  input  mem_rsp_t          imem_rsp_i,
  // data memory
  output logic              dmem_req_valid_o,
  input  logic              dmem_req_ready_i,
  output mem_req_t          dmem_req_o,
  input  logic              dmem_rsp_valid_i,
  input  mem_rsp_t          dmem_rsp_i,
  // events
  output logic              itlb_miss_o,
  output logic              dtlb_miss_o,
  output logic              ic_hit_o,
  output logic              ic_miss_o,
  output logic              ic_spm_o,
  output logic              dc_hit_o,
  output logic              dc_miss_o,
  output logic              dc_spm_o
);
  localparam logic [PLEN-1:0] ISPM_SIZE = PLEN'(IC_NWAY * SETS * LINE_BYTES);

  logic [PARTS-1:0]       cur_part;
  tlb_entry_t [LOCKS-1:0] lock;
  logic [IC_NWAY-1:0]     ic_spm_ways;
  logic [DC_NWAY-1:0]     dc_spm_ways;

  vmrt_csr #(.PARTS(PARTS), .LOCKS(LOCKS), .IC_NWAY(IC_NWAY), .DC_NWAY(DC_NWAY)) i_csr (
    .clk_i, .rst_ni,
    .csr_we_i, .csr_addr_i, .csr_wdata_i, .csr_rdata_o,
    .cur_part_o    (cur_part),
    .lock_o        (lock),
    .ic_spm_ways_o (ic_spm_ways),
    .dc_spm_ways_o (dc_spm_ways)
  );

  // MMU <-> caches
  logic       ic_req_valid, ic_req_ready;
  cache_req_t ic_req;
  logic       dc_req_valid, dc_req_ready;
  cache_req_t dc_req;
  logic       ptw_valid, ptw_ready, ptw_rsp_valid;
  cache_req_t ptw_req;
  logic       to_ispm;

  // arbiter <-> caches
  logic       icache_valid, icache_ready, icache_rsp;
  cache_req_t icache_req;
  logic [XLEN-1:0] icache_rdata;
  logic       dcache_valid, dcache_ready, dcache_rsp;
  cache_req_t dcache_req;
  logic [XLEN-1:0] dcache_rdata;
  logic       lsu_d_ready, lsu_i_ready, lsu_d_rsp, lsu_i_rsp;

  mmu #(.ENTRIES(ENTRIES), .PARTS(PARTS), .LOCKS(LOCKS)) i_mmu (
    .clk_i, .rst_ni,
    .en_translation_i, .satp_ppn_i, .asid_i, .vmid_i,
    .flush_i         (flush_tlb_i),
    .cur_part_i      (cur_part),
    .lock_i          (lock),
    .fetch_valid_i, .fetch_vaddr_i, .fetch_ready_o, .fetch_fault_o,
    .ic_req_valid_o  (ic_req_valid),
    .ic_req_o        (ic_req),
    .ic_req_ready_i  (ic_req_ready),
    .lsu_valid_i, .lsu_req_i, .lsu_ready_o, .lsu_fault_o,
    .dc_req_valid_o  (dc_req_valid),
    .dc_req_o        (dc_req),
    .dc_req_ready_i  (dc_req_ready),
    .ptw_req_valid_o (ptw_valid),
    .ptw_req_o       (ptw_req),
    .ptw_req_ready_i (ptw_ready),
    .ptw_rsp_valid_i (ptw_rsp_valid),
    .ptw_rsp_rdata_i (dcache_rdata),
    .itlb_miss_o, .dtlb_miss_o
  );

  assign to_ispm      = (dc_req.addr >= IC_SPM_BASE) && (dc_req.addr - IC_SPM_BASE < ISPM_SIZE);
  assign dc_req_ready = to_ispm ? lsu_i_ready : lsu_d_ready;

  req_arb2 i_iarb (
    .clk_i, .rst_ni,
    .a_valid_i     (ic_req_valid),
    .a_ready_o     (ic_req_ready),
    .a_req_i       (ic_req),
    .a_rsp_valid_o (fetch_rsp_valid_o),
    .b_valid_i     (dc_req_valid && to_ispm),
    .b_ready_o     (lsu_i_ready),
    .b_req_i       (dc_req),
    .b_rsp_valid_o (lsu_i_rsp),
    .valid_o       (icache_valid),
    .ready_i       (icache_ready),
    .req_o         (icache_req),
    .rsp_valid_i   (icache_rsp)
  );

  req_arb2 i_darb (
    .clk_i, .rst_ni,
    .a_valid_i     (ptw_valid),
    .a_ready_o     (ptw_ready),
    .a_req_i       (ptw_req),
    .a_rsp_valid_o (ptw_rsp_valid),
    .b_valid_i     (dc_req_valid && !to_ispm),
    .b_ready_o     (lsu_d_ready),
    .b_req_i       (dc_req),
    .b_rsp_valid_o (lsu_d_rsp),
    .valid_o       (dcache_valid),
    .ready_i       (dcache_ready),
    .req_o         (dcache_req),
    .rsp_valid_i   (dcache_rsp)
  );

  hybrid_cache #(.WAYS(IC_NWAY), .SETS(SETS), .SPM_BASE(IC_SPM_BASE), .READ_ONLY(1'b1)) i_icache (
    .clk_i, .rst_ni,
    .spm_ways_i      (ic_spm_ways),
    .req_valid_i     (icache_valid),
    .req_ready_o     (icache_ready),
    .req_i           (icache_req),
    .rsp_valid_o     (icache_rsp),
    .rsp_rdata_o     (icache_rdata),
    .mem_req_valid_o (imem_req_valid_o),
    .mem_req_ready_i (imem_req_ready_i),
    .mem_req_o       (imem_req_o),
    .mem_rsp_valid_i (imem_rsp_valid_i),
    .mem_rsp_i       (imem_rsp_i),
    .hit_o           (ic_hit_o),
    .miss_o          (ic_miss_o),
    .spm_access_o    (ic_spm_o)
  );

  hybrid_cache #(.WAYS(DC_NWAY), .SETS(SETS), .SPM_BASE(DC_SPM_BASE), .READ_ONLY(1'b0)) i_dcache (
    .clk_i, .rst_ni,
    .spm_ways_i      (dc_spm_ways),
    .req_valid_i     (dcache_valid),
    .req_ready_o     (dcache_ready),
    .req_i           (dcache_req),
    .rsp_valid_o     (dcache_rsp),
    .rsp_rdata_o     (dcache_rdata),
    .mem_req_valid_o (dmem_req_valid_o),
    .mem_req_ready_i (dmem_req_ready_i),
    .mem_req_o       (dmem_req_o),
    .mem_rsp_valid_i (dmem_rsp_valid_i),
    .mem_rsp_i       (dmem_rsp_i),
    .hit_o           (dc_hit_o),
    .miss_o          (dc_miss_o),
    .spm_access_o    (dc_spm_o)
  );

  assign fetch_rdata_o   = icache_rdata;
  assign lsu_rsp_valid_o = lsu_d_rsp || lsu_i_rsp;
  assign lsu_rdata_o     = lsu_i_rsp ? icache_rdata : dcache_rdata;

endmodule
