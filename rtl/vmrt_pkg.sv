// vmrt_pkg: constants and types shared by the time-predictable MMU and the
// hybrid cache/scratchpad subsystem.
//
// Address widths follow RISC-V Sv39 (39-bit virtual, 56-bit physical
// addresses, 4 KiB base pages, 2 MiB and 1 GiB super pages). The TLB size of
// 16 entries and the eight lock slots are the numbers of the reference
// configuration; the partition count of 16 (one TLB entry per partition bit)
// is this design's choice, made so that a single entry can be handed to the
// hypervisor. The custom CSR numbers are this design's choice and sit in the
// custom supervisor read/write range 0x5C0-0x5FF.
package vmrt_pkg;

  // ---------------------------------------------------------------- widths
  localparam int unsigned VLEN      = 39;
  localparam int unsigned PLEN      = 56;
  localparam int unsigned VPN_W     = 27;   // 3 x 9 bits
  localparam int unsigned PPN_W     = 44;
  localparam int unsigned ASID_W    = 16;
  localparam int unsigned VMID_W    = 14;
  localparam int unsigned XLEN      = 64;
  localparam int unsigned LINE_BITS = 128;  // cache line, 16 bytes
  localparam int unsigned LINE_BYTES = LINE_BITS / 8;

  // ------------------------------------------------------- default sizes
  localparam int unsigned TLB_ENTRIES = 16;
  localparam int unsigned TLB_PARTS   = 16;
  localparam int unsigned TLB_LOCKS   = 8;
  localparam int unsigned IC_WAYS     = 4;   // 16 KiB = 4 x 256 x 16 B
  localparam int unsigned DC_WAYS     = 8;   // 32 KiB = 8 x 256 x 16 B
  localparam int unsigned CACHE_SETS  = 256;

  localparam logic [PLEN-1:0] IC_SPM_BASE = 56'h0000_0000_7000_0000;
  localparam logic [PLEN-1:0] DC_SPM_BASE = 56'h0000_0000_7100_0000;

  // ------------------------------------------------------------ CSR map
  localparam logic [11:0] CSR_CUR_PART          = 12'h5C0;
  localparam logic [11:0] CSR_LAST_PART         = 12'h5C1;
  localparam logic [11:0] CSR_RESTORE_LAST_PART = 12'h5C2;
  localparam logic [11:0] CSR_IC_SPM            = 12'h5C3;
  localparam logic [11:0] CSR_DC_SPM            = 12'h5C4;
  // lock slot k: CSR_LOCK_BASE + 3k   = {valid[63], size[62:61], vpn[26:0]}
  //              CSR_LOCK_BASE + 3k+1 = leaf PTE (valid = PTE.V)
  //              CSR_LOCK_BASE + 3k+2 = {valid[63], vmid[45:32], asid[15:0]}
  localparam logic [11:0] CSR_LOCK_BASE         = 12'h5C8;

  // ------------------------------------------------------------- types
  typedef enum logic [1:0] {
    PG_4K = 2'd0,
    PG_2M = 2'd1,
    PG_1G = 2'd2
  } pg_size_e;

  // Sv39 page table entry (reserved / PBMT bits dropped)
  typedef struct packed {
    logic [PPN_W-1:0] ppn;
    logic [1:0]       rsw;
    logic             d;
    logic             a;
    logic             g;
    logic             u;
    logic             x;
    logic             w;
    logic             r;
    logic             v;
  } pte_t;   // 54 bits

  typedef struct packed {
    logic              valid;
    logic [ASID_W-1:0] asid;
    logic [VMID_W-1:0] vmid;
    logic [VPN_W-1:0]  vpn;
    pg_size_e          size;
    pte_t              pte;
  } tlb_entry_t;

  // physical request into a cache (one 64-bit word)
  typedef struct packed {
    logic [PLEN-1:0] addr;
    logic            we;
    logic [XLEN-1:0] wdata;
    logic [7:0]      be;
  } cache_req_t;

  // virtual request from the load/store unit
  typedef struct packed {
    logic [VLEN-1:0] vaddr;
    logic            we;
    logic [XLEN-1:0] wdata;
    logic [7:0]      be;
  } lsu_req_t;

  // request from a cache to memory: a line read (we = 0, addr line
  // aligned, answered with a whole line) or a word write (answered with an
  // acknowledge)
  typedef struct packed {
    logic [PLEN-1:0] addr;
    logic            we;
    logic [XLEN-1:0] wdata;
    logic [7:0]      be;
  } mem_req_t;

  typedef struct packed {
    logic [LINE_BITS-1:0] rdata;
  } mem_rsp_t;

  // Does a TLB entry translate this VPN in this address space?
  function automatic logic tlb_match(tlb_entry_t e, logic [VPN_W-1:0] vpn,
                                     logic [ASID_W-1:0] asid,
                                     logic [VMID_W-1:0] vmid);
    logic vpn_ok;
    unique case (e.size)
      PG_1G:   vpn_ok = (e.vpn[26:18] == vpn[26:18]);
      PG_2M:   vpn_ok = (e.vpn[26:9]  == vpn[26:9]);
      default: vpn_ok = (e.vpn        == vpn);
    endcase
    return e.valid && vpn_ok && (e.vmid == vmid) && (e.pte.g || (e.asid == asid));
  endfunction

  // Physical address produced by a matching entry
  function automatic logic [PLEN-1:0] tlb_paddr(tlb_entry_t e, logic [VLEN-1:0] va);
    logic [PLEN-1:0] pa;
    pa = {e.pte.ppn, va[11:0]};
    if (e.size == PG_2M) pa[20:12] = va[20:12];
    if (e.size == PG_1G) pa[29:12] = va[29:12];
    return pa;
  endfunction

endpackage
