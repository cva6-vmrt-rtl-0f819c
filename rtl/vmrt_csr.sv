// vmrt_csr: the custom control registers of the predictability extensions.
//
//   CUR_PART           partition bitmap that restricts TLB replacement. A
//                      write copies the old value into LAST_PART first.
//   LAST_PART          the bitmap before the last CUR_PART write; software
//                      may also write it directly (to choose the bitmap a
//                      trap handler will return to).
//   RESTORE_LAST_PART  write-only; writing a value with bit 0 set copies
//                      LAST_PART into CUR_PART in one step. LAST_PART itself
//                      is left as it is (this design's choice).
//   IC_SPM, DC_SPM     one bit per cache way; a set bit turns the way into
//                      scratchpad memory.
//   LOCK slot k        three registers: {valid, page size, VPN},
//                      the leaf PTE (its V bit is the valid bit) and
//                      {valid, VMID, ASID}. The slot yields a locked TLB
//                      entry only while all three are valid.
//
// The three partition registers and the three-register lock slots follow
// the published mechanism; register numbers, bit layouts and reset values
// (all partitions enabled, no lock, no scratchpad way) are this design's
// choices. Interface: a simple CSR port, writes take effect on the next
// clock edge and reads are combinational. Reading RESTORE_LAST_PART or an
// unknown number returns zero.
module vmrt_csr
  import vmrt_pkg::*;
#(
  parameter int unsigned PARTS   = TLB_PARTS,
  parameter int unsigned LOCKS   = TLB_LOCKS,
  parameter int unsigned IC_NWAY = IC_WAYS,
  parameter int unsigned DC_NWAY = DC_WAYS
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  logic                    csr_we_i,
  input  logic [11:0]             csr_addr_i,
  input  logic [XLEN-1:0]         csr_wdata_i,
  output logic [XLEN-1:0]         csr_rdata_o,
  output logic [PARTS-1:0]        cur_part_o,
  output tlb_entry_t [LOCKS-1:0]  lock_o,
  output logic [IC_NWAY-1:0]      ic_spm_ways_o,
  output logic [DC_NWAY-1:0]      dc_spm_ways_o
);
  logic [PARTS-1:0]   cur_part_q, last_part_q;
  logic [IC_NWAY-1:0] ic_spm_q;
  logic [DC_NWAY-1:0] dc_spm_q;
  logic [XLEN-1:0]    lock_vpn_q [LOCKS];
  logic [XLEN-1:0]    lock_pte_q [LOCKS];
  logic [XLEN-1:0]    lock_id_q  [LOCKS];

  function automatic logic [11:0] lock_csr(int unsigned k, int unsigned sub);
    return CSR_LOCK_BASE + 12'(3 * k + sub);
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cur_part_q  <= '1;
      last_part_q <= '1;
      ic_spm_q    <= '0;
      dc_spm_q    <= '0;
      for (int unsigned k = 0; k < LOCKS; k++) begin
        lock_vpn_q[k] <= '0;
        lock_pte_q[k] <= '0;
        lock_id_q[k]  <= '0;
      end
    end else if (csr_we_i) begin
      unique case (csr_addr_i)
        CSR_CUR_PART: begin
          last_part_q <= cur_part_q;
          cur_part_q  <= csr_wdata_i[PARTS-1:0];
        end
        CSR_LAST_PART:         last_part_q <= csr_wdata_i[PARTS-1:0];
        CSR_RESTORE_LAST_PART: if (csr_wdata_i[0]) cur_part_q <= last_part_q;
        CSR_IC_SPM:            ic_spm_q <= csr_wdata_i[IC_NWAY-1:0];
        CSR_DC_SPM:            dc_spm_q <= csr_wdata_i[DC_NWAY-1:0];
        default: begin
          for (int unsigned k = 0; k < LOCKS; k++) begin
            if (csr_addr_i == lock_csr(k, 0)) lock_vpn_q[k] <= csr_wdata_i;
            if (csr_addr_i == lock_csr(k, 1)) lock_pte_q[k] <= csr_wdata_i;
            if (csr_addr_i == lock_csr(k, 2)) lock_id_q[k]  <= csr_wdata_i;
          end
        end
      endcase
    end
  end

  always_comb begin
    csr_rdata_o = '0;
    unique case (csr_addr_i)
      CSR_CUR_PART:  csr_rdata_o = XLEN'(cur_part_q);
      CSR_LAST_PART: csr_rdata_o = XLEN'(last_part_q);
      CSR_IC_SPM:    csr_rdata_o = XLEN'(ic_spm_q);
      CSR_DC_SPM:    csr_rdata_o = XLEN'(dc_spm_q);
      default: begin
        for (int unsigned k = 0; k < LOCKS; k++) begin
          if (csr_addr_i == lock_csr(k, 0)) csr_rdata_o = lock_vpn_q[k];
          if (csr_addr_i == lock_csr(k, 1)) csr_rdata_o = lock_pte_q[k];
          if (csr_addr_i == lock_csr(k, 2)) csr_rdata_o = lock_id_q[k];
        end
      end
    endcase
  end

  always_comb begin
    for (int unsigned k = 0; k < LOCKS; k++) begin
      lock_o[k].valid = lock_vpn_q[k][63] && lock_pte_q[k][0] && lock_id_q[k][63];
      lock_o[k].size  = pg_size_e'(lock_vpn_q[k][62:61]);
      lock_o[k].vpn   = lock_vpn_q[k][VPN_W-1:0];
      lock_o[k].pte   = pte_t'(lock_pte_q[k][53:0]);
      lock_o[k].vmid  = lock_id_q[k][32 +: VMID_W];
      lock_o[k].asid  = lock_id_q[k][ASID_W-1:0];
    end
  end

  assign cur_part_o    = cur_part_q;
  assign ic_spm_ways_o = ic_spm_q;
  assign dc_spm_ways_o = dc_spm_q;

endmodule
