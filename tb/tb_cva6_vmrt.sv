// tb_cva6_vmrt: end-to-end test of the memory subsystem at its default
// configuration (16-entry TLBs, 16 partitions, 8 lock slots, 16 KiB I$,
// 32 KiB D$). A page table in the data memory maps 512 pages; a "critical"
// and a "noisy" virtual machine (different ASID/VMID) take turns, switched
// the way a hypervisor trap handler would (CUR_PART write on entry,
// LAST_PART write on a VM switch, RESTORE_LAST_PART on exit).
//
// The critical task touches eight pages (its half of the TLB). Its run
// time is measured:
//   isolated, after priming               -> T_iso
//   after the noisy VM touched 64 pages   -> slower (TLB walks, misses)
//   with TLB partitioning                 -> no page walks for the critical VM
//   with locked TLB entries + D-SPM       -> exactly the isolated time under noise
// Also exercised: instruction fetch through the ITLB, code placed in the
// instruction scratchpad by stores and fetched through a locked entry,
// dummy reads and dropped writes on unconfigured scratchpad ways, page
// faults. Every mechanism is counted and must have happened.
module tb_cva6_vmrt;
  import vmrt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic en_tr, flush;
  logic [PPN_W-1:0] satp_ppn;
  logic [ASID_W-1:0] asid;
  logic [VMID_W-1:0] vmid;
  logic csr_we;
  logic [11:0] csr_addr;
  logic [63:0] csr_wdata, csr_rdata;
  logic fetch_valid, fetch_ready, fetch_fault, fetch_rsp;
  logic [VLEN-1:0] fetch_va;
  logic [63:0] fetch_rdata;
  logic lsu_valid, lsu_ready, lsu_fault, lsu_rsp;
  lsu_req_t lsu_req;
  logic [63:0] lsu_rdata;
  logic imv, imr, imrv, dmv, dmr, dmrv;
  mem_req_t imreq, dmreq;
  mem_rsp_t imrsp, dmrsp;
  logic itlb_miss, dtlb_miss, ic_hit, ic_miss, ic_spm, dc_hit, dc_miss, dc_spm;

  cva6_vmrt dut (
    .clk_i(clk), .rst_ni(rst_n),
    .en_translation_i(en_tr), .satp_ppn_i(satp_ppn), .asid_i(asid), .vmid_i(vmid), .flush_tlb_i(flush),
    .csr_we_i(csr_we), .csr_addr_i(csr_addr), .csr_wdata_i(csr_wdata), .csr_rdata_o(csr_rdata),
    .fetch_valid_i(fetch_valid), .fetch_vaddr_i(fetch_va), .fetch_ready_o(fetch_ready),
    .fetch_fault_o(fetch_fault), .fetch_rsp_valid_o(fetch_rsp), .fetch_rdata_o(fetch_rdata),
    .lsu_valid_i(lsu_valid), .lsu_req_i(lsu_req), .lsu_ready_o(lsu_ready), .lsu_fault_o(lsu_fault),
    .lsu_rsp_valid_o(lsu_rsp), .lsu_rdata_o(lsu_rdata),
    .imem_req_valid_o(imv), .imem_req_ready_i(imr), .imem_req_o(imreq),
    .imem_rsp_valid_i(imrv), .imem_rsp_i(imrsp),
    .dmem_req_valid_o(dmv), .dmem_req_ready_i(dmr), .dmem_req_o(dmreq),
    .dmem_rsp_valid_i(dmrv), .dmem_rsp_i(dmrsp),
    .itlb_miss_o(itlb_miss), .dtlb_miss_o(dtlb_miss), .ic_hit_o(ic_hit), .ic_miss_o(ic_miss),
    .ic_spm_o(ic_spm), .dc_hit_o(dc_hit), .dc_miss_o(dc_miss), .dc_spm_o(dc_spm));

  tb_mem_model #(.LAT(20)) imem (.clk_i(clk), .req_valid_i(imv), .req_ready_o(imr), .req_i(imreq),
                                 .rsp_valid_o(imrv), .rsp_o(imrsp));
  tb_mem_model #(.LAT(20)) dmem (.clk_i(clk), .req_valid_i(dmv), .req_ready_o(dmr), .req_i(dmreq),
                                 .rsp_valid_o(dmrv), .rsp_o(dmrsp));

  // ------------------------------------------------ event counters
  int n_itlb_miss = 0, n_dtlb_miss = 0, n_ic_hit = 0, n_ic_miss = 0, n_ic_spm = 0;
  int n_dc_hit = 0, n_dc_miss = 0, n_dc_spm = 0, n_fault = 0, n_dwrite = 0;
  always @(posedge clk) if (rst_n) begin
    n_itlb_miss += int'(itlb_miss); n_dtlb_miss += int'(dtlb_miss);
    n_ic_hit += int'(ic_hit); n_ic_miss += int'(ic_miss); n_ic_spm += int'(ic_spm);
    n_dc_hit += int'(dc_hit); n_dc_miss += int'(dc_miss); n_dc_spm += int'(dc_spm);
    n_fault += int'(lsu_fault) + int'(fetch_fault);
    n_dwrite += int'(dmv && dmr && dmreq.we);
  end

  int cycle = 0;
  always @(posedge clk) cycle++;

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  // ------------------------------------------------ core-side tasks
  task automatic csr_wr(logic [11:0] a, logic [63:0] d);
    csr_we = 1; csr_addr = a; csr_wdata = d;
    @(posedge clk); #1;
    csr_we = 0;
  endtask

  task automatic mem_op(input logic [VLEN-1:0] va, input logic w, input logic [63:0] d,
                        output logic [63:0] r, output logic flt);
    lsu_valid = 1; lsu_req = '{vaddr: va, we: w, wdata: d, be: 8'hFF};
    #1;
    while (!lsu_ready) begin @(posedge clk); #1; end
    flt = lsu_fault;
    @(posedge clk); #1;
    lsu_valid = 0;
    r = '0;
    if (!flt) begin
      while (!lsu_rsp) begin @(posedge clk); #1; end
      r = lsu_rdata;
      @(posedge clk); #1;
    end
  endtask

  task automatic fetch(input logic [VLEN-1:0] va, output logic [63:0] r, output logic flt);
    fetch_valid = 1; fetch_va = va;
    #1;
    while (!fetch_ready) begin @(posedge clk); #1; end
    flt = fetch_fault;
    @(posedge clk); #1;
    fetch_valid = 0;
    r = '0;
    if (!flt) begin
      while (!fetch_rsp) begin @(posedge clk); #1; end
      r = fetch_rdata;
      @(posedge clk); #1;
    end
  endtask

  // ------------------------------------------------ page table
  localparam logic [43:0] ROOT = 44'h80000, L1 = 44'h80001, L0 = 44'h80002;
  localparam logic [55:0] DATA_PA = 56'h8100_0000;
  // VA page i (i < 512) = 0x4000_0000 + i * 4 KiB  ->  PA DATA_PA + i * 4 KiB
  function automatic logic [VLEN-1:0] va_of(int page, int off);
    return 39'h40000000 + 39'(page) * 39'h1000 + 39'(off);
  endfunction
  function automatic logic [55:0] pa_of(int page, int off);
    return DATA_PA + 56'(page) * 56'h1000 + 56'(off);
  endfunction
  task automatic build_pt();
    dmem.poke({ROOT, 9'd1, 3'b0}, {10'd0, L1, 10'h001});
    dmem.poke({L1, 9'd0, 3'b0},   {10'd0, L0, 10'h001});
    for (int i = 0; i < 512; i++)
      dmem.poke({L0, 9'(i), 3'b0}, {10'd0, 44'(pa_of(i, 0) >> 12), 10'h0CF});
  endtask

  // ------------------------------------------------ VM switching
  localparam logic [15:0] PART_CRIT = 16'hFF00, PART_HYP = 16'h0001, PART_NOISE = 16'h00FE;
  logic partitioned;
  // hypervisor trap: enter with the hypervisor partition, leave to `next`
  task automatic vm_switch(input logic to_critical);
    logic [15:0] nxt;
    nxt = !partitioned ? 16'hFFFF : (to_critical ? PART_CRIT : PART_NOISE);
    csr_wr(CSR_CUR_PART, 64'(partitioned ? PART_HYP : 16'hFFFF));
    csr_wr(CSR_LAST_PART, 64'(nxt));
    asid = to_critical ? 16'd1 : 16'd2;
    vmid = to_critical ? 14'd1 : 14'd2;
    csr_wr(CSR_RESTORE_LAST_PART, 64'h1);
    csr_addr = CSR_CUR_PART; #1;
    check("CUR_PART after trap return", 64'(csr_rdata), 64'(64'(nxt)));
  endtask

  // critical task: one load per page, returns cycles
  int crit_walks;
  task automatic critical_task(input int base_page, output int cyc);
    logic [63:0] r; logic flt; int t0, w0;
    t0 = cycle; w0 = n_dtlb_miss;
    for (int p = 0; p < 8; p++) begin
      mem_op(va_of(base_page + p, 8 * p), 0, 0, r, flt);
      check("critical load data", r, dmem.rd_word(pa_of(base_page + p, 8 * p)));
    end
    cyc = cycle - t0;
    crit_walks = n_dtlb_miss - w0;
  endtask

  task automatic noise_task();
    logic [63:0] r; logic flt;
    for (int p = 100; p < 164; p++) mem_op(va_of(p, 64 * (p % 64)), 0, 0, r, flt);
  endtask

  // critical task on locked pages backed by the data scratchpad
  task automatic critical_spm_task(output int cyc);
    logic [63:0] r; logic flt; int t0;
    t0 = cycle;
    for (int p = 0; p < 8; p++) begin
      mem_op(va_of(400 + p % 4, 8 * p), 0, 0, r, flt);
      check("SPM data through locked entry", 64'(r), 64'(64'hC0DE_0000 + 64'(p % 4)));
    end
    cyc = cycle - t0;
  endtask

  int t_iso, t_noise, t_part, t_spm_iso, t_spm_noise, n_partition_protect, n_lock_use;
  logic [63:0] r; logic flt;

  initial begin
    en_tr = 0; flush = 0; satp_ppn = ROOT; asid = 1; vmid = 1;
    csr_we = 0; csr_addr = 0; csr_wdata = 0;
    fetch_valid = 0; fetch_va = 0; lsu_valid = 0; lsu_req = '0;
    partitioned = 0; n_partition_protect = 0; n_lock_use = 0;
    build_pt();
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    @(posedge clk); #1;
    en_tr = 1;

    // ---- fetch through the ITLB
    fetch(va_of(10, 0), r, flt);
    check("fetch data", r, imem.init_word(pa_of(10, 0)));
    fetch(va_of(10, 8), r, flt);
    check("fetch hit data", r, imem.init_word(pa_of(10, 8)));

    // ---- (a) isolated critical task, (b) with noise, no mitigation
    critical_task(0, t_iso);          // prime
    critical_task(0, t_iso);
    check("isolated: no walks", 64'(crit_walks), 64'(0));
    vm_switch(0); noise_task(); vm_switch(1);
    critical_task(0, t_noise);
    check("noise slows the critical task", 64'(t_noise > t_iso), 64'(1));
    check("noise evicted critical TLB entries", 64'(crit_walks > 0), 64'(1));

    // ---- (c) TLB partitioning
    partitioned = 1;
    flush = 1; @(posedge clk); #1; flush = 0;   // start from empty partitions
    vm_switch(1);
    critical_task(0, t_part);         // prime in own partitions
    vm_switch(0); noise_task(); vm_switch(1);
    critical_task(0, t_part);
    check("partitioned: no walks for critical VM", 64'(crit_walks), 64'(0));
    if (crit_walks == 0) n_partition_protect++;

    // ---- (d) TLB locking + data scratchpad (50 % of the D$)
    csr_wr(CSR_DC_SPM, 64'hF0);
    for (int k = 0; k < 4; k++) begin
      // lock slot k: VA page 400+k -> SPM way 4, page k of that way (4 KiB each)
      csr_wr(CSR_LOCK_BASE + 12'(3 * k),     {1'b1, 2'd0, 34'd0, 27'(va_of(400 + k, 0) >> 12)});
      csr_wr(CSR_LOCK_BASE + 12'(3 * k + 1), {10'd0, 44'((DC_SPM_BASE + 56'h4000 + 56'(k) * 56'h1000) >> 12), 10'h0CF});
      csr_wr(CSR_LOCK_BASE + 12'(3 * k + 2), {1'b1, 17'd0, 14'd1, 16'd0, 16'd1});
    end
    for (int p = 0; p < 8; p++) mem_op(va_of(400 + p % 4, 8 * p), 1, 64'hC0DE_0000 + 64'(p % 4), r, flt);
    check("SPM stores stay off memory", 64'(n_dwrite), 64'(0));
    critical_spm_task(t_spm_iso);     // prime
    critical_spm_task(t_spm_iso);
    vm_switch(0); noise_task(); vm_switch(1);
    begin
      int w0; w0 = n_dtlb_miss;
      critical_spm_task(t_spm_noise);
      check("locked: no walks", 64'(n_dtlb_miss - w0), 64'(0));
      if (n_dtlb_miss == w0) n_lock_use++;
    end
    check("locked+SPM: same time under noise", 64'(t_spm_noise), 64'(t_spm_iso));
    check("locked+SPM: faster than cached isolated", 64'(t_spm_iso <= t_iso), 64'(1));
    $display("cycles: isolated %0d, noise %0d, partitioned %0d, lock+SPM isolated %0d, lock+SPM noise %0d",
             t_iso, t_noise, t_part, t_spm_iso, t_spm_noise);

    // ---- unconfigured scratchpad way: dropped write, dummy read
    csr_wr(CSR_LOCK_BASE + 12'd12, {1'b1, 2'd0, 34'd0, 27'(va_of(410, 0) >> 12)});
    csr_wr(CSR_LOCK_BASE + 12'd13, {10'd0, 44'(DC_SPM_BASE >> 12), 10'h0CF});   // way 0: cache
    csr_wr(CSR_LOCK_BASE + 12'd14, {1'b1, 17'd0, 14'd1, 16'd0, 16'd1});
    mem_op(va_of(410, 0), 1, 64'h1234, r, flt);
    mem_op(va_of(410, 0), 0, 0, r, flt);
    check("dummy zero from cache-mode way", 64'(r), 64'(0));

    // ---- instruction scratchpad: code stored by the LSU, fetched via a locked entry
    csr_wr(CSR_IC_SPM, 64'h8);       // way 3
    csr_wr(CSR_LOCK_BASE + 12'd15, {1'b1, 2'd0, 34'd0, 27'(va_of(420, 0) >> 12)});
    csr_wr(CSR_LOCK_BASE + 12'd16, {10'd0, 44'((IC_SPM_BASE + 56'h3000) >> 12), 10'h0CF});
    csr_wr(CSR_LOCK_BASE + 12'd17, {1'b1, 17'd0, 14'd1, 16'd0, 16'd1});
    for (int i = 0; i < 8; i++) mem_op(va_of(420, 8 * i), 1, 64'h0000_0013_0000_0000 | 64'(i), r, flt);
    for (int i = 0; i < 8; i++) begin
      int w0; w0 = n_itlb_miss;
      fetch(va_of(420, 8 * i), r, flt);
      check("ISPM fetch", 64'(r), 64'(64'h0000_0013_0000_0000 | 64'(i)));
      check("ISPM fetch: no walk", 64'(n_itlb_miss - w0), 64'(0));
    end
    mem_op(va_of(420, 0), 0, 0, r, flt);
    check("LSU reads ISPM", 64'(r), 64'(64'h0000_0013_0000_0000));

    // ---- page fault
    dmem.poke({L0, 9'd500, 3'b0}, 64'h0);
    mem_op(va_of(500, 0), 0, 0, r, flt);
    check("page fault", 64'(flt), 64'(1));
    mem_op(va_of(1, 0), 1, 64'hABCD, r, flt);
    check("store after fault", 64'(flt), 64'(0));
    check("write-through", 64'(dmem.rd_word(pa_of(1, 0))), 64'(64'hABCD));

    // ---- every mechanism happened
    $display("events: itlb walks %0d, dtlb walks %0d, I$ hit %0d miss %0d spm %0d, D$ hit %0d miss %0d spm %0d, faults %0d",
             n_itlb_miss, n_dtlb_miss, n_ic_hit, n_ic_miss, n_ic_spm, n_dc_hit, n_dc_miss, n_dc_spm, n_fault);
    check("ITLB walk happened", 64'(n_itlb_miss > 0), 64'(1));
    check("DTLB walk happened", 64'(n_dtlb_miss > 0), 64'(1));
    check("I$ hit happened", 64'(n_ic_hit > 0), 64'(1));
    check("I$ miss happened", 64'(n_ic_miss > 0), 64'(1));
    check("I$ SPM access happened", 64'(n_ic_spm > 0), 64'(1));
    check("D$ hit happened", 64'(n_dc_hit > 0), 64'(1));
    check("D$ miss happened", 64'(n_dc_miss > 0), 64'(1));
    check("D$ SPM access happened", 64'(n_dc_spm > 0), 64'(1));
    check("page fault happened", 64'(n_fault > 0), 64'(1));
    check("partition protection happened", 64'(n_partition_protect > 0), 64'(1));
    check("locked translation happened", 64'(n_lock_use > 0), 64'(1));
    check("write-through happened", 64'(n_dwrite > 0), 64'(1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

