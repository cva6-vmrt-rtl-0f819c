// tb_synthetic_bench: the synthetic interference benchmark, run on the
// full default configuration (16-entry TLBs, 16 partitions, 8 lock slots,
// 16 KiB I$, 32 KiB D$).
//
// A critical guest (ASID 1 / VMID 1) touches as many pages as the DTLB has
// entries (16), one load per page. Each iteration primes nothing new: the
// pages were primed once without timing; the hypervisor then schedules the
// noisy guest (ASID 2 / VMID 2), which touches a random number (2..40) of
// its own pages, four loads each at random lines of the first 16 sets (the
// sets the critical data lives in), switches back, and the critical guest
// walks its pages again in reverse order (so it does not evict its own
// entries). The cycles of that walk are recorded over ITER iterations and
// the mean and standard deviation are printed for each configuration:
//   a isolated (noisy guest not run)      b noise, no mitigation
//   c noise, TLB partitioned              d noise, 2 MiB locked translation
//   e noise, partitioned + locked         f noise, locked + data scratchpad
// Partitions: critical 0xFF00, hypervisor 0x0001, noisy 0x00FE. The locked
// translations use slots 6 and 7, which sit in the noisy guest's half.
// Checks: the isolated time never varies; noise makes it slower and more
// variable; locking removes all page walks of the critical guest and
// lowers mean and spread; locking plus scratchpad gives a constant time
// equal to the isolated one or better.
// Scratchpad variant: 16 KiB of data scratchpad holds 4 pages, so in (f)
// the 16 loads go to 16 distinct lines spread over those 4 pages.
module tb_synthetic_bench;
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


  localparam int ITER = 16, PAGES = 16;
  localparam logic [38:0] SPM_VA = 39'h40200000;   // 2 MiB region locked onto the D$ window

  int crit_walks;
  task automatic critical_run(input bit spm, output int cyc);
    logic [63:0] r; logic flt; int t0, w0;
    t0 = cycle; w0 = n_dtlb_miss;
    for (int p = PAGES - 1; p >= 0; p--) begin
      if (spm) begin
        mem_op(SPM_VA + 39'h4000 + 39'(p) * 39'h400, 0, 0, r, flt);
        check("SPM data", r, 64'hBEEF_0000 + 64'(p));
      end else begin
        mem_op(va_of(p, 16 * p), 0, 0, r, flt);
        check("critical data", r, dmem.rd_word(pa_of(p, 16 * p)));
      end
    end
    cyc = cycle - t0;
    crit_walks = n_dtlb_miss - w0;
  endtask

  task automatic noise_run();
    logic [63:0] r; logic flt; int n, base;
    n = int'($urandom_range(40, 2));
    base = 100 + int'($urandom_range(300));
    for (int i = 0; i < n; i++)
      for (int j = 0; j < 4; j++) mem_op(va_of(base + i, 16 * int'($urandom_range(15))), 0, 0, r, flt);
  endtask

  real mean_c [6], std_c [6];
  int walks_c [6];
  task automatic scenario(input int id, input bit noise, input bit spm);
    int t [ITER]; int cyc; real m, v;
    walks_c[id] = 0;
    critical_run(spm, cyc);   // prime, not timed
    for (int it = 0; it < ITER; it++) begin
      vm_switch(0);
      if (noise) noise_run();
      vm_switch(1);
      critical_run(spm, cyc);
      t[it] = cyc;
      walks_c[id] += crit_walks;
    end
    m = 0; for (int it = 0; it < ITER; it++) m += real'(t[it]);
    m = m / ITER;
    v = 0; for (int it = 0; it < ITER; it++) v += (real'(t[it]) - m) * (real'(t[it]) - m);
    mean_c[id] = m; std_c[id] = $sqrt(v / ITER);
    $display("scenario %c: mean %0.1f cycles, std dev %0.2f, critical page walks %0d",
             8'h61 + 8'(id), mean_c[id], std_c[id], walks_c[id]);
  endtask

  task automatic lock_2m(input int slot, input logic [38:0] va, input logic [55:0] pa);
    csr_wr(CSR_LOCK_BASE + 12'(3 * slot),     {1'b1, 2'd1, 34'd0, 27'(va >> 12)});
    csr_wr(CSR_LOCK_BASE + 12'(3 * slot + 1), {10'd0, 44'(pa >> 12), 10'h0CF});
    csr_wr(CSR_LOCK_BASE + 12'(3 * slot + 2), {1'b1, 17'd0, 14'd1, 16'd0, 16'd1});
  endtask

  initial begin
    logic [63:0] r; logic flt;
    en_tr = 0; flush = 0; satp_ppn = ROOT; asid = 1; vmid = 1;
    csr_we = 0; csr_addr = 0; csr_wdata = 0;
    fetch_valid = 0; fetch_va = 0; lsu_valid = 0; lsu_req = '0;
    partitioned = 0;
    build_pt();
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    @(posedge clk); #1;
    en_tr = 1;

    scenario(0, 0, 0);
    scenario(1, 1, 0);
    partitioned = 1;
    flush = 1; @(posedge clk); #1; flush = 0;
    vm_switch(1);
    scenario(2, 1, 0);
    partitioned = 0;
    lock_2m(7, va_of(0, 0), pa_of(0, 0));
    vm_switch(1);
    scenario(3, 1, 0);
    partitioned = 1;
    vm_switch(1);
    scenario(4, 1, 0);
    csr_wr(CSR_DC_SPM, 64'hF0);
    lock_2m(6, SPM_VA, DC_SPM_BASE);
    for (int p = 0; p < PAGES; p++) mem_op(SPM_VA + 39'h4000 + 39'(p) * 39'h400, 1, 64'hBEEF_0000 + 64'(p), r, flt);
    scenario(5, 1, 1);

    check("a: isolated time is constant", 64'(std_c[0] == 0.0), 64'(1));
    check("b: noise raises the mean", 64'(mean_c[1] > mean_c[0]), 64'(1));
    check("b: noise raises the spread", 64'(std_c[1] > std_c[0]), 64'(1));
    check("b: noise causes critical page walks", 64'(walks_c[1] > 0), 64'(1));
    check("d: locking removes critical page walks", 64'(walks_c[3]), 64'(0));
    check("e: partition + lock removes critical page walks", 64'(walks_c[4]), 64'(0));
    check("d: locking lowers the mean", 64'(mean_c[3] < mean_c[1]), 64'(1));
    check("d: locking lowers the spread", 64'(std_c[3] < std_c[1]), 64'(1));
    check("f: lock + SPM time is constant", 64'(std_c[5] == 0.0), 64'(1));
    check("f: lock + SPM no slower than isolated", 64'(mean_c[5] <= mean_c[0]), 64'(1));
    check("f: no page walks", 64'(walks_c[5]), 64'(0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
