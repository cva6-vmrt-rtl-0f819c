// tb_mmu: drives the instruction and data interfaces of the MMU at its
// default size with a page table in a testbench memory. Checks bare-mode
// pass-through, miss -> walk -> refill -> hit, the physical addresses sent
// to the caches, that a TLB hit and a locked translation are forwarded in
// the same cycle the request arrives (no walk for a locked entry even if
// the page table lacks it), permission faults (fetch without X, store
// without W) and walk faults.
module tb_mmu;
  import vmrt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic en, flush;
  logic [TLB_PARTS-1:0] cur_part;
  tlb_entry_t [TLB_LOCKS-1:0] lock;
  logic fetch_valid, fetch_ready, fetch_fault, ic_valid;
  logic [VLEN-1:0] fetch_va;
  cache_req_t ic_req, dc_req, ptw_req;
  logic lsu_valid, lsu_ready, lsu_fault, dc_valid;
  lsu_req_t lsu_req;
  logic ptw_valid, ptw_ready, ptw_rsp_valid, imiss, dmiss;
  logic [63:0] ptw_rdata;

  mmu dut (
    .clk_i(clk), .rst_ni(rst_n), .en_translation_i(en), .satp_ppn_i(44'h100),
    .asid_i(16'd1), .vmid_i(14'd1), .flush_i(flush), .cur_part_i(cur_part), .lock_i(lock),
    .fetch_valid_i(fetch_valid), .fetch_vaddr_i(fetch_va), .fetch_ready_o(fetch_ready),
    .fetch_fault_o(fetch_fault), .ic_req_valid_o(ic_valid), .ic_req_o(ic_req), .ic_req_ready_i(1'b1),
    .lsu_valid_i(lsu_valid), .lsu_req_i(lsu_req), .lsu_ready_o(lsu_ready), .lsu_fault_o(lsu_fault),
    .dc_req_valid_o(dc_valid), .dc_req_o(dc_req), .dc_req_ready_i(1'b1),
    .ptw_req_valid_o(ptw_valid), .ptw_req_o(ptw_req), .ptw_req_ready_i(ptw_ready),
    .ptw_rsp_valid_i(ptw_rsp_valid), .ptw_rsp_rdata_i(ptw_rdata),
    .itlb_miss_o(imiss), .dtlb_miss_o(dmiss));

  logic [63:0] pmem [logic [55:0]];
  int walks_i = 0, walks_d = 0;
  always @(posedge clk) begin
    if (imiss) walks_i++;
    if (dmiss) walks_d++;
  end

  // memory for PTE reads: fixed 2-cycle answer
  initial begin
    logic [55:0] a;
    ptw_ready = 0; ptw_rsp_valid = 0; ptw_rdata = 0;
    forever begin
      @(posedge clk); #1;
      ptw_rsp_valid = 0;
      if (ptw_valid) begin
        ptw_ready = 1; a = ptw_req.addr;
        @(posedge clk); #1;
        ptw_ready = 0;
        @(posedge clk); #1;
        ptw_rdata = pmem.exists(a) ? pmem[a] : 64'h0;
        ptw_rsp_valid = 1;
      end
    end
  end

  function automatic logic [63:0] ptr(logic [43:0] ppn); return {10'd0, ppn, 10'h001}; endfunction
  function automatic logic [63:0] pte(logic [43:0] ppn, logic [7:0] fl); return {10'd0, ppn, 2'b0, fl}; endfunction
  function automatic logic [55:0] pa(logic [43:0] ppn, logic [8:0] i); return {ppn, i, 3'b0}; endfunction

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  // fetch: returns cycles until accepted and the physical address seen
  task automatic fetch(input logic [VLEN-1:0] va, output int cyc, output logic flt, output logic [55:0] p);
    cyc = 0; flt = 0; p = '0;
    fetch_valid = 1; fetch_va = va;
    #1;
    while (!fetch_ready) begin @(posedge clk); #1; cyc++; end
    flt = fetch_fault; p = ic_req.addr;
    check("fetch forwarded iff no fault", ic_valid, !flt);
    @(posedge clk); #1;
    fetch_valid = 0;
  endtask

  task automatic access(input logic [VLEN-1:0] va, input logic w, output int cyc, output logic flt, output logic [55:0] p);
    cyc = 0;
    lsu_valid = 1; lsu_req = '{vaddr: va, we: w, wdata: 64'h1234, be: 8'hFF};
    #1;
    while (!lsu_ready) begin @(posedge clk); #1; cyc++; end
    flt = lsu_fault; p = dc_req.addr;
    check("lsu forwarded iff no fault", dc_valid, !flt);
    if (!flt) check("store data passes", dc_req.wdata, 64'h1234);
    @(posedge clk); #1;
    lsu_valid = 0;
  endtask

  int cyc; logic flt; logic [55:0] p;

  initial begin
    en = 0; flush = 0; cur_part = '1; lock = '0;
    fetch_valid = 0; fetch_va = 0; lsu_valid = 0; lsu_req = '0;
    // VA {1,2,3} -> 0x5000 RX ; {1,2,4} -> 0x6000 R only ; {1,2,5} -> 0x7000 RW
    pmem[pa(44'h100, 9'd1)] = ptr(44'h200);
    pmem[pa(44'h200, 9'd2)] = ptr(44'h300);
    pmem[pa(44'h300, 9'd3)] = pte(44'h5, 8'hCB);   // D A - - X - R V
    pmem[pa(44'h300, 9'd4)] = pte(44'h6, 8'hC3);   // R only
    pmem[pa(44'h300, 9'd5)] = pte(44'h7, 8'hC7);   // RW
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    @(posedge clk); #1;

    // bare mode
    fetch(39'h12345678, cyc, flt, p);
    check("bare fetch addr", p, 56'h12345678);
    check("bare fetch no stall", cyc, 0);
    en = 1;

    // fetch miss -> walk -> hit
    fetch({9'd1, 9'd2, 9'd3, 12'h44}, cyc, flt, p);
    check("fetch after walk ok", flt, 0);
    check("fetch paddr", p, {44'h5, 12'h44});
    check("one ITLB walk", walks_i, 1);
    check("walk took cycles", cyc > 6, 1);
    fetch({9'd1, 9'd2, 9'd3, 12'h48}, cyc, flt, p);
    check("ITLB hit same cycle", cyc, 0);
    check("no second walk", walks_i, 1);

    // loads / stores
    access({9'd1, 9'd2, 9'd5, 12'h10}, 1, cyc, flt, p);
    check("store RW ok", flt, 0);
    check("store paddr", p, {44'h7, 12'h10});
    check("one DTLB walk", walks_d, 1);
    access({9'd1, 9'd2, 9'd5, 12'h18}, 0, cyc, flt, p);
    check("DTLB hit same cycle", cyc, 0);
    access({9'd1, 9'd2, 9'd4, 12'h0}, 1, cyc, flt, p);
    check("store to read-only faults", flt, 1);
    access({9'd1, 9'd2, 9'd4, 12'h0}, 0, cyc, flt, p);
    check("load read-only ok", flt, 0);
    fetch({9'd1, 9'd2, 9'd4, 12'h0}, cyc, flt, p);
    check("fetch without X faults", flt, 1);
    access({9'd1, 9'd9, 9'd9, 12'h0}, 0, cyc, flt, p);
    check("unmapped load faults", flt, 1);
    access({9'd1, 9'd2, 9'd5, 12'h0}, 0, cyc, flt, p);
    check("after fault next access ok", flt, 0);

    // locked translation for a page that is not in the page table
    lock[2] = '0;
    lock[2].valid = 1; lock[2].vpn = {9'd7, 9'd7, 9'd7}; lock[2].size = PG_4K;
    lock[2].asid = 16'd1; lock[2].vmid = 14'd1;
    lock[2].pte = pte_t'({44'hC0DE, 2'b0, 8'hCF});
    #1;
    access({9'd7, 9'd7, 9'd7, 12'h123}, 0, cyc, flt, p);
    check("locked: no stall", cyc, 0);
    check("locked paddr", p, {44'hC0DE, 12'h123});
    check("locked: no walk", walks_d, 3);
    fetch({9'd7, 9'd7, 9'd7, 12'h0}, cyc, flt, p);
    check("locked in ITLB: no stall", cyc, 0);
    check("locked in ITLB: no walk", walks_i, 2);
    // flush drops walked entries, not the locked one
    flush = 1; @(posedge clk); #1; flush = 0;
    access({9'd1, 9'd2, 9'd5, 12'h0}, 0, cyc, flt, p);
    check("after flush walk again", walks_d, 4);
    access({9'd7, 9'd7, 9'd7, 12'h0}, 0, cyc, flt, p);
    check("locked survives flush", cyc, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
