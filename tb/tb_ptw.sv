// tb_ptw: walks a small Sv39 page table held in a testbench memory (random
// response delay) and checks the refilled entry, the number of PTE reads
// per page size (3 for 4 KiB, 2 for 2 MiB, 1 for 1 GiB), the PTE addresses,
// and the page faults (invalid PTE, W without R, misaligned super page,
// pointer at level 0).
module tb_ptw;
  import vmrt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic             req_valid, req_ready, mem_valid, mem_ready, rsp_valid;
  logic [VPN_W-1:0] vpn;
  cache_req_t       mreq;
  logic [63:0]      rsp_data;
  logic             upd, upd_itlb, fault, busy;
  tlb_entry_t       upd_e;

  ptw dut (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid), .req_ready_o(req_ready),
    .req_vpn_i(vpn), .req_is_itlb_i(1'b1), .asid_i(16'd3), .vmid_i(14'd2), .satp_ppn_i(44'h100),
    .mem_req_valid_o(mem_valid), .mem_req_ready_i(mem_ready), .mem_req_o(mreq),
    .mem_rsp_valid_i(rsp_valid), .mem_rsp_rdata_i(rsp_data),
    .upd_valid_o(upd), .upd_is_itlb_o(upd_itlb), .upd_entry_o(upd_e), .fault_o(fault), .busy_o(busy));

  // page-table memory: word address -> PTE
  logic [63:0] pmem [logic [55:0]];
  int          reads;
  logic [55:0] last_addr;

  function automatic logic [63:0] ptr(logic [43:0] ppn);  return {10'd0, ppn, 10'h001}; endfunction
  function automatic logic [63:0] leaf(logic [43:0] ppn); return {10'd0, ppn, 10'h0CF}; endfunction
  function automatic logic [55:0] pa(logic [43:0] ppn, logic [8:0] i); return {ppn, i, 3'b0}; endfunction

  // memory model: accept after a random wait, answer 1..3 cycles later
  initial begin
    mem_ready = 0; rsp_valid = 0; rsp_data = 0;
    forever begin
      @(posedge clk); #1;
      rsp_valid = 0;
      if (mem_valid) begin
        repeat ($urandom % 2) begin @(posedge clk); #1; end
        mem_ready = 1;
        last_addr = mreq.addr;
        @(posedge clk); #1;
        mem_ready = 0;
        reads++;
        repeat ($urandom % 3) begin @(posedge clk); #1; end
        rsp_data  = pmem.exists(last_addr) ? pmem[last_addr] : 64'h0;
        rsp_valid = 1;
      end
    end
  end

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  // run one walk; returns 1 for refill, 0 for fault
  task automatic walk(input logic [VPN_W-1:0] v, output logic ok, output tlb_entry_t e, output int nreads);
    reads = 0;
    req_valid = 1; vpn = v;
    @(posedge clk); #1;
    req_valid = 0;
    while (!upd && !fault) begin @(posedge clk); #1; end
    ok = upd; e = upd_e; nreads = reads;
    @(posedge clk); #1;
    check("one-cycle result pulse", upd | fault, 0);
  endtask

  logic ok; tlb_entry_t e; int n;

  initial begin
    req_valid = 0; vpn = 0;
    // root 0x100: [1] -> 0x200 ; [2] 1 GiB leaf 0x40000 ; [3] invalid ; [4] misaligned 1G
    pmem[pa(44'h100, 9'd1)] = ptr(44'h200);
    pmem[pa(44'h100, 9'd2)] = leaf(44'h40000);
    pmem[pa(44'h100, 9'd4)] = leaf(44'h40001);
    pmem[pa(44'h100, 9'd5)] = {10'd0, 44'h300, 10'h005};    // W without R? (v,w) -> fault
    // level 1 table 0x200: [7] -> 0x300 ; [8] 2 MiB leaf 0x1200 ; [9] -> 0x301
    pmem[pa(44'h200, 9'd7)] = ptr(44'h300);
    pmem[pa(44'h200, 9'd8)] = leaf(44'h1200);
    pmem[pa(44'h200, 9'd9)] = ptr(44'h301);
    pmem[pa(44'h200, 9'd10)] = leaf(44'h1201);               // misaligned 2 MiB
    // level 0 table 0x300: [0x1F] 4 KiB leaf 0xABCDE ; 0x301: [0] pointer at level 0
    pmem[pa(44'h300, 9'h1F)] = leaf(44'hABCDE);
    pmem[pa(44'h301, 9'h0)]  = ptr(44'h999);
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    @(posedge clk); #1;
    check("idle ready", req_ready, 1);

    walk({9'd1, 9'd7, 9'h1F}, ok, e, n);
    check("4K refill", ok, 1);
    check("4K reads", n, 3);
    check("4K ppn", e.pte.ppn, 44'hABCDE);
    check("4K size", e.size, PG_4K);
    check("4K vpn", e.vpn, {9'd1, 9'd7, 9'h1F});
    check("asid tag", e.asid, 16'd3);
    check("vmid tag", e.vmid, 14'd2);
    check("itlb flag", upd_itlb, 1);
    check("last PTE address", last_addr, pa(44'h300, 9'h1F));

    walk({9'd1, 9'd8, 9'h55}, ok, e, n);
    check("2M refill", ok, 1);
    check("2M reads", n, 2);
    check("2M size", e.size, PG_2M);
    check("2M ppn", e.pte.ppn, 44'h1200);

    walk({9'd2, 9'd8, 9'h55}, ok, e, n);
    check("1G refill", ok, 1);
    check("1G reads", n, 1);
    check("1G size", e.size, PG_1G);

    walk({9'd3, 9'd0, 9'h0}, ok, e, n);
    check("invalid PTE faults", ok, 0);
    check("invalid PTE reads", n, 1);
    walk({9'd4, 9'd0, 9'h0}, ok, e, n);
    check("misaligned 1G faults", ok, 0);
    walk({9'd1, 9'd10, 9'h0}, ok, e, n);
    check("misaligned 2M faults", ok, 0);
    walk({9'd5, 9'd0, 9'h0}, ok, e, n);
    check("W without R faults", ok, 0);
    walk({9'd1, 9'd9, 9'h0}, ok, e, n);
    check("pointer at level 0 faults", ok, 0);
    check("pointer at level 0 reads", n, 3);
    walk({9'd1, 9'd6, 9'h0}, ok, e, n);
    check("invalid level-1 PTE faults", ok, 0);
    check("invalid level-1 reads", n, 2);

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
