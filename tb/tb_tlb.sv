// tb_tlb: checks the TLB at its default size (16 entries, 16 partitions, 8
// lock slots): same-cycle hits after a refill, 4 KiB / 2 MiB / 1 GiB
// matching, ASID, global and VMID tagging, partition isolation (entries
// filled by a task in its own partitions survive any number of refills by
// another task in other partitions, but not without partitioning), locked
// entries (hit from the lock registers, survive refills and flushes), and
// flush.
module tb_tlb;
  import vmrt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                        flush, lu_valid, lu_hit, upd_valid;
  logic [VPN_W-1:0]            lu_vpn;
  logic [ASID_W-1:0]           lu_asid;
  logic [VMID_W-1:0]           lu_vmid;
  tlb_entry_t                  lu_entry, upd_entry;
  logic [TLB_PARTS-1:0]        part_en;
  tlb_entry_t [TLB_LOCKS-1:0]  lock;

  tlb dut (
    .clk_i(clk), .rst_ni(rst_n), .flush_i(flush),
    .lu_valid_i(lu_valid), .lu_vpn_i(lu_vpn), .lu_asid_i(lu_asid), .lu_vmid_i(lu_vmid),
    .lu_hit_o(lu_hit), .lu_entry_o(lu_entry),
    .upd_valid_i(upd_valid), .upd_entry_i(upd_entry),
    .part_en_i(part_en), .lock_i(lock));

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  function automatic tlb_entry_t mk(logic [VPN_W-1:0] vpn, logic [PPN_W-1:0] ppn,
                                    pg_size_e sz, logic [ASID_W-1:0] asid,
                                    logic [VMID_W-1:0] vmid, logic g);
    tlb_entry_t e;
    e = '0;
    e.valid = 1; e.vpn = vpn; e.size = sz; e.asid = asid; e.vmid = vmid;
    e.pte.ppn = ppn; e.pte.v = 1; e.pte.r = 1; e.pte.w = 1; e.pte.x = 1; e.pte.g = g;
    e.pte.a = 1; e.pte.d = 1;
    return e;
  endfunction

  task automatic refill(tlb_entry_t e);
    upd_valid = 1; upd_entry = e;
    @(posedge clk); #1;
    upd_valid = 0;
  endtask


  task automatic lu(input logic [VPN_W-1:0] vpn, input logic [ASID_W-1:0] asid,
                    input logic [VMID_W-1:0] vmid, output logic hit, output tlb_entry_t e);
    lu_valid = 1; lu_vpn = vpn; lu_asid = asid; lu_vmid = vmid;
    #1;
    hit = lu_hit; e = lu_entry;
    @(posedge clk); #1;
    lu_valid = 0;
  endtask

  logic hit;
  tlb_entry_t e;
  int survivors;

  initial begin
    flush = 0; lu_valid = 0; upd_valid = 0; upd_entry = '0; lu_vpn = 0; lu_asid = 0; lu_vmid = 0;
    part_en = '1; lock = '0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    @(posedge clk); #1;

    // ---- basic refill / lookup
    lu(27'h123, 16'd1, 14'd0, hit, e);
    check("miss before refill", hit, 0);
    refill(mk(27'h123, 44'hABCDE, PG_4K, 16'd1, 14'd0, 0));
    lu(27'h123, 16'd1, 14'd0, hit, e);
    check("hit after refill", hit, 1);
    check("ppn", e.pte.ppn, 44'hABCDE);
    check("paddr 4K", tlb_paddr(e, {27'h123, 12'h456}), 56'hABCDE456);
    lu(27'h123, 16'd2, 14'd0, hit, e);
    check("ASID mismatch misses", hit, 0);
    lu(27'h123, 16'd1, 14'd3, hit, e);
    check("VMID mismatch misses", hit, 0);
    // ---- global and super pages
    refill(mk(27'h0400, 44'h200, PG_2M, 16'd7, 14'd0, 1));     // 2 MiB, global
    lu(27'h05A5 & 27'h7FFFE00 | 27'h0400 | 27'h1A5, 16'd9, 14'd0, hit, e);
    check("2M global hit", hit, 1);
    check("paddr 2M", tlb_paddr(e, {27'h05A5, 12'h010}), {44'h200 | 44'h1A5, 12'h010});
    refill(mk({9'h3, 18'h0}, 44'h40000, PG_1G, 16'd1, 14'd0, 0)); // 1 GiB
    lu({9'h3, 18'h2ABCD}, 16'd1, 14'd0, hit, e);
    check("1G hit", hit, 1);
    check("paddr 1G", tlb_paddr(e, {9'h3, 18'h2ABCD, 12'h321}), {44'h40000 | 44'h2ABCD, 12'h321});
    lu({9'h4, 18'h2ABCD}, 16'd1, 14'd0, hit, e);
    check("1G other gigapage misses", hit, 0);

    // ---- flush
    flush = 1; @(posedge clk); #1; flush = 0;
    lu(27'h123, 16'd1, 14'd0, hit, e);
    check("flush drops entries", hit, 0);

    // ---- partition isolation: critical task owns entries 8..15
    part_en = 16'hFF00;
    for (int i = 0; i < 8; i++) refill(mk(27'h1000 + i, 44'h500 + i, PG_4K, 16'd1, 14'd1, 0));
    part_en = 16'h00FF;   // noisy task in entries 0..7
    for (int i = 0; i < 200; i++) refill(mk(27'h2000 + i, 44'h900 + i, PG_4K, 16'd2, 14'd2, 0));
    survivors = 0;
    for (int i = 0; i < 8; i++) begin
      lu(27'h1000 + i, 16'd1, 14'd1, hit, e);
      check("critical entry survives", hit, 1);
      check("critical entry ppn", e.pte.ppn, 44'h500 + i);
    end
    for (int i = 192; i < 200; i++) begin
      lu(27'h2000 + i, 16'd2, 14'd2, hit, e);
      check("noisy last 8 present", hit, 1);
    end
    // without partitioning the noisy task evicts the critical entries
    part_en = '1;
    for (int i = 0; i < 200; i++) refill(mk(27'h3000 + i, 44'hA00 + i, PG_4K, 16'd2, 14'd2, 0));
    for (int i = 0; i < 8; i++) begin
      lu(27'h1000 + i, 16'd1, 14'd1, hit, e);
      if (hit) survivors++;
    end
    check("unpartitioned: critical entries evicted", survivors, 0);

    // ---- locking: slot 3 provides a fixed translation
    lock[3] = mk(27'h7777, 44'hC0FFE, PG_4K, 16'd5, 14'd4, 0);
    #1;
    lu(27'h7777, 16'd5, 14'd4, hit, e);
    check("locked entry hits", hit, 1);
    check("locked ppn", e.pte.ppn, 44'hC0FFE);
    for (int i = 0; i < 100; i++) refill(mk(27'h4000 + i, 44'hB00 + i, PG_4K, 16'd2, 14'd2, 0));
    lu(27'h7777, 16'd5, 14'd4, hit, e);
    check("locked entry survives refills", hit, 1);
    flush = 1; @(posedge clk); #1; flush = 0;
    lu(27'h7777, 16'd5, 14'd4, hit, e);
    check("locked entry survives flush", hit, 1);
    // a locked entry is never refilled: with only partition 3 open and slot 3 locked,
    // nothing is reachable and the refill is dropped
    part_en = 16'h0008;
    refill(mk(27'h5555, 44'h1, PG_4K, 16'd2, 14'd2, 0));
    lu(27'h5555, 16'd2, 14'd2, hit, e);
    check("refill into locked-only partition dropped", hit, 0);
    lu(27'h7777, 16'd5, 14'd4, hit, e);
    check("locked entry intact", e.pte.ppn, 44'hC0FFE);
    lock[3].valid = 0;
    refill(mk(27'h5555, 44'h1, PG_4K, 16'd2, 14'd2, 0));
    lu(27'h5555, 16'd2, 14'd2, hit, e);
    check("after unlock entry 3 is refillable", hit, 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
