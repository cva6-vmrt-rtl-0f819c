// tb_vmrt_csr: checks the custom registers: reset values, CUR_PART writes
// saving the old value in LAST_PART, RESTORE_LAST_PART (only with bit 0
// set), direct LAST_PART writes (the trap-handler task-switch sequence), the
// SPM way masks, and the lock slots (a slot becomes valid only once all
// three registers are valid, with the fields decoded as documented).
module tb_vmrt_csr;
  import vmrt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                       we;
  logic [11:0]                addr;
  logic [63:0]                wdata, rdata;
  logic [TLB_PARTS-1:0]       cur_part;
  tlb_entry_t [TLB_LOCKS-1:0] lock;
  logic [IC_WAYS-1:0]         ic_spm;
  logic [DC_WAYS-1:0]         dc_spm;

  vmrt_csr dut (
    .clk_i(clk), .rst_ni(rst_n), .csr_we_i(we), .csr_addr_i(addr), .csr_wdata_i(wdata),
    .csr_rdata_o(rdata), .cur_part_o(cur_part), .lock_o(lock),
    .ic_spm_ways_o(ic_spm), .dc_spm_ways_o(dc_spm));

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  task automatic wr(logic [11:0] a, logic [63:0] d);
    we = 1; addr = a; wdata = d;
    @(posedge clk); #1;
    we = 0;
  endtask


  task automatic rdc(string what, logic [11:0] a, logic [63:0] exp);
    addr = a; #1;
    check(what, rdata, exp);
  endtask

  initial begin
    we = 0; addr = 0; wdata = 0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1; #1;
    check("reset CUR_PART", cur_part, 16'hFFFF);
    rdc("reset LAST_PART read", CSR_LAST_PART, 64'hFFFF);
    check("reset no lock", lock[0].valid, 0);
    check("reset no SPM", {ic_spm, dc_spm}, 0);

    // VM A runs with 0x00FE, trap handler enters with hypervisor partition 0x0001
    wr(CSR_CUR_PART, 64'h00FE);
    check("CUR_PART written", cur_part, 16'h00FE);
    rdc("LAST_PART holds old", CSR_LAST_PART, 64'hFFFF);
    wr(CSR_CUR_PART, 64'h0001);
    check("handler partition", cur_part, 16'h0001);
    rdc("LAST_PART = interrupted task", CSR_LAST_PART, 64'h00FE);
    // restore without bit 0 does nothing
    wr(CSR_RESTORE_LAST_PART, 64'h2);
    check("restore needs LSB", cur_part, 16'h0001);
    wr(CSR_RESTORE_LAST_PART, 64'h1);
    check("restored", cur_part, 16'h00FE);
    rdc("restore keeps LAST_PART", CSR_LAST_PART, 64'h00FE);
    rdc("RESTORE reads zero", CSR_RESTORE_LAST_PART, 64'h0);
    // task switch: handler writes LAST_PART with the next VM's bitmap
    wr(CSR_CUR_PART, 64'h0001);
    wr(CSR_LAST_PART, 64'hFF00);
    check("LAST_PART write leaves CUR", cur_part, 16'h0001);
    wr(CSR_RESTORE_LAST_PART, 64'h1);
    check("switched to next VM", cur_part, 16'hFF00);

    // SPM masks
    wr(CSR_IC_SPM, 64'h3);
    wr(CSR_DC_SPM, 64'hF0);
    check("IC SPM", ic_spm, 4'h3);
    check("DC SPM", dc_spm, 8'hF0);
    rdc("DC SPM read", CSR_DC_SPM, 64'hF0);

    // lock slot 5
    wr(CSR_LOCK_BASE + 12'd15, {1'b1, 2'd1, 34'd0, 27'h12345});
    check("VPN only: not valid", lock[5].valid, 0);
    wr(CSR_LOCK_BASE + 12'd16, {10'd0, 44'hBEEF, 10'h0CF});
    check("VPN+PTE: not valid", lock[5].valid, 0);
    wr(CSR_LOCK_BASE + 12'd17, {1'b1, 17'd0, 14'h2A, 16'd0, 16'h77});
    check("all three: valid", lock[5].valid, 1);
    check("lock vpn", lock[5].vpn, 27'h12345);
    check("lock size", lock[5].size, PG_2M);
    check("lock ppn", lock[5].pte.ppn, 44'hBEEF);
    check("lock flags", {lock[5].pte.d, lock[5].pte.a, lock[5].pte.g, lock[5].pte.u,
                         lock[5].pte.x, lock[5].pte.w, lock[5].pte.r, lock[5].pte.v}, 8'hCF);
    check("lock vmid", lock[5].vmid, 14'h2A);
    check("lock asid", lock[5].asid, 16'h77);
    check("other slots untouched", lock[4].valid | lock[6].valid, 0);
    rdc("lock pte read back", CSR_LOCK_BASE + 12'd16, {10'd0, 44'hBEEF, 10'h0CF});
    // clearing the PTE valid bit releases the slot
    wr(CSR_LOCK_BASE + 12'd16, 64'h0);
    check("PTE invalid releases", lock[5].valid, 0);
    // slot 0 and slot 7 (edges of the range)
    wr(CSR_LOCK_BASE + 12'd0, {1'b1, 63'h1});
    wr(CSR_LOCK_BASE + 12'd1, 64'h1);
    wr(CSR_LOCK_BASE + 12'd2, {1'b1, 63'h0});
    wr(CSR_LOCK_BASE + 12'd21, {1'b1, 63'h2});
    wr(CSR_LOCK_BASE + 12'd22, 64'h1);
    wr(CSR_LOCK_BASE + 12'd23, {1'b1, 63'h0});
    check("slot 0 valid", lock[0].valid, 1);
    check("slot 7 valid", lock[7].valid, 1);
    check("slot 7 vpn", lock[7].vpn, 2);

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
