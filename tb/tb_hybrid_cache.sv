// tb_hybrid_cache: the hybrid cache as data cache (8 ways, 32 KiB) and as
// instruction cache (4 ways, 16 KiB, read-only), each with a memory model.
// Checks cached loads and stores against memory, the 50 % cache / 50 %
// scratchpad split of the evaluation (scratchpad accesses always answer one
// cycle after acceptance and cause no memory traffic, while the cache keeps
// working on its remaining ways), dummy zeros and dropped writes for ways
// not configured as scratchpad, and that a line cached in a way before the
// way became scratchpad can never hit afterwards.
module tb_hybrid_cache;
  import vmrt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ------------------------------------------------------------ D$
  logic [DC_WAYS-1:0] dspm;
  logic dvalid, dready, drsp, dhit, dmiss, dspm_acc;
  cache_req_t dreq;
  logic [63:0] drdata;
  logic dmv, dmr, dmrv;
  mem_req_t dmreq;
  mem_rsp_t dmrsp;

  hybrid_cache dut_d (
    .clk_i(clk), .rst_ni(rst_n), .spm_ways_i(dspm),
    .req_valid_i(dvalid), .req_ready_o(dready), .req_i(dreq),
    .rsp_valid_o(drsp), .rsp_rdata_o(drdata),
    .mem_req_valid_o(dmv), .mem_req_ready_i(dmr), .mem_req_o(dmreq),
    .mem_rsp_valid_i(dmrv), .mem_rsp_i(dmrsp),
    .hit_o(dhit), .miss_o(dmiss), .spm_access_o(dspm_acc));
  tb_mem_model #(.LAT(6)) dmem (.clk_i(clk), .req_valid_i(dmv), .req_ready_o(dmr), .req_i(dmreq),
                                .rsp_valid_o(dmrv), .rsp_o(dmrsp));

  // ------------------------------------------------------------ I$
  logic [IC_WAYS-1:0] ispm;
  logic ivalid, iready, irsp, ihit, imiss, ispm_acc;
  cache_req_t ireq;
  logic [63:0] irdata;
  logic imv, imr, imrv;
  mem_req_t imreq;
  mem_rsp_t imrsp;

  hybrid_cache #(.WAYS(IC_WAYS), .SPM_BASE(IC_SPM_BASE), .READ_ONLY(1'b1)) dut_i (
    .clk_i(clk), .rst_ni(rst_n), .spm_ways_i(ispm),
    .req_valid_i(ivalid), .req_ready_o(iready), .req_i(ireq),
    .rsp_valid_o(irsp), .rsp_rdata_o(irdata),
    .mem_req_valid_o(imv), .mem_req_ready_i(imr), .mem_req_o(imreq),
    .mem_rsp_valid_i(imrv), .mem_rsp_i(imrsp),
    .hit_o(ihit), .miss_o(imiss), .spm_access_o(ispm_acc));
  tb_mem_model #(.LAT(6)) imem (.clk_i(clk), .req_valid_i(imv), .req_ready_o(imr), .req_i(imreq),
                                .rsp_valid_o(imrv), .rsp_o(imrsp));

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  task automatic dacc(input logic [55:0] a, input logic w, input logic [63:0] d,
                      output logic [63:0] r, output int lat);
    dreq = '{addr: a, we: w, wdata: d, be: 8'hFF};
    dvalid = 1; #1;
    while (!dready) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    dvalid = 0;
    lat = 1;
    while (!drsp) begin @(posedge clk); #1; lat++; end
    r = drdata;
    @(posedge clk); #1;
  endtask

  task automatic iacc(input logic [55:0] a, input logic w, input logic [63:0] d,
                      output logic [63:0] r, output int lat);
    ireq = '{addr: a, we: w, wdata: d, be: 8'hFF};
    ivalid = 1; #1;
    while (!iready) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    ivalid = 0;
    lat = 1;
    while (!irsp) begin @(posedge clk); #1; lat++; end
    r = irdata;
    @(posedge clk); #1;
  endtask

  function automatic logic [55:0] dspa(int way, int row, int word);
    return DC_SPM_BASE + 56'(way * CACHE_SETS * 16 + row * 16 + word * 8);
  endfunction

  logic [63:0] r; int lat, rd0, wr0, spm_lat_bad, n_spm;
  logic [63:0] smodel [int];

  initial begin
    dspm = '0; ispm = '0; dvalid = 0; ivalid = 0; dreq = '0; ireq = '0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    @(posedge clk); #1;

    // --- plain data cache
    dacc(56'h8000_1000, 0, 0, r, lat);
    check("D$ miss data", r, dmem.init_word(56'h8000_1000));
    dacc(56'h8000_1008, 0, 0, r, lat);
    check("D$ hit latency", lat, 1);
    dacc(56'h8000_1008, 1, 64'h55, r, lat);
    dacc(56'h8000_1008, 0, 0, r, lat);
    check("D$ store then load", r, 64'h55);
    // line A cached (set 0x40) so that it may sit in way 4..7 later
    for (int t = 0; t < 8; t++) dacc(56'h9000_0400 + 56'(t) * 56'h1000, 0, 0, r, lat);

    // --- 50 % scratchpad: ways 4..7
    dspm = 8'hF0;
    @(posedge clk); #1;
    rd0 = dmem.reads; wr0 = dmem.writes;
    spm_lat_bad = 0; n_spm = 0;
    for (int i = 0; i < 400; i++) begin
      int way, row, word;
      logic [63:0] d;
      way = 4 + $urandom % 4; row = $urandom % CACHE_SETS; word = $urandom % 2;
      d = {$urandom, $urandom};
      dacc(dspa(way, row, word), 1, d, r, lat);
      if (lat != 1) spm_lat_bad++;
      smodel[way * 1000 + row * 2 + word] = d;
      n_spm++;
    end
    check("SPM traffic stays off the memory bus", dmem.reads + dmem.writes, rd0 + wr0);
    // scratchpad contents survive cache traffic with misses in between
    foreach (smodel[k]) begin
      logic [55:0] ca;
      dacc(dspa(k / 1000, (k % 1000) / 2, k % 2), 0, 0, r, lat);
      check("SPM readback", r, smodel[k]);
      if (lat != 1) spm_lat_bad++;
      n_spm++;
      ca = 56'h8100_0000 + 56'($urandom % 64) * 56'h1000 + 56'(($urandom % 16) * 16);
      dacc(ca, 0, 0, r, lat);
      check("cache beside SPM", r, dmem.rd_word(ca));
    end
    check("SPM latency always one cycle", spm_lat_bad, 0);
    check("SPM accesses counted", n_spm > 400, 1);
    // lines cached before the split can no longer hit in the SPM ways:
    // overwrite the whole SPM row 0x40 and re-read the old addresses
    for (int w = 4; w < 8; w++) begin
      dacc(dspa(w, 8'h40, 0), 1, 64'hBAD0 + 64'(w), r, lat);
      dacc(dspa(w, 8'h40, 1), 1, 64'hBAD0 + 64'(w), r, lat);
    end
    for (int t = 0; t < 8; t++) begin
      dacc(56'h9000_0400 + 56'(t) * 56'h1000, 0, 0, r, lat);
      check("no stale hit on SPM way", r, dmem.init_word(56'h9000_0400 + 56'(t) * 56'h1000));
    end
    // a way outside the SPM configuration: write dropped, read gives zero
    dacc(dspa(1, 3, 0), 1, 64'h77, r, lat);
    check("non-SPM way: write answered in one cycle", lat, 1);
    dacc(dspa(1, 3, 0), 0, 0, r, lat);
    check("non-SPM way: dummy zero", r, 0);
    check("non-SPM way: no stall", lat, 1);

    // --- instruction cache: fetch miss / hit, ISPM filled by writes
    iacc(56'h8000_2000, 0, 0, r, lat);
    check("I$ miss data", r, imem.init_word(56'h8000_2000));
    iacc(56'h8000_2000, 0, 0, r, lat);
    check("I$ hit", lat, 1);
    iacc(56'h8000_2000, 1, 64'h99, r, lat);        // read-only: treated as read
    check("I$ ignores writes", imem.writes, 0);
    ispm = 4'b1100;
    @(posedge clk); #1;
    iacc(IC_SPM_BASE + 56'(2 * CACHE_SETS * 16 + 32), 1, 64'h0013_0000_0013, r, lat);
    iacc(IC_SPM_BASE + 56'(2 * CACHE_SETS * 16 + 32), 0, 0, r, lat);
    check("ISPM fetch", r, 64'h0013_0000_0013);
    check("ISPM fetch latency", lat, 1);
    iacc(IC_SPM_BASE + 56'(0 * CACHE_SETS * 16 + 32), 0, 0, r, lat);
    check("ISPM unconfigured way dummy", r, 0);
    iacc(56'h8000_2000, 0, 0, r, lat);
    check("I$ still caches", r, imem.init_word(56'h8000_2000));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
