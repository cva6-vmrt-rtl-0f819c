// tb_cache_ctrl: the cache controller of the default 8-way, 256-set data
// cache with its SRAMs and a memory model. Checks read misses (line
// fetch, answer), read hits (answer one cycle after acceptance, no memory
// traffic), write-through stores (memory updated, hit line updated, no
// allocation on a store miss), filling all eight ways of one set and
// replacing, that ways configured as scratchpad never hold or hit cache
// lines, and that changing a way's mode drops its lines. Random traffic
// is checked against the memory contents.
module tb_cache_ctrl;
  import vmrt_pkg::*;
  localparam int unsigned W = DC_WAYS, S = CACHE_SETS, TAG_W = PLEN - 8 - 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [W-1:0]     spm_ways, sram_req;
  logic             req_valid, req_ready, rsp_valid, data_we, tag_we, hit, miss;
  cache_req_t       req;
  logic [63:0]      rsp_rdata;
  logic [7:0]       idx;
  logic [127:0]     dwdata;
  logic [15:0]      dbe;
  logic [TAG_W-1:0] twdata;
  logic [127:0]     drdata [W];
  logic [TAG_W-1:0] trdata [W];
  logic             mvalid, mready, mrsp_valid;
  mem_req_t         mreq;
  mem_rsp_t         mrsp;

  cache_ctrl dut (
    .clk_i(clk), .rst_ni(rst_n), .spm_ways_i(spm_ways),
    .req_valid_i(req_valid), .req_ready_o(req_ready), .req_i(req),
    .rsp_valid_o(rsp_valid), .rsp_rdata_o(rsp_rdata),
    .sram_req_o(sram_req), .data_we_o(data_we), .tag_we_o(tag_we), .sram_idx_o(idx),
    .data_wdata_o(dwdata), .data_be_o(dbe), .tag_wdata_o(twdata),
    .data_rdata_i(drdata), .tag_rdata_i(trdata),
    .mem_req_valid_o(mvalid), .mem_req_ready_i(mready), .mem_req_o(mreq),
    .mem_rsp_valid_i(mrsp_valid), .mem_rsp_i(mrsp), .hit_o(hit), .miss_o(miss));

  for (genvar w = 0; w < int'(W); w++) begin : g_way
    sram_sp #(.DEPTH(S), .WIDTH(128)) i_d (.clk_i(clk), .req_i(sram_req[w]), .we_i(data_we),
      .addr_i(idx), .wdata_i(dwdata), .be_i(dbe), .rdata_o(drdata[w]));
    sram_sp #(.DEPTH(S), .WIDTH(TAG_W)) i_t (.clk_i(clk), .req_i(sram_req[w] && !(data_we && !tag_we)),
      .we_i(tag_we), .addr_i(idx), .wdata_i(twdata), .be_i('1), .rdata_o(trdata[w]));
  end

  tb_mem_model #(.LAT(4)) mem (.clk_i(clk), .req_valid_i(mvalid), .req_ready_o(mready), .req_i(mreq),
                               .rsp_valid_o(mrsp_valid), .rsp_o(mrsp));

  int hits = 0, misses = 0;
  always @(posedge clk) begin
    if (hit) hits++;
    if (miss) misses++;
    // scratchpad ways are never written or hit by the cache
    if (rst_n && data_we && |(sram_req & spm_ways)) begin
      failures++;
      $display("FAIL cache wrote a scratchpad way");
    end
  end

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  // one request; returns data and cycles from acceptance to response
  task automatic acc(input logic [55:0] a, input logic w, input logic [63:0] d,
                     output logic [63:0] r, output int lat);
    req = '{addr: a, we: w, wdata: d, be: 8'hFF};
    req_valid = 1;
    #1;
    while (!req_ready) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    req_valid = 0;
    lat = 1;
    while (!rsp_valid) begin @(posedge clk); #1; lat++; end
    r = rsp_rdata;
    @(posedge clk); #1;
  endtask

  logic [63:0] r; int lat, rd0, m0;
  // address with given tag and set
  function automatic logic [55:0] ad(int tag, int set, int word);
    return 56'h8000_0000 + 56'(tag) * 56'(S * 16) + 56'(set * 16 + word * 8);
  endfunction

  initial begin
    spm_ways = '0; req_valid = 0; req = '0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    @(posedge clk); #1;
    // miss then hit
    acc(ad(1, 3, 1), 0, 0, r, lat);
    check("miss data", r, mem.init_word(ad(1, 3, 1)));
    check("miss fetched one line", mem.reads, 1);
    rd0 = mem.reads;
    acc(ad(1, 3, 0), 0, 0, r, lat);
    check("hit data", r, mem.init_word(ad(1, 3, 0)));
    check("hit latency one cycle", lat, 1);
    check("hit: no memory read", mem.reads, rd0);
    // store hit: write-through and line updated
    acc(ad(1, 3, 0), 1, 64'hFEED, r, lat);
    check("write-through", mem.rd_word(ad(1, 3, 0)), 64'hFEED);
    acc(ad(1, 3, 0), 0, 0, r, lat);
    check("store hit updated line", r, 64'hFEED);
    check("updated line hit", lat, 1);
    // store miss: no allocation
    acc(ad(2, 3, 0), 1, 64'hBEEF, r, lat);
    rd0 = mem.reads;
    acc(ad(2, 3, 0), 0, 0, r, lat);
    check("no write allocate", mem.reads, rd0 + 1);
    check("store miss data from memory", r, 64'hBEEF);
    // fill set 9 with 8 tags, all hit afterwards
    for (int t = 0; t < 8; t++) acc(ad(10 + t, 9, 0), 0, 0, r, lat);
    rd0 = mem.reads;
    for (int t = 0; t < 8; t++) begin
      acc(ad(10 + t, 9, 0), 0, 0, r, lat);
      check("8-way set holds 8 lines", lat, 1);
    end
    check("no refetch", mem.reads, rd0);
    // a ninth tag replaces one line
    acc(ad(30, 9, 0), 0, 0, r, lat);
    m0 = 0;
    for (int t = 0; t < 8; t++) begin
      acc(ad(10 + t, 9, 0), 0, 0, r, lat);
      if (lat > 1) m0++;
    end
    check("one line was replaced", m0 >= 1, 1);
    // four ways become scratchpad: their lines are gone, only 4 ways remain
    spm_ways = 8'hF0;
    @(posedge clk); #1;
    // the tag rows of the four changed ways are swept to zero, one row per cycle
    check("busy while tags are cleared", 64'(req_ready), 64'(0));
    begin
      int wait_c; wait_c = 0;
      while (!req_ready && wait_c < 10 * S) begin @(posedge clk); #1; wait_c++; end
      check("tag sweep takes one cycle per set", 64'(wait_c >= S - 1 && wait_c <= S + 1), 64'(1));
    end
    check("set 9 tag of way 3 kept", 64'(g_way[3].i_t.mem[9] != '0), 64'(1));
    check("set 9 tag of way 4 cleared", 64'(g_way[4].i_t.mem[9]), 64'(0));
    check("set 9 tag of way 7 cleared", 64'(g_way[7].i_t.mem[9]), 64'(0));
    for (int t = 0; t < 12; t++) acc(ad(40 + t, 20, 0), 0, 0, r, lat);
    rd0 = mem.reads;
    m0 = 0;
    for (int t = 8; t < 12; t++) begin
      acc(ad(40 + t, 20, 0), 0, 0, r, lat);
      if (lat > 1) m0++;
    end
    check("4 cache ways keep last 4 lines", m0, 0);
    m0 = 0;
    for (int t = 0; t < 8; t++) begin
      acc(ad(40 + t, 20, 0), 0, 0, r, lat);
      if (lat > 1) m0++;
    end
    check("older lines evicted with 4 ways", m0, 8);
    // all ways scratchpad: reads served from memory, never hit
    spm_ways = 8'hFF;
    @(posedge clk); #1;
    acc(ad(60, 1, 0), 0, 0, r, lat);
    acc(ad(60, 1, 0), 0, 0, r, lat);
    check("no way: still correct data", r, mem.init_word(ad(60, 1, 0)));
    check("no way: no hit", lat > 1, 1);
    spm_ways = 8'h00;
    @(posedge clk); #1;
    // random traffic
    for (int i = 0; i < 600; i++) begin
      logic [55:0] a;
      logic [63:0] d;
      a = ad($urandom % 24, $urandom % 4, $urandom % 2);
      d = {$urandom, $urandom};
      if ($urandom % 3 == 0) begin
        acc(a, 1, d, r, lat);
        check("random store reached memory", mem.rd_word(a), d);
      end else begin
        acc(a, 0, 0, r, lat);
        check("random load", r, mem.rd_word(a));
      end
      if (i == 300) begin spm_ways = 8'h0C; @(posedge clk); #1; end
    end
    check("hits seen", hits > 50, 1);
    check("misses seen", misses > 100, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
