// tb_spm_ctrl: checks the scratchpad address decoder and controller of the
// default 8-way, 256-set data cache: the window bounds, the contiguous
// address-to-way/row mapping, writes and reads of scratchpad ways, writes
// to ways still used as cache being dropped, reads of such ways returning
// dummy zeros, and the constant one-cycle response latency.
module tb_spm_ctrl;
  import vmrt_pkg::*;
  localparam int unsigned W = DC_WAYS, S = CACHE_SETS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [W-1:0]          spm_ways, sram_req;
  cache_req_t            req;
  logic                  is_spm, req_valid, rsp_valid, sram_we;
  logic [63:0]           rsp_rdata;
  logic [7:0]            sram_idx;
  logic [127:0]          sram_wdata;
  logic [15:0]           sram_be;
  logic [127:0]          sram_rdata [W];

  spm_ctrl dut (
    .clk_i(clk), .rst_ni(rst_n), .spm_ways_i(spm_ways), .req_i(req), .is_spm_o(is_spm),
    .req_valid_i(req_valid), .rsp_valid_o(rsp_valid), .rsp_rdata_o(rsp_rdata),
    .sram_req_o(sram_req), .sram_we_o(sram_we), .sram_idx_o(sram_idx),
    .sram_wdata_o(sram_wdata), .sram_be_o(sram_be), .sram_rdata_i(sram_rdata));

  for (genvar w = 0; w < int'(W); w++) begin : g_sram
    sram_sp #(.DEPTH(S), .WIDTH(128)) i_sram (
      .clk_i(clk), .req_i(sram_req[w]), .we_i(sram_we), .addr_i(sram_idx),
      .wdata_i(sram_wdata), .be_i(sram_be), .rdata_o(sram_rdata[w]));
  end

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  function automatic logic [55:0] spa(int way, int row, int word);
    return DC_SPM_BASE + 56'(way * S * 16 + row * 16 + word * 8);
  endfunction

  // one access; checks the one-cycle latency, returns the read data
  task automatic acc(input logic [55:0] a, input logic w, input logic [63:0] d, output logic [63:0] r);
    req = '{addr: a, we: w, wdata: d, be: 8'hFF};
    req_valid = 1;
    #1;
    @(posedge clk); #1;
    req_valid = 0;
    check("response after exactly one cycle", rsp_valid, 1);
    r = rsp_rdata;
  endtask

  logic [63:0] r;
  logic [63:0] model [int];

  initial begin
    spm_ways = 8'b0000_1111; req = '0; req_valid = 0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    @(posedge clk); #1;
    // decoder
    req.addr = DC_SPM_BASE - 1;                 #1; check("below window", is_spm, 0);
    req.addr = DC_SPM_BASE;                     #1; check("window start", is_spm, 1);
    req.addr = DC_SPM_BASE + 56'(W*S*16 - 8);   #1; check("window end", is_spm, 1);
    req.addr = DC_SPM_BASE + 56'(W*S*16);       #1; check("past window", is_spm, 0);
    req.addr = 56'h8000_0000;                   #1; check("DRAM address", is_spm, 0);
    // mapping: way 2 row 37 word 1
    req = '{addr: spa(2, 37, 1), we: 1, wdata: 64'hAA, be: 8'h0F};
    req_valid = 1; #1;
    check("way select", sram_req, 8'b0000_0100);
    check("row select", sram_idx, 37);
    check("upper word byte enables", sram_be, 16'h0F00);
    req_valid = 0;
    // random writes and reads of SPM ways 0..3
    for (int i = 0; i < 300; i++) begin
      int way, row, word;
      logic [63:0] d;
      way = $urandom % 4; row = $urandom % S; word = $urandom % 2;
      d = {$urandom, $urandom};
      acc(spa(way, row, word), 1, d, r);
      model[way * 1000 + row * 2 + word] = d;
    end
    foreach (model[k]) begin
      acc(spa(k / 1000, (k % 1000) / 2, k % 2), 0, 0, r);
      check("SPM readback", r, model[k]);
    end
    // write to a way still in cache mode is dropped, read returns zero
    acc(spa(6, 5, 0), 1, 64'hDEAD, r);
    acc(spa(6, 5, 0), 0, 0, r);
    check("non-SPM way reads dummy zero", r, 0);
    spm_ways = 8'b0100_1111; #1;
    acc(spa(6, 5, 0), 1, 64'h1111, r);
    acc(spa(6, 5, 1), 1, 64'h2222, r);
    spm_ways = 8'b0000_1111; #1;
    acc(spa(6, 5, 0), 1, 64'hDEAD, r);          // dropped
    spm_ways = 8'b0100_1111; #1;
    acc(spa(6, 5, 0), 0, 0, r);
    check("dropped write left data", r, 64'h1111);
    acc(spa(6, 5, 1), 0, 0, r);
    check("second word", r, 64'h2222);
    // back-to-back reads, one per cycle
    req = '{addr: spa(6, 5, 0), we: 0, wdata: 0, be: '1};
    req_valid = 1;
    @(posedge clk); #1;
    req.addr = spa(6, 5, 1);
    check("pipelined 1st", rsp_rdata, 64'h1111);
    @(posedge clk); #1;
    req_valid = 0;
    check("pipelined 2nd", rsp_rdata, 64'h2222);
    check("pipelined valid", rsp_valid, 1);
    @(posedge clk); #1;
    check("no spurious response", rsp_valid, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
