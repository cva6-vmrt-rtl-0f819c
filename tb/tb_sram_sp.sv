// tb_sram_sp: random byte-enabled writes and reads of the default 256 x 128
// array against a testbench copy; checks that read data appears exactly one
// cycle after the read and holds while writes happen.
module tb_sram_sp;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic         req, we;
  logic [7:0]   addr;
  logic [127:0] wdata, rdata;
  logic [15:0]  be;
  logic [127:0] model [256];

  sram_sp dut (.clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr), .wdata_i(wdata), .be_i(be), .rdata_o(rdata));

  task automatic check(string what, logic [127:0] got, logic [127:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    logic [127:0] exp_q;
    req = 0; we = 0; addr = 0; wdata = 0; be = 0;
    // fill every row with full writes
    for (int i = 0; i < 256; i++) begin
      req = 1; we = 1; addr = 8'(i); be = '1;
      wdata = {$urandom, $urandom, $urandom, $urandom};
      model[i] = wdata;
      @(posedge clk); #1;
    end
    for (int it = 0; it < 4000; it++) begin
      req = 1; addr = 8'($urandom);
      we = $urandom % 2;
      be = 16'($urandom);
      wdata = {$urandom, $urandom, $urandom, $urandom};
      if (!we) begin
        exp_q = model[addr];
        @(posedge clk); #1;
        check("read data after one cycle", rdata, exp_q);
        // idle and write cycles keep the output
        req = $urandom % 2; we = 1; addr = 8'($urandom); be = 16'($urandom);
        if (req) for (int b = 0; b < 16; b++) if (be[b]) model[addr][8*b +: 8] = wdata[8*b +: 8];
        @(posedge clk); #1;
        check("read data holds", rdata, exp_q);
      end else begin
        for (int b = 0; b < 16; b++) if (be[b]) model[addr][8*b +: 8] = wdata[8*b +: 8];
        @(posedge clk); #1;
      end
    end
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
