// spm_ctrl: address decoder and scratchpad controller of a hybrid cache.
//
// The scratchpad window starts at BASE and spans WAYS x SETS lines; the
// cache ways are laid out one after the other in it, so for an address a
// inside the window
//   way  = (a - BASE) / (SETS * 16)
//   row  = ((a - BASE) / 16) mod SETS
//   word = a[3]            (64-bit half of the 128-bit line)
// is_spm_o is the decoder output, combinational from req_i.addr; the
// enclosing cache uses it to steer the request here or to the cache
// controller.
//
// An accepted request (req_valid_i) accesses the way's data SRAM in the
// same cycle and answers with rsp_valid_o one cycle later, every time: the
// scratchpad latency is one cycle and depends on nothing else. Before the
// access the controller checks that the way is configured as scratchpad
// (spm_ways_i). If it is not, a write is silently dropped and a read returns
// zero as dummy data, still after one cycle, so the core never stalls. The
// check and the drop/dummy behaviour follow the published design; zero as
// the dummy value and the window base are this design's choices. Writes
// are acknowledged by a response too.
module spm_ctrl
  import vmrt_pkg::*;
#(
  parameter int unsigned     WAYS = DC_WAYS,
  parameter int unsigned     SETS = CACHE_SETS,
  parameter logic [PLEN-1:0] BASE = DC_SPM_BASE
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  logic [WAYS-1:0]             spm_ways_i,
  // request
  input  cache_req_t                  req_i,
  output logic                        is_spm_o,
  input  logic                        req_valid_i,
  output logic                        rsp_valid_o,
  output logic [XLEN-1:0]             rsp_rdata_o,
  // data SRAMs
  output logic [WAYS-1:0]             sram_req_o,
  output logic                        sram_we_o,
  output logic [$clog2(SETS)-1:0]     sram_idx_o,
  output logic [LINE_BITS-1:0]        sram_wdata_o,
  output logic [LINE_BYTES-1:0]       sram_be_o,
  input  logic [LINE_BITS-1:0]        sram_rdata_i [WAYS]
);
  localparam int unsigned IDX_W  = $clog2(SETS);
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned SPAN_W = $clog2(WAYS * SETS * LINE_BYTES);

  logic [PLEN-1:0]  off;
  logic [WAY_W-1:0] way;
  logic             way_ok;
  logic             rsp_q, ok_q, word_q;
  logic [WAY_W-1:0] way_q;

  assign off        = req_i.addr - BASE;
  assign is_spm_o   = (req_i.addr >= BASE) && (off < PLEN'(WAYS * SETS * LINE_BYTES));
  assign way        = WAY_W'(off[SPAN_W-1:IDX_W+4]);
  assign way_ok     = spm_ways_i[way];
  assign sram_idx_o = off[IDX_W+3:4];
  assign sram_we_o  = req_i.we;
  assign sram_wdata_o = {2{req_i.wdata}};
  assign sram_be_o  = req_i.addr[3] ? {req_i.be, 8'h00} : {8'h00, req_i.be};

  always_comb begin
    sram_req_o = '0;
    if (req_valid_i && is_spm_o && way_ok) sram_req_o[way] = 1'b1;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rsp_q  <= 1'b0;
      ok_q   <= 1'b0;
      word_q <= 1'b0;
      way_q  <= '0;
    end else begin
      rsp_q  <= req_valid_i && is_spm_o;
      ok_q   <= way_ok && !req_i.we;
      word_q <= req_i.addr[3];
      way_q  <= way;
    end
  end

  assign rsp_valid_o = rsp_q;
  assign rsp_rdata_o = !ok_q ? '0 :
                       word_q ? sram_rdata_i[way_q][127:64] : sram_rdata_i[way_q][63:0];

endmodule
