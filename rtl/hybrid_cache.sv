// hybrid_cache: L1 cache whose ways can be turned into scratchpad memory
// (SPM) at run time, one way at a time. Used as the instruction cache
// (READ_ONLY = 1, 4 ways, 16 KiB) and as the data cache (8 ways, 32 KiB).
//
// Structure: an address decoder (inside spm_ctrl) looks at the physical
// address of each request. Addresses inside the SPM window go to the
// scratchpad controller, all others to the cache controller. Both
// controllers drive the same per-way data SRAMs through a multiplexer; the
// tag SRAMs belong to the cache controller only. No memory is added for the
// scratchpad: a way configured as SPM (bit set in spm_ways_i) is simply
// skipped by the cache's hit and replacement logic, and its valid bits and
// tags are cleared when its mode changes (the cache is busy for SETS cycles
// while the tag rows are swept).
//
// Timing: requests are taken one at a time with a valid/ready handshake and
// answered in order with rsp_valid_o. A scratchpad access always answers one
// cycle after it is accepted and can be accepted every cycle while the
// cache controller is idle; a cache hit answers one cycle after
// acceptance; misses and write-through stores wait for memory. A
// scratchpad request waits while the cache controller is busy with a miss
// (the SRAMs are shared). The memory side carries line reads and word
// writes (mem_req_t / mem_rsp_t).
//
// Following the published design: way reuse as SPM, address decoding, the
// SPM controller's way check, the mux in front of the SRAMs. This design's
// choices: way count, line size, SPM window base, blocking controller.
module hybrid_cache
  import vmrt_pkg::*;
#(
  parameter int unsigned     WAYS      = DC_WAYS,
  parameter int unsigned     SETS      = CACHE_SETS,
  parameter logic [PLEN-1:0] SPM_BASE  = DC_SPM_BASE,
  parameter bit              READ_ONLY = 1'b0
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic [WAYS-1:0]   spm_ways_i,
  // core side
  input  logic              req_valid_i,
  output logic              req_ready_o,
  input  cache_req_t        req_i,
  output logic              rsp_valid_o,
  output logic [XLEN-1:0]   rsp_rdata_o,
  // memory side
  output logic              mem_req_valid_o,
  input  logic              mem_req_ready_i,
  output mem_req_t          mem_req_o,
  input  logic              mem_rsp_valid_i,
  input  mem_rsp_t          mem_rsp_i,
  // events
  output logic              hit_o,
  output logic              miss_o,
  output logic              spm_access_o
);
  localparam int unsigned IDX_W = $clog2(SETS);
  localparam int unsigned TAG_W = PLEN - IDX_W - 4;

  logic is_spm, cc_ready, cc_rsp, spm_rsp, spm_go, cc_go;
  logic [XLEN-1:0] cc_rdata, spm_rdata;

  // cache controller SRAM port
  logic [WAYS-1:0]       cc_req;
  logic                  cc_data_we, cc_tag_we;
  logic [IDX_W-1:0]      cc_idx;
  logic [LINE_BITS-1:0]  cc_wdata;
  logic [LINE_BYTES-1:0] cc_be;
  logic [TAG_W-1:0]      cc_tag_wdata;
  // scratchpad SRAM port
  logic [WAYS-1:0]       sp_req;
  logic                  sp_we;
  logic [IDX_W-1:0]      sp_idx;
  logic [LINE_BITS-1:0]  sp_wdata;
  logic [LINE_BYTES-1:0] sp_be;

  logic [LINE_BITS-1:0]  data_rdata [WAYS];
  logic [TAG_W-1:0]      tag_rdata  [WAYS];

  assign spm_go      = req_valid_i && is_spm && cc_ready;
  assign cc_go       = req_valid_i && !is_spm;
  assign req_ready_o = cc_ready;   // idle controller: SPM or cache may go

  spm_ctrl #(.WAYS(WAYS), .SETS(SETS), .BASE(SPM_BASE)) i_spm (
    .clk_i, .rst_ni,
    .spm_ways_i,
    .req_i,
    .is_spm_o     (is_spm),
    .req_valid_i  (spm_go),
    .rsp_valid_o  (spm_rsp),
    .rsp_rdata_o  (spm_rdata),
    .sram_req_o   (sp_req),
    .sram_we_o    (sp_we),
    .sram_idx_o   (sp_idx),
    .sram_wdata_o (sp_wdata),
    .sram_be_o    (sp_be),
    .sram_rdata_i (data_rdata)
  );

  cache_ctrl #(.WAYS(WAYS), .SETS(SETS), .READ_ONLY(READ_ONLY)) i_cc (
    .clk_i, .rst_ni,
    .spm_ways_i,
    .req_valid_i  (cc_go),
    .req_ready_o  (cc_ready),
    .req_i,
    .rsp_valid_o  (cc_rsp),
    .rsp_rdata_o  (cc_rdata),
    .sram_req_o   (cc_req),
    .data_we_o    (cc_data_we),
    .tag_we_o     (cc_tag_we),
    .sram_idx_o   (cc_idx),
    .data_wdata_o (cc_wdata),
    .data_be_o    (cc_be),
    .tag_wdata_o  (cc_tag_wdata),
    .data_rdata_i (data_rdata),
    .tag_rdata_i  (tag_rdata),
    .mem_req_valid_o,
    .mem_req_ready_i,
    .mem_req_o,
    .mem_rsp_valid_i,
    .mem_rsp_i,
    .hit_o,
    .miss_o
  );

  // SRAM multiplexer: the scratchpad port only drives when it was granted
  for (genvar w = 0; w < int'(WAYS); w++) begin : g_way
    logic use_sp;
    assign use_sp = |sp_req;
    sram_sp #(.DEPTH(SETS), .WIDTH(LINE_BITS)) i_data (
      .clk_i,
      .req_i   (use_sp ? sp_req[w] : cc_req[w]),
      .we_i    (use_sp ? sp_we     : cc_data_we),
      .addr_i  (use_sp ? sp_idx    : cc_idx),
      .wdata_i (use_sp ? sp_wdata  : cc_wdata),
      .be_i    (use_sp ? sp_be     : cc_be),
      .rdata_o (data_rdata[w])
    );
    sram_sp #(.DEPTH(SETS), .WIDTH(TAG_W)) i_tag (
      .clk_i,
      .req_i   (cc_req[w] && !(cc_data_we && !cc_tag_we)),
      .we_i    (cc_tag_we),
      .addr_i  (cc_idx),
      .wdata_i (cc_tag_wdata),
      .be_i    ('1),
      .rdata_o (tag_rdata[w])
    );
  end

  assign rsp_valid_o  = cc_rsp || spm_rsp;
  assign rsp_rdata_o  = spm_rsp ? spm_rdata : cc_rdata;
  assign spm_access_o = spm_go;

  // the two controllers never use the SRAMs in the same cycle
  assert property (@(posedge clk_i) disable iff (!rst_ni) !(|sp_req && |cc_req));
  assert property (@(posedge clk_i) disable iff (!rst_ni) !(cc_rsp && spm_rsp));

endmodule
