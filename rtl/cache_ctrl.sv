// cache_ctrl: controller of a blocking, set-associative, write-through L1
// cache whose ways can be taken away from it and used as scratchpad.
//
// Address split (16-byte lines): offset addr[3:0], row addr[IDX+3:4], tag
// the bits above. Valid bits live in flip-flops, tags and data in the
// per-way SRAMs owned by the enclosing cache.
//
// Operation, one request at a time:
//   IDLE    accept a request, read tag and data rows of every way
//   LOOKUP  compare tags of the valid ways that are not scratchpad.
//           Read hit: answer now (latency 1 cycle after acceptance).
//           Store: update the line on a hit (no allocation on a miss),
//           then write the word through to memory.
//           Read miss: fetch the line from memory.
//   MEM_RD / RD_WAIT  line read; the line is written into the victim way,
//           its tag stored and valid set, and the word answered.
//   MEM_WR / WR_WAIT  word write; answered after memory acknowledges.
//   CLEAR   after a mode change, write zero into every tag row of the
//           ways that changed, one row per cycle (SETS cycles); no
//           request is accepted meanwhile.
// The victim is the first invalid way among the cache ways, else the way
// chosen by a round-robin pointer, skipping scratchpad ways. If every way
// is scratchpad a read miss is answered from memory without allocation.
//
// Scratchpad extension: ways set in spm_ways_i are removed from hit
// detection and from victim selection, and whenever a way changes between
// cache and scratchpad its valid bits are all cleared in the same cycle, so
// no stale line can hit, and its tag rows are then swept to zero in the
// CLEAR state. Way removal and clearing of tags and valid bits follow the
// published design; write-through, the round-robin victim and the blocking controller
// are this design's choices. READ_ONLY (instruction cache) treats every
// request as a read.
module cache_ctrl
  import vmrt_pkg::*;
#(
  parameter int unsigned WAYS      = DC_WAYS,
  parameter int unsigned SETS      = CACHE_SETS,
  parameter bit          READ_ONLY = 1'b0,
  localparam int unsigned IDX_W    = $clog2(SETS),
  localparam int unsigned TAG_W    = PLEN - IDX_W - 4
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  logic [WAYS-1:0]         spm_ways_i,
  // request
  input  logic                    req_valid_i,
  output logic                    req_ready_o,
  input  cache_req_t              req_i,
  output logic                    rsp_valid_o,
  output logic [XLEN-1:0]         rsp_rdata_o,
  // SRAMs
  output logic [WAYS-1:0]         sram_req_o,
  output logic                    data_we_o,
  output logic                    tag_we_o,
  output logic [IDX_W-1:0]        sram_idx_o,
  output logic [LINE_BITS-1:0]    data_wdata_o,
  output logic [LINE_BYTES-1:0]   data_be_o,
  output logic [TAG_W-1:0]        tag_wdata_o,
  input  logic [LINE_BITS-1:0]    data_rdata_i [WAYS],
  input  logic [TAG_W-1:0]        tag_rdata_i  [WAYS],
  // memory
  output logic                    mem_req_valid_o,
  input  logic                    mem_req_ready_i,
  output mem_req_t                mem_req_o,
  input  logic                    mem_rsp_valid_i,
  input  mem_rsp_t                mem_rsp_i,
  // events
  output logic                    hit_o,
  output logic                    miss_o
);
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;

  typedef enum logic [2:0] { IDLE, LOOKUP, MEM_RD, RD_WAIT, MEM_WR, WR_WAIT, CLEAR } state_e;

  state_e            state_q;
  cache_req_t        req_q;
  logic [SETS-1:0]   valid_q [WAYS];
  logic [WAYS-1:0]   spm_q;
  logic [WAY_W-1:0]  rr_q;
  logic [WAYS-1:0]   clr_q;        // ways whose tag rows still need clearing
  logic [IDX_W-1:0]  clr_row_q;
  logic [WAYS-1:0]   mode_chg;

  logic [IDX_W-1:0]  idx;
  logic [TAG_W-1:0]  tag;
  logic [WAYS-1:0]   hit_vec;
  logic [WAY_W-1:0]  hit_way;
  logic [WAY_W-1:0]  victim;
  logic              victim_ok;
  logic [WAY_W-1:0]  cand;
  logic              is_write;

  assign idx      = req_q.addr[IDX_W+3:4];
  assign tag      = req_q.addr[PLEN-1:IDX_W+4];
  assign is_write = req_q.we && !READ_ONLY;

  always_comb begin
    hit_vec = '0;
    hit_way = '0;
    for (int unsigned w = 0; w < WAYS; w++) begin
      hit_vec[w] = valid_q[w][idx] && !spm_ways_i[w] && (tag_rdata_i[w] == tag);
      if (hit_vec[w]) hit_way = WAY_W'(w);
    end
  end

  // victim: first invalid cache way, else next cache way from rr_q
  logic found_inv;
  always_comb begin
    victim    = '0;
    cand      = '0;
    victim_ok = 1'b0;
    found_inv = 1'b0;
    for (int unsigned w = 0; w < WAYS; w++) begin
      if (!found_inv && !spm_ways_i[w] && !valid_q[w][idx]) begin
        victim    = WAY_W'(w);
        victim_ok = 1'b1;
        found_inv = 1'b1;
      end
    end
    for (int w = int'(WAYS) - 1; w >= 0; w--) begin
      cand = WAY_W'(32'(rr_q) + w);   // WAYS is a power of two
      if (!found_inv && !spm_ways_i[cand]) begin
        victim    = cand;
        victim_ok = 1'b1;
      end
    end
  end

  assign mode_chg = spm_q ^ spm_ways_i;

  logic [XLEN-1:0] rd_word, mem_word;
  assign rd_word  = req_q.addr[3] ? data_rdata_i[hit_way][127:64] : data_rdata_i[hit_way][63:0];
  assign mem_word = req_q.addr[3] ? mem_rsp_i.rdata[127:64] : mem_rsp_i.rdata[63:0];

  always_comb begin
    req_ready_o     = (state_q == IDLE) && !(|clr_q);
    rsp_valid_o     = 1'b0;
    rsp_rdata_o     = '0;
    sram_req_o      = '0;
    data_we_o       = 1'b0;
    tag_we_o        = 1'b0;
    sram_idx_o      = idx;
    data_wdata_o    = {2{req_q.wdata}};
    data_be_o       = req_q.addr[3] ? {req_q.be, 8'h00} : {8'h00, req_q.be};
    tag_wdata_o     = tag;
    mem_req_valid_o = 1'b0;
    mem_req_o.addr  = {req_q.addr[PLEN-1:4], 4'h0};
    mem_req_o.we    = 1'b0;
    mem_req_o.wdata = req_q.wdata;
    mem_req_o.be    = req_q.be;
    hit_o           = 1'b0;
    miss_o          = 1'b0;
    unique case (state_q)
      IDLE: begin
        sram_idx_o = req_i.addr[IDX_W+3:4];
        if (req_valid_i && !(|clr_q)) sram_req_o = '1;
      end
      CLEAR: begin
        sram_req_o  = clr_q;
        tag_we_o    = 1'b1;
        tag_wdata_o = '0;
        sram_idx_o  = clr_row_q;
      end
      LOOKUP: begin
        hit_o  = |hit_vec;
        miss_o = !(|hit_vec) && !is_write;
        if (!is_write && |hit_vec) begin
          rsp_valid_o = 1'b1;
          rsp_rdata_o = rd_word;
        end
        if (is_write && |hit_vec) begin
          sram_req_o[hit_way] = 1'b1;
          data_we_o           = 1'b1;
        end
      end
      MEM_RD: mem_req_valid_o = 1'b1;
      RD_WAIT: if (mem_rsp_valid_i) begin
        rsp_valid_o = 1'b1;
        rsp_rdata_o = mem_word;
        if (victim_ok) begin
          sram_req_o[victim] = 1'b1;
          data_we_o          = 1'b1;
          tag_we_o           = 1'b1;
          data_wdata_o       = mem_rsp_i.rdata;
          data_be_o          = '1;
        end
      end
      MEM_WR: begin
        mem_req_valid_o = 1'b1;
        mem_req_o.addr  = req_q.addr;
        mem_req_o.we    = 1'b1;
      end
      WR_WAIT: if (mem_rsp_valid_i) rsp_valid_o = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= IDLE;
      req_q   <= '0;
      spm_q   <= '0;
      rr_q    <= '0;
      clr_q   <= '0;
      clr_row_q <= '0;
      for (int unsigned w = 0; w < WAYS; w++) valid_q[w] <= '0;
    end else begin
      spm_q <= spm_ways_i;
      // a way that changes mode loses all its lines now and its tags in CLEAR
      for (int unsigned w = 0; w < WAYS; w++)
        if (mode_chg[w]) valid_q[w] <= '0;
      if (|mode_chg) begin
        clr_q     <= clr_q | mode_chg;
        clr_row_q <= '0;
      end
      unique case (state_q)
        IDLE: if (|clr_q) begin
          state_q <= CLEAR;
        end else if (req_valid_i) begin
          req_q   <= req_i;
          state_q <= LOOKUP;
        end
        CLEAR: if (!(|mode_chg)) begin
          clr_row_q <= clr_row_q + 1'b1;
          if (clr_row_q == IDX_W'(SETS - 1)) begin
            clr_q   <= '0;
            state_q <= IDLE;
          end
        end
        LOOKUP: begin
          if (is_write)        state_q <= MEM_WR;
          else if (|hit_vec)   state_q <= IDLE;
          else                 state_q <= MEM_RD;
        end
        MEM_RD: if (mem_req_ready_i) state_q <= RD_WAIT;
        RD_WAIT: if (mem_rsp_valid_i) begin
          state_q <= IDLE;
          if (victim_ok && (spm_q == spm_ways_i)) begin
            valid_q[victim][idx] <= 1'b1;
            rr_q <= victim + 1'b1;
          end
        end
        MEM_WR: if (mem_req_ready_i) state_q <= WR_WAIT;
        WR_WAIT: if (mem_rsp_valid_i) state_q <= IDLE;
        default: state_q <= IDLE;
      endcase
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(hit_vec));

endmodule
