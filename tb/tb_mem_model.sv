// tb_mem_model: behavioural main memory for the cache testbenches. Accepts
// one request at a time (ready while idle), answers LAT cycles later with
// a one-cycle rsp_valid: a whole 16-byte line for a read, an acknowledge
// for a word write. Words never written read as init_word(address), so a
// testbench can compute expected data on its own. Counts reads and writes.
module tb_mem_model
  import vmrt_pkg::*;
#(
  parameter int unsigned LAT = 4
) (
  input  logic     clk_i,
  input  logic     req_valid_i,
  output logic     req_ready_o,
  input  mem_req_t req_i,
  output logic     rsp_valid_o,
  output mem_rsp_t rsp_o
);
  logic [63:0] words [logic [55:0]];
  int reads = 0, writes = 0;
  int busy = 0;
  mem_req_t cur;

  function automatic logic [63:0] init_word(logic [55:0] a);
    return {~a[31:0], a[31:0]};
  endfunction

  function automatic logic [63:0] rd_word(logic [55:0] a);
    logic [55:0] wa;
    wa = {a[55:3], 3'b000};
    return words.exists(wa) ? words[wa] : init_word(wa);
  endfunction

  function automatic void poke(logic [55:0] a, logic [63:0] d);
    words[{a[55:3], 3'b000}] = d;
  endfunction

  assign req_ready_o = (busy == 0);

  initial begin
    rsp_valid_o = 0;
    rsp_o = '0;
  end

  always @(posedge clk_i) begin
    rsp_valid_o <= 1'b0;
    if (busy == 0) begin
      if (req_valid_i) begin
        cur  <= req_i;
        busy <= LAT;
      end
    end else if (busy == 1) begin
      busy <= 0;
      rsp_valid_o <= 1'b1;
      if (cur.we) begin
        logic [63:0] w;
        w = rd_word(cur.addr);
        for (int b = 0; b < 8; b++) if (cur.be[b]) w[8*b +: 8] = cur.wdata[8*b +: 8];
        words[{cur.addr[55:3], 3'b000}] = w;
        writes++;
        rsp_o <= '0;
      end else begin
        rsp_o.rdata <= {rd_word({cur.addr[55:4], 4'h8}), rd_word({cur.addr[55:4], 4'h0})};
        reads++;
      end
    end else begin
      busy <= busy - 1;
    end
  end
endmodule
