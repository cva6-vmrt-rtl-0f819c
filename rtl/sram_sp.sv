// sram_sp: single-port synchronous memory with byte-enabled writes, the
// storage of the cache data and tag arrays (and, through the data arrays,
// of the scratchpad).
//
// One access per cycle: with req_i high the row addr_i is read, or written
// where be_i is set when we_i is high. Read data appears on rdata_o in the
// next cycle and holds until the next read. A write does not change
// rdata_o. Contents are not reset, as in a real SRAM macro; this array
// stands in for the foundry macros.
module sram_sp #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned WIDTH = 128
) (
  input  logic                     clk_i,
  input  logic                     req_i,
  input  logic                     we_i,
  input  logic [$clog2(DEPTH)-1:0] addr_i,
  input  logic [WIDTH-1:0]         wdata_i,
  input  logic [(WIDTH+7)/8-1:0]   be_i,
  output logic [WIDTH-1:0]         rdata_o
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int unsigned b = 0; b < WIDTH; b++)
          if (be_i[b/8]) mem[addr_i][b] <= wdata_i[b];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end

endmodule
