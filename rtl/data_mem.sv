// data_mem: word-addressed data memory with one port per load/store unit.
//
// Each port accesses the array when `en` is high: a write stores `wdata` at the end of the
// cycle; a read returns the word on `rdata` one cycle later, and `rdata` holds until the next
// read on that port. Reads see the contents before writes of the same cycle. When two ports
// write one address in a cycle, the higher-numbered port wins. The memory holds the seven
// stored forward-metric vectors of a 6144-bit block (43,008 words) and the LLR vectors of the
// decoder; its size is this design's choice, the paper gives none.
module data_mem
  import tta_pkg::*;
#(
  parameter int unsigned DEPTH     = 131072,
  parameter int unsigned NUM_PORTS = 3,
  localparam int unsigned ADDR_W   = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic [NUM_PORTS-1:0] en,
  input  logic [NUM_PORTS-1:0] we,
  input  logic [ADDR_W-1:0] addr  [NUM_PORTS],
  input  word_t             wdata [NUM_PORTS],
  output word_t             rdata [NUM_PORTS]
);
  word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    for (int p = 0; p < NUM_PORTS; p++) begin
      if (en[p] && !we[p]) rdata[p] <= mem[addr[p]];
    end
    for (int p = 0; p < NUM_PORTS; p++) begin
      if (en[p] && we[p]) mem[addr[p]] <= wdata[p];
    end
  end
endmodule
