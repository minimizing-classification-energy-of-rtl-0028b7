// bnn_filter_cache -- per-PE store for the one filter the PE is working on.
//
// The global controller copies a filter word by word from the shared filter
// memory into the cache of each PE before that PE's group of output channels
// is computed; the PE then re-reads it for every output position, so the
// shared filter memory is touched once per filter and not once per patch.
// Synchronous write, synchronous read with one cycle latency (the read data
// meets the data word from the shared memory, which has the same latency).
// DEPTH, the longest filter in words, is this design's choice: the source
// gives no cache size.
module bnn_filter_cache #(
  parameter int unsigned M     = 128,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [M-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [M-1:0]  rdata
);

  logic [M-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
