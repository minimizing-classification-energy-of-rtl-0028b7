// bnn_sram -- one shared on-chip memory of the engine (filter, input or
// feature-map memory).
//
// Simple dual-port synchronous RAM: one write port with a per-bit write mask
// and one read port whose data appears on the clock edge after the address
// (one cycle latency, as a compiled SRAM macro or FPGA block RAM behaves).
// The per-bit mask lets the N processing engines deposit their N output bits
// into their slice of a feature-map word without a read-modify-write.
// Width and depth are parameters; the word width is the "memory width" M that
// the architecture scales. The memory is not reset; what is never written
// reads back as whatever it powered up with.
module bnn_sram #(
  parameter int unsigned WIDTH = 128,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  // write port
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [WIDTH-1:0] wmask,   // 1 = write this bit
  // read port
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= (mem[waddr] & ~wmask) | (wdata & wmask);
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
