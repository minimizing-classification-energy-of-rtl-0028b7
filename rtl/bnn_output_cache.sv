// bnn_output_cache -- output cache, max-pool OR and its bypass multiplexer.
//
// The PE writes the sign bit of every finished output position into slot
// (position mod DEPTH). Once the controller has a batch of DEPTH positions it
// reads the cache back one output at a time: with max-pool off the read index
// selects a single slot; with max-pool on it selects a group of POOL
// neighbouring slots and returns their OR, which is the maximum of +1/-1
// values coded as 1/0. A slot that pool skipping never wrote keeps an old
// value, which is harmless: it is only ever ORed with a slot holding 1.
// Write is synchronous; the read is combinational so that all PEs present
// their bit of the same output in the same cycle.
module bnn_output_cache #(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned POOL  = 2,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic          wbit,
  input  logic          maxpool,   // 1: OR POOL slots, 0: bypass
  input  logic [AW-1:0] ridx,      // output index (pooled index when maxpool)
  output logic          rbit
);

  logic [DEPTH-1:0] bits;

  always_ff @(posedge clk) begin
    if (we) bits[waddr] <= wbit;
  end

  always_comb begin
    if (maxpool) begin
      rbit = 1'b0;
      for (int unsigned k = 0; k < POOL; k++)
        rbit |= bits[AW'(int'(ridx) * POOL + k)];
    end else begin
      rbit = bits[ridx];
    end
  end

  initial assert (DEPTH % POOL == 0) else $error("DEPTH must be a multiple of POOL");

endmodule
