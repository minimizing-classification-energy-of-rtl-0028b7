// tb_bnn_output_cache -- writes random bits into the default 16-slot output
// cache and reads them back with max-pool off (each slot) and on (OR of each
// pair of slots), including a pool whose second slot was never rewritten.
module tb_bnn_output_cache;
  localparam int D = 16, P = 2;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, wbit = 0, maxpool = 0, rbit;
  logic [3:0] waddr = '0, ridx = '0;
  logic [D-1:0] model;
  int checks = 0, failures = 0;

  bnn_output_cache #(.DEPTH(D), .POOL(P)) dut (.clk, .we, .waddr, .wbit, .maxpool, .ridx, .rbit);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_all();
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1; waddr = 4'(a); wbit = 1'($urandom); model[a] = wbit;
    end
    @(negedge clk);
    we = 0;
  endtask

  task automatic read_all();
    maxpool = 0;
    for (int i = 0; i < D; i++) begin
      ridx = 4'(i); #1;
      checks++;
      if (rbit !== model[i]) begin failures++; $display("FAIL bypass slot %0d", i); end
    end
    maxpool = 1;
    for (int i = 0; i < D / P; i++) begin
      ridx = 4'(i); #1;
      checks++;
      if (rbit !== (model[2*i] | model[2*i+1])) begin failures++; $display("FAIL pool %0d", i); end
    end
  endtask

  initial begin
    for (int n = 0; n < 20; n++) begin
      write_all();
      read_all();
    end
    // a skipped slot keeps a stale value; the written +1 decides the pool
    @(negedge clk);
    we = 1; waddr = 4'd6; wbit = 1'b1; model[6] = 1'b1;
    @(negedge clk);
    we = 0; maxpool = 1; ridx = 4'd3; #1;
    checks++;
    if (rbit !== 1'b1) begin failures++; $display("FAIL pool with written +1"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
