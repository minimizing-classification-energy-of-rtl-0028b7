// tb_bnn_filter_cache -- fills the default-size filter cache (64 words of 128
// bits), reads it back in random order and checks data and the one-cycle read
// latency; a read in the same cycle as a write must return the old word.
module tb_bnn_filter_cache;
  localparam int M = 128, D = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [5:0] waddr = '0, raddr = '0;
  logic [M-1:0] wdata = '0, rdata;
  logic [M-1:0] model [D];
  int checks = 0, failures = 0;

  bnn_filter_cache #(.M(M), .DEPTH(D)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [M-1:0] rnd();
    logic [M-1:0] v;
    for (int i = 0; i < M / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1; waddr = 6'(a); wdata = rnd(); model[a] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int n = 0; n < 300; n++) begin
      automatic int a = $urandom_range(D - 1);
      @(negedge clk);
      re = 1; raddr = 6'(a);
      @(negedge clk);
      re = 0;
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        $display("FAIL word %0d: %h expected %h", a, rdata, model[a]);
      end
    end
    // read and write of the same word in one cycle: old data
    @(negedge clk);
    we = 1; re = 1; waddr = 6'd5; raddr = 6'd5; wdata = ~model[5];
    @(negedge clk);
    we = 0; re = 0;
    checks++;
    if (rdata !== model[5]) begin
      failures++;
      $display("FAIL read-during-write did not return the old word");
    end
    model[5] = ~model[5];
    @(negedge clk);
    re = 1; raddr = 6'd5;
    @(negedge clk);
    re = 0;
    checks++;
    if (rdata !== model[5]) begin
      failures++;
      $display("FAIL word 5 not updated");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
