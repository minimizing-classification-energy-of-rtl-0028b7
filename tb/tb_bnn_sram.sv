// tb_bnn_sram -- checks the shared memory at its default size: full-word and
// bit-masked writes against a reference array, one-cycle read latency, and
// that the read data holds while the read enable is low.
module tb_bnn_sram;
  localparam int W = 128, D = 256;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [7:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, wmask = '0, rdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  bnn_sram #(.WIDTH(W), .DEPTH(D)) dut (.clk, .we, .waddr, .wdata, .wmask, .re, .raddr, .rdata);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v;
    for (int i = 0; i < W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    // fill every word
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1; waddr = 8'(a); wdata = rnd(); wmask = '1; model[a] = wdata;
    end
    // masked writes, narrow slices like the PEs' output packets
    for (int n = 0; n < 400; n++) begin
      automatic int a = $urandom_range(D - 1);
      logic [W-1:0] m;
      @(negedge clk);
      m = (n % 2 != 0) ? rnd() : (W'(8'hff) << (8 * $urandom_range(15)));
      we = 1; waddr = 8'(a); wdata = rnd(); wmask = m;
      model[a] = (model[a] & ~m) | (wdata & m);
    end
    @(negedge clk);
    we = 0;
    // read back with one cycle latency
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      re = 1; raddr = 8'(a);
      @(negedge clk);
      re = 0; raddr = 8'(a + 1);
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        $display("FAIL addr %0d: %h expected %h", a, rdata, model[a]);
      end
      @(negedge clk);
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        $display("FAIL addr %0d: read data did not hold", a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
