// tb_bnn_popcount -- checks the population count of 128-bit words against a
// bit-by-bit count: all-zeros, all-ones, single bits and random words.
module tb_bnn_popcount;
  localparam int M = 128;
  logic [M-1:0] din;
  logic [$clog2(M):0] count;
  int checks = 0, failures = 0;

  bnn_popcount #(.M(M)) dut (.din, .count);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic [M-1:0] v);
    int ref_cnt = 0;
    for (int i = 0; i < M; i++) if (v[i]) ref_cnt++;
    din = v;
    #1;
    checks++;
    if (int'(count) != ref_cnt) begin
      failures++;
      $display("FAIL din=%h count=%0d expected %0d", v, count, ref_cnt);
    end
  endtask

  initial begin
    logic [M-1:0] v;
    check('0);
    check('1);
    for (int i = 0; i < M; i++) check(M'(1) << i);
    for (int n = 0; n < 500; n++) begin
      for (int w = 0; w < M / 32; w++) v[w*32 +: 32] = $urandom;
      if (n % 3 == 1) v &= {M/32{$urandom}};
      check(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
