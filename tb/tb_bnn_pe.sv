// tb_bnn_pe -- drives one default-size PE (M = 128) the way the global
// controller does: fills its filter cache, issues one step per cycle and
// presents the shared-memory word one cycle after each step. Checks, against
// sums worked out here:
//   mid mode   : acc_init + sum of pcnt(xnor(data, filter) & mask) over 3 words
//   first mode : acc_init + sum of (filter bit ? sample : -sample), 16-bit
//                samples packed 8 per word, 2 words
//   last mode  : sum of (data bit ? weight : -weight), 16-bit weights packed
//                8 per filter word, 24 steps
//   the output-cache sign bit of every patch, the 3-cycle issue-to-result
//   latency, and pool skipping: a +1 in the first position of a pool makes
//   the PE drop the second position (no result), the pooled bit is still 1;
//   the same with 16 positions issued back to back with random signs.
module tb_bnn_pe;
  import bnn_pkg::*;
  localparam int M = 128, E = M / 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  layer_mode_e        mode = MODE_MID;
  logic               maxpool = 0, clr = 0, fl_we = 0;
  logic [M-1:0]       in_mask = '1, fl_data = '0, mem_rdata = '0, next_data = '0;
  logic signed [M-1:0] acc_init = '0;
  logic [5:0]         fl_addr = '0, st_fidx = '0;
  logic               st_valid = 0, st_first = 0, st_last = 0, st_dload = 0, st_fload = 0;
  logic [CNT_W-1:0]   st_pos = '0;
  logic [3:0]         dr_idx = '0;
  logic               dr_bit, pd_valid, res_valid;
  logic [CNT_W-1:0]   pd_id;
  logic signed [M-1:0] res_acc;

  bnn_pe #(.M(M), .FC_DEPTH(64), .OC_DEPTH(16), .POOL(2)) dut (.*);

  always @(posedge clk) mem_rdata <= next_data;

  int checks = 0, failures = 0, cyc = 0, last_issue_cyc, res_cnt = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (res_valid) res_cnt++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [M-1:0] rnd();
    logic [M-1:0] v;
    for (int i = 0; i < M / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  logic [M-1:0] fwords [8];
  logic [M-1:0] dwords [8];

  task automatic load_filter(int nw);
    for (int j = 0; j < nw; j++) begin
      @(negedge clk);
      fl_we = 1; fl_addr = 6'(j); fl_data = fwords[j];
    end
    @(negedge clk);
    fl_we = 0;
  endtask

  // issue one patch; step s uses data word dw(s) and filter word fw(s)
  task automatic issue_patch(int nsteps, int pos);
    for (int s = 0; s < nsteps; s++) begin
      int dw, fw;
      bit dl, fl;
      case (mode)
        MODE_FIRST: begin dw = s / E; dl = (s % E == 0); fw = s / M; fl = (s % M == 0); end
        MODE_LAST:  begin dw = s / M; dl = (s % M == 0); fw = s / E; fl = (s % E == 0); end
        default:    begin dw = s; dl = 1; fw = s; fl = 1; end
      endcase
      @(negedge clk);
      st_valid = 1; st_first = (s == 0); st_last = (s == nsteps - 1);
      st_dload = dl; st_fload = fl; st_fidx = 6'(fw); st_pos = CNT_W'(pos);
      next_data = dwords[dw];
      last_issue_cyc = cyc;
    end
    @(negedge clk);
    st_valid = 0; st_first = 0; st_last = 0;
  endtask

  task automatic expect_result(int exp, string what);
    int waited = 0;
    while (!res_valid && waited < 10) begin @(posedge clk); #1; waited++; end
    checks++;
    if (!res_valid || res_acc != M'(exp)) begin
      failures++;
      $display("FAIL %s: acc %0d expected %0d", what, res_acc, exp);
    end
    checks++;
    if (cyc - last_issue_cyc != 3) begin
      failures++;
      $display("FAIL %s: result %0d cycles after the last step, expected 3", what, cyc - last_issue_cyc);
    end
    @(negedge clk);
  endtask

  initial begin
    int exp;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---------------- mid mode ----------------
    for (int n = 0; n < 20; n++) begin
      mode = MODE_MID; maxpool = 0;
      in_mask = (n % 2 != 0) ? ((M'(1) << 100) - 1) : '1;
      acc_init = M'(-150 + n);
      exp = -150 + n;
      for (int j = 0; j < 3; j++) begin
        fwords[j] = rnd(); dwords[j] = rnd();
        for (int b = 0; b < M; b++) if (in_mask[b] && fwords[j][b] == dwords[j][b]) exp++;
      end
      load_filter(3);
      issue_patch(3, n % 16);
      expect_result(exp, "mid");
      dr_idx = 4'(n % 16); #1;
      checks++;
      if (dr_bit !== (exp >= 0)) begin failures++; $display("FAIL mid sign bit"); end
    end

    // ---------------- first mode ----------------
    for (int n = 0; n < 20; n++) begin
      mode = MODE_FIRST; maxpool = 0; in_mask = '1;
      acc_init = M'(n * 37 - 300);
      exp = n * 37 - 300;
      fwords[0] = rnd();
      for (int j = 0; j < 2; j++) begin
        dwords[j] = rnd();
        for (int i = 0; i < E; i++) begin
          automatic int x = int'(signed'(dwords[j][i*16 +: 16]));
          exp += fwords[0][j * E + i] ? x : -x;
        end
      end
      load_filter(1);
      issue_patch(2 * E, n % 16);
      expect_result(exp, "first");
      dr_idx = 4'(n % 16); #1;
      checks++;
      if (dr_bit !== (exp >= 0)) begin failures++; $display("FAIL first sign bit"); end
    end

    // ---------------- last mode ----------------
    for (int n = 0; n < 20; n++) begin
      mode = MODE_LAST; maxpool = 0;
      acc_init = '0;
      exp = 0;
      dwords[0] = rnd();
      for (int j = 0; j < 3; j++) begin
        fwords[j] = rnd();
        for (int i = 0; i < E; i++) begin
          automatic int w = int'(signed'(fwords[j][i*16 +: 16]));
          exp += dwords[0][j * E + i] ? w : -w;
        end
      end
      load_filter(3);
      issue_patch(3 * E, n % 16);
      expect_result(exp, "last");
    end

    // ---------------- pool skipping ----------------
    mode = MODE_MID; maxpool = 1; in_mask = '1; acc_init = M'(-64 * 2);
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    fwords[0] = rnd(); fwords[1] = rnd();
    load_filter(2);
    // position 0: data equal to the filter -> +1, pool 0 decided
    dwords[0] = fwords[0]; dwords[1] = fwords[1];
    issue_patch(2, 0);
    expect_result(2 * M - 128, "pool pos 0");
    checks++;
    if (!(pd_valid && pd_id == 0)) begin failures++; $display("FAIL pool 0 not decided"); end
    // position 1 belongs to the decided pool: dropped
    begin
      int cnt0;
      @(negedge clk);
      cnt0 = res_cnt;
      dwords[0] = ~fwords[0]; dwords[1] = ~fwords[1];
      issue_patch(2, 1);
      repeat (5) @(negedge clk);
      checks++;
      if (res_cnt != cnt0) begin failures++; $display("FAIL skipped position produced a result"); end
    end
    // positions 2 (-1) and 3 (+1): pool 1 computed in full
    issue_patch(2, 2);
    expect_result(-128, "pool pos 2");
    checks++;
    if (pd_id == 1) begin failures++; $display("FAIL pool 1 decided by a -1"); end
    dwords[0] = fwords[0]; dwords[1] = fwords[1];
    issue_patch(2, 3);
    expect_result(128, "pool pos 3");
    // positions 4 and 5 both -1
    dwords[0] = ~fwords[0]; dwords[1] = ~fwords[1];
    issue_patch(2, 4);
    expect_result(-128, "pool pos 4");
    issue_patch(2, 5);
    expect_result(-128, "pool pos 5");
    for (int q = 0; q < 3; q++) begin
      dr_idx = 4'(q); #1;
      checks++;
      if (dr_bit !== (q != 2)) begin failures++; $display("FAIL pooled bit %0d = %0d", q, dr_bit); end
    end

    // back-to-back pooled positions, as the controller issues them: 16
    // positions (8 pools) with random signs, no gap between patches. A
    // position whose pool an earlier +1 decided must give no result.
    for (int rep = 0; rep < 4; rep++) begin
      bit sgn [16];
      automatic int exp_res = 0;
      int cnt0;
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      for (int q = 0; q < 16; q++) sgn[q] = 1'($urandom_range(1));
      for (int q = 0; q < 16; q++) if (!(q % 2 == 1 && sgn[q - 1])) exp_res++;
      cnt0 = res_cnt;
      for (int q = 0; q < 16; q++)
        for (int st = 0; st < 2; st++) begin
          @(negedge clk);
          st_valid = 1; st_first = (st == 0); st_last = (st == 1);
          st_dload = 1; st_fload = 1; st_fidx = 6'(st); st_pos = CNT_W'(q);
          next_data = sgn[q] ? fwords[st] : ~fwords[st];
        end
      @(negedge clk);
      st_valid = 0; st_first = 0; st_last = 0;
      repeat (6) @(negedge clk);
      checks++;
      if (res_cnt - cnt0 != exp_res) begin
        failures++;
        $display("FAIL back-to-back pools: %0d results, expected %0d", res_cnt - cnt0, exp_res);
      end
      for (int q = 0; q < 8; q++) begin
        dr_idx = 4'(q); #1;
        checks++;
        if (dr_bit !== (sgn[2*q] | sgn[2*q+1])) begin failures++; $display("FAIL back-to-back pooled bit %0d", q); end
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
