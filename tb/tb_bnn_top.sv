// tb_bnn_top -- end-to-end test of the whole engine at its default size
// (M = 128-bit memories, N = 8 PEs).
//
// Runs two networks shaped like the two case studies, and a small strided
// one, with pseudo-random weights and inputs generated by a hash so that
// nothing needs to be stored:
//   activity: 40 full-precision inputs -> binary dense 256 -> 256 -> 256
//             -> binary dense 16 (final, scores = accumulators)
//   stress:   64 x 7 full-precision frame -> binary conv 1x5 x128 -> conv x64
//             + max-pool 2 -> conv x64 -> conv x32 + pool -> conv x32 + pool
//             -> binary dense 64 -> 16-bit dense 4 (final)
//   strided:  34 x 3 frame -> conv 1x4 stride 2 x16 -> conv 1x3 x32 + pool
//             -> conv 1x3 stride 2 x24 -> 16-bit dense 5 (final)
// (convolutions without padding). The testbench lays the model out in the
// filter memory and the frame in the input memory, programs the layer table,
// runs the engine and compares every class score with a reference model
// written directly from the network arithmetic (sums of +1/-1 products,
// sign, OR-pooling). For the activity network, which has no pooling, the
// cycle count is also checked against the closed-form schedule of the
// controller. Mechanisms counted: first/mid/last layer modes, max-pool,
// pool-skip jumps, several channel groups, a partly filled group, several
// output-cache batches per group, strided convolutions, the memory swap
// between layers, and PE steps dropped by pool skipping.
module tb_bnn_top;
  import bnn_pkg::*;

  localparam int M = 128, N = 8, E = M / 16, OC_DEPTH = 16, N_SCORES = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               host_fw_we, host_in_we, cfg_we, start, busy, done;
  logic [10:0]        host_fw_addr;
  logic [7:0]         host_in_addr;
  logic [M-1:0]       host_fw_data, host_in_data;
  logic [2:0]         cfg_addr;
  layer_desc_t        cfg_desc;
  logic [3:0]         n_layers;
  logic [SCORE_W-1:0] scores [N_SCORES];
  logic [31:0]        cycles, pool_skips;

  bnn_top dut (
    .clk, .rst_n, .host_fw_we, .host_fw_addr, .host_fw_data, .host_in_we, .host_in_addr,
    .host_in_data, .cfg_we, .cfg_addr, .cfg_desc, .n_layers, .start, .busy, .done,
    .scores, .cycles, .pool_skips
  );

  int checks = 0, failures = 0;

  // watchdog
  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // PE steps executed and dropped by pool skipping (operations saved)
  longint pe_exec = 0, pe_drop = 0;
  for (genvar l = 0; l < N; l++) begin : g_count
    always @(posedge clk)
      if (dut.g_pe[l].u_pe.s1_valid) begin
        if (dut.g_pe[l].u_pe.skip1) pe_drop++;
        else pe_exec++;
      end
  end

  // ---------------- pseudo-random model ----------------
  function automatic int unsigned mix(int unsigned a);
    a ^= a >> 16; a *= 32'h7feb352d; a ^= a >> 15; a *= 32'h846ca68b; a ^= a >> 16;
    return a;
  endfunction
  function automatic int unsigned h4(int a, int b, int c, int d);
    return mix(32'(a) * 1000003 ^ mix(32'(b) * 7919 ^ mix(32'(c) * 104729 ^ mix(32'(d) + 17))));
  endfunction
  int net_id;
  function automatic bit wbit(int l, int o, int k, int c);
    return bit'((h4(net_id * 16 + l, o, k, c) >> 7) & 1);
  endfunction
  function automatic int wval(int l, int o, int k, int c);
    return int'(h4(net_id * 16 + l, o, k, c) % 401) - 200;
  endfunction
  function automatic int xval(int t, int c);
    return int'(h4(net_id * 16 + 15, t, c, 5) % 2001) - 1000;
  endfunction

  // ---------------- network description ----------------
  typedef struct {
    layer_mode_e mode;
    int k, cin, cout;
    bit pool, fin;
    int stride;          // positions advance by this many time steps
  } lspec_t;
  lspec_t net [8];
  int nl, t_in;

  bit  fmap [64][256];
  bit  ymap [64][256];
  int exp_score [N_SCORES];

  // mechanism counters
  int n_first, n_mid, n_last, n_pool, n_multi_group, n_partial_group, n_multi_batch, n_swap, n_stride;
  int total_skips;
  longint total_drops;

  task automatic host_fw(int addr, logic [M-1:0] data);
    @(negedge clk);
    host_fw_we = 1'b1; host_fw_addr = 11'(addr); host_fw_data = data;
    @(negedge clk);
    host_fw_we = 1'b0;
  endtask
  task automatic host_in(int addr, logic [M-1:0] data);
    @(negedge clk);
    host_in_we = 1'b1; host_in_addr = 8'(addr); host_in_data = data;
    @(negedge clk);
    host_in_we = 1'b0;
  endtask

  task automatic run_net(string name, output int exp_cycles);
    int fbase = 0, T = t_in, C = net[0].cin;
    int wpt;
    logic [M-1:0] word;
    exp_cycles = 0;
    // input frame: time step t occupies wpt words of E 16-bit samples
    wpt = (C + E - 1) / E;
    for (int t = 0; t < T; t++)
      for (int w = 0; w < wpt; w++) begin
        word = '0;
        for (int i = 0; i < E; i++)
          if (w * E + i < C) word[i*16 +: 16] = 16'(xval(t, w * E + i));
        host_in(t * wpt + w, word);
      end

    for (int l = 0; l < nl; l++) begin
      layer_desc_t d;
      int k = net[l].k, np, nsteps, fw, groups;
      int kc;
      if (l > 0) n_swap++;
      if (net[l].cin != C) $fatal(1, "bad network description");
      np = (T - k) / net[l].stride + 1;
      if (net[l].stride > 1) n_stride++;
      d = '0;
      d.mode = net[l].mode; d.maxpool = net[l].pool; d.final_layer = net[l].fin;
      d.n_pos = 16'(np); d.n_cout = 16'(net[l].cout); d.filt_base = 16'(fbase);
      case (net[l].mode)
        MODE_FIRST: begin
          wpt = (C + E - 1) / E; nsteps = k * wpt * E; fw = (nsteps + M - 1) / M;
          d.acc_init = '0; n_first++;
        end
        MODE_MID: begin
          wpt = (C + M - 1) / M; nsteps = k * wpt; fw = nsteps;
          d.in_bits = (C < M) ? 16'(C) : '0;
          d.acc_init = 16'(-((k * C + 1) / 2)); n_mid++;
        end
        default: begin
          wpt = (C + M - 1) / M; nsteps = k * wpt * M; fw = nsteps / E;
          d.acc_init = '0; n_last++;
        end
      endcase
      d.n_steps = 16'(nsteps); d.pos_stride = 16'(wpt * net[l].stride); d.filt_words = 16'(fw);
      if (net[l].pool) n_pool++;
      groups = (net[l].cout + N - 1) / N;
      if (groups > 1) n_multi_group++;
      if (net[l].cout % N != 0) n_partial_group++;
      if (np > OC_DEPTH) n_multi_batch++;

      // filters
      for (int o = 0; o < net[l].cout; o++)
        for (int j = 0; j < fw; j++) begin
          word = '0;
          for (int b = 0; b < M; b++) begin
            int e, kk, c;
            case (net[l].mode)
              MODE_FIRST: begin
                e = j * M + b;
                kk = e / (wpt * E); c = e % (wpt * E);
                if (e < nsteps && c < C) word[b] = wbit(l, o, kk, c);
              end
              MODE_MID: begin
                kk = j / wpt; c = (j % wpt) * M + b;
                if (c < C) word[b] = wbit(l, o, kk, c);
              end
              default: if (b % 16 == 0) begin
                e = j * E + b / 16;
                kk = e / (wpt * M); c = e % (wpt * M);
                if (c < C) word[b +: 16] = 16'(wval(l, o, kk, c));
              end
            endcase
          end
          host_fw(fbase + o * fw + j, word);
        end
      fbase += net[l].cout * fw;

      // descriptor
      @(negedge clk);
      cfg_we = 1'b1; cfg_addr = 3'(l); cfg_desc = d;
      @(negedge clk);
      cfg_we = 1'b0;

      // schedule without pool skips
      exp_cycles += 1;
      for (int g = 0; g < groups; g++) begin
        int act = (net[l].cout - g * N > N) ? N : net[l].cout - g * N;
        exp_cycles += act * fw + 1;
        for (int t0 = 0; t0 < np; t0 += OC_DEPTH) begin
          int nb = (np - t0 > OC_DEPTH) ? OC_DEPTH : np - t0;
          exp_cycles += nb * nsteps + 4 + (net[l].fin ? 1 : (net[l].pool ? nb / 2 : nb));
        end
      end

      // reference model
      kc = k * C;
      for (int o = 0; o < net[l].cout; o++)
        for (int p = 0; p < np; p++) begin
          int acc = 0;
          int agree = 0;
          for (int kk = 0; kk < k; kk++)
            for (int c = 0; c < C; c++)
              case (net[l].mode)
                MODE_FIRST: acc += wbit(l, o, kk, c) ? xval(p * net[l].stride + kk, c) : -xval(p * net[l].stride + kk, c);
                MODE_MID:   if (wbit(l, o, kk, c) == fmap[p * net[l].stride + kk][c]) agree++;
                default:    acc += fmap[p * net[l].stride + kk][c] ? wval(l, o, kk, c) : -wval(l, o, kk, c);
              endcase
          if (net[l].mode == MODE_MID) acc = 2 * agree - kc;
          if (net[l].fin) begin
            if (net[l].mode == MODE_MID) exp_score[o] = agree - (kc + 1) / 2;
            else exp_score[o] = acc;
          end else ymap[p][o] = (acc >= 0);
        end
      if (!net[l].fin) begin
        if (net[l].pool) begin
          for (int q = 0; q < np / 2; q++)
            for (int o = 0; o < net[l].cout; o++) fmap[q][o] = ymap[2*q][o] | ymap[2*q+1][o];
          T = np / 2;
        end else begin
          for (int q = 0; q < np; q++)
            for (int o = 0; o < net[l].cout; o++) fmap[q][o] = ymap[q][o];
          T = np;
        end
        C = net[l].cout;
      end
    end

    $display("%s: model occupies %0d filter-memory words, input %0d data words",
             name, fbase, t_in * ((net[0].cin + E - 1) / E));
    // run
    @(negedge clk);
    n_layers = 4'(nl); start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    wait (done);
    @(negedge clk);
    total_skips += int'(pool_skips);
    $display("%s: PE steps executed %0d, dropped by pool skipping %0d (%0.1f%%)", name,
             pe_exec, pe_drop, 100.0 * real'(pe_drop) / real'(pe_exec + pe_drop));
    total_drops += pe_drop;
    pe_exec = 0; pe_drop = 0;
    $display("%s: %0d cycles, %0d pool-skip jumps (no-skip schedule %0d cycles)",
             name, cycles, pool_skips, exp_cycles);
    for (int o = 0; o < net[nl-1].cout; o++) begin
      checks++;
      if (signed'(scores[o]) != exp_score[o]) begin
        failures++;
        $display("  FAIL %s score[%0d] = %0d, expected %0d", name, o, signed'(scores[o]), exp_score[o]);
      end
    end
  endtask

  initial begin
    int exp_cycles;
    host_fw_we = 0; host_in_we = 0; cfg_we = 0; start = 0;
    host_fw_addr = '0; host_in_addr = '0; host_fw_data = '0; host_in_data = '0;
    cfg_addr = '0; cfg_desc = '0; n_layers = '0;
    n_first = 0; n_mid = 0; n_last = 0; n_pool = 0; n_multi_group = 0;
    n_partial_group = 0; n_multi_batch = 0; n_swap = 0; n_stride = 0; total_skips = 0; total_drops = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // physical-activity shaped MLP
    net_id = 1; t_in = 1; nl = 4;
    net[0] = '{MODE_FIRST, 1, 40, 256, 1'b0, 1'b0, 1};
    net[1] = '{MODE_MID,   1, 256, 256, 1'b0, 1'b0, 1};
    net[2] = '{MODE_MID,   1, 256, 256, 1'b0, 1'b0, 1};
    net[3] = '{MODE_MID,   1, 256, 16, 1'b0, 1'b1, 1};
    run_net("activity", exp_cycles);
    checks++;
    if (cycles != 32'(exp_cycles)) begin
      failures++;
      $display("  FAIL activity cycles %0d, expected %0d", cycles, exp_cycles);
    end

    // stress-detection shaped ConvNet
    net_id = 2; t_in = 64; nl = 7;
    net[0] = '{MODE_FIRST, 5, 7, 128, 1'b0, 1'b0, 1};
    net[1] = '{MODE_MID,   5, 128, 64, 1'b1, 1'b0, 1};
    net[2] = '{MODE_MID,   5, 64, 64, 1'b0, 1'b0, 1};
    net[3] = '{MODE_MID,   5, 64, 32, 1'b1, 1'b0, 1};
    net[4] = '{MODE_MID,   5, 32, 32, 1'b1, 1'b0, 1};
    net[5] = '{MODE_MID,   3, 32, 64, 1'b0, 1'b0, 1};
    net[6] = '{MODE_LAST,  1, 64, 4, 1'b0, 1'b1, 1};
    run_net("stress", exp_cycles);
    checks++;
    if (cycles > 32'(exp_cycles)) begin
      failures++;
      $display("  FAIL stress took longer than the no-skip schedule");
    end

    // small network with strided convolutions (positions advance by 2 steps)
    net_id = 3; t_in = 34; nl = 4;
    net[0] = '{MODE_FIRST, 4, 3, 16, 1'b0, 1'b0, 2};
    net[1] = '{MODE_MID,   3, 16, 32, 1'b1, 1'b0, 1};
    net[2] = '{MODE_MID,   3, 32, 24, 1'b0, 1'b0, 2};
    net[3] = '{MODE_LAST,  3, 24, 5, 1'b0, 1'b1, 1};
    run_net("strided", exp_cycles);
    checks++;
    if (cycles > 32'(exp_cycles)) begin
      failures++;
      $display("  FAIL strided took longer than the no-skip schedule");
    end

    // every mechanism must have happened
    begin
      int mech [9];
      string mname [9];
      mech = '{n_first, n_mid, n_last, n_pool, total_skips, n_multi_group, n_partial_group, n_multi_batch,
               n_stride};
      mname = '{"first-layer mode", "mid-layer mode", "last-layer mode", "max-pool",
                "pool-skip jump", "several channel groups", "partial group", "several batches",
                "strided convolution"};
      for (int i = 0; i < 9; i++) begin
        checks++;
        $display("mechanism %-24s : %0d", mname[i], mech[i]);
        if (mech[i] == 0) failures++;
      end
      checks++;
      $display("mechanism %-24s : %0d", "memory swap", n_swap);
      if (n_swap == 0) failures++;
      checks++;
      $display("mechanism %-24s : %0d", "PE step dropped", total_drops);
      if (total_drops == 0) failures++;
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
