// tb_bnn_global_ctrl -- runs the controller (M = 128, N = 8) through a
// three-layer program with simple stand-ins for the PEs and checks every
// address it produces against sequences computed here:
//   layer 0  mid mode, 20 positions (two output-cache batches), 3 steps,
//            12 channels (a full and a partial group of PEs), stride 2
//   layer 1  mid mode with max-pool, 8 positions, 4 steps; the stand-in PEs
//            decide every pool at its first position, so the controller must
//            jump over the rest of each pool (pool skipping)
//   layer 2  last mode, final: 256 steps over two data words, 4 classes
// Checked: filter-memory read addresses and the filter-cache write of each
// word one cycle later; data address, first/last flags and the word/filter
// load flags of every step; drain write address, data and mask; which
// memory is read (swap per layer) and that a final layer writes nothing;
// the class scores; the number of pool-skip jumps and that a jump costs no
// cycle (the steps of the pooled layer are issued back to back); busy/done.
module tb_bnn_global_ctrl;
  import bnn_pkg::*;
  localparam int M = 128, N = 8, E = M / 16, OC = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic               cfg_we = 0, start = 0, busy, done;
  logic [2:0]         cfg_addr = '0;
  layer_desc_t        cfg_desc = '0;
  logic [3:0]         n_layers = '0;
  logic [SCORE_W-1:0] scores [16];
  logic [31:0]        cycles, pool_skips;
  logic               fm_re, dm_re, dm_rsel, dm_we, pe_maxpool, pe_clr;
  logic [10:0]        fm_raddr;
  logic [7:0]         dm_raddr, dm_waddr;
  logic [M-1:0]       dm_wdata, dm_wmask, pe_in_mask;
  layer_mode_e        pe_mode;
  logic signed [M-1:0] pe_acc_init;
  logic [N-1:0]       fl_we;
  logic [5:0]         fl_addr, st_fidx;
  logic               st_valid, st_first, st_last, st_dload, st_fload;
  logic [CNT_W-1:0]   st_pos;
  logic [3:0]         dr_idx;
  logic [N-1:0]       dr_bits, pd_valid, res_valid;
  logic [CNT_W-1:0]   pd_id [N];
  logic signed [M-1:0] res_acc [N];

  bnn_global_ctrl #(.M(M), .N(N)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- program ----------------
  layer_desc_t lay [3];
  initial begin
    lay[0] = '0; lay[0].mode = MODE_MID; lay[0].n_pos = 20; lay[0].n_steps = 3;
    lay[0].pos_stride = 2; lay[0].n_cout = 12; lay[0].filt_base = 100; lay[0].filt_words = 3;
    lay[0].in_bits = 40; lay[0].acc_init = 16'(-7);
    lay[1] = '0; lay[1].mode = MODE_MID; lay[1].maxpool = 1; lay[1].n_pos = 8; lay[1].n_steps = 4;
    lay[1].pos_stride = 1; lay[1].n_cout = 8; lay[1].filt_base = 500; lay[1].filt_words = 4;
    lay[2] = '0; lay[2].mode = MODE_LAST; lay[2].final_layer = 1; lay[2].n_pos = 1;
    lay[2].n_steps = 256; lay[2].pos_stride = 2; lay[2].n_cout = 4; lay[2].filt_base = 900;
    lay[2].filt_words = 32;
  end

  // ---------------- PE stand-ins ----------------
  // decide a pool 3 cycles after the last step of its first position; report
  // a result 3 cycles after every last step
  logic [2:0] dec_pipe, res_pipe;
  logic [CNT_W-1:0] pos_pipe [3];
  always_ff @(posedge clk) begin
    dec_pipe <= {dec_pipe[1:0], st_valid && st_last && pe_maxpool && st_pos[0] == 1'b0};
    res_pipe <= {res_pipe[1:0], st_valid && st_last};
    pos_pipe[0] <= st_pos; pos_pipe[1] <= pos_pipe[0]; pos_pipe[2] <= pos_pipe[1];
    if (!rst_n || pe_clr) pd_valid <= '0;
    else if (dec_pipe[1]) begin
      pd_valid <= '1;
      for (int l = 0; l < N; l++) pd_id[l] <= pos_pipe[1] / 2;
    end
  end
  always_comb begin
    res_valid = {N{res_pipe[2]}};
    for (int l = 0; l < N; l++) begin
      res_acc[l] = M'(1000 * l - 5);
      dr_bits[l] = ((int'(dr_idx) + l) % 3 == 0);
    end
  end

  // ---------------- expected sequences ----------------
  int exp_fm [$];          // filter-memory addresses
  int exp_fl [$];          // lane*64 + word written into a filter cache
  int exp_wr_addr [$];
  logic [M-1:0] exp_wr_mask [$], exp_wr_data [$];
  int exp_issues [3];

  initial begin
    #1;
    for (int li = 0; li < 3; li++) begin
      automatic int ncout = int'(lay[li].n_cout), fw = int'(lay[li].filt_words);
      automatic int np = int'(lay[li].n_pos);
      automatic int owpp = (ncout + M - 1) / M;
      for (int g = 0; g * N < ncout; g++) begin
        automatic int act = (ncout - g * N > N) ? N : ncout - g * N;
        for (int l = 0; l < act; l++)
          for (int w = 0; w < fw; w++) begin
            exp_fm.push_back(int'(lay[li].filt_base) + (g * N + l) * fw + w);
            exp_fl.push_back(l * 64 + w);
          end
        if (!lay[li].final_layer)
          for (int t0 = 0; t0 < np; t0 += OC) begin
            automatic int nb = (np - t0 > OC) ? OC : np - t0;
            automatic int nout = lay[li].maxpool ? nb / 2 : nb;
            for (int i = 0; i < nout; i++) begin
              logic [N-1:0] pk;
              automatic int q = (lay[li].maxpool ? t0 / 2 : t0) + i;
              for (int l = 0; l < N; l++) pk[l] = (l < act) && ((i + l) % 3 == 0);
              exp_wr_addr.push_back(q * owpp + (g * N) / M);
              exp_wr_mask.push_back(M'((1 << act) - 1) << ((g * N) % M));
              exp_wr_data.push_back(M'(pk) << ((g * N) % M));
            end
          end
      end
    end
  end

  // ---------------- monitor ----------------
  int cur = 0, s_exp = 0, issues [3];
  int cyc = 0, l1_first = -1, l1_last = -1;   // first/last issue cycle of layer 1
  always @(posedge clk) cyc++;
  int fl_expect = -1;
  always @(posedge clk) if (rst_n) begin
    // layer tracking from the filter region being read
    if (fm_re) begin
      if (fm_raddr >= 900) cur = 2; else if (fm_raddr >= 500) cur = 1; else cur = 0;
      chk(exp_fm.size() > 0 && int'(fm_raddr) == exp_fm[0],
          $sformatf("filter read %0d", fm_raddr));
      if (exp_fm.size() > 0) void'(exp_fm.pop_front());
      chk(pe_clr, "PE pool state not cleared during a filter load");
    end
    if (fl_we != '0) begin
      chk(exp_fl.size() > 0 && $onehot(fl_we) && fl_we[exp_fl[0] / 64] && int'(fl_addr) == exp_fl[0] % 64,
          $sformatf("filter cache write lanes %b word %0d", fl_we, fl_addr));
      if (exp_fl.size() > 0) void'(exp_fl.pop_front());
    end
    if (st_valid) begin
      automatic int s = st_first ? 0 : s_exp;
      int wip, fi;
      bit dl, fl;
      automatic layer_desc_t d = lay[cur];
      issues[cur]++;
      if (cur == 1) begin
        if (l1_first < 0) l1_first = cyc;
        l1_last = cyc;
      end
      case (d.mode)
        MODE_LAST: begin wip = s / M; dl = (s % M == 0); fi = s / E; fl = (s % E == 0); end
        default:   begin wip = s; dl = 1; fi = s; fl = 1; end
      endcase
      chk(dm_re && int'(dm_raddr) == int'(st_pos) * int'(d.pos_stride) + wip,
          $sformatf("layer %0d data address %0d for pos %0d step %0d", cur, dm_raddr, st_pos, s));
      chk(st_last == (s == int'(d.n_steps) - 1), "last flag");
      chk(st_dload == dl && st_fload == fl && int'(st_fidx) == fi, "load flags / filter index");
      chk(dm_rsel == cur[0], "memory swap");
      chk(pe_mode == d.mode && pe_maxpool == d.maxpool, "mode broadcast");
      if (cur == 0) chk(pe_in_mask == (M'(1) << 40) - 1 && pe_acc_init == -7, "mask / acc_init");
      if (cur == 1 && !st_first) chk(st_pos[0] == 1'b0 || s < 2, "pool not skipped");
      s_exp = s + 1;
    end
    if (dm_we) begin
      chk(exp_wr_addr.size() > 0 && int'(dm_waddr) == exp_wr_addr[0] &&
          dm_wmask == exp_wr_mask[0] && dm_wdata == exp_wr_data[0],
          $sformatf("drain write addr %0d mask %h data %h", dm_waddr, dm_wmask, dm_wdata));
      if (exp_wr_addr.size() > 0) begin
        void'(exp_wr_addr.pop_front()); void'(exp_wr_mask.pop_front()); void'(exp_wr_data.pop_front());
      end
      chk(cur != 2, "final layer wrote the data memory");
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3; i++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = 3'(i); cfg_desc = lay[i];
    end
    @(negedge clk);
    cfg_we = 0; n_layers = 4'd3; start = 1;
    @(negedge clk);
    start = 0;
    chk(busy && !done, "busy after start");
    wait (done);
    @(negedge clk);
    chk(!busy, "idle when done");
    chk(issues[0] == 2 * 20 * 3, $sformatf("layer 0 issued %0d steps", issues[0]));
    chk(issues[1] == 4 * (4 + 2), $sformatf("layer 1 issued %0d steps", issues[1]));
    chk(issues[2] == 256, $sformatf("layer 2 issued %0d steps", issues[2]));
    chk(pool_skips == 4, $sformatf("%0d pool-skip jumps", pool_skips));
    chk(l1_last - l1_first == issues[1] - 1,
        $sformatf("layer 1 steps spread over %0d cycles: a jump cost a cycle", l1_last - l1_first + 1));
    chk(exp_fm.size() == 0 && exp_fl.size() == 0 && exp_wr_addr.size() == 0, "missing accesses");
    for (int l = 0; l < 4; l++)
      chk(signed'(scores[l]) == 1000 * l - 5, $sformatf("score %0d = %0d", l, signed'(scores[l])));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
