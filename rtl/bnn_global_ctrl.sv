// bnn_global_ctrl -- global address and data-flow controller.
//
// The only unit that computes addresses (and the only one with multipliers).
// It walks a table of layer descriptors, written by the host before start,
// and for each layer:
//   1. splits the output channels into groups of N, one channel per PE;
//   2. for each group copies every PE's filter from the shared filter memory
//      into that PE's filter cache (filter o at filt_base + o*filt_words);
//   3. streams the patches of OC_DEPTH consecutive output positions to all
//      PEs at once, one step per cycle: the data word of step s of position p
//      is at p*pos_stride + s (mid mode), p*pos_stride + s/(M/16) (first mode,
//      16-bit samples) or p*pos_stride + s/M (last mode, packed bits);
//   4. waits for the PE pipeline to empty and drains the output caches: output
//      q of the group becomes one N-bit packet, written with a bit mask into
//      word q*ceil(n_cout/M) + g*N/M at bit offset (g*N mod M) of the other
//      data memory. With max-pool, q counts pooled outputs.
// The input memory and the feature-map memory swap roles after every layer:
// even layers read the input memory and write the feature-map memory.
//
// Pool skipping: while streaming position p of pool q = p/POOL, if every
// active PE reports that pool q is already decided (+1 found), the controller
// stops streaming that pool and jumps to the first position of pool q+1. The
// jump costs no cycle: in the cycle it is taken, step 0 of that position is
// already issued (unless the batch has no further pool, which ends it).
//
// Final layer: nothing is written to the data memories; every PE's finished
// accumulator is kept as the score of class g*N + lane.
//
// Handshake with the host: write descriptors while idle, pulse start with
// n_layers set; busy is high until the last layer is finished, done then
// stays high until the next start. cycles counts busy cycles and pool_skips
// the number of pool-skip jumps of the last run.
// Layout, descriptor format, batch size and the skip-when-all-PEs-agree rule
// are this design's choices; the source describes the controller's role only.
module bnn_global_ctrl
  import bnn_pkg::*;
#(
  parameter int unsigned M          = 128,
  parameter int unsigned N          = 8,
  parameter int unsigned FILT_DEPTH = 2048,
  parameter int unsigned DATA_DEPTH = 256,
  parameter int unsigned FC_DEPTH   = 64,
  parameter int unsigned OC_DEPTH   = 16,
  parameter int unsigned POOL       = 2,
  parameter int unsigned MAX_LAYERS = 8,
  parameter int unsigned N_SCORES   = 16,
  localparam int unsigned ACC_W = M,
  localparam int unsigned FMAW  = (FILT_DEPTH > 1) ? $clog2(FILT_DEPTH) : 1,
  localparam int unsigned DMAW  = (DATA_DEPTH > 1) ? $clog2(DATA_DEPTH) : 1,
  localparam int unsigned FAW   = (FC_DEPTH > 1) ? $clog2(FC_DEPTH) : 1,
  localparam int unsigned OAW   = (OC_DEPTH > 1) ? $clog2(OC_DEPTH) : 1,
  localparam int unsigned LAW   = (MAX_LAYERS > 1) ? $clog2(MAX_LAYERS) : 1,
  localparam int unsigned LNW   = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned SCW   = (N_SCORES > 1) ? $clog2(N_SCORES) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // host side
  input  logic                    cfg_we,
  input  logic [LAW-1:0]          cfg_addr,
  input  layer_desc_t             cfg_desc,
  input  logic [LAW:0]            n_layers,
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  output logic [SCORE_W-1:0]      scores [N_SCORES],
  output logic [31:0]             cycles,
  output logic [31:0]             pool_skips,
  // filter memory read port
  output logic                    fm_re,
  output logic [FMAW-1:0]         fm_raddr,
  // data memories: read one, write the other
  output logic                    dm_re,
  output logic [DMAW-1:0]         dm_raddr,
  output logic                    dm_rsel,    // 0: input memory, 1: feature-map memory
  output logic                    dm_we,
  output logic [DMAW-1:0]         dm_waddr,
  output logic [M-1:0]            dm_wdata,
  output logic [M-1:0]            dm_wmask,
  // broadcast to the PEs
  output layer_mode_e             pe_mode,
  output logic                    pe_maxpool,
  output logic [M-1:0]            pe_in_mask,
  output logic signed [ACC_W-1:0] pe_acc_init,
  output logic                    pe_clr,
  output logic [N-1:0]            fl_we,
  output logic [FAW-1:0]          fl_addr,
  output logic                    st_valid,
  output logic                    st_first,
  output logic                    st_last,
  output logic                    st_dload,
  output logic                    st_fload,
  output logic [FAW-1:0]          st_fidx,
  output logic [CNT_W-1:0]        st_pos,
  output logic [OAW-1:0]          dr_idx,
  // from the PEs
  input  logic [N-1:0]            dr_bits,
  input  logic [N-1:0]            pd_valid,
  input  logic [CNT_W-1:0]        pd_id [N],
  input  logic [N-1:0]            res_valid,
  input  logic signed [ACC_W-1:0] res_acc [N]
);

  localparam int unsigned E    = M / DATA_W;
  localparam int unsigned LGM  = $clog2(M);
  localparam int unsigned LGE  = $clog2(E);
  localparam int unsigned WAIT_CYC = 4;   // issue -> result visible, plus one

  typedef enum logic [2:0] {
    S_IDLE, S_LAYER, S_FLOAD, S_FWAIT, S_COMP, S_WAIT, S_DRAIN
  } state_e;

  state_e state;

  layer_desc_t table_q [MAX_LAYERS];
  layer_desc_t d;

  logic [LAW:0]      li;          // current layer
  logic [CNT_W-1:0]  grp_base;    // first output channel of the group
  logic [CNT_W-1:0]  t0, t_end;   // batch of positions [t0, t_end)
  logic [CNT_W-1:0]  p, s;        // position and step being issued
  logic [CNT_W-1:0]  fl_lane, fl_w;
  logic              fl_v_q;
  logic [LNW-1:0]    fl_lane_q;
  logic [FAW-1:0]    fl_w_q;
  logic [2:0]        wcnt;
  logic [CNT_W-1:0]  di, n_out;
  logic              rsel;

  // ---------------- derived layer values ----------------
  logic [CNT_W-1:0] out_wpp;      // output words per position
  logic [CNT_W-1:0] n_active;     // PEs with a channel in this group
  logic [N-1:0]     lane_act;
  logic [CNT_W-1:0] q_cur;

  always_comb begin
    out_wpp = (d.n_cout + CNT_W'(M - 1)) >> LGM;
    n_active = (d.n_cout - grp_base > CNT_W'(N)) ? CNT_W'(N) : d.n_cout - grp_base;
    for (int unsigned l = 0; l < N; l++) lane_act[l] = (CNT_W'(l) < n_active);
    for (int unsigned i = 0; i < M; i++)
      pe_in_mask[i] = (d.in_bits == '0) || (CNT_W'(i) < d.in_bits);
    q_cur = CNT_W'(p / POOL);
  end

  assign pe_mode     = d.mode;
  assign pe_maxpool  = d.maxpool;
  assign pe_acc_init = ACC_W'(signed'(d.acc_init));
  assign busy        = (state != S_IDLE);
  assign dm_rsel     = rsel;

  // every active PE has decided the pool being streamed
  logic all_decided;
  always_comb begin
    all_decided = 1'b1;
    for (int unsigned l = 0; l < N; l++)
      if (lane_act[l] && !(pd_valid[l] && pd_id[l] == q_cur)) all_decided = 1'b0;
  end
  logic do_skip, skip_end;
  logic [CNT_W-1:0] p_next_pool;   // first position of the next pool
  logic [CNT_W-1:0] p_i, s_i;      // position and step issued in this cycle
  assign do_skip     = (state == S_COMP) && d.maxpool && all_decided;
  assign p_next_pool = (q_cur + 1'b1) * CNT_W'(POOL);
  assign skip_end    = do_skip && (p_next_pool >= t_end);
  assign p_i         = do_skip ? p_next_pool : p;
  assign s_i         = do_skip ? '0 : s;

  // ---------------- step issue (combinational) ----------------
  logic [CNT_W-1:0] wip;   // data word within the patch
  logic [FAW-1:0]   fidx;
  logic             issue;

  always_comb begin
    unique case (d.mode)
      MODE_FIRST: begin
        wip      = s_i >> LGE;
        st_dload = (s_i & CNT_W'(E - 1)) == '0;
        fidx     = FAW'(s_i >> LGM);
        st_fload = (s_i & CNT_W'(M - 1)) == '0;
      end
      MODE_LAST: begin
        wip      = s_i >> LGM;
        st_dload = (s_i & CNT_W'(M - 1)) == '0;
        fidx     = FAW'(s_i >> LGE);
        st_fload = (s_i & CNT_W'(E - 1)) == '0;
      end
      default: begin
        wip      = s_i;
        st_dload = 1'b1;
        fidx     = FAW'(s_i);
        st_fload = 1'b1;
      end
    endcase
    issue    = (state == S_COMP) && !skip_end;
    st_valid = issue;
    st_first = (s_i == '0);
    st_last  = (s_i == d.n_steps - 1'b1);
    st_fidx  = fidx;
    st_pos   = p_i;
    dm_re    = issue;
    dm_raddr = DMAW'(p_i * d.pos_stride + wip);
  end

  // ---------------- filter load ----------------
  always_comb begin
    fm_re    = (state == S_FLOAD);
    fm_raddr = FMAW'(d.filt_base + (grp_base + fl_lane) * d.filt_words + fl_w);
    fl_we    = '0;
    if (fl_v_q) fl_we[fl_lane_q] = 1'b1;
    fl_addr  = fl_w_q;
    pe_clr   = (state == S_FLOAD);
  end

  // ---------------- drain ----------------
  logic [CNT_W-1:0] out_q;
  logic [N-1:0]     packet;
  logic [CNT_W-1:0] bit_off;
  always_comb begin
    dr_idx   = OAW'(di);
    packet   = dr_bits & lane_act;
    out_q    = (d.maxpool ? CNT_W'(t0 / POOL) : t0) + di;
    bit_off  = grp_base & CNT_W'(M - 1);
    dm_we    = (state == S_DRAIN) && !d.final_layer;
    dm_waddr = DMAW'(out_q * out_wpp + (grp_base >> LGM));
    dm_wdata = M'(packet) << bit_off;
    dm_wmask = M'(lane_act) << bit_off;
  end

  // ---------------- sequencing ----------------
  logic [CNT_W-1:0] next_t_end;
  assign next_t_end = (t_end + CNT_W'(OC_DEPTH) > d.n_pos) ? d.n_pos : t_end + CNT_W'(OC_DEPTH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      d          <= '0;
      li         <= '0;
      grp_base   <= '0;
      t0         <= '0;
      t_end      <= '0;
      p          <= '0;
      s          <= '0;
      fl_lane    <= '0;
      fl_w       <= '0;
      fl_v_q     <= 1'b0;
      fl_lane_q  <= '0;
      fl_w_q     <= '0;
      wcnt       <= '0;
      di         <= '0;
      n_out      <= '0;
      rsel       <= 1'b0;
      done       <= 1'b0;
      cycles     <= '0;
      pool_skips <= '0;
    end else begin
      fl_v_q    <= (state == S_FLOAD);
      fl_lane_q <= LNW'(fl_lane);
      fl_w_q    <= FAW'(fl_w);
      if (busy) cycles <= cycles + 1'b1;

      unique case (state)
        S_IDLE: if (start && n_layers != '0) begin
          state      <= S_LAYER;
          li         <= '0;
          rsel       <= 1'b0;
          done       <= 1'b0;
          cycles     <= '0;
          pool_skips <= '0;
        end

        S_LAYER: begin
          d        <= table_q[li[LAW-1:0]];
          grp_base <= '0;
          fl_lane  <= '0;
          fl_w     <= '0;
          state    <= S_FLOAD;
        end

        S_FLOAD: begin
          // entered with t0 cleared by the group/layer transition
          if (fl_w == d.filt_words - 1'b1) begin
            fl_w <= '0;
            if (fl_lane == n_active - 1'b1) begin
              fl_lane <= '0;
              t0      <= '0;
              t_end   <= (d.n_pos > CNT_W'(OC_DEPTH)) ? CNT_W'(OC_DEPTH) : d.n_pos;
              p       <= '0;
              s       <= '0;
              state   <= S_FWAIT;
            end else fl_lane <= fl_lane + 1'b1;
          end else fl_w <= fl_w + 1'b1;
        end

        // the last filter word is written into its cache in this cycle
        S_FWAIT: state <= S_COMP;

        S_COMP: begin
          if (do_skip) pool_skips <= pool_skips + 1'b1;
          if (skip_end) begin
            s     <= '0;
            state <= S_WAIT;
            wcnt  <= '0;
          end else if (s_i == d.n_steps - 1'b1) begin
            s <= '0;
            p <= p_i + 1'b1;
            if (p_i + 1'b1 == t_end) begin
              state <= S_WAIT;
              wcnt  <= '0;
            end
          end else begin
            s <= s_i + 1'b1;
            p <= p_i;
          end
        end

        S_WAIT: begin
          wcnt <= wcnt + 1'b1;
          if (wcnt == 3'(WAIT_CYC - 1)) begin
            di    <= '0;
            n_out <= d.maxpool ? (t_end - t0) / CNT_W'(POOL) : t_end - t0;
            state <= S_DRAIN;   // a final layer leaves it at once
          end
        end

        S_DRAIN: begin
          if (d.final_layer || di == n_out - 1'b1) begin
            // batch finished
            if (t_end < d.n_pos) begin
              t0    <= t_end;
              t_end <= next_t_end;
              p     <= t_end;
              s     <= '0;
              state <= S_COMP;
            end else if (grp_base + CNT_W'(N) < d.n_cout) begin
              grp_base <= grp_base + CNT_W'(N);
              state    <= S_FLOAD;
            end else if (li + 1'b1 < n_layers) begin
              li    <= li + 1'b1;
              rsel  <= ~rsel;
              state <= S_LAYER;
            end else begin
              done  <= 1'b1;
              state <= S_IDLE;
            end
          end else di <= di + 1'b1;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- descriptor table ----------------
  always_ff @(posedge clk) begin
    if (cfg_we && !busy) table_q[cfg_addr] <= cfg_desc;
  end

  // ---------------- class scores ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned k = 0; k < N_SCORES; k++) scores[k] <= '0;
    end else begin
      for (int unsigned l = 0; l < N; l++)
        if (res_valid[l] && d.final_layer && lane_act[l] &&
            (grp_base + CNT_W'(l) < CNT_W'(N_SCORES)))
          scores[SCW'(grp_base + CNT_W'(l))] <= SCORE_W'(res_acc[l]);
    end
  end

  // ---------------- rules ----------------
  initial begin
    assert (M >= 16 && (M & (M - 1)) == 0) else $error("M must be a power of two, at least 16");
    assert (N >= 1 && M % N == 0) else $error("N must divide M (a group's packet stays in one word)");
  end
  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("start while busy");
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == S_COMP) |-> (d.n_steps != '0))
    else $error("layer with zero steps per patch");
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == S_FLOAD) |-> (d.filt_words <= CNT_W'(FC_DEPTH)))
    else $error("filter longer than the filter cache");

endmodule
