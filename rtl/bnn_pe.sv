// bnn_pe -- one processing engine (PE) of the binarized-network engine.
//
// Every PE computes one output channel at a time; N PEs work on N different
// output channels of the same layer (output-channel tiling) and all see the
// same data word, broadcast from the shared input/feature-map memory. A PE
// holds its filter in a private filter cache and its finished output bits in
// a private output cache.
//
// Datapath, three stages, one step per cycle:
//   S0  the global controller issues a step; the shared memory and the filter
//       cache are read (both answer one cycle later).
//   S1  operand forming. Mid layers: bit-wise xnor of the data word and the
//       filter word, masked to the word's valid bits, into a register.
//       First layer: the data word holds M/16 signed 16-bit samples and is
//       shifted 16 bits per step, the packed filter word is shifted 1 bit per
//       step; the sample and the filter bit are registered. Last layer: the
//       roles swap -- 16-bit weights from the filter word, 1 data bit per step.
//   S2  population count (mid) or the sample/weight (first/last) is added to
//       or subtracted from the accumulator. The add/sub select is the filter
//       bit (first), always add (mid) or the data bit (last), as on the
//       drawing's three-way multiplexers. On the last step of a patch the
//       accumulator's sign bit (1 = +1, i.e. sum >= 0) goes to the output cache.
// The accumulator is M bits wide as drawn; its start value for every patch is
// the layer's acc_init, which folds in the bias/threshold (this design's way
// of realising "bias implicitly included").
//
// Pool skipping: with max-pool on, once a position yields +1 the PE records
// that its current pool is decided (pd_valid/pd_id). Steps that belong to a
// decided pool are dropped at S1 and S2 (the pipeline is flushed and nothing
// is accumulated), and the skipped positions' cache slots keep stale values,
// which the OR of the pool masks. The controller jumps ahead only when every
// active PE has decided the pool; until then a decided PE simply idles.
//
// pd_id is a pool index (position / POOL), so its top bit is always 0.
//
// Final layer: res_valid/res_acc present the full accumulator of every
// finished patch so that the controller can keep it as a class score.
module bnn_pe
  import bnn_pkg::*;
#(
  parameter int unsigned M        = 128,
  parameter int unsigned FC_DEPTH = 64,
  parameter int unsigned OC_DEPTH = 16,
  parameter int unsigned POOL     = 2,
  localparam int unsigned ACC_W = M,
  localparam int unsigned FAW = (FC_DEPTH > 1) ? $clog2(FC_DEPTH) : 1,
  localparam int unsigned OAW = (OC_DEPTH > 1) ? $clog2(OC_DEPTH) : 1,
  localparam int unsigned PCW = $clog2(M) + 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // layer configuration, stable during a layer
  input  layer_mode_e             mode,
  input  logic                    maxpool,
  input  logic [M-1:0]            in_mask,
  input  logic signed [ACC_W-1:0] acc_init,
  input  logic                    clr,        // forget the decided pool (new channel group)
  // filter cache fill
  input  logic                    fl_we,
  input  logic [FAW-1:0]          fl_addr,
  input  logic [M-1:0]            fl_data,
  // step issue (S0)
  input  logic                    st_valid,
  input  logic                    st_first,   // first step of a patch
  input  logic                    st_last,    // last step of a patch
  input  logic                    st_dload,   // a new data word arrives at S1
  input  logic                    st_fload,   // a new filter word arrives at S1
  input  logic [FAW-1:0]          st_fidx,    // filter cache word to read
  input  logic [CNT_W-1:0]        st_pos,     // output position of the step
  // shared data memory word (S1, one cycle after issue)
  input  logic [M-1:0]            mem_rdata,
  // output cache read-back
  input  logic [OAW-1:0]          dr_idx,
  output logic                    dr_bit,
  // pool-skip state
  output logic                    pd_valid,
  output logic [CNT_W-1:0]        pd_id,
  // finished patch
  output logic                    res_valid,
  output logic signed [ACC_W-1:0] res_acc
);

  localparam int unsigned E = M / DATA_W;  // 16-bit elements per word

  // ---------------- S0: filter cache ----------------
  logic [M-1:0] fc_q;

  bnn_filter_cache #(.M(M), .DEPTH(FC_DEPTH)) u_fcache (
    .clk   (clk),
    .we    (fl_we),
    .waddr (fl_addr),
    .wdata (fl_data),
    .re    (st_valid),
    .raddr (st_fidx),
    .rdata (fc_q)
  );

  // ---------------- S1 ----------------
  logic             s1_valid, s1_first, s1_last, s1_dload, s1_fload;
  logic [CNT_W-1:0] s1_pos;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_last  <= 1'b0;
      s1_dload <= 1'b0;
      s1_fload <= 1'b0;
      s1_pos   <= '0;
    end else begin
      s1_valid <= st_valid;
      s1_first <= st_first;
      s1_last  <= st_last;
      s1_dload <= st_dload;
      s1_fload <= st_fload;
      s1_pos   <= st_pos;
    end
  end

  // the two shifters: packed filter/data for the first/last layers
  logic [M-1:0] dsh_q, fsh_q, dword, fword, dsh_d, fsh_d;
  logic signed [15:0] elem;    // sample (first) or weight (last)
  logic               elem_neg; // subtract it
  logic [M-1:0]       xnor_w;

  always_comb begin
    dword = s1_dload ? mem_rdata : dsh_q;
    fword = s1_fload ? fc_q : fsh_q;
    xnor_w = ~(mem_rdata ^ fc_q) & in_mask;
    if (mode == MODE_LAST) begin
      elem     = fword[WGT_W-1:0];
      elem_neg = ~dword[0];
      dsh_d    = dword >> 1;
      fsh_d    = fword >> WGT_W;
    end else begin
      elem     = dword[DATA_W-1:0];
      elem_neg = ~fword[0];
      dsh_d    = dword >> DATA_W;
      fsh_d    = fword >> 1;
    end
  end

  logic skip1, skip2;
  assign skip1 = maxpool && pd_valid && (pd_id == CNT_W'(s1_pos / POOL));

  logic               s2_valid, s2_first, s2_last, s2_neg;
  logic [CNT_W-1:0]   s2_pos;
  logic [M-1:0]       xnor_q;
  logic signed [15:0] s2_elem;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dsh_q    <= '0;
      fsh_q    <= '0;
      s2_valid <= 1'b0;
      s2_first <= 1'b0;
      s2_last  <= 1'b0;
      s2_neg   <= 1'b0;
      s2_pos   <= '0;
      xnor_q   <= '0;
      s2_elem  <= '0;
    end else begin
      if (s1_valid) begin
        dsh_q <= dsh_d;
        fsh_q <= fsh_d;
      end
      s2_valid <= s1_valid && !skip1;
      if (s1_valid && !skip1) begin
        s2_first <= s1_first;
        s2_last  <= s1_last;
        s2_pos   <= s1_pos;
        if (mode == MODE_MID) xnor_q <= xnor_w;
        else begin
          s2_elem <= elem;
          s2_neg  <= elem_neg;
        end
      end
    end
  end

  // ---------------- S2: pcnt, add/sub, accumulate ----------------
  logic [PCW-1:0]           pcnt;
  logic signed [ACC_W-1:0]  operand, acc_base, acc_d, acc_q;
  logic                     sub, eff, sign_bit;

  bnn_popcount #(.M(M)) u_pcnt (.din(xnor_q), .count(pcnt));

  always_comb begin
    if (mode == MODE_MID) begin
      operand = ACC_W'(pcnt);
      sub     = 1'b0;
    end else begin
      operand = ACC_W'(s2_elem);  // sign-extended
      sub     = s2_neg;
    end
    acc_base = s2_first ? acc_init : acc_q;
    acc_d    = sub ? acc_base - operand : acc_base + operand;
    sign_bit = ~acc_d[ACC_W-1];
  end

  assign skip2 = maxpool && pd_valid && (pd_id == CNT_W'(s2_pos / POOL));
  assign eff   = s2_valid && !skip2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q     <= '0;
      res_valid <= 1'b0;
      res_acc   <= '0;
      pd_valid  <= 1'b0;
      pd_id     <= '0;
    end else begin
      res_valid <= eff && s2_last;
      if (eff) acc_q <= acc_d;
      if (eff && s2_last) res_acc <= acc_d;
      if (clr) pd_valid <= 1'b0;
      else if (eff && s2_last && maxpool && sign_bit) begin
        pd_valid <= 1'b1;
        pd_id    <= CNT_W'(s2_pos / POOL);
      end
    end
  end

  // ---------------- output cache and max-pool ----------------
  bnn_output_cache #(.DEPTH(OC_DEPTH), .POOL(POOL)) u_ocache (
    .clk     (clk),
    .we      (eff && s2_last),
    .waddr   (OAW'(s2_pos % OC_DEPTH)),
    .wbit    (sign_bit),
    .maxpool (maxpool),
    .ridx    (dr_idx),
    .rbit    (dr_bit)
  );

  initial begin
    assert (M % DATA_W == 0 && E >= 1) else $error("M must be a multiple of 16");
    assert (OC_DEPTH % POOL == 0) else $error("OC_DEPTH must be a multiple of POOL");
  end

endmodule
