// bnn_top -- scalable binarized-network inference engine.
//
// N processing engines share three M-bit wide memories: a filter memory with
// the whole model, and an input memory and a feature-map memory that swap
// roles after every layer (one feeds the PEs, the other collects their
// outputs). A global controller addresses all three and sequences the layers
// from a descriptor table. All PEs receive the same data word in the same
// cycle and each works on its own output channel.
//
// Host interface (plain signals, all synchronous to clk):
//   host_fw_*  write a word of the filter memory (only while idle)
//   host_in_*  write a word of the input memory (only while idle)
//   cfg_*      write layer descriptor cfg_addr (only while idle)
//   start      pulse with n_layers set; busy, then done (held until the
//              next start); scores holds the final layer's accumulators,
//              one per output class; cycles and pool_skips report the run.
// Throughput: one step per cycle in every PE, i.e. an M-bit xnor and pcnt per
// PE and cycle in mid layers, one 16-bit add/sub per PE and cycle in first
// and last layers. Memory read latency is one cycle.
module bnn_top
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
  localparam int unsigned LAW   = (MAX_LAYERS > 1) ? $clog2(MAX_LAYERS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               host_fw_we,
  input  logic [FMAW-1:0]    host_fw_addr,
  input  logic [M-1:0]       host_fw_data,
  input  logic               host_in_we,
  input  logic [DMAW-1:0]    host_in_addr,
  input  logic [M-1:0]       host_in_data,
  input  logic               cfg_we,
  input  logic [LAW-1:0]     cfg_addr,
  input  layer_desc_t        cfg_desc,
  input  logic [LAW:0]       n_layers,
  input  logic               start,
  output logic               busy,
  output logic               done,
  output logic [SCORE_W-1:0] scores [N_SCORES],
  output logic [31:0]        cycles,
  output logic [31:0]        pool_skips
);

  // controller <-> memories
  logic            fm_re;
  logic [FMAW-1:0] fm_raddr;
  logic [M-1:0]    fm_rdata;
  logic            dm_re, dm_rsel, dm_we;
  logic [DMAW-1:0] dm_raddr, dm_waddr;
  logic [M-1:0]    dm_wdata, dm_wmask;
  logic [M-1:0]    in_rdata, fmap_rdata, mem_rdata;
  logic            rsel_q;

  // controller <-> PEs
  layer_mode_e             pe_mode;
  logic                    pe_maxpool, pe_clr;
  logic [M-1:0]            pe_in_mask;
  logic signed [ACC_W-1:0] pe_acc_init;
  logic [N-1:0]            fl_we;
  logic [FAW-1:0]          fl_addr;
  logic                    st_valid, st_first, st_last, st_dload, st_fload;
  logic [FAW-1:0]          st_fidx;
  logic [CNT_W-1:0]        st_pos;
  logic [OAW-1:0]          dr_idx;
  logic [N-1:0]            dr_bits, pd_valid, res_valid;
  logic [CNT_W-1:0]        pd_id [N];
  logic signed [ACC_W-1:0] res_acc [N];

  // ---------------- memories ----------------
  bnn_sram #(.WIDTH(M), .DEPTH(FILT_DEPTH)) u_filter_mem (
    .clk(clk), .we(host_fw_we && !busy), .waddr(host_fw_addr), .wdata(host_fw_data),
    .wmask('1), .re(fm_re), .raddr(fm_raddr), .rdata(fm_rdata)
  );

  // input memory: written by the host while idle, by the controller on odd layers
  logic            in_we;
  logic [DMAW-1:0] in_waddr;
  logic [M-1:0]    in_wdata, in_wmask;
  always_comb begin
    if (busy) begin
      in_we    = dm_we && dm_rsel;
      in_waddr = dm_waddr;
      in_wdata = dm_wdata;
      in_wmask = dm_wmask;
    end else begin
      in_we    = host_in_we;
      in_waddr = host_in_addr;
      in_wdata = host_in_data;
      in_wmask = '1;
    end
  end

  bnn_sram #(.WIDTH(M), .DEPTH(DATA_DEPTH)) u_input_mem (
    .clk(clk), .we(in_we), .waddr(in_waddr), .wdata(in_wdata), .wmask(in_wmask),
    .re(dm_re && !dm_rsel), .raddr(dm_raddr), .rdata(in_rdata)
  );

  bnn_sram #(.WIDTH(M), .DEPTH(DATA_DEPTH)) u_fmap_mem (
    .clk(clk), .we(dm_we && !dm_rsel), .waddr(dm_waddr), .wdata(dm_wdata), .wmask(dm_wmask),
    .re(dm_re && dm_rsel), .raddr(dm_raddr), .rdata(fmap_rdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rsel_q <= 1'b0;
    else        rsel_q <= dm_rsel;
  end
  assign mem_rdata = rsel_q ? fmap_rdata : in_rdata;

  // ---------------- global controller ----------------
  bnn_global_ctrl #(
    .M(M), .N(N), .FILT_DEPTH(FILT_DEPTH), .DATA_DEPTH(DATA_DEPTH), .FC_DEPTH(FC_DEPTH),
    .OC_DEPTH(OC_DEPTH), .POOL(POOL), .MAX_LAYERS(MAX_LAYERS), .N_SCORES(N_SCORES)
  ) u_ctrl (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_desc, .n_layers, .start, .busy, .done,
    .scores, .cycles, .pool_skips,
    .fm_re, .fm_raddr, .dm_re, .dm_raddr, .dm_rsel, .dm_we, .dm_waddr, .dm_wdata, .dm_wmask,
    .pe_mode, .pe_maxpool, .pe_in_mask, .pe_acc_init, .pe_clr, .fl_we, .fl_addr,
    .st_valid, .st_first, .st_last, .st_dload, .st_fload, .st_fidx, .st_pos, .dr_idx,
    .dr_bits, .pd_valid, .pd_id, .res_valid, .res_acc
  );

  // ---------------- processing engines ----------------
  for (genvar l = 0; l < N; l++) begin : g_pe
    bnn_pe #(.M(M), .FC_DEPTH(FC_DEPTH), .OC_DEPTH(OC_DEPTH), .POOL(POOL)) u_pe (
      .clk, .rst_n,
      .mode(pe_mode), .maxpool(pe_maxpool), .in_mask(pe_in_mask), .acc_init(pe_acc_init),
      .clr(pe_clr),
      .fl_we(fl_we[l]), .fl_addr(fl_addr), .fl_data(fm_rdata),
      .st_valid, .st_first, .st_last, .st_dload, .st_fload, .st_fidx, .st_pos,
      .mem_rdata(mem_rdata),
      .dr_idx, .dr_bit(dr_bits[l]),
      .pd_valid(pd_valid[l]), .pd_id(pd_id[l]),
      .res_valid(res_valid[l]), .res_acc(res_acc[l])
    );
  end

endmodule
