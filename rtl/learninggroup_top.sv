// learninggroup_top: the LearningGroup sparse-training accelerator.
//
// Wires the accelerator of the published system architecture: global
// parameter memory, max-index unit and sparse data encoder (OSEL) with its
// sparse row memory, load allocation unit, C LearningGroup cores of N vector
// processing units, aggregator with activation memory, and the instruction
// scheduler.  One `start` runs one layer pass -- weight grouping, weight
// compression, sparse matrix-vector product -- for the forward matrix W or,
// in MODE_BWD, its transpose.  The host side (the PCIe/AXI shell of the
// FPGA platform, not part of this design) is replaced by plain ports: the
// host loads weights and grouping matrices into the parameter memory,
// writes the input activation vector, reads the output vector and the
// sparse row memory, and sees statistics counters.
//
// The single shared read port of the parameter memory is given to the load
// allocation unit while it is busy and to the scheduler otherwise.
module learninggroup_top
  import lg_pkg::*;
(
  input  logic               clk,
  input  logic               rst,
  // host: parameter memory load
  input  logic               host_gpm_we,
  input  logic [GPM_AW-1:0]  host_gpm_addr,
  input  fp16_t              host_gpm_data,
  // host: activation memory load and output read
  input  logic               host_act_we,
  input  logic [CHW-1:0]     host_act_addr,
  input  fp16_t              host_act_data,
  input  logic [CHW-1:0]     host_out_addr,
  output fp16_t              host_out_data,
  // host: sparse row memory inspection
  input  mode_e              host_bv_mode,
  input  logic [GW-1:0]      host_bv_grp,
  output logic [CH_MAX-1:0]  host_bv_data,
  // layer command
  input  logic               start,
  input  mode_e              mode,
  input  logic [WLW-1:0]     i_ch,
  input  logic [WLW-1:0]     o_ch,
  input  logic [GCW-1:0]     n_groups,
  input  logic               commit_en,
  output logic               busy,
  output logic               done,
  // statistics
  output logic [WLW-1:0]     enc_rows,
  output logic [WLW-1:0]     enc_hits,
  output logic [WLW-1:0]     enc_misses,
  output logic [31:0]        cyc_group,
  output logic [31:0]        cyc_compress,
  output logic [31:0]        cyc_compute,
  output logic               core_busy    [NUM_CORES],
  output logic [31:0]        core_stamps  [NUM_CORES],
  output logic [31:0]        core_flushes [NUM_CORES],
  output logic [31:0]        core_accum   [NUM_CORES],
  output logic [31:0]        core_split   [NUM_CORES],
  output logic [31:0]        core_wait    [NUM_CORES],
  output logic [31:0]        core_macs    [NUM_CORES],
  output logic [31:0]        agg_psums
);
  // ---- scheduler ----
  mode_e             cfg_mode;
  logic [WLW-1:0]    cfg_rows, cfg_och;
  logic [GCW-1:0]    cfg_groups;
  logic              sch_gpm_re;
  logic [GPM_AW-1:0] sch_gpm_raddr;
  fp16_t             gpm_rdata;
  logic              mx_valid, mx_first, mx_last, mx_idx_valid;
  fp16_t             mx_value;
  logic [GW-1:0]     mx_idx;
  logic              enc_start, col_we, row_valid;
  logic [WLW-1:0]    enc_n_cols;
  logic [CHW-1:0]    col_addr;
  logic [GW-1:0]     col_grp, row_grp;
  logic              lau_start, lau_done, lau_busy;
  logic              core_start;
  logic              core_done [NUM_CORES];
  logic              agg_idle, agg_clr, agg_commit;

  instruction_scheduler u_sched (
    .clk, .rst, .start, .mode, .i_ch, .o_ch, .n_groups, .commit_en, .busy, .done,
    .cfg_mode, .cfg_rows, .cfg_och, .cfg_groups,
    .gpm_re(sch_gpm_re), .gpm_raddr(sch_gpm_raddr), .gpm_rdata,
    .mx_valid, .mx_first, .mx_last, .mx_value, .mx_idx_valid, .mx_idx,
    .enc_start, .enc_n_cols, .col_we, .col_addr, .col_grp, .row_valid, .row_grp,
    .lau_start, .lau_done, .core_start, .core_done, .agg_idle, .agg_clr, .agg_commit,
    .cyc_group, .cyc_compress, .cyc_compute);

  // ---- global parameter memory ----
  logic              lau_gpm_re;
  logic [GPM_AW-1:0] lau_gpm_raddr;

  global_parameter_memory u_gpm (
    .clk, .we(host_gpm_we), .waddr(host_gpm_addr), .wdata(host_gpm_data),
    .re(lau_busy ? lau_gpm_re : sch_gpm_re),
    .raddr(lau_busy ? lau_gpm_raddr : sch_gpm_raddr),
    .rdata(gpm_rdata));

  // ---- max index unit ----
  max_index_unit u_max (
    .clk, .rst, .in_valid(mx_valid), .in_first(mx_first), .in_last(mx_last),
    .in_value(mx_value), .idx_valid(mx_idx_valid), .idx(mx_idx));

  // ---- sparse data encoder + sparse row memory ----
  logic              srm_clr, srm_st_valid, srm_tw_en, srm_lw_en;
  mode_e             srm_mode;
  logic [GW-1:0]     srm_st_grp, srm_tw_grp, srm_lw_grp;
  logic [CH_MAX-1:0] srm_tw_bv;
  logic [CHW-1:0]    srm_tw_nz [CH_MAX];
  logic [WLW-1:0]    srm_tw_wl;
  logic [CHW-1:0]    srm_lw_pos;

  sparse_data_encoder u_enc (
    .clk, .rst, .start(enc_start), .mode(cfg_mode), .n_cols(enc_n_cols),
    .col_we, .col_addr, .col_grp, .row_valid, .row_grp,
    .srm_clr, .srm_mode, .srm_st_grp, .srm_st_valid,
    .srm_tw_en, .srm_tw_grp, .srm_tw_bv, .srm_tw_nz, .srm_tw_wl,
    .srm_lw_en, .srm_lw_pos, .srm_lw_grp,
    .n_rows(enc_rows), .hits(enc_hits), .misses(enc_misses));

  mode_e          lau_srm_mode, agg_srm_mode;
  logic [CHW-1:0] li_pos, ra_k, ra_nz, agg_k, agg_nz;
  logic [GW-1:0]  li_grp, ra_grp, agg_grp;
  logic [WLW-1:0] ra_wl;

  sparse_row_memory u_srm (
    .clk, .rst,
    .clr_bank(srm_clr), .clr_mode(srm_mode),
    .tw_en(srm_tw_en), .tw_mode(srm_mode), .tw_grp(srm_tw_grp), .tw_bv(srm_tw_bv),
    .tw_nz(srm_tw_nz), .tw_wl(srm_tw_wl),
    .lw_en(srm_lw_en), .lw_mode(srm_mode), .lw_pos(srm_lw_pos), .lw_grp(srm_lw_grp),
    .st_mode(srm_mode), .st_grp(srm_st_grp), .st_valid(srm_st_valid),
    .ra_mode(lau_srm_mode), .ra_grp, .ra_k, .ra_wl, .ra_nz,
    .rb_mode(agg_srm_mode), .rb_grp(agg_grp), .rb_k(agg_k), .rb_nz(agg_nz),
    .bv_mode(host_bv_mode), .bv_grp(host_bv_grp), .bv_data(host_bv_data),
    .li_mode(lau_srm_mode), .li_pos, .li_grp);

  // ---- load allocation unit ----
  logic [CHW-1:0] lau_act_addr;
  fp16_t          lau_act_data;
  core_wr_t       core_wr;

  load_allocation_unit u_lau (
    .clk, .rst, .start(lau_start), .mode(cfg_mode), .n_rows(cfg_rows), .o_ch(cfg_och),
    .n_groups(cfg_groups), .busy(lau_busy), .done(lau_done),
    .srm_mode(lau_srm_mode), .li_pos, .li_grp, .ra_grp, .ra_k, .ra_wl, .ra_nz,
    .act_addr(lau_act_addr), .act_data(lau_act_data),
    .gpm_re(lau_gpm_re), .gpm_raddr(lau_gpm_raddr), .gpm_rdata, .core_wr);

  // ---- cores ----
  logic  ps_valid [NUM_CORES];
  psum_t ps       [NUM_CORES];
  logic  ps_ready [NUM_CORES];

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    learninggroup_core #(.CORE_ID(2'(c))) u_core (
      .clk, .rst, .wr(core_wr), .start(core_start), .busy(core_busy[c]), .done(core_done[c]),
      .ps_valid(ps_valid[c]), .ps(ps[c]), .ps_ready(ps_ready[c]),
      .n_stamps(core_stamps[c]), .n_flushes(core_flushes[c]), .n_accum(core_accum[c]),
      .n_split(core_split[c]), .n_wait(core_wait[c]), .n_macs(core_macs[c]));
  end

  // ---- aggregator & activation memory ----
  aggregator #(.C(NUM_CORES)) u_agg (
    .clk, .rst, .mode(cfg_mode), .clr_out(agg_clr), .commit(agg_commit),
    .ps_valid, .ps, .ps_ready,
    .srm_mode(agg_srm_mode), .srm_grp(agg_grp), .srm_k(agg_k), .srm_nz(agg_nz),
    .act_we(host_act_we), .act_waddr(host_act_addr), .act_wdata(host_act_data),
    .act_addr(lau_act_addr), .act_data(lau_act_data),
    .out_addr(host_out_addr), .out_data(host_out_data),
    .idle(agg_idle), .n_psums(agg_psums));
endmodule
