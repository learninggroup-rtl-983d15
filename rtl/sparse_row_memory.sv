// sparse_row_memory: cache of sparse data tuples, one per group index, plus
// the weight-matrix index list.
//
// Every row of a weight-grouping mask is one of at most G distinct
// bitvectors (the row of the output selection matrix chosen by the row's
// input-group index), so the memory holds G tuples, addressed by group
// index: a status bit (tuple generated or not), the bitvector, the list of
// its non-zero positions and the workload (number of non-zeros).  The index
// list gives, for each weight-matrix row in order, the group index whose
// tuple describes it.  Both exist twice, one bank for the forward matrix W
// and one for the transposed matrix used by backward propagation, so that
// both can be kept at once.  This organisation follows the published
// figures; the separate banks and the port set are this design's choices.
//
// Interface: one write port for tuples (`tw_*`, whole tuple in one cycle),
// one for index-list entries (`lw_*`) and a bank clear (`clr_bank`, clears
// all status bits of `clr_mode`).  All reads are combinational: status for
// the encoder's hit/miss test, a tuple port for the load allocation unit
// (workload and one non-zero position), a second non-zero position port for
// the aggregator, a bitvector port and an index-list port.  Writes take
// effect at the rising clock edge.  Synchronous reset clears all status.
module sparse_row_memory
  import lg_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst,
  // bank clear
  input  logic                 clr_bank,
  input  mode_e                clr_mode,
  // tuple write
  input  logic                 tw_en,
  input  mode_e                tw_mode,
  input  logic [GW-1:0]        tw_grp,
  input  logic [CH_MAX-1:0]    tw_bv,
  input  logic [CHW-1:0]       tw_nz [CH_MAX],
  input  logic [WLW-1:0]       tw_wl,
  // index list write
  input  logic                 lw_en,
  input  mode_e                lw_mode,
  input  logic [CHW-1:0]       lw_pos,
  input  logic [GW-1:0]        lw_grp,
  // status read (encoder)
  input  mode_e                st_mode,
  input  logic [GW-1:0]        st_grp,
  output logic                 st_valid,
  // tuple read (load allocation unit)
  input  mode_e                ra_mode,
  input  logic [GW-1:0]        ra_grp,
  input  logic [CHW-1:0]       ra_k,
  output logic [WLW-1:0]       ra_wl,
  output logic [CHW-1:0]       ra_nz,
  // non-zero position read (aggregator)
  input  mode_e                rb_mode,
  input  logic [GW-1:0]        rb_grp,
  input  logic [CHW-1:0]       rb_k,
  output logic [CHW-1:0]       rb_nz,
  // bitvector read
  input  mode_e                bv_mode,
  input  logic [GW-1:0]        bv_grp,
  output logic [CH_MAX-1:0]    bv_data,
  // index list read
  input  mode_e                li_mode,
  input  logic [CHW-1:0]       li_pos,
  output logic [GW-1:0]        li_grp
);
  logic [G_MAX-1:0]     status [2];
  logic [CH_MAX-1:0]    bitvec [2][G_MAX];
  logic [CHW-1:0]       nzidx  [2][G_MAX][CH_MAX];
  logic [WLW-1:0]       wload  [2][G_MAX];
  logic [GW-1:0]        idxlst [2][CH_MAX];

  always_ff @(posedge clk) begin
    if (rst) begin
      status[0] <= '0;
      status[1] <= '0;
    end else begin
      if (clr_bank) status[clr_mode] <= '0;
      if (tw_en)    status[tw_mode][tw_grp] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (tw_en) begin
      bitvec[tw_mode][tw_grp] <= tw_bv;
      wload[tw_mode][tw_grp]  <= tw_wl;
      for (int i = 0; i < CH_MAX; i++) nzidx[tw_mode][tw_grp][i] <= tw_nz[i];
    end
    if (lw_en) idxlst[lw_mode][lw_pos] <= lw_grp;
  end

  assign st_valid = status[st_mode][st_grp];
  assign ra_wl    = wload[ra_mode][ra_grp];
  assign ra_nz    = nzidx[ra_mode][ra_grp][ra_k];
  assign rb_nz    = nzidx[rb_mode][rb_grp][rb_k];
  assign bv_data  = bitvec[bv_mode][bv_grp];
  assign li_grp   = idxlst[li_mode][li_pos];
endmodule
