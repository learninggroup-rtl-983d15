// sparse_data_encoder: the on-chip sparse data encoding loop (OSEL).
//
// A weight-grouping mask element (r, c) is 1 exactly when the maximum
// position of row r of the input grouping matrix equals the maximum position
// of column c of the output grouping matrix.  Hence every mask row is fully
// described by its row max index, and there are at most G distinct rows.
// The encoder first receives the column max indexes (`col_*`, one per cycle,
// kept in a register file).  Then it receives one row max index per cycle
// (`row_valid`, `row_grp`).  For each it looks up the tuple status in the
// sparse row memory:
//   * miss (status clear): all column max indexes are compared with the row
//     index in parallel, giving the bitvector; its popcount is the workload
//     and a compaction of its set positions gives the non-zero indexes.  The
//     tuple is written and its status set in the same cycle.
//   * hit  (status set): no tuple is generated.
// In both cases the row index is appended to the index list.  For the
// transposed matrix (backward propagation) the roles of the two index lists
// swap: the caller loads the input-group indexes as columns and streams the
// output-group indexes as rows with `mode` = MODE_BWD, which selects the
// other bank of the sparse row memory.  This is the published OSEL loop; the
// single-cycle miss (comparison, popcount and compaction in one cycle) is
// this design's reading of the cycle-by-cycle example, where a miss and a
// hit each take one cycle.
//
// Interface: `start` (one cycle) clears the selected bank's status bits and
// the hit/miss counters and restarts the index list at position 0;
// `n_cols` bounds the comparison.  Rows must not be sent in the cycle of
// `start`.  Outputs to the memory are combinational from the current row;
// `n_rows`, `hits` and `misses` count the rows processed since `start`.
module sparse_data_encoder
  import lg_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 start,
  input  mode_e                mode,
  input  logic [WLW-1:0]       n_cols,
  // column max index list
  input  logic                 col_we,
  input  logic [CHW-1:0]       col_addr,
  input  logic [GW-1:0]        col_grp,
  // row max index stream
  input  logic                 row_valid,
  input  logic [GW-1:0]        row_grp,
  // sparse row memory side
  output logic                 srm_clr,
  output mode_e                srm_mode,
  output logic [GW-1:0]        srm_st_grp,
  input  logic                 srm_st_valid,
  output logic                 srm_tw_en,
  output logic [GW-1:0]        srm_tw_grp,
  output logic [CH_MAX-1:0]    srm_tw_bv,
  output logic [CHW-1:0]       srm_tw_nz [CH_MAX],
  output logic [WLW-1:0]       srm_tw_wl,
  output logic                 srm_lw_en,
  output logic [CHW-1:0]       srm_lw_pos,
  output logic [GW-1:0]        srm_lw_grp,
  // statistics
  output logic [WLW-1:0]       n_rows,
  output logic [WLW-1:0]       hits,
  output logic [WLW-1:0]       misses
);
  logic [GW-1:0]     col_idx [CH_MAX];
  logic [CH_MAX-1:0] bv;
  logic [WLW-1:0]    cnt;
  logic              miss;

  always_ff @(posedge clk) begin
    if (col_we) col_idx[col_addr] <= col_grp;
  end

  // parallel comparison, popcount and compaction
  always_comb begin
    bv  = '0;
    cnt = '0;
    for (int i = 0; i < CH_MAX; i++) srm_tw_nz[i] = '0;
    for (int c = 0; c < CH_MAX; c++) begin
      bv[c] = (WLW'(c) < n_cols) && (col_idx[c] == row_grp);
      if (bv[c]) begin
        srm_tw_nz[cnt[CHW-1:0]] = CHW'(c);
        cnt = cnt + WLW'(1);
      end
    end
  end

  assign miss       = row_valid && !srm_st_valid;
  assign srm_clr    = start;
  assign srm_mode   = mode;
  assign srm_st_grp = row_grp;
  assign srm_tw_en  = miss;
  assign srm_tw_grp = row_grp;
  assign srm_tw_bv  = bv;
  assign srm_tw_wl  = cnt;
  assign srm_lw_en  = row_valid;
  assign srm_lw_pos = n_rows[CHW-1:0];
  assign srm_lw_grp = row_grp;

  always_ff @(posedge clk) begin
    if (rst || start) begin
      n_rows <= '0;
      hits   <= '0;
      misses <= '0;
    end else if (row_valid) begin
      n_rows <= n_rows + WLW'(1);
      if (miss) misses <= misses + WLW'(1);
      else      hits   <= hits + WLW'(1);
    end
  end

  // A row must never arrive together with the bank clear.
  assert property (@(posedge clk) disable iff (rst) !(start && row_valid));
endmodule
