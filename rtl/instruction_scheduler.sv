// instruction_scheduler: top-level sequencer of one layer pass.
//
// Runs the stages of a layer in order:
//   1. weight grouping -- every column vector of the column grouping matrix
//      and then every row vector of the row grouping matrix is read from the
//      global parameter memory, one value per cycle, through the max-index
//      unit; column results fill the encoder's column list, row results are
//      streamed into the encoder (OSEL), which builds the sparse row memory;
//   2. weight compression -- the load allocation unit distributes the
//      unmasked weights, activations and index lists to the cores;
//   3. computation -- the cores run the sparse matrix-vector product and the
//      aggregator combines their partial sums; optionally the result is
//      committed as the next layer's activation.
// MODE_FWD uses W (rows = input channels, row groups from IG, column groups
// from OG); MODE_BWD uses W^T for backward propagation (rows = output
// channels, the roles of IG and OG swapped).  The paper names the
// scheduler as the main control unit running weight grouping, forward and
// backward propagation and weight update; this block covers the first three
// for one layer per `start`.  The weight update stage is not described in
// enough detail to build and is not included.
//
// Grouping matrix layout in the parameter memory: IG(r, g) at
// IG_BASE + r * G_MAX + g, OG(g, c) at OG_BASE + g * CH_MAX + c.
//
// Timing: `start` (one cycle) latches the configuration; `done` pulses when
// all stages have finished.  The cycle counters report the length of each
// stage of the last pass.
module instruction_scheduler
  import lg_pkg::*;
(
  input  logic               clk,
  input  logic               rst,
  input  logic               start,
  input  mode_e              mode,
  input  logic [WLW-1:0]     i_ch,
  input  logic [WLW-1:0]     o_ch,
  input  logic [GCW-1:0]     n_groups,
  input  logic               commit_en,
  output logic               busy,
  output logic               done,
  output mode_e              cfg_mode,
  output logic [WLW-1:0]     cfg_rows,
  output logic [WLW-1:0]     cfg_och,
  output logic [GCW-1:0]     cfg_groups,
  // parameter memory read (grouping matrices)
  output logic               gpm_re,
  output logic [GPM_AW-1:0]  gpm_raddr,
  input  fp16_t              gpm_rdata,
  // max index unit
  output logic               mx_valid,
  output logic               mx_first,
  output logic               mx_last,
  output fp16_t              mx_value,
  input  logic               mx_idx_valid,
  input  logic [GW-1:0]      mx_idx,
  // encoder
  output logic               enc_start,
  output logic [WLW-1:0]     enc_n_cols,
  output logic               col_we,
  output logic [CHW-1:0]     col_addr,
  output logic [GW-1:0]      col_grp,
  output logic               row_valid,
  output logic [GW-1:0]      row_grp,
  // load allocation unit
  output logic               lau_start,
  input  logic               lau_done,
  // cores and aggregator
  output logic               core_start,
  input  logic               core_done [NUM_CORES],
  input  logic               agg_idle,
  output logic               agg_clr,
  output logic               agg_commit,
  // statistics
  output logic [31:0]        cyc_group,
  output logic [31:0]        cyc_compress,
  output logic [31:0]        cyc_compute
);
  typedef enum logic [3:0] {
    S_IDLE, S_INIT, S_COL, S_COL_WAIT, S_ROW, S_ROW_WAIT,
    S_LAU, S_LAU_WAIT, S_CORE, S_CORE_WAIT, S_COMMIT, S_DONE
  } state_e;

  state_e          state;
  logic [WLW-1:0]  cfg_cols;
  logic [WLW-1:0]  vec;          // vector being issued
  logic [GCW-1:0]  g;            // element within the vector
  logic [WLW-1:0]  res;          // results received in this phase
  logic            d_valid, d_first, d_last;
  logic            cfg_commit;
  logic [NUM_CORES-1:0] cdone;
  logic            issuing, col_phase;

  assign busy       = (state != S_IDLE);
  assign enc_n_cols = cfg_cols;
  assign issuing    = (state == S_COL) || (state == S_ROW);
  assign col_phase  = (state == S_COL) || (state == S_COL_WAIT);

  // address of element g of vector `vec` of the current phase
  logic [GPM_AW-1:0] a_ig, a_og;
  always_comb begin
    // IG vector (a row of IG): IG(vec, g); OG vector (a column of OG): OG(g, vec)
    a_ig = GPM_AW'(IG_BASE) + GPM_AW'(vec) * GPM_AW'(G_MAX) + GPM_AW'(g);
    a_og = GPM_AW'(OG_BASE) + GPM_AW'(g) * GPM_AW'(CH_MAX) + GPM_AW'(vec);
    // forward: columns from OG, rows from IG; backward: the reverse
    if ((cfg_mode == MODE_FWD) == col_phase) gpm_raddr = a_og;
    else                                     gpm_raddr = a_ig;
  end
  assign gpm_re = issuing;

  // data stage: parameter memory output feeds the max index unit
  assign mx_valid = d_valid;
  assign mx_first = d_first;
  assign mx_last  = d_last;
  assign mx_value = gpm_rdata;

  // results
  assign col_we    = mx_idx_valid && col_phase;
  assign col_addr  = res[CHW-1:0];
  assign col_grp   = mx_idx;
  assign row_valid = mx_idx_valid && !col_phase;
  assign row_grp   = mx_idx;

  assign enc_start  = (state == S_INIT);
  assign agg_clr    = (state == S_INIT);
  assign lau_start  = (state == S_LAU);
  assign core_start = (state == S_CORE);
  assign agg_commit = (state == S_COMMIT) && cfg_commit;

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_IDLE;
      done     <= 1'b0;
      d_valid  <= 1'b0;
      d_first  <= 1'b0;
      d_last   <= 1'b0;
      vec      <= '0;
      g        <= '0;
      res      <= '0;
      cfg_mode <= MODE_FWD;
      cfg_rows <= '0;
      cfg_cols <= '0;
      cfg_och  <= '0;
      cfg_groups <= '0;
      cfg_commit <= 1'b0;
      cdone    <= '0;
      cyc_group    <= '0;
      cyc_compress <= '0;
      cyc_compute  <= '0;
    end else begin
      done    <= 1'b0;
      d_valid <= issuing;
      d_first <= issuing && (g == '0);
      d_last  <= issuing && (g + GCW'(1) == cfg_groups);
      if (mx_idx_valid) res <= res + WLW'(1);
      unique case (state)
        S_IDLE: if (start) begin
          cfg_mode   <= mode;
          cfg_rows   <= (mode == MODE_FWD) ? i_ch : o_ch;
          cfg_cols   <= (mode == MODE_FWD) ? o_ch : i_ch;
          cfg_och    <= o_ch;
          cfg_groups <= n_groups;
          cfg_commit <= commit_en;
          cyc_group    <= '0;
          cyc_compress <= '0;
          cyc_compute  <= '0;
          state      <= S_INIT;
        end
        S_INIT: begin
          vec   <= '0;
          g     <= '0;
          res   <= '0;
          state <= S_COL;
        end
        S_COL, S_ROW: begin
          if (g + GCW'(1) == cfg_groups) begin
            g   <= '0;
            vec <= vec + WLW'(1);
            if (vec + WLW'(1) == ((state == S_COL) ? cfg_cols : cfg_rows))
              state <= (state == S_COL) ? S_COL_WAIT : S_ROW_WAIT;
          end else begin
            g <= g + GCW'(1);
          end
        end
        S_COL_WAIT: if (res == cfg_cols && !d_valid && !mx_idx_valid) begin
          res   <= '0;
          vec   <= '0;
          state <= S_ROW;
        end
        S_ROW_WAIT: if (res == cfg_rows && !d_valid && !mx_idx_valid) begin
          state <= S_LAU;
        end
        S_LAU:      state <= S_LAU_WAIT;
        S_LAU_WAIT: if (lau_done) begin
          cdone <= '0;
          state <= S_CORE;
        end
        S_CORE:      state <= S_CORE_WAIT;
        S_CORE_WAIT: begin
          for (int i = 0; i < NUM_CORES; i++) if (core_done[i]) cdone[i] <= 1'b1;
          if (&cdone && agg_idle) state <= S_COMMIT;
        end
        S_COMMIT: state <= S_DONE;
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
      if (state inside {S_INIT, S_COL, S_COL_WAIT, S_ROW, S_ROW_WAIT}) cyc_group <= cyc_group + 32'd1;
      if (state inside {S_LAU, S_LAU_WAIT})                            cyc_compress <= cyc_compress + 32'd1;
      if (state inside {S_CORE, S_CORE_WAIT})                          cyc_compute <= cyc_compute + 32'd1;
    end
  end
endmodule
