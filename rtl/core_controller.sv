// core_controller: schedules a LearningGroup core's compressed rows onto its
// N vector processing units.
//
// The core's rows (its part of the index list, each with the workload of its
// group) are processed in time stamps.  A time stamp takes up to four rows
// and flattens their workloads onto the VPUs: the first WL0 VPUs get select
// 0 (activation of row 0), the next WL1 select 1, and so on, so that rows of
// different length share the VPU array without gaps; VPUs beyond the total
// stay idle.  This is the published scheme: with the index list 1 2 1 3 and
// workloads idx0..3 = 1 2 1 2 and seven VPUs the selects read
// 00 00 01 10 10 11 11 (VPU 0 first).  A row longer than the space left is
// split: the part that fits is done now and the rest starts the next time
// stamp (this design's rule, needed for rows wider than N).
//
// Accumulation (this design's choice; the paper gives four accumulation
// registers per VPU but not when they are emptied): if a time stamp has the
// same pattern as the previous one -- same groups in the same slots, same
// starting non-zero positions and lengths -- every VPU works on the same
// output column as before and simply keeps accumulating, register = select.
// Otherwise the previous accumulators are first flushed: `cap` copies them
// to the output buffer (which must be empty, else the controller waits) and
// the new time stamp starts with `vpu_clr`.  After the last row a final
// flush follows.  The dense case (G = 1) thus accumulates a whole layer in
// the VPUs.
//
// Per time stamp: one planning cycle, four weight-load cycles (quarter q of
// the staging registers, N/4 weights per cycle, `wl_q`), then one fire cycle
// in which every valid VPU does one multiply-accumulate (`vpu_fire`).
// `start` (one cycle) begins a layer of `n_rows` local rows; `done` pulses
// once the last flush has been accepted.
module core_controller
  import lg_pkg::*;
#(
  parameter int unsigned N = NUM_VPU
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 start,
  input  logic [WLW-1:0]       n_rows,
  output logic                 busy,
  output logic                 done,
  // row lookup (index list + workload table of the core)
  output logic [WLW-1:0]       row_addr [4],
  input  logic [GW-1:0]        row_grp  [4],
  input  logic [WLW-1:0]       row_wl   [4],
  // weight staging
  output logic                 wl_en,
  output logic [1:0]           wl_q,
  output logic [31:0]          w_base,
  output logic [WLW-1:0]       w_used,
  // VPU control for the current time stamp
  output logic                 vpu_fire,
  output logic                 vpu_clr,
  output logic [1:0]           sel [N],
  output logic                 vld [N],
  output logic [WLW-1:0]       act_row [4],
  // flush of the previous pattern into the output buffer
  input  logic                 obuf_empty,
  output logic                 cap,
  output logic [1:0]           cap_sel [N],
  output logic                 cap_vld [N],
  output logic [GW-1:0]        cap_grp [4],
  output logic [CHW-1:0]       cap_k   [N],
  // statistics
  output logic [31:0]          n_stamps,
  output logic [31:0]          n_flushes,
  output logic [31:0]          n_accum,
  output logic [31:0]          n_split,
  output logic [31:0]          n_wait
);
  typedef enum logic [2:0] {S_IDLE, S_PLAN, S_LOAD, S_FIRE, S_FINAL, S_DRAIN} state_e;

  state_e         state;
  logic [WLW-1:0] cfg_rows, pos, koff;
  logic           have_prev;

  // ---- planner (combinational on pos/koff) ----
  logic [WLW-1:0] p_take [4];
  logic [WLW-1:0] p_k0   [4];
  logic           p_use  [4];
  logic [WLW-1:0] p_next_pos, p_next_koff, p_used;
  logic           p_split;

  always_comb begin
    logic [WLW-1:0] cap_left, full;
    logic           stop;
    cap_left = WLW'(N);
    full     = '0;
    stop     = 1'b0;
    p_next_pos  = pos;
    p_next_koff = '0;
    p_split     = 1'b0;
    for (int s = 0; s < 4; s++) begin
      row_addr[s] = pos + WLW'(s);
      p_take[s] = '0;
      p_k0[s]   = '0;
      p_use[s]  = 1'b0;
      if (!stop && (pos + WLW'(s) < cfg_rows)) begin
        p_use[s] = 1'b1;
        p_k0[s]  = (s == 0) ? koff : '0;
        full     = row_wl[s] - p_k0[s];
        if (full <= cap_left) begin
          p_take[s]  = full;
          cap_left   = cap_left - full;
          p_next_pos = pos + WLW'(s + 1);
        end else begin
          p_take[s]   = cap_left;
          cap_left    = '0;
          stop        = 1'b1;
          p_split     = 1'b1;
          p_next_pos  = pos + WLW'(s);
          p_next_koff = p_k0[s] + p_take[s];
        end
      end
    end
    p_used = WLW'(N) - cap_left;
  end

  // ---- current and previous time stamp ----
  logic           c_use [4], q_use [4];
  logic [GW-1:0]  c_grp [4], q_grp [4];
  logic [WLW-1:0] c_k0 [4], q_k0 [4];
  logic [WLW-1:0] c_take [4], q_take [4];
  logic [WLW-1:0] c_start [4], q_start [4];
  logic [WLW-1:0] c_used;
  logic [WLW-1:0] c_next_pos, c_next_koff;
  logic           c_split;
  logic           same;
  logic [WLW-1:0] c_pos;

  always_comb begin
    same = have_prev;
    for (int s = 0; s < 4; s++)
      if (c_use[s] != q_use[s] ||
          (c_use[s] && (c_grp[s] != q_grp[s] || c_k0[s] != q_k0[s] || c_take[s] != q_take[s])))
        same = 1'b0;
  end

  // select generation from the slot boundaries
  always_comb begin
    for (int j = 0; j < N; j++) begin
      logic [1:0] sj;
      sj = 2'd0;
      for (int s = 1; s < 4; s++)
        if (c_use[s] && WLW'(j) >= c_start[s]) sj = 2'(s);
      sel[j] = sj;
      vld[j] = (WLW'(j) < c_used);
    end
  end

  // the previous pattern, as seen by the output buffer
  logic [1:0] q_sel [N];
  logic       q_vld [N];
  always_ff @(posedge clk) begin
    if (state == S_FIRE && !(have_prev && !same && !obuf_empty)) begin
      for (int j = 0; j < N; j++) begin
        q_sel[j] <= sel[j];
        q_vld[j] <= vld[j];
      end
    end
  end
  always_comb begin
    for (int j = 0; j < N; j++) begin
      cap_sel[j] = q_sel[j];
      cap_vld[j] = q_vld[j];
      cap_k[j]   = CHW'(q_k0[q_sel[j]] + (WLW'(j) - q_start[q_sel[j]]));
    end
    for (int s = 0; s < 4; s++) cap_grp[s] = q_grp[s];
  end

  assign busy     = (state != S_IDLE);
  assign wl_en    = (state == S_LOAD);
  assign w_used   = c_used;
  always_comb
    for (int s = 0; s < 4; s++) act_row[s] = c_pos + WLW'(s);

  logic fire_ok;
  assign fire_ok  = (state == S_FIRE) && !(have_prev && !same && !obuf_empty);
  assign vpu_fire = fire_ok;
  assign vpu_clr  = fire_ok && !same;
  assign cap      = (fire_ok && have_prev && !same) ||
                    (state == S_FINAL && have_prev && obuf_empty);

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_IDLE;
      done      <= 1'b0;
      have_prev <= 1'b0;
      pos       <= '0;
      koff      <= '0;
      cfg_rows  <= '0;
      wl_q      <= '0;
      w_base    <= '0;
      c_pos     <= '0;
      c_used    <= '0;
      c_next_pos  <= '0;
      c_next_koff <= '0;
      c_split   <= 1'b0;
      n_stamps  <= '0;
      n_flushes <= '0;
      n_accum   <= '0;
      n_split   <= '0;
      n_wait    <= '0;
      for (int s = 0; s < 4; s++) begin
        c_use[s] <= 1'b0; q_use[s] <= 1'b0;
        c_grp[s] <= '0;   q_grp[s] <= '0;
        c_k0[s]  <= '0;   q_k0[s]  <= '0;
        c_take[s] <= '0;  q_take[s] <= '0;
        c_start[s] <= '0; q_start[s] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          cfg_rows  <= n_rows;
          pos       <= '0;
          koff      <= '0;
          w_base    <= '0;
          have_prev <= 1'b0;
          state     <= S_PLAN;
        end
        S_PLAN: begin
          if (pos >= cfg_rows) begin
            state <= S_FINAL;
          end else begin
            logic [WLW-1:0] acc_start;
            acc_start = '0;
            for (int s = 0; s < 4; s++) begin
              c_use[s]   <= p_use[s];
              c_grp[s]   <= p_use[s] ? row_grp[s] : '0;
              c_k0[s]    <= p_k0[s];
              c_take[s]  <= p_take[s];
              c_start[s] <= acc_start;
              acc_start  = acc_start + p_take[s];
            end
            c_pos       <= pos;
            c_used      <= p_used;
            c_next_pos  <= p_next_pos;
            c_next_koff <= p_next_koff;
            c_split     <= p_split;
            wl_q        <= 2'd0;
            state       <= S_LOAD;
          end
        end
        S_LOAD: begin
          wl_q <= wl_q + 2'd1;
          if (wl_q == 2'd3) state <= S_FIRE;
        end
        S_FIRE: begin
          if (!fire_ok) begin
            n_wait <= n_wait + 32'd1;
          end else begin
            n_stamps <= n_stamps + 32'd1;
            if (same) n_accum <= n_accum + 32'd1;
            if (have_prev && !same) n_flushes <= n_flushes + 32'd1;
            if (c_split) n_split <= n_split + 32'd1;
            for (int s = 0; s < 4; s++) begin
              q_use[s]   <= c_use[s];
              q_grp[s]   <= c_grp[s];
              q_k0[s]    <= c_k0[s];
              q_take[s]  <= c_take[s];
              q_start[s] <= c_start[s];
            end
            have_prev <= 1'b1;
            w_base    <= w_base + 32'(c_used);
            pos       <= c_next_pos;
            koff      <= c_next_koff;
            state     <= S_PLAN;
          end
        end
        S_FINAL: begin
          if (!have_prev) begin
            state <= S_DRAIN;
          end else if (obuf_empty) begin
            n_flushes <= n_flushes + 32'd1;
            have_prev <= 1'b0;
            state     <= S_DRAIN;
          end else begin
            n_wait <= n_wait + 32'd1;
          end
        end
        S_DRAIN: begin
          if (obuf_empty) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
