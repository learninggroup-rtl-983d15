// load_allocation_unit: weight compression and row-based load balancing.
//
// After the encoder has filled the sparse row memory, this unit walks the
// index list row by row.  For row r with group index g it reads the tuple of
// g (workload and non-zero positions) and fetches only the unmasked weights
// from the global parameter memory: address r * O_CH + nz for the forward
// matrix, and nz * O_CH + r for the transposed matrix of backward
// propagation (the weights stay stored once, row-major).  Rows are split
// evenly between the cores in contiguous blocks of ceil(rows / C), which
// balances the load because every weight survives with probability 1/G.
// Each core receives, through one shared write port, the workload table
// (copied to all cores), its local index list, the activation of each of its
// rows and its compressed weights in row order, and finally its row count.
// The address formation and the even row split are the published scheme;
// the write sequence and the one-weight-per-cycle rate are this design's.
//
// Timing: `start` (one cycle) begins a pass with the given configuration.
// The pass takes about n_groups + 2 * n_rows + (unmasked weights) + C
// cycles; `done` pulses for one cycle at its end and `busy` is high during
// it.  SRM and activation reads are combinational; the parameter memory read
// has one cycle latency and the matching core write leaves one cycle after
// its read was issued.
module load_allocation_unit
  import lg_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 start,
  input  mode_e                mode,
  input  logic [WLW-1:0]       n_rows,     // rows of the (possibly transposed) matrix
  input  logic [WLW-1:0]       o_ch,       // output channels of W: row-major stride
  input  logic [GCW-1:0]       n_groups,
  output logic                 busy,
  output logic                 done,
  // sparse row memory
  output mode_e                srm_mode,
  output logic [CHW-1:0]       li_pos,
  input  logic [GW-1:0]        li_grp,
  output logic [GW-1:0]        ra_grp,
  output logic [CHW-1:0]       ra_k,
  input  logic [WLW-1:0]       ra_wl,
  input  logic [CHW-1:0]       ra_nz,
  // activation memory (aggregator)
  output logic [CHW-1:0]       act_addr,
  input  fp16_t                act_data,
  // global parameter memory
  output logic                 gpm_re,
  output logic [GPM_AW-1:0]    gpm_raddr,
  input  fp16_t                gpm_rdata,
  // cores
  output core_wr_t             core_wr
);
  typedef enum logic [2:0] {S_IDLE, S_WL, S_IDX, S_ACT, S_W, S_NROWS, S_DONE} state_e;

  state_e            state;
  logic [GCW-1:0]    g_cnt;
  logic [WLW-1:0]    r, rpc, l;
  logic [1:0]        c;
  logic [GW-1:0]     cur_g;
  logic [WLW-1:0]    k;
  logic [31:0]       wptr [NUM_CORES];
  logic [WLW-1:0]    rows_of [NUM_CORES];
  core_wr_t          p;          // issued command, written next cycle
  mode_e             cfg_mode;
  logic [WLW-1:0]    cfg_rows, cfg_och;
  logic [GCW-1:0]    cfg_groups;
  logic [GPM_AW-1:0] waddr_fwd, waddr_bwd;

  assign busy     = (state != S_IDLE);
  assign srm_mode = cfg_mode;
  assign li_pos   = r[CHW-1:0];
  assign ra_grp   = (state == S_WL) ? g_cnt[GW-1:0] : cur_g;
  assign ra_k     = k[CHW-1:0];
  assign act_addr = r[CHW-1:0];

  assign waddr_fwd = GPM_AW'(r) * GPM_AW'(cfg_och) + GPM_AW'(ra_nz);
  assign waddr_bwd = GPM_AW'(ra_nz) * GPM_AW'(cfg_och) + GPM_AW'(r);
  assign gpm_re    = (state == S_W);
  assign gpm_raddr = (cfg_mode == MODE_FWD) ? waddr_fwd : waddr_bwd;

  // write stage: weights take their data from the parameter memory
  always_comb begin
    core_wr = p;
    if (p.kind == CW_W) core_wr.data = gpm_rdata;
  end

  // the current row is finished this cycle
  logic adv_row;
  assign adv_row = (state == S_ACT && ra_wl == '0) ||
                   (state == S_W && k + WLW'(1) == ra_wl);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      done  <= 1'b0;
      p     <= '0;
      r     <= '0;
      l     <= '0;
      c     <= '0;
      k     <= '0;
      g_cnt <= '0;
      cur_g <= '0;
      rpc   <= '0;
      cfg_mode   <= MODE_FWD;
      cfg_rows   <= '0;
      cfg_och    <= '0;
      cfg_groups <= '0;
      for (int i = 0; i < NUM_CORES; i++) begin wptr[i] <= '0; rows_of[i] <= '0; end
    end else begin
      done <= 1'b0;
      p    <= '0;
      unique case (state)
        S_IDLE: if (start) begin
          cfg_mode   <= mode;
          cfg_rows   <= n_rows;
          cfg_och    <= o_ch;
          cfg_groups <= n_groups;
          rpc        <= WLW'((32'(n_rows) + NUM_CORES - 1) / NUM_CORES);
          g_cnt      <= '0;
          r          <= '0;
          l          <= '0;
          c          <= '0;
          for (int i = 0; i < NUM_CORES; i++) begin wptr[i] <= '0; rows_of[i] <= '0; end
          state      <= S_WL;
        end
        S_WL: begin
          p <= '{kind: CW_WL, core: 2'b11, addr: 32'(g_cnt), data: 16'(ra_wl)};
          if (g_cnt + GCW'(1) >= cfg_groups) begin
            g_cnt <= '0;
            state <= (cfg_rows == '0) ? S_NROWS : S_IDX;
          end else begin
            g_cnt <= g_cnt + GCW'(1);
          end
        end
        S_IDX: begin
          p <= '{kind: CW_IDX, core: c, addr: 32'(l), data: 16'(li_grp)};
          cur_g <= li_grp;
          rows_of[c] <= rows_of[c] + WLW'(1);
          state <= S_ACT;
        end
        S_ACT: begin
          p <= '{kind: CW_ACT, core: c, addr: 32'(l), data: act_data};
          k <= '0;
          state <= S_W;
        end
        S_W: begin
          p <= '{kind: CW_W, core: c, addr: wptr[c], data: 16'd0};
          wptr[c] <= wptr[c] + 32'd1;
          k <= k + WLW'(1);
        end
        S_NROWS: begin
          p <= '{kind: CW_NROWS, core: g_cnt[1:0], addr: 32'd0, data: 16'(rows_of[g_cnt[1:0]])};
          if (g_cnt >= GCW'(NUM_CORES - 1)) state <= S_DONE;
          g_cnt <= (g_cnt >= GCW'(NUM_CORES - 1)) ? '0 : g_cnt + GCW'(1);
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
      if (adv_row) begin
        r <= r + WLW'(1);
        if (l + WLW'(1) == rpc) begin
          l <= '0;
          c <= c + 2'd1;
        end else begin
          l <= l + WLW'(1);
        end
        state <= (r + WLW'(1) == cfg_rows) ? S_NROWS : S_IDX;
      end
    end
  end
endmodule
