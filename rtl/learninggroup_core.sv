// learninggroup_core: one LearningGroup core (sparse matrix-vector engine).
//
// Holds the compressed data it receives from the load allocation unit -- the
// workload table (workload per group index), its part of the index list,
// the activation of each of its rows and its unmasked weights in row order
// -- and multiplies it out on N vector processing units under the core
// controller.  Each time stamp broadcasts four activations (the rows in the
// four slots) and gives every VPU its own weight from a staging register
// that is filled N/4 words per cycle over four cycles.  Partial sums leave
// through the output buffer: when the controller flushes, each active VPU
// contributes one entry (group index, non-zero position k inside that
// group's bitvector, value); the aggregator maps (group, k) to the output
// column.  The output buffer empties one entry per cycle through a
// valid/ready port, lowest VPU first.
//
// The component list (controller, activation memory, weight memory, index
// list with workloads, VPUs, output buffer) and the broadcast/unicast
// widths are the published ones; memory sizes, the write port and the
// output-buffer protocol are this design's choices.  N must be a multiple
// of 4 so that the staging splits into four equal quarters.
//
// Interface: `wr` is the shared load port (`wr.core` == CORE_ID, or 3 for
// all cores).  `start` begins the layer with the row count last written;
// `done` pulses when all partial sums have left the output buffer.
module learninggroup_core
  import lg_pkg::*;
#(
  parameter int unsigned       N       = NUM_VPU,
  parameter int unsigned       WDEPTH  = WMEM_DEPTH,
  parameter int unsigned       RDEPTH  = ROWS_PER_CORE_MAX,
  parameter logic [1:0]        CORE_ID = 2'd0
) (
  input  logic        clk,
  input  logic        rst,
  input  core_wr_t    wr,
  input  logic        start,
  output logic        busy,
  output logic        done,
  // partial sums to the aggregator
  output logic        ps_valid,
  output psum_t       ps,
  input  logic        ps_ready,
  // statistics
  output logic [31:0] n_stamps,
  output logic [31:0] n_flushes,
  output logic [31:0] n_accum,
  output logic [31:0] n_split,
  output logic [31:0] n_wait,
  output logic [31:0] n_macs
);
  localparam int unsigned NQ = N / 4;
  localparam int unsigned WAW = $clog2(WDEPTH);

  // ---- memories ----
  logic [WLW-1:0] wl_tab  [G_MAX];
  logic [GW-1:0]  idx_mem [RDEPTH];
  fp16_t          act_mem [RDEPTH];
  fp16_t          w_mem   [WDEPTH];
  logic [WLW-1:0] n_rows;

  logic mine;
  assign mine = (wr.core == CORE_ID) || (wr.core == 2'b11);

  always_ff @(posedge clk) begin
    if (mine) begin
      unique case (wr.kind)
        CW_WL:    wl_tab[wr.addr[GW-1:0]] <= WLW'(wr.data);
        CW_IDX:   idx_mem[wr.addr[$clog2(RDEPTH)-1:0]] <= GW'(wr.data);
        CW_ACT:   act_mem[wr.addr[$clog2(RDEPTH)-1:0]] <= wr.data;
        CW_W:     w_mem[wr.addr[WAW-1:0]] <= wr.data;
        CW_NROWS: n_rows <= WLW'(wr.data);
        default: ;
      endcase
    end
  end

  // ---- controller ----
  logic [WLW-1:0] row_addr [4];
  logic [GW-1:0]  row_grp  [4];
  logic [WLW-1:0] row_wl   [4];
  logic           wl_en;
  logic [1:0]     wl_q;
  logic [31:0]    w_base;
  logic [WLW-1:0] w_used;
  logic           vpu_fire, vpu_clr;
  logic [1:0]     sel [N];
  logic           vld [N];
  logic [WLW-1:0] act_row [4];
  logic           obuf_empty, cap;
  logic [1:0]     cap_sel [N];
  logic           cap_vld [N];
  logic [GW-1:0]  cap_grp [4];
  logic [CHW-1:0] cap_k   [N];

  always_comb begin
    for (int s = 0; s < 4; s++) begin
      row_grp[s] = idx_mem[row_addr[s][$clog2(RDEPTH)-1:0]];
      row_wl[s]  = wl_tab[row_grp[s]];
    end
  end

  core_controller #(.N(N)) u_ctl (
    .clk, .rst, .start, .n_rows, .busy, .done,
    .row_addr, .row_grp, .row_wl,
    .wl_en, .wl_q, .w_base, .w_used,
    .vpu_fire, .vpu_clr, .sel, .vld, .act_row,
    .obuf_empty, .cap, .cap_sel, .cap_vld, .cap_grp, .cap_k,
    .n_stamps, .n_flushes, .n_accum, .n_split, .n_wait);

  // ---- weight staging: N/4 unicast weights per cycle ----
  fp16_t stage [N];
  always_ff @(posedge clk) begin
    if (wl_en) begin
      for (int i = 0; i < NQ; i++) begin
        int unsigned j;
        j = 32'(wl_q) * NQ + 32'(i);
        if (j < 32'(w_used))
          stage[j] <= w_mem[WAW'(w_base + j)];
        else
          stage[j] <= '0;
      end
    end
  end

  // ---- broadcast activations ----
  fp16_t act_b [4];
  always_comb
    for (int s = 0; s < 4; s++) act_b[s] = act_mem[act_row[s][$clog2(RDEPTH)-1:0]];

  // ---- vector processing units ----
  fp16_t acc [N][4];
  for (genvar j = 0; j < N; j++) begin : g_vpu
    vector_processing_unit u_vpu (
      .clk, .rst,
      .en(vpu_fire && vld[j]), .clr(vpu_clr), .sel(sel[j]),
      .weight(stage[j]), .act(act_b), .acc(acc[j]));
  end

  always_ff @(posedge clk) begin
    if (rst) n_macs <= '0;
    else if (vpu_fire) n_macs <= n_macs + 32'(w_used);
  end

  // ---- output buffer ----
  logic [N-1:0]   ob_v;
  fp16_t          ob_val [N];
  logic [GW-1:0]  ob_grp [N];
  logic [CHW-1:0] ob_k   [N];
  logic [$clog2(N)-1:0] head;
  logic           any;

  always_comb begin
    head = '0;
    any  = 1'b0;
    for (int j = N - 1; j >= 0; j--)
      if (ob_v[j]) begin head = $clog2(N)'(j); any = 1'b1; end
  end

  assign obuf_empty = !any;
  assign ps_valid   = any;
  assign ps         = '{grp: ob_grp[head], k: ob_k[head], val: ob_val[head]};

  always_ff @(posedge clk) begin
    if (rst) begin
      ob_v <= '0;
    end else if (cap) begin
      for (int j = 0; j < N; j++) begin
        ob_v[j]   <= cap_vld[j];
        ob_val[j] <= acc[j][cap_sel[j]];
        ob_grp[j] <= cap_grp[cap_sel[j]];
        ob_k[j]   <= cap_k[j];
      end
    end else if (ps_valid && ps_ready) begin
      ob_v[head] <= 1'b0;
    end
  end

  // a flush only ever lands in an empty output buffer
  assert property (@(posedge clk) disable iff (rst) cap |-> obuf_empty);
endmodule
