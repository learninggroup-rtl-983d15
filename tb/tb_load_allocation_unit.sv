// tb_load_allocation_unit: self-checking test of weight compression and
// row allocation.
//
// An encoder and a sparse row memory build the tuples of a random grouped
// layer; a parameter memory holds weights whose value encodes their address.
// The load allocation unit then distributes the layer, and every write it
// makes to a core is collected into per-core models.  These are compared
// with the expected compressed data worked out from the mask definition:
// the workload table, each core's contiguous block of ceil(rows / 3) rows
// (index list and activations) and the unmasked weights in row order, for
// both the forward and the transposed matrix.  The pass must take
// G + 2 * rows + (unmasked weights) + C + 2 cycles,
// counted from the cycle of `start` to the cycle of `done`.
module tb_load_allocation_unit;
  import lg_pkg::*;

  logic clk = 0, rst = 1;
  int checks = 0, failures = 0;
  int cycle = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // encoder + memory
  logic enc_start = 0; mode_e mode = MODE_FWD; logic [WLW-1:0] n_cols = 0;
  logic col_we = 0; logic [CHW-1:0] col_addr = 0; logic [GW-1:0] col_grp = 0;
  logic row_valid = 0; logic [GW-1:0] row_grp = 0;
  logic srm_clr, srm_st_valid, srm_tw_en, srm_lw_en;
  mode_e srm_mode, lau_srm_mode;
  logic [GW-1:0] srm_st_grp, srm_tw_grp, srm_lw_grp;
  logic [CH_MAX-1:0] srm_tw_bv, bv_data;
  logic [CHW-1:0] srm_tw_nz [CH_MAX];
  logic [WLW-1:0] srm_tw_wl, n_rows_e, hits, misses;
  logic [CHW-1:0] srm_lw_pos;
  logic [CHW-1:0] li_pos, ra_k, rb_nz, ra_nz;
  logic [GW-1:0] li_grp, ra_grp;
  logic [WLW-1:0] ra_wl;

  sparse_data_encoder u_enc (
    .clk, .rst, .start(enc_start), .mode, .n_cols, .col_we, .col_addr, .col_grp,
    .row_valid, .row_grp, .srm_clr, .srm_mode, .srm_st_grp, .srm_st_valid,
    .srm_tw_en, .srm_tw_grp, .srm_tw_bv, .srm_tw_nz, .srm_tw_wl,
    .srm_lw_en, .srm_lw_pos, .srm_lw_grp, .n_rows(n_rows_e), .hits, .misses);

  sparse_row_memory u_srm (
    .clk, .rst, .clr_bank(srm_clr), .clr_mode(srm_mode),
    .tw_en(srm_tw_en), .tw_mode(srm_mode), .tw_grp(srm_tw_grp), .tw_bv(srm_tw_bv),
    .tw_nz(srm_tw_nz), .tw_wl(srm_tw_wl),
    .lw_en(srm_lw_en), .lw_mode(srm_mode), .lw_pos(srm_lw_pos), .lw_grp(srm_lw_grp),
    .st_mode(srm_mode), .st_grp(srm_st_grp), .st_valid(srm_st_valid),
    .ra_mode(lau_srm_mode), .ra_grp, .ra_k, .ra_wl, .ra_nz,
    .rb_mode(lau_srm_mode), .rb_grp(ra_grp), .rb_k(ra_k), .rb_nz,
    .bv_mode(lau_srm_mode), .bv_grp(ra_grp), .bv_data,
    .li_mode(lau_srm_mode), .li_pos, .li_grp);

  // parameter memory
  logic gpm_we = 0; logic [GPM_AW-1:0] gpm_waddr = 0; fp16_t gpm_wdata = 0;
  logic gpm_re; logic [GPM_AW-1:0] gpm_raddr; fp16_t gpm_rdata;
  global_parameter_memory u_gpm (.clk, .we(gpm_we), .waddr(gpm_waddr), .wdata(gpm_wdata),
                                 .re(gpm_re), .raddr(gpm_raddr), .rdata(gpm_rdata));

  // activation memory model
  logic [CHW-1:0] act_addr; fp16_t act_data;
  fp16_t actm [CH_MAX];
  assign act_data = actm[act_addr];

  // dut
  logic start = 0, busy, done;
  logic [WLW-1:0] n_rows = 0, o_ch = 0;
  logic [GCW-1:0] n_groups = 0;
  core_wr_t core_wr;
  load_allocation_unit dut (.clk, .rst, .start, .mode, .n_rows, .o_ch, .n_groups, .busy, .done,
    .srm_mode(lau_srm_mode), .li_pos, .li_grp, .ra_grp, .ra_k, .ra_wl, .ra_nz,
    .act_addr, .act_data, .gpm_re, .gpm_raddr, .gpm_rdata, .core_wr);

  // per-core collected data
  int c_wl [NUM_CORES][G_MAX];
  int c_idx [NUM_CORES][CH_MAX];
  int c_act [NUM_CORES][CH_MAX];
  int c_w [NUM_CORES][$];
  int c_nrows [NUM_CORES];

  always @(posedge clk) begin
    if (!rst) begin
      for (int cc = 0; cc < NUM_CORES; cc++) begin
        if (core_wr.kind != CW_NONE && (core_wr.core == 2'b11 || int'(core_wr.core) == cc)) begin
          case (core_wr.kind)
            CW_WL:    c_wl[cc][core_wr.addr] = int'(core_wr.data);
            CW_IDX:   c_idx[cc][core_wr.addr] = int'(core_wr.data);
            CW_ACT:   c_act[cc][core_wr.addr] = int'(core_wr.data);
            CW_W:     begin
                        if (int'(core_wr.addr) != c_w[cc].size()) begin
                          failures++; $display("FAIL weight address out of order");
                        end
                        c_w[cc].push_back(int'(core_wr.data));
                      end
            CW_NROWS: c_nrows[cc] = int'(core_wr.data);
            default: ;
          endcase
        end
      end
    end
  end

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  int colg[CH_MAX], rowg[CH_MAX];

  // weight value stored at address a
  function automatic int wval(int a);
    return (a * 40503 + 7) & 16'hffff;
  endfunction

  task automatic run_layer(mode_e m, int m_in, int n_out, int g);
    int rows, cols, rpc, t0, nnz;
    rows = (m == MODE_FWD) ? m_in : n_out;
    cols = (m == MODE_FWD) ? n_out : m_in;
    for (int c = 0; c < cols; c++) colg[c] = $urandom_range(0, g - 1);
    for (int r = 0; r < rows; r++) rowg[r] = $urandom_range(0, g - 1);
    for (int r = 0; r < rows; r++) actm[r] = 16'($urandom);
    // weights of the m_in x n_out layer, row-major
    for (int a = 0; a < m_in * n_out; a++) begin
      @(negedge clk);
      gpm_we = 1; gpm_waddr = GPM_AW'(a); gpm_wdata = 16'(wval(a));
    end
    @(negedge clk);
    gpm_we = 0;
    // encode
    mode = m; n_cols = WLW'(cols); enc_start = 1;
    @(negedge clk);
    enc_start = 0;
    for (int c = 0; c < cols; c++) begin
      col_we = 1; col_addr = CHW'(c); col_grp = GW'(colg[c]);
      @(negedge clk);
    end
    col_we = 0;
    for (int r = 0; r < rows; r++) begin
      row_valid = 1; row_grp = GW'(rowg[r]);
      @(negedge clk);
    end
    row_valid = 0;
    for (int cc = 0; cc < NUM_CORES; cc++) begin c_w[cc].delete(); c_nrows[cc] = -1; end
    // allocate
    n_rows = WLW'(rows); o_ch = WLW'(n_out); n_groups = GCW'(g); start = 1;
    @(negedge clk);
    start = 0;
    t0 = cycle;
    while (!done) @(negedge clk);
    // expected data
    rpc = (rows + NUM_CORES - 1) / NUM_CORES;
    nnz = 0;
    for (int cc = 0; cc < NUM_CORES; cc++) begin
      int first, last, wi;
      first = cc * rpc;
      last  = (cc + 1) * rpc < rows ? (cc + 1) * rpc : rows;
      chk(c_nrows[cc] == (last > first ? last - first : 0), $sformatf("core %0d row count %0d", cc, c_nrows[cc]));
      for (int gi = 0; gi < g; gi++) begin
        int wl = 0;
        bit used = 0;
        for (int c = 0; c < cols; c++) if (colg[c] == gi) wl++;
        for (int r = 0; r < rows; r++) if (rowg[r] == gi) used = 1;
        if (used) chk(c_wl[cc][gi] == wl, $sformatf("core %0d wl[%0d]", cc, gi));
      end
      wi = 0;
      for (int r = first; r < last; r++) begin
        chk(c_idx[cc][r - first] == rowg[r], $sformatf("core %0d index list %0d", cc, r - first));
        chk(c_act[cc][r - first] == int'(actm[r]), $sformatf("core %0d act %0d", cc, r - first));
        for (int c = 0; c < cols; c++) begin
          if (colg[c] == rowg[r]) begin
            int a;
            a = (m == MODE_FWD) ? r * n_out + c : c * n_out + r;
            chk(wi < c_w[cc].size() && c_w[cc][wi] == wval(a),
                $sformatf("core %0d weight %0d (row %0d col %0d)", cc, wi, r, c));
            wi++;
            nnz++;
          end
        end
      end
      chk(wi == c_w[cc].size(), $sformatf("core %0d weight count %0d expected %0d", cc, c_w[cc].size(), wi));
    end
    chk(cycle - t0 == g + 2 * rows + nnz + NUM_CORES + 1,
        $sformatf("allocation took %0d cycles, expected %0d", cycle - t0, g + 2 * rows + nnz + NUM_CORES + 1));
  endtask

  initial begin
    for (int i = 0; i < CH_MAX; i++) actm[i] = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    run_layer(MODE_FWD, 6, 6, 4);
    run_layer(MODE_FWD, 20, 37, 2);
    run_layer(MODE_BWD, 20, 37, 4);
    run_layer(MODE_FWD, 128, 64, 8);
    run_layer(MODE_BWD, 64, 100, 16);
    run_layer(MODE_FWD, 7, 5, 1);
    run_layer(MODE_FWD, 2, 9, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
