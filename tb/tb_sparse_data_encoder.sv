// tb_sparse_data_encoder: self-checking test of the OSEL encoder together
// with a sparse row memory.
//
// Part 1 replays the published G = 4 example: column max indexes
// 1 1 3 3 2 0 and row max indexes 1 2 1 3 0 2 must give miss, miss, hit,
// miss, miss, hit, and the tuples 000001/[5]/1, 110000/[0,1]/2,
// 000010/[4]/1, 001100/[2,3]/2 for groups 0..3 (bitvectors printed with
// column 0 on the left).  Part 2 runs random layers (G in 1..16, up to 512
// columns and 512 rows, both matrix orientations) and checks every tuple,
// the index list, the hit/miss counts and the one-row-per-cycle rate
// against a reference computed directly from the mask definition.
module tb_sparse_data_encoder;
  import lg_pkg::*;

  logic clk = 0, rst = 1;
  logic start = 0;
  mode_e mode = MODE_FWD;
  logic [WLW-1:0] n_cols = 0;
  logic col_we = 0;
  logic [CHW-1:0] col_addr = 0;
  logic [GW-1:0] col_grp = 0;
  logic row_valid = 0;
  logic [GW-1:0] row_grp = 0;
  logic srm_clr, srm_st_valid, srm_tw_en, srm_lw_en;
  mode_e srm_mode;
  logic [GW-1:0] srm_st_grp, srm_tw_grp, srm_lw_grp;
  logic [CH_MAX-1:0] srm_tw_bv;
  logic [CHW-1:0] srm_tw_nz [CH_MAX];
  logic [WLW-1:0] srm_tw_wl, n_rows, hits, misses;
  logic [CHW-1:0] srm_lw_pos;
  // read side of the memory
  mode_e rd_mode = MODE_FWD;
  logic [GW-1:0] rd_grp = 0;
  logic [CHW-1:0] rd_k = 0, rd_pos = 0;
  logic [WLW-1:0] ra_wl;
  logic [CHW-1:0] ra_nz, rb_nz;
  logic [CH_MAX-1:0] bv_data;
  logic [GW-1:0] li_grp;
  logic st_dummy;

  int checks = 0, failures = 0;
  int cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  sparse_data_encoder dut (.*);

  sparse_row_memory u_srm (
    .clk, .rst,
    .clr_bank(srm_clr), .clr_mode(srm_mode),
    .tw_en(srm_tw_en), .tw_mode(srm_mode), .tw_grp(srm_tw_grp), .tw_bv(srm_tw_bv),
    .tw_nz(srm_tw_nz), .tw_wl(srm_tw_wl),
    .lw_en(srm_lw_en), .lw_mode(srm_mode), .lw_pos(srm_lw_pos), .lw_grp(srm_lw_grp),
    .st_mode(srm_mode), .st_grp(srm_st_grp), .st_valid(srm_st_valid),
    .ra_mode(rd_mode), .ra_grp(rd_grp), .ra_k(rd_k), .ra_wl(ra_wl), .ra_nz(ra_nz),
    .rb_mode(rd_mode), .rb_grp(rd_grp), .rb_k(rd_k), .rb_nz(rb_nz),
    .bv_mode(rd_mode), .bv_grp(rd_grp), .bv_data(bv_data),
    .li_mode(rd_mode), .li_pos(rd_pos), .li_grp(li_grp)
  );
  assign st_dummy = 1'b0;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  int colg[CH_MAX];
  int rowg[CH_MAX];
  bit misslog[CH_MAX];

  // run one encoding: columns then rows, one row per cycle
  task automatic encode(mode_e m, int ncol, int nrow);
    @(negedge clk);
    mode = m; n_cols = WLW'(ncol); start = 1;
    @(negedge clk);
    start = 0;
    for (int c = 0; c < ncol; c++) begin
      col_we = 1; col_addr = CHW'(c); col_grp = GW'(colg[c]);
      @(negedge clk);
    end
    col_we = 0;
    for (int r = 0; r < nrow; r++) begin
      row_valid = 1; row_grp = GW'(rowg[r]);
      #1 misslog[r] = srm_tw_en;
      @(negedge clk);
    end
    row_valid = 0;
    @(negedge clk);
  endtask

  task automatic check_layer(mode_e m, int ncol, int nrow, int g);
    bit seen[G_MAX];
    int h = 0, mi = 0;
    for (int i = 0; i < G_MAX; i++) seen[i] = 0;
    for (int r = 0; r < nrow; r++) begin
      chk(misslog[r] == !seen[rowg[r]], $sformatf("hit/miss of row %0d", r));
      if (seen[rowg[r]]) h++; else mi++;
      seen[rowg[r]] = 1;
    end
    chk(int'(hits) == h && int'(misses) == mi && int'(n_rows) == nrow,
        $sformatf("counts hits=%0d misses=%0d rows=%0d, expected %0d %0d %0d", hits, misses, n_rows, h, mi, nrow));
    rd_mode = m;
    for (int r = 0; r < nrow; r++) begin
      rd_pos = CHW'(r); #1;
      chk(int'(li_grp) == rowg[r], $sformatf("index list[%0d]", r));
    end
    for (int gi = 0; gi < g; gi++) begin
      int wl;
      if (!seen[gi]) continue;
      rd_grp = GW'(gi); rd_k = 0; #1;
      wl = 0;
      for (int c = 0; c < CH_MAX; c++) begin
        bit e;
        e = (c < ncol) && (colg[c] == gi);
        chk(bv_data[c] == e, $sformatf("bitvector grp %0d col %0d", gi, c));
        if (e) begin
          rd_k = CHW'(wl); #1;
          chk(int'(ra_nz) == c && int'(rb_nz) == c, $sformatf("nz grp %0d k %0d = %0d expected %0d", gi, wl, ra_nz, c));
          wl++;
        end
      end
      chk(int'(ra_wl) == wl, $sformatf("workload grp %0d = %0d expected %0d", gi, ra_wl, wl));
    end
  endtask

  initial begin
    int ex_col[6] = '{1, 1, 3, 3, 2, 0};
    int ex_row[6] = '{1, 2, 1, 3, 0, 2};
    bit ex_miss[6] = '{1, 1, 0, 1, 1, 0};
    string ex_bv[4] = '{"000001", "110000", "000010", "001100"};
    int t0;
    repeat (3) @(posedge clk);
    rst = 0;
    // ---- published example ----
    for (int i = 0; i < 6; i++) begin colg[i] = ex_col[i]; rowg[i] = ex_row[i]; end
    encode(MODE_FWD, 6, 6);
    for (int i = 0; i < 6; i++) chk(misslog[i] == ex_miss[i], $sformatf("example cycle %0d hit/miss", i + 1));
    rd_mode = MODE_FWD;
    for (int gi = 0; gi < 4; gi++) begin
      string s;
      rd_grp = GW'(gi); #1;
      s = "";
      for (int c = 0; c < 6; c++) s = {s, bv_data[c] ? "1" : "0"};
      chk(s == ex_bv[gi], $sformatf("example bitvector %0d = %s", gi, s));
    end
    check_layer(MODE_FWD, 6, 6, 4);
    // ---- random layers, both orientations ----
    for (int n = 0; n < 12; n++) begin
      int g, ncol, nrow;
      mode_e m;
      g    = 1 << (n % 5);
      if (n % 3 == 2) g = $urandom_range(1, 16);
      ncol = (n < 2) ? 512 : $urandom_range(1, 512);
      nrow = (n == 0) ? 512 : $urandom_range(1, 512);
      m    = mode_e'(n % 2);
      for (int c = 0; c < ncol; c++) colg[c] = $urandom_range(0, g - 1);
      for (int r = 0; r < nrow; r++) rowg[r] = $urandom_range(0, g - 1);
      @(negedge clk); t0 = cycle;
      encode(m, ncol, nrow);
      // start + columns + rows + 1 idle cycle
      chk(cycle - t0 == 1 + ncol + nrow + 1 + 1, $sformatf("encode took %0d cycles for %0d cols %0d rows", cycle - t0, ncol, nrow));
      check_layer(m, ncol, nrow, g);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
