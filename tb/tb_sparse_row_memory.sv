// tb_sparse_row_memory: self-checking test of the sparse row memory.
//
// Writes random tuples into both banks, checks every read port against a
// model kept in the testbench, checks that the status bit is set only by a
// tuple write (visible the next cycle), that a bank clear drops the status
// of that bank alone, and that index-list entries read back.
module tb_sparse_row_memory;
  import lg_pkg::*;

  logic clk = 0, rst = 1;
  logic clr_bank = 0; mode_e clr_mode = MODE_FWD;
  logic tw_en = 0; mode_e tw_mode = MODE_FWD; logic [GW-1:0] tw_grp = 0;
  logic [CH_MAX-1:0] tw_bv = 0; logic [CHW-1:0] tw_nz [CH_MAX]; logic [WLW-1:0] tw_wl = 0;
  logic lw_en = 0; mode_e lw_mode = MODE_FWD; logic [CHW-1:0] lw_pos = 0; logic [GW-1:0] lw_grp = 0;
  mode_e st_mode = MODE_FWD; logic [GW-1:0] st_grp = 0; logic st_valid;
  mode_e ra_mode = MODE_FWD; logic [GW-1:0] ra_grp = 0; logic [CHW-1:0] ra_k = 0;
  logic [WLW-1:0] ra_wl; logic [CHW-1:0] ra_nz;
  mode_e rb_mode = MODE_FWD; logic [GW-1:0] rb_grp = 0; logic [CHW-1:0] rb_k = 0; logic [CHW-1:0] rb_nz;
  mode_e bv_mode = MODE_FWD; logic [GW-1:0] bv_grp = 0; logic [CH_MAX-1:0] bv_data;
  mode_e li_mode = MODE_FWD; logic [CHW-1:0] li_pos = 0; logic [GW-1:0] li_grp;

  int checks = 0, failures = 0;
  logic [CH_MAX-1:0] m_bv [2][G_MAX];
  int m_nz [2][G_MAX][CH_MAX];
  int m_wl [2][G_MAX];
  bit m_st [2][G_MAX];
  int m_li [2][CH_MAX];
  bit m_liw [2][CH_MAX];

  sparse_row_memory dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  task automatic check_all();
    for (int b = 0; b < 2; b++)
      for (int g = 0; g < G_MAX; g++) begin
        st_mode = mode_e'(b); st_grp = GW'(g); #1;
        chk(st_valid == m_st[b][g], $sformatf("status %0d/%0d", b, g));
        if (!m_st[b][g]) continue;
        ra_mode = mode_e'(b); ra_grp = GW'(g); bv_mode = mode_e'(b); bv_grp = GW'(g);
        rb_mode = mode_e'(b); rb_grp = GW'(g);
        for (int k = 0; k < CH_MAX; k += 37) begin
          ra_k = CHW'(k); rb_k = CHW'(CH_MAX - 1 - k); #1;
          chk(int'(ra_nz) == m_nz[b][g][k], "nz port a");
          chk(int'(rb_nz) == m_nz[b][g][CH_MAX - 1 - k], "nz port b");
        end
        chk(int'(ra_wl) == m_wl[b][g], "workload");
        chk(bv_data == m_bv[b][g], "bitvector");
      end
  endtask

  initial begin
    for (int i = 0; i < CH_MAX; i++) tw_nz[i] = 0;
    for (int b = 0; b < 2; b++) for (int g = 0; g < G_MAX; g++) m_st[b][g] = 0;
    for (int b = 0; b < 2; b++) for (int i = 0; i < CH_MAX; i++) m_liw[b][i] = 0;
    repeat (2) @(posedge clk);
    rst = 0;
    @(negedge clk);
    check_all();
    for (int n = 0; n < 60; n++) begin
      int b, g;
      @(negedge clk);
      b = $urandom_range(0, 1); g = $urandom_range(0, G_MAX - 1);
      tw_en = 1; tw_mode = mode_e'(b); tw_grp = GW'(g);
      for (int w = 0; w < CH_MAX / 32; w++) tw_bv[w*32 +: 32] = $urandom;
      tw_wl = WLW'($urandom_range(0, CH_MAX));
      for (int i = 0; i < CH_MAX; i++) tw_nz[i] = CHW'($urandom);
      m_bv[b][g] = tw_bv; m_wl[b][g] = int'(tw_wl);
      for (int i = 0; i < CH_MAX; i++) m_nz[b][g][i] = int'(tw_nz[i]);
      st_mode = mode_e'(b); st_grp = GW'(g); #1;
      chk(st_valid == m_st[b][g], "status before write edge");
      m_st[b][g] = 1;
      lw_en = 1; lw_mode = mode_e'(b); lw_pos = CHW'(n * 7); lw_grp = GW'(g);
      m_li[b][n * 7] = g; m_liw[b][n * 7] = 1;
      @(negedge clk);
      tw_en = 0; lw_en = 0;
      if (n % 20 == 19) check_all();
    end
    // index list: the last write at each position wins
    for (int b = 0; b < 2; b++) begin
      li_mode = mode_e'(b);
      for (int n = 0; n < 60; n++) begin
        li_pos = CHW'(n * 7); #1;
        if (m_liw[b][n * 7]) chk(int'(li_grp) == m_li[b][n * 7], "index list");
      end
    end
    // clear bank 1 only
    @(negedge clk);
    clr_bank = 1; clr_mode = MODE_BWD;
    @(negedge clk);
    clr_bank = 0;
    for (int g = 0; g < G_MAX; g++) m_st[1][g] = 0;
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
