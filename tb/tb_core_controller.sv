// tb_core_controller: self-checking test of time-stamp planning, selection
// signal generation and flush decisions.
//
// Part 1 uses seven VPUs and the published example: index list
// 1 2 1 3 0 2 3 3 with workloads idx0..3 = 1 2 1 2 must give the selection
// signal 00000110101111 in time stamp 1 and 000110101111 (VPU 6 idle) in
// time stamp 2, VPU 0 printed first.  Part 2 runs random row lists with
// random workloads (some wider than the VPU array, some zero) against a
// reference planner written from the scheme's description: up to four rows
// per time stamp, each taking as much of the remaining space as it needs, a
// row that does not fit ending the time stamp.  For every fire the selects
// and valid bits are compared; for every flush the group and non-zero
// position of each VPU's partial sum; a flush must happen exactly when the
// pattern changes.  A time stamp must take 6 cycles when the output buffer
// is free, and the controller must wait while it is not.
module tb_core_controller;
  import lg_pkg::*;
  localparam int unsigned N = 7;

  logic clk = 0, rst = 1, start = 0;
  logic [WLW-1:0] n_rows = 0;
  logic busy, done;
  logic [WLW-1:0] row_addr [4];
  logic [GW-1:0]  row_grp  [4];
  logic [WLW-1:0] row_wl   [4];
  logic wl_en; logic [1:0] wl_q; logic [31:0] w_base; logic [WLW-1:0] w_used;
  logic vpu_fire, vpu_clr;
  logic [1:0] sel [N]; logic vld [N];
  logic [WLW-1:0] act_row [4];
  logic obuf_empty = 1, cap;
  logic [1:0] cap_sel [N]; logic cap_vld [N];
  logic [GW-1:0] cap_grp [4]; logic [CHW-1:0] cap_k [N];
  logic [31:0] n_stamps, n_flushes, n_accum, n_split, n_wait;

  core_controller #(.N(N)) dut (.*);

  always #5 clk = ~clk;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  int idxl[CH_MAX];
  int wlt[G_MAX];
  always_comb
    for (int s = 0; s < 4; s++) begin
      row_grp[s] = GW'(idxl[row_addr[s] % CH_MAX]);
      row_wl[s]  = WLW'(wlt[row_grp[s]]);
    end

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- reference plan ----
  typedef struct {
    int nslot;
    int grp[4], k0[4], take[4], start[4], row[4];
    int used;
  } ts_t;
  ts_t plan[$];

  task automatic make_plan(int nrows);
    int pos, koff;
    plan.delete();
    pos = 0; koff = 0;
    while (pos < nrows) begin
      ts_t t;
      int cap_left, s;
      cap_left = N; t.nslot = 0; t.used = 0;
      for (s = 0; s < 4 && pos < nrows; s++) begin
        int rem, tk;
        rem = wlt[idxl[pos]] - koff;
        tk  = rem < cap_left ? rem : cap_left;
        t.grp[s] = idxl[pos]; t.k0[s] = koff; t.take[s] = tk; t.start[s] = t.used;
        t.row[s] = pos;
        t.used += tk; cap_left -= tk; t.nslot++;
        if (tk < rem) begin koff = koff + tk; break; end
        koff = 0; pos++;
      end
      plan.push_back(t);
    end
  endtask

  function automatic bit same_pat(ts_t a, ts_t b);
    if (a.nslot != b.nslot) return 0;
    for (int s = 0; s < a.nslot; s++)
      if (a.grp[s] != b.grp[s] || a.k0[s] != b.k0[s] || a.take[s] != b.take[s]) return 0;
    return 1;
  endfunction

  function automatic int slot_of(ts_t t, int j);
    int s = 0;
    for (int i = 0; i < t.nslot; i++) if (t.take[i] > 0 && j >= t.start[i]) s = i;
    return s;
  endfunction

  string sel_str[$];
  int fire_cycles[$];
  bit busy_obuf = 0;

  // monitor: checks each fire and flush against the plan
  int ts_i;
  ts_t prev;
  always @(posedge clk) begin
    if (!rst && (vpu_fire || cap)) begin
      if (cap) begin
        chk(ts_i > 0, "flush before any time stamp");
        if (ts_i > 0) begin
          chk(!vpu_fire || !same_pat(plan[ts_i], prev), "flush although pattern unchanged");
          for (int j = 0; j < N; j++) begin
            chk(cap_vld[j] == (j < prev.used), $sformatf("flush valid VPU %0d", j));
            if (j < prev.used) begin
              int s;
              s = slot_of(prev, j);
              chk(int'(cap_grp[cap_sel[j]]) == prev.grp[s] &&
                  int'(cap_k[j]) == prev.k0[s] + j - prev.start[s],
                  $sformatf("flush tag VPU %0d: grp %0d k %0d expected %0d %0d", j,
                            cap_grp[cap_sel[j]], cap_k[j], prev.grp[s], prev.k0[s] + j - prev.start[s]));
            end
          end
        end
      end
      if (vpu_fire) begin
        string s;
        chk(ts_i < plan.size(), "more time stamps than planned");
        if (ts_i < plan.size()) begin
          ts_t t;
          t = plan[ts_i];
          if (ts_i > 0) chk(vpu_clr == !same_pat(t, prev), "clear / accumulate decision");
          else chk(vpu_clr, "first time stamp clears");
          if (ts_i > 0 && !same_pat(t, prev)) chk(cap, "pattern change must flush");
          s = "";
          for (int j = 0; j < N; j++) begin
            chk(vld[j] == (j < t.used), $sformatf("ts %0d valid VPU %0d", ts_i, j));
            if (j < t.used) begin
              chk(int'(sel[j]) == slot_of(t, j), $sformatf("ts %0d sel VPU %0d = %0d exp %0d", ts_i, j, sel[j], slot_of(t, j)));
              s = {s, $sformatf("%b", sel[j])};
            end
          end
          for (int sl = 0; sl < t.nslot; sl++)
            chk(int'(act_row[sl]) == t.row[sl], "activation row");
          sel_str.push_back(s);
          fire_cycles.push_back(cycle);
          prev = t;
        end
        ts_i++;
      end
    end
  end

  task automatic run(int nrows, bit throttle);
    ts_i = 0;
    sel_str.delete();
    fire_cycles.delete();
    make_plan(nrows);
    @(negedge clk);
    n_rows = WLW'(nrows); start = 1;
    @(negedge clk);
    start = 0;
    while (!done) begin
      @(negedge clk);
      if (throttle) obuf_empty = ($urandom_range(0, 2) != 0);
      else obuf_empty = 1;
    end
    obuf_empty = 1;
    chk(ts_i == plan.size(), $sformatf("%0d time stamps fired, %0d planned", ts_i, plan.size()));
    if (!throttle)
      for (int i = 1; i < fire_cycles.size(); i++)
        chk(fire_cycles[i] - fire_cycles[i - 1] == 6, "time stamp period");
  endtask

  initial begin
    int ex_idx[8] = '{1, 2, 1, 3, 0, 2, 3, 3};
    int ex_wl[4]  = '{1, 2, 1, 2};
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 8; i++) idxl[i] = ex_idx[i];
    for (int i = 0; i < 4; i++) wlt[i] = ex_wl[i];
    run(8, 0);
    chk(sel_str.size() == 2, "example: two time stamps");
    if (sel_str.size() == 2) begin
      chk(sel_str[0] == "00000110101111", {"example time stamp 1: ", sel_str[0]});
      chk(sel_str[1] == "000110101111", {"example time stamp 2: ", sel_str[1]});
    end
    // random lists
    for (int n = 0; n < 60; n++) begin
      int g, nr;
      g  = $urandom_range(1, 16);
      nr = $urandom_range(1, 40);
      for (int i = 0; i < g; i++) wlt[i] = (n % 3 == 0) ? $urandom_range(0, 3 * N) : $urandom_range(0, N);
      for (int i = 0; i < nr; i++) idxl[i] = $urandom_range(0, g - 1);
      if (n % 5 == 0) for (int i = 0; i < nr; i++) idxl[i] = 0;   // one pattern repeated
      run(nr, n % 2 == 1);
    end
    chk(n_accum > 0 && n_flushes > 0 && n_split > 0 && n_wait > 0, "all mechanisms seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
