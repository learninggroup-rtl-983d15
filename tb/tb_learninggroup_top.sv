// tb_learninggroup_top: end-to-end test of the whole accelerator at its
// default size (3 cores of 264 VPUs, up to 16 groups, 512 channels).
//
// The testbench acts as the host.  For each layer it writes a random weight
// matrix W (I x O, row-major) and random grouping matrices IG (I x G) and
// OG (G x O) into the parameter memory, writes the input activation vector,
// starts a pass and reads the output vector back.  The reference computes
// the mask from the argmax of the IG rows and OG columns
// (mask(i,o) = 1 iff argmax IG(i,:) == argmax OG(:,o)) and the masked
// product in double precision; every output must lie within a tolerance
// that covers FP16 rounding of the accumulation.  Also checked per pass:
// bitvectors in the sparse row memory, hit/miss counts of the encoder (one
// miss per distinct row group), and stage cycle counters.
//
// Passes: forward and backward (transposed) on a random layer; a layer
// whose rows come in long runs of one group (same time-stamp pattern, so
// the cores accumulate), committed to the activation memory and then used
// as input of a backward pass (checks the commit); a 16 x 512 layer with two
// groups whose rows are wider than what is left in a time stamp (rows are
// split); the 128 x 512 layer with 4 groups of the published mask study.
// At the end every mechanism must have been seen: encoder hit and miss,
// core accumulate, flush, split and wait, backward mode and commit.
module tb_learninggroup_top;
  import lg_pkg::*;
  import tb_fp16_pkg::*;

  logic clk = 0, rst = 1;
  logic host_gpm_we = 0; logic [GPM_AW-1:0] host_gpm_addr = 0; fp16_t host_gpm_data = 0;
  logic host_act_we = 0; logic [CHW-1:0] host_act_addr = 0; fp16_t host_act_data = 0;
  logic [CHW-1:0] host_out_addr = 0; fp16_t host_out_data;
  mode_e host_bv_mode = MODE_FWD; logic [GW-1:0] host_bv_grp = 0; logic [CH_MAX-1:0] host_bv_data;
  logic start = 0; mode_e mode = MODE_FWD;
  logic [WLW-1:0] i_ch = 0, o_ch = 0; logic [GCW-1:0] n_groups = 0; logic commit_en = 0;
  logic busy, done;
  logic [WLW-1:0] enc_rows, enc_hits, enc_misses;
  logic [31:0] cyc_group, cyc_compress, cyc_compute;
  logic        core_busy [NUM_CORES];
  logic [31:0] core_stamps [NUM_CORES], core_flushes [NUM_CORES], core_accum [NUM_CORES];
  logic [31:0] core_split [NUM_CORES], core_wait [NUM_CORES], core_macs [NUM_CORES];
  logic [31:0] agg_psums;

  learninggroup_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL %s", msg); end
  endtask

  initial begin
    #200000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- host model of the layer ----
  int  NI, NO, NG;
  real w   [CH_MAX * CH_MAX];
  int  igm [CH_MAX];          // argmax of IG row i
  int  ogm [CH_MAX];          // argmax of OG column o
  real x   [CH_MAX];
  real y   [CH_MAX];
  real tol [CH_MAX];
  int  n_hit_seen = 0, n_miss_seen = 0, n_bwd = 0, n_commit = 0;

  task automatic gpm_write(int addr, fp16_t d);
    @(negedge clk);
    host_gpm_we = 1; host_gpm_addr = GPM_AW'(addr); host_gpm_data = d;
  endtask

  // grouping vector with its maximum at position m (strictly larger)
  task automatic write_group_vec(int base, int stride, int m);
    for (int g = 0; g < NG; g++) begin
      fp16_t v;
      v = (g == m) ? {6'b010001, 10'($urandom_range(0, 1023))} : rand_fp(1);
      gpm_write(base + g * stride, v);
    end
  endtask

  // rows: -1 = random groups, otherwise run length of equal row groups
  task automatic load_layer(int ni, int no, int ng, int run_len);
    NI = ni; NO = no; NG = ng;
    for (int i = 0; i < NI; i++)
      for (int o = 0; o < NO; o++) begin
        fp16_t h;
        h = rand_fp(2);
        w[i * NO + o] = fp2real(h);
        gpm_write(i * NO + o, h);
      end
    for (int i = 0; i < NI; i++) begin
      igm[i] = (run_len < 0) ? $urandom_range(0, NG - 1) : (i / run_len) % NG;
      write_group_vec(IG_BASE + i * G_MAX, 1, igm[i]);
    end
    for (int o = 0; o < NO; o++) begin
      ogm[o] = $urandom_range(0, NG - 1);
      write_group_vec(OG_BASE + o, CH_MAX, ogm[o]);
    end
    @(negedge clk);
    host_gpm_we = 0;
  endtask

  task automatic write_x(int n);
    for (int i = 0; i < n; i++) begin
      fp16_t h;
      h = rand_fp(2);
      x[i] = fp2real(h);
      @(negedge clk);
      host_act_we = 1; host_act_addr = CHW'(i); host_act_data = h;
    end
    @(negedge clk);
    host_act_we = 0;
  endtask

  // reference: forward y[o] = sum_i x[i] W[i][o] m(i,o); backward
  // y[i] = sum_o x[o] W[i][o] m(i,o)
  task automatic reference(mode_e md);
    int nout, nin;
    nout = (md == MODE_FWD) ? NO : NI;
    nin  = (md == MODE_FWD) ? NI : NO;
    for (int a = 0; a < nout; a++) begin
      y[a] = 0.0; tol[a] = 0.0;
      for (int b = 0; b < nin; b++) begin
        int i, o;
        real p;
        i = (md == MODE_FWD) ? b : a;
        o = (md == MODE_FWD) ? a : b;
        if (igm[i] == ogm[o]) begin
          p = x[b] * w[i * NO + o];
          y[a] += p;
          tol[a] += fp_abs(p);
        end
      end
      tol[a] = tol[a] * 0.004 + 0.001;
    end
  endtask

  task automatic run_pass(mode_e md, bit commit, string name);
    int nrows, ncols, nout, distinct;
    bit seen [G_MAX];
    int rg [CH_MAX];
    int cg [CH_MAX];
    nrows = (md == MODE_FWD) ? NI : NO;
    ncols = (md == MODE_FWD) ? NO : NI;
    for (int r = 0; r < nrows; r++) rg[r] = (md == MODE_FWD) ? igm[r] : ogm[r];
    for (int c = 0; c < ncols; c++) cg[c] = (md == MODE_FWD) ? ogm[c] : igm[c];
    reference(md);
    @(negedge clk);
    start = 1; mode = md; i_ch = WLW'(NI); o_ch = WLW'(NO); n_groups = GCW'(NG); commit_en = commit;
    @(negedge clk);
    start = 0;
    chk(busy, {name, ": busy after start"});
    while (!done) @(negedge clk);
    @(negedge clk);
    chk(!busy, {name, ": idle after done"});
    // encoder statistics
    distinct = 0;
    for (int g = 0; g < G_MAX; g++) seen[g] = 0;
    for (int r = 0; r < nrows; r++) if (!seen[rg[r]]) begin seen[rg[r]] = 1; distinct++; end
    chk(int'(enc_rows) == nrows, {name, ": row count"});
    chk(int'(enc_misses) == distinct, $sformatf("%s: misses %0d expected %0d", name, enc_misses, distinct));
    chk(int'(enc_hits) == nrows - distinct, {name, ": hits"});
    n_hit_seen  += int'(enc_hits);
    n_miss_seen += int'(enc_misses);
    chk(cyc_group > 0 && cyc_compress > 0 && cyc_compute > 0, {name, ": stage counters"});
    // bitvectors of the groups that occurred
    host_bv_mode = md;
    for (int g = 0; g < NG; g++) if (seen[g]) begin
      logic [CH_MAX-1:0] e;
      e = '0;
      for (int c = 0; c < ncols; c++) e[c] = (cg[c] == g);
      host_bv_grp = GW'(g); #1;
      chk(host_bv_data == e, $sformatf("%s: bitvector of group %0d", name, g));
    end
    // output vector
    nout = ncols;
    for (int a = 0; a < nout; a++) begin
      real v;
      host_out_addr = CHW'(a); #1;
      v = fp2real(host_out_data);
      chk(fp_abs(v - y[a]) <= tol[a],
          $sformatf("%s: out[%0d] = %f expected %f (tol %f)", name, a, v, y[a], tol[a]));
    end
    if (md == MODE_BWD) n_bwd++;
    if (commit) n_commit++;
    $display("%s: %0dx%0d G=%0d %s  group %0d  compress %0d  compute %0d cycles",
             name, NI, NO, NG, md == MODE_FWD ? "fwd" : "bwd", cyc_group, cyc_compress, cyc_compute);
  endtask

  // committed outputs become the next input: re-read them exactly from the DUT
  task automatic take_committed(int n);
    for (int a = 0; a < n; a++) begin
      host_out_addr = CHW'(a); #1;
      x[a] = fp2real(host_out_data);
    end
  endtask

  initial begin
    int st, fl, ac, sp, wt, mc;
    repeat (3) @(posedge clk);
    rst = 0;
    // 1. random layer, forward and backward
    load_layer(40, 48, 4, -1);
    write_x(40);
    run_pass(MODE_FWD, 0, "random fwd");
    write_x(48);
    run_pass(MODE_BWD, 0, "random bwd");
    // 2. long runs of one row group: same time-stamp pattern, accumulation;
    //    commit, then a backward pass on the committed vector
    load_layer(96, 32, 4, 24);
    write_x(96);
    run_pass(MODE_FWD, 1, "runs fwd");
    take_committed(32);
    run_pass(MODE_BWD, 0, "committed bwd");
    // 3. rows wider than the space left in a time stamp
    load_layer(16, 512, 2, -1);
    write_x(16);
    run_pass(MODE_FWD, 0, "wide fwd");
    // 4. the published mask study size: 128 x 512, G = 4
    load_layer(128, 512, 4, -1);
    write_x(128);
    run_pass(MODE_FWD, 0, "128x512 fwd");
    write_x(512);
    run_pass(MODE_BWD, 0, "128x512 bwd");

    st = 0; fl = 0; ac = 0; sp = 0; wt = 0; mc = 0;
    for (int c = 0; c < NUM_CORES; c++) begin
      st += int'(core_stamps[c]);  fl += int'(core_flushes[c]); ac += int'(core_accum[c]);
      sp += int'(core_split[c]);   wt += int'(core_wait[c]);    mc += int'(core_macs[c]);
    end
    $display("mechanisms: hits %0d misses %0d stamps %0d accumulate %0d flush %0d split %0d wait %0d macs %0d psums %0d bwd %0d commit %0d",
             n_hit_seen, n_miss_seen, st, ac, fl, sp, wt, mc, agg_psums, n_bwd, n_commit);
    chk(n_hit_seen > 0,  "encoder hit seen");
    chk(n_miss_seen > 0, "encoder miss seen");
    chk(ac > 0, "core accumulate seen");
    chk(fl > 0, "core flush seen");
    chk(sp > 0, "row split seen");
    chk(wt > 0, "core wait for output buffer seen");
    chk(n_bwd > 0, "transposed (backward) mode seen");
    chk(n_commit > 0, "commit seen");
    chk(int'(agg_psums) > 0, "aggregation seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
