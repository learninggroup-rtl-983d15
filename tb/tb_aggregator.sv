// tb_aggregator: self-checking test of partial-sum combining.
//
// Three sources send random partial sums tagged (group, k); a table in the
// testbench plays the sparse row memory, mapping (group, k) to a column.
// Every accepted sum is replayed on a reference output vector with the
// reference FP16 adder, in the order the aggregator accepted them, and the
// output vector is compared at the end.  Also checked: one sum per cycle
// while any source is valid, round-robin order when all three are valid,
// that the right column is looked up, the output clear, host writes to the
// activation memory and the commit of the output into it.
module tb_aggregator;
  import lg_pkg::*;
  import tb_fp16_pkg::*;
  localparam int unsigned C = 3;

  logic clk = 0, rst = 1;
  mode_e mode = MODE_FWD;
  logic clr_out = 0, commit = 0;
  logic ps_valid [C];
  psum_t ps [C];
  logic ps_ready [C];
  mode_e srm_mode; logic [GW-1:0] srm_grp; logic [CHW-1:0] srm_k, srm_nz;
  logic act_we = 0; logic [CHW-1:0] act_waddr = 0, act_addr = 0, out_addr = 0;
  fp16_t act_wdata = 0, act_data, out_data;
  logic idle; logic [31:0] n_psums;

  aggregator #(.C(C)) dut (.*);
  always #5 clk = ~clk;

  int nzt [G_MAX][CH_MAX];
  assign srm_nz = CHW'(nzt[srm_grp][srm_k]);

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  fp16_t ref_out [CH_MAX];
  psum_t q [C][$];
  int last_pick = -1;
  int accepted = 0;

  // sources present the head of their queue
  always_comb
    for (int c = 0; c < C; c++) begin
      ps_valid[c] = (q[c].size() > 0);
      ps[c] = (q[c].size() > 0) ? q[c][0] : '0;
    end

  always @(posedge clk) begin
    if (!rst) begin
      int nready, nvalid, p;
      nready = 0; nvalid = 0; p = -1;
      for (int c = 0; c < C; c++) begin
        if (ps_valid[c]) nvalid++;
        if (ps_ready[c]) begin nready++; p = c; end
      end
      chk(nready == (nvalid > 0 ? 1 : 0), "one sum per cycle while any is valid");
      if (p >= 0) begin
        int col;
        chk(ps_valid[p], "ready only to a valid source");
        if (nvalid == C && last_pick >= 0) chk(p == (last_pick + 1) % C, "round robin");
        col = nzt[ps[p].grp][ps[p].k];
        ref_out[col] = real2fp(fp2real(ref_out[col]) + fp2real(ps[p].val));
        void'(q[p].pop_front());
        last_pick = p;
        accepted++;
      end
    end
  end

  initial begin
    for (int c = 0; c < C; c++) q[c].delete();
    for (int g = 0; g < G_MAX; g++)
      for (int k = 0; k < CH_MAX; k++) nzt[g][k] = $urandom_range(0, CH_MAX - 1);
    for (int i = 0; i < CH_MAX; i++) ref_out[i] = 0;
    repeat (2) @(posedge clk);
    rst = 0;
    @(negedge clk);
    clr_out = 1;
    @(negedge clk);
    clr_out = 0;
    // bursts of partial sums, few columns so that sums collide
    for (int b = 0; b < 20; b++) begin
      for (int c = 0; c < C; c++) begin
        int n;
        n = $urandom_range(0, 40);
        for (int i = 0; i < n; i++) begin
          psum_t e;
          e.grp = GW'($urandom_range(0, 3));
          e.k   = CHW'($urandom_range(0, 7));
          e.val = rand_fp(2);
          q[c].push_back(e);
        end
      end
      while (q[0].size() + q[1].size() + q[2].size() > 0) @(negedge clk);
    end
    @(negedge clk);
    chk(idle, "idle when nothing is valid");
    chk(int'(n_psums) == accepted, "sum counter");
    for (int i = 0; i < CH_MAX; i++) begin
      out_addr = CHW'(i); #1;
      chk(out_data == ref_out[i], $sformatf("out[%0d]=%h expected %h", i, out_data, ref_out[i]));
    end
    // host writes to the activation memory
    for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      act_we = 1; act_waddr = CHW'(i * 31); act_wdata = 16'(i * 1111 + 3);
    end
    @(negedge clk);
    act_we = 0;
    for (int i = 0; i < 16; i++) begin
      act_addr = CHW'(i * 31); #1;
      chk(act_data == 16'(i * 1111 + 3), "activation write");
    end
    // commit output into the activation memory, then clear the output
    @(negedge clk);
    commit = 1;
    @(negedge clk);
    commit = 0;
    for (int i = 0; i < CH_MAX; i++) begin
      act_addr = CHW'(i); #1;
      chk(act_data == ref_out[i], "commit");
    end
    clr_out = 1;
    @(negedge clk);
    clr_out = 0;
    for (int i = 0; i < CH_MAX; i += 17) begin
      out_addr = CHW'(i); #1;
      chk(out_data == 0, "clear");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
