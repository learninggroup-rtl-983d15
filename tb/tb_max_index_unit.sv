// tb_max_index_unit: self-checking test of the max-index finder.
//
// Streams random vectors of G = 1, 2, 4, 8 and 16 FP16 values back to back
// (no idle cycle between vectors), some with repeated values to exercise the
// earliest-wins tie rule, and compares each reported index with one found by
// comparing the values as reals.  Also checks that the index appears exactly
// one cycle after the last value and that a vector of G values takes G
// cycles.
module tb_max_index_unit;
  import lg_pkg::*;
  import tb_fp16_pkg::*;

  logic clk = 0, rst = 1;
  logic in_valid = 0, in_first = 0, in_last = 0;
  fp16_t in_value = 0;
  logic idx_valid;
  logic [GW-1:0] idx;
  int checks = 0, failures = 0;
  int exp_q[$];
  int last_cycle_q[$];
  int cycle = 0;

  max_index_unit dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  always @(posedge clk) begin
    if (!rst && idx_valid) begin
      int e, lc;
      checks += 2;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected idx_valid");
      end else begin
        e  = exp_q.pop_front();
        lc = last_cycle_q.pop_front();
        if (int'(idx) != e) begin
          failures++;
          $display("FAIL idx=%0d expected %0d", idx, e);
        end
        if (cycle != lc + 1) begin
          failures++;
          $display("FAIL latency: last at %0d, idx at %0d", lc, cycle);
        end
      end
    end
  end

  initial begin
    int gs[5] = '{1, 2, 4, 8, 16};
    repeat (3) @(posedge clk);
    rst = 0;
    for (int n = 0; n < 400; n++) begin
      int g, best, start;
      real bv;
      fp16_t vals[16];
      g = gs[n % 5];
      for (int i = 0; i < g; i++) begin
        vals[i] = rand_fp(4);
        if (i > 0 && $urandom_range(0, 3) == 0) vals[i] = vals[$urandom_range(0, i - 1)];
      end
      best = 0; bv = fp2real(vals[0]);
      for (int i = 1; i < g; i++)
        if (fp2real(vals[i]) > bv) begin bv = fp2real(vals[i]); best = i; end
      for (int i = 0; i < g; i++) begin
        @(negedge clk);
        in_valid = 1; in_first = (i == 0); in_last = (i == g - 1); in_value = vals[i];
        if (i == 0) start = cycle;
        if (i == g - 1) begin
          exp_q.push_back(best);
          last_cycle_q.push_back(cycle);
        end
      end
      checks++;
      if (cycle - start != g - 1) begin
        failures++;
        $display("FAIL vector of %0d values took %0d cycles", g, cycle - start + 1);
      end
    end
    @(negedge clk);
    in_valid = 0; in_first = 0; in_last = 0;
    repeat (4) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL %0d indexes never reported", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
