// tb_vector_processing_unit: self-checking test of one VPU.
//
// Drives random weights, four random activations and random selects, and
// checks every accumulator against a reference built from exact double
// arithmetic rounded once per operation to FP16 (the same rounding points as
// the hardware: one rounding after the multiply, one after the add).  Also
// checks that `clr` restarts an accumulation and that only the selected
// register changes.  Each update must be visible one clock after `en`.
module tb_vector_processing_unit;
  import lg_pkg::*;
  import tb_fp16_pkg::*;

  logic clk = 0, rst = 1, en = 0, clr = 0;
  logic [1:0] sel = 0;
  fp16_t weight = 0;
  fp16_t act [4];
  fp16_t acc [4];
  fp16_t ref_acc [4];
  int checks = 0, failures = 0;

  vector_processing_unit dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all(string what);
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (acc[i] !== ref_acc[i]) begin
        failures++;
        if (failures < 10)
          $display("FAIL %s acc[%0d]=%h expected %h", what, i, acc[i], ref_acc[i]);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < 4; i++) begin act[i] = 0; ref_acc[i] = 0; end
    repeat (2) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    check_all("reset");
    for (int n = 0; n < 2000; n++) begin
      logic [15:0] p;
      logic        c;
      @(negedge clk);
      for (int i = 0; i < 4; i++) act[i] = rand_fp(3);
      weight = rand_fp(3);
      sel    = 2'($urandom_range(0, 3));
      c      = ($urandom_range(0, 15) == 0);
      clr    = c;
      en     = 1;
      p = real2fp(fp2real(weight) * fp2real(act[sel]));
      if (c) for (int i = 0; i < 4; i++) ref_acc[i] = 0;
      ref_acc[sel] = real2fp(fp2real(c ? 16'h0 : ref_acc[sel]) + fp2real(p));
      @(posedge clk);
      #1;
      en = 0; clr = 0;
      check_all("mac");
    end
    // en low: nothing changes
    @(negedge clk);
    weight = rand_fp(3);
    @(posedge clk); #1;
    check_all("hold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
