// tb_global_parameter_memory: self-checking test of the parameter memory.
//
// Writes random words to random addresses over the whole address range,
// reads them back and checks the one-cycle read latency, that read data
// holds while `re` is low, and that a read in the cycle of a write to the
// same address returns the old word.
module tb_global_parameter_memory;
  import lg_pkg::*;
  localparam int unsigned AW = GPM_AW;

  logic clk = 0, we = 0, re = 0;
  logic [AW-1:0] waddr = 0, raddr = 0;
  fp16_t wdata = 0, rdata;
  int checks = 0, failures = 0;
  int addrs[256];
  fp16_t vals[256];

  global_parameter_memory dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  initial begin
    for (int i = 0; i < 256; i++) begin
      addrs[i] = (i == 0) ? 0 : (i == 1) ? int'(GPM_DEPTH) - 1 : (i * 2053) % int'(GPM_DEPTH);
      vals[i]  = 16'($urandom);
    end
    @(negedge clk);
    for (int i = 0; i < 256; i++) begin
      we = 1; waddr = AW'(addrs[i]); wdata = vals[i];
      @(negedge clk);
    end
    we = 0;
    for (int i = 0; i < 256; i++) begin
      re = 1; raddr = AW'(addrs[i]);
      @(negedge clk);
      chk(rdata == vals[i], $sformatf("read %0d", addrs[i]));
    end
    // hold while re low
    re = 0; raddr = AW'(addrs[5]);
    @(negedge clk);
    chk(rdata == vals[255], "hold");
    // read-during-write returns old data
    re = 1; we = 1; raddr = AW'(addrs[7]); waddr = AW'(addrs[7]); wdata = ~vals[7];
    @(negedge clk);
    chk(rdata == vals[7], "read during write");
    we = 0;
    @(negedge clk);
    chk(rdata == ~vals[7], "after write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
