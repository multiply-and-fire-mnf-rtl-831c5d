// tb_mnf_acc_sram: self-checking test of one partial-sum bank at its default
// size (625 words of 32 bits), with one read and one write port.
//
// Random reads and writes run in the same cycles; each read result (the
// cycle after re) is compared with a model that holds the value before that
// cycle's write, so a read of the address being written returns the old
// value. Every word is written first so no unwritten word is read. The size
// follows the paper; the old-value rule is this design's own choice.
module tb_mnf_acc_sram;
  import mnf_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  logic re = 0, we = 0;
  logic [AADDR_W-1:0] raddr = '0, waddr = '0;
  logic [PSUM_W-1:0]  wdata = '0, rdata;

  mnf_acc_sram dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [PSUM_W-1:0] model [ADEPTH];
  int n_same = 0;

  initial begin
    logic [PSUM_W-1:0] expect_v;
    bit pending;
    pending = 0;
    for (int a = 0; a < ADEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = AADDR_W'(a); wdata = $urandom; model[a] = wdata;
    end
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      if (pending) check(rdata == expect_v, "read data");
      re = ($urandom % 2) == 0;
      raddr = AADDR_W'($urandom % 8);
      we = ($urandom % 2) == 0;
      waddr = ($urandom % 2) ? raddr : AADDR_W'($urandom % 8);
      wdata = $urandom;
      pending = re;
      expect_v = model[raddr];
      n_same += int'(re && we && raddr == waddr);
      if (we) model[waddr] = wdata;
    end
    check(n_same > 0, "read and write of the same address seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
