// tb_mnf_weight_sram: self-checking test of the weight SRAM at its default
// size (25600 words of 216 bits).
//
// Writes random words to 300 random addresses (and to the first and last
// word), then reads them back: read data must appear the cycle after the
// read and match what was last written; a cycle with ce low must leave the
// output unchanged. The size follows the paper; the one-cycle read latency
// and the chip enable are this design's own choices.
module tb_mnf_weight_sram;
  import mnf_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  logic ce = 0, we = 0;
  logic [WADDR_W-1:0] addr = '0;
  logic [WWORD_W-1:0] wdata = '0, rdata;

  mnf_weight_sram dut (.*);

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

  logic [WWORD_W-1:0] model [int];
  function automatic logic [WWORD_W-1:0] rnd();
    logic [WWORD_W-1:0] v;
    for (int i = 0; i < 7; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    int a;
    logic [WWORD_W-1:0] held;
    for (int i = 0; i < 302; i++) begin
      @(negedge clk);
      a = (i == 300) ? 0 : (i == 301) ? WDEPTH - 1 : int'($urandom % WDEPTH);
      ce = 1; we = 1; addr = WADDR_W'(a); wdata = rnd(); model[a] = wdata;
    end
    foreach (model[k]) begin
      @(negedge clk);
      ce = 1; we = 0; addr = WADDR_W'(k);
      @(negedge clk);
      ce = 0;
      check(rdata == model[k], $sformatf("read-back of word %0d", k));
      held = rdata;
      @(negedge clk);
      check(rdata == held, "output held while ce is low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
