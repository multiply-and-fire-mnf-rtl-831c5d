// tb_mnf_fifo: self-checking test of mnf_fifo (default depth 4, 8-bit data).
//
// Drives random push and pop traffic (random valid on the input side, random
// ready on the output side) and compares every popped value, the valid/ready
// flags and the count with a queue model in this testbench. Checks that the
// FIFO fills (in_ready low) and empties (out_valid low) at least once.
// The test pattern is this design's own; the paper only says that circular
// FIFOs connect the modules.
module tb_mnf_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       in_valid = 0, out_ready = 0, in_ready, out_valid;
  logic [7:0] in_data = 0, out_data;
  logic [2:0] count;

  mnf_fifo #(.T(logic [7:0]), .DEPTH(4)) dut (.*);

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

  logic [7:0] q [$];
  int n_full = 0, n_empty = 0;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid  = ($urandom % 100) < ((i / 500) % 2 ? 80 : 30);
      in_data   = 8'($urandom);
      out_ready = ($urandom % 100) < ((i / 500) % 2 ? 30 : 80);
      #1;
      check(count == 3'(q.size()), "count matches model");
      check(in_ready == (q.size() < 4), "in_ready matches model");
      check(out_valid == (q.size() > 0), "out_valid matches model");
      if (out_valid && q.size() > 0) check(out_data == q[0], "data order");
      n_full  += int'(!in_ready);
      n_empty += int'(!out_valid);
      @(posedge clk);
      if (out_valid && out_ready && q.size() > 0) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    check(n_full > 0, "FIFO became full");
    check(n_empty > 0, "FIFO became empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
