// tb_mnf_mac_module: self-checking test of one MAC module (default size:
// 3 multipliers, 3 partial-sum banks of 625 words).
//
// After the reset-time clearing sweep (ready high), random items - an input
// value, three weights, a lane-valid mask and a local address - are sent,
// often back to back to the same address so the one-cycle bypass is used.
// A model in this testbench accumulates the same products. Every touched
// partial sum is then read out through the quantizer (one read per cycle,
// result on q_out the cycle after rd_en) and compared with the model's
// rounded, saturated value; a second read must give 0 because reading
// clears the sum. Bypass hits and multiplier activity must both be seen.
// The multiply-accumulate follows the paper; the bypass, the clearing on
// read and the quantizer are this design's own choices.
module tb_mnf_mac_module;
  import mnf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mac_item_t in = '0;
  logic busy, ready, rd_en = 0, bypass_hit;
  logic [AADDR_W-1:0] rd_local = '0;
  logic [1:0] rd_lane = '0;
  logic signed [15:0] qmul = 16'sd1;
  logic [5:0] qshift = '0;
  act_t q_out;
  logic [MULTS-1:0] mac_fire;

  mnf_mac_module dut (.*);

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

  longint model [16][MULTS];
  int n_byp = 0, n_fire = 0;
  always @(posedge clk) if (rst_n) begin
    n_byp  += int'(bypass_hit);
    n_fire += $countones(mac_fire);
  end

  function automatic int quant(input longint s, input int m, input int sh);
    longint v;
    v = s * m;
    if (sh > 0) v = (v + (64'sd1 <<< (sh - 1))) >>> sh;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return int'(v);
  endfunction

  task automatic read_all(input int m, input int sh, input bit expect_zero);
    for (int a = 0; a < 16; a++)
      for (int k = 0; k < MULTS; k++) begin
        @(negedge clk);
        qmul = 16'(m); qshift = 6'(sh);
        rd_en = 1; rd_local = AADDR_W'(a); rd_lane = 2'(k);
        @(negedge clk);
        rd_en = 0;
        check(int'(q_out) == (expect_zero ? 0 : quant(model[a][k], m, sh)),
              $sformatf("readout addr %0d lane %0d", a, k));
        model[a][k] = 0;
      end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    check(ready == 0, "not ready during the clearing sweep");
    while (!ready) @(posedge clk);
    for (int round = 0; round < 3; round++) begin
      for (int a = 0; a < 16; a++) for (int k = 0; k < MULTS; k++) model[a][k] = 0;
      for (int i = 0; i < 400; i++) begin
        @(negedge clk);
        in = '0;
        if ($urandom % 4 != 0) begin
          in.valid = 1;
          in.data  = act_t'($urandom);
          in.lv    = 3'($urandom);
          for (int k = 0; k < MULTS; k++) in.w[k] = 8'($urandom);
          in.local_addr = AADDR_W'($urandom % (round == 0 ? 2 : 16));
          for (int k = 0; k < MULTS; k++)
            if (in.lv[k]) model[in.local_addr][k] += longint'(in.data) * longint'($signed(in.w[k]));
        end
      end
      @(negedge clk); in = '0;
      repeat (3) @(negedge clk);
      check(!busy, "idle after the last item");
      read_all(round == 2 ? 3 : 1, round == 0 ? 0 : 10, 0);
      read_all(1, 0, 1);
    end
    check(n_byp > 0, "bypass used");
    check(n_fire > 0, "multipliers fired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
