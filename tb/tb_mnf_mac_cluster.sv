// tb_mnf_mac_cluster: self-checking test of the MAC cluster at its default
// size (9 MAC modules x 3 multipliers, 625 partial sums per lane).
//
// After the clearing sweep, random items go to all 9 modules in the same
// cycles (up to 27 multiplications per cycle), on a few local addresses so
// that back-to-back updates of one address occur. The n_mac and n_bypass
// outputs are compared each cycle with the lane-valid bits of the items in the adder
// stage; a bypass may only be reported where the previous cycle updated the
// same address of that module. The results are then
// read out, four modules at a time on one lane as in a pooling window, and
// compared with a model (quantizer x1, shift 2, rounding, saturation).
// 27 multipliers per PE and 9 modules follow the paper; the quantizer and
// the bypass are this design's own.
module tb_mnf_mac_cluster;
  import mnf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mac_item_t in [NUM_MAC];
  logic busy, ready;
  logic [NUM_MAC-1:0] rd_en = '0;
  logic [AADDR_W-1:0] rd_local [NUM_MAC];
  logic [1:0] rd_lane = '0;
  logic signed [15:0] qmul = 16'sd1;
  logic [5:0] qshift = 6'd2;
  act_t q_out [NUM_MAC];
  logic [4:0] n_mac;
  logic [3:0] n_bypass;

  mnf_mac_cluster dut (.*);

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

  longint model [NUM_MAC][4][MULTS];
  int exp_mac [$], exp_byp [$];
  int tot_mac = 0, tot_byp = 0;

  function automatic int quant(input longint s);
    longint v;
    v = (s + 2) >>> 2;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return int'(v);
  endfunction

  initial begin
    int prev_addr [NUM_MAC];
    bit prev_v [NUM_MAC];
    for (int m = 0; m < NUM_MAC; m++) begin
      in[m] = '0; rd_local[m] = '0; prev_addr[m] = -1; prev_v[m] = 0;
      for (int a = 0; a < 4; a++) for (int k = 0; k < MULTS; k++) model[m][a][k] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (!ready) @(posedge clk);
    for (int i = 0; i < 600; i++) begin
      int nm, nb;
      @(negedge clk);
      nm = 0; nb = 0;
      for (int m = 0; m < NUM_MAC; m++) begin
        in[m] = '0;
        if ($urandom % 5 != 0) begin
          in[m].valid = 1;
          in[m].data  = act_t'($urandom % 64);
          in[m].lv    = 3'($urandom);
          for (int k = 0; k < MULTS; k++) in[m].w[k] = 8'($urandom);
          in[m].local_addr = AADDR_W'($urandom % 4);
          for (int k = 0; k < MULTS; k++)
            if (in[m].lv[k]) model[m][in[m].local_addr][k] += longint'(in[m].data) * longint'($signed(in[m].w[k]));
          nm += $countones(in[m].lv);
          // bypass: the previous cycle wrote the same address on a lane used now
          if (prev_v[m] && prev_addr[m] == int'(in[m].local_addr) && in[m].lv != 0) nb++;
          prev_v[m] = in[m].lv != 0; prev_addr[m] = int'(in[m].local_addr);
        end else begin
          prev_v[m] = 0;
        end
      end
      exp_mac.push_back(nm); exp_byp.push_back(nb); stamp.push_back(cyc);
    end
    @(negedge clk);
    for (int m = 0; m < NUM_MAC; m++) in[m] = '0;
    repeat (4) @(negedge clk);
    check(!busy, "idle after the last item");
    check(exp_mac.size() == 0, "all activity reported");
    // readout: modules {0,1,3,4} then {2,5,6,7} then {8}, one lane per cycle
    for (int a = 0; a < 4; a++)
      for (int k = 0; k < MULTS; k++)
        for (int g = 0; g < 3; g++) begin
          logic [NUM_MAC-1:0] sel;
          sel = (g == 0) ? 9'b000011011 : (g == 1) ? 9'b011100100 : 9'b100000000;
          @(negedge clk);
          rd_en = sel; rd_lane = 2'(k);
          for (int m = 0; m < NUM_MAC; m++) rd_local[m] = AADDR_W'(a);
          @(negedge clk);
          rd_en = '0;
          for (int m = 0; m < NUM_MAC; m++)
            if (sel[m]) check(int'(q_out[m]) == quant(model[m][a][k]),
                              $sformatf("module %0d addr %0d lane %0d", m, a, k));
        end
    check(tot_mac > 0 && tot_byp > 0, "multiplications and bypasses seen");
    $display("cluster: %0d multiplications, %0d bypasses", tot_mac, tot_byp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // n_mac and n_bypass report the items in the adder stage: an item driven
  // after posedge P is taken at posedge P+1 and reported until posedge P+2
  int cyc = 0;
  int stamp [$];
  always @(posedge clk) begin
    if (rst_n) begin
      tot_mac += int'(n_mac);
      tot_byp += int'(n_bypass);
      if (stamp.size() > 0 && stamp[0] == cyc - 1) begin
        check(int'(n_mac) == exp_mac[0], $sformatf("multiplication count %0d vs %0d", n_mac, exp_mac[0]));
        check(int'(n_bypass) <= exp_byp[0], "bypass only on back-to-back updates of one address");
        void'(stamp.pop_front()); void'(exp_mac.pop_front()); void'(exp_byp.pop_front());
      end
    end
    cyc++;
  end
endmodule
