// tb_mnf_load_module: self-checking test of the load module.
//
// 1. The worked example of the conv algorithm: an event (input pixel (1,1) of a 4x4 map, 3x3 filter) with start_weight 4,
//    start_neuron 0, x_jump = y_jump = 1 and nc_output = 4 must update output
//    neurons 0, 1, 4, 5 with filter taps 4, 3, 1, 0.
// 2. Random conv events (random stride, jumps, start positions, channel and
//    two output-channel groups): every issued item is compared with a model
//    of Algorithm 1 (tap, row, column of the 9 entries) and the weight-word
//    address w_base + ch_id*n_og + grp.
// 3. Random FC events with 40 output neurons (2 weight words per input):
//    addresses w_base + i*2 + q (Algorithm 2).
// 4. End-of-data: with n_eod = 2 only the second end-of-data event gives an
//    item, and no weight read is issued for it.
// Both sinks have random ready. The example and the algorithms follow the
// paper; the word layout and the end-of-data counting are this design's.
module tb_mnf_load_module;
  import mnf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_t cfg = '0;
  logic ev_valid = 0, ev_ready, rd_valid, rd_ready = 0, it_valid, it_ready = 0;
  event_t ev = '0;
  logic [WADDR_W-1:0] rd_addr;
  ld_item_t it;

  mnf_load_module dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random ready on both sinks
  always @(negedge clk) begin
    rd_ready <= ($urandom % 4) != 0;
    it_ready <= ($urandom % 4) != 0;
  end

  // expected outputs
  typedef struct { bit eod; int addr; int tap[9]; int row[9]; int col[9]; bit v[9]; } exp_t;
  exp_t expq [$];
  int n_items = 0;

  always @(posedge clk) if (rst_n) begin
    check(!(rd_valid && rd_ready) || (it_valid && it_ready), "read and item go together");
    if (it_valid && it_ready) begin
      exp_t x;
      n_items++;
      if (expq.size() == 0) check(0, "unexpected item");
      else begin
        x = expq.pop_front();
        check(it.eod == x.eod, "item kind");
        check((rd_valid && rd_ready) == !x.eod, "weight read issued for every non-EOD item");
        if (!x.eod) begin
          check(int'(rd_addr) == x.addr, $sformatf("weight address %0d vs %0d", rd_addr, x.addr));
          if (it.mode == MODE_CONV)
            for (int e = 0; e < 9; e++) begin
              check(it.ent_v[e] == x.v[e], "entry valid");
              if (x.v[e])
                check(int'(it.tap[e]) == x.tap[e] && int'(it.row[e]) == x.row[e] &&
                      int'(it.col[e]) == x.col[e], $sformatf("entry %0d", e));
            end
        end
      end
    end
  end

  task automatic send(input event_t e);
    @(negedge clk);
    ev_valid = 1; ev = e;
    @(posedge clk);
    while (!ev_ready) @(posedge clk);
    @(negedge clk);
    ev_valid = 0;
  endtask

  task automatic exp_conv(input event_t e);
    for (int g = 0; g < int'(cfg.n_og); g++) begin
      exp_t x;
      x.eod = 0;
      x.addr = int'(cfg.w_base) + int'(e.ch_id) * int'(cfg.n_og) + g;
      for (int y = 0; y < 3; y++)
        for (int xx = 0; xx < 3; xx++) begin
          int n;
          n = int'(e.start_neuron) + int'(cfg.ofm_w) * y + xx;
          x.v[3*y+xx]   = (xx <= int'(e.x_jump)) && (y <= int'(e.y_jump));
          x.tap[3*y+xx] = int'(e.start_weight) - int'(cfg.stride) * xx
                          - int'(cfg.k) * int'(cfg.stride) * y;
          x.row[3*y+xx] = n / int'(cfg.ofm_w);
          x.col[3*y+xx] = n % int'(cfg.ofm_w);
        end
      expq.push_back(x);
    end
  endtask

  initial begin
    event_t e;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. worked example
    cfg.mode = MODE_CONV; cfg.k = 4'd3; cfg.stride = 3'd1; cfg.ofm_w = 8'd4; cfg.ofm_h = 8'd4;
    cfg.n_og = 8'd1; cfg.w_base = '0; cfg.n_eod = 4'd1;
    e = '0; e.kind = EV_CONV; e.data = 8'sd100; e.start_weight = 4'd4; e.start_neuron = '0;
    e.x_jump = 2'd1; e.y_jump = 2'd1;
    exp_conv(e);
    check(expq[0].tap[0] == 4 && expq[0].tap[1] == 3 && expq[0].tap[3] == 1 && expq[0].tap[4] == 0,
          "example taps 4, 3, 1, 0");
    check(expq[0].row[4] * 4 + expq[0].col[4] == 5, "example neuron 5");
    send(e);

    // 2. random conv events
    cfg.n_og = 8'd2; cfg.w_base = WADDR_W'(100); cfg.ofm_w = 8'd20; cfg.ofm_h = 8'd20;
    for (int i = 0; i < 300; i++) begin
      cfg.stride = 3'(1 + $urandom % 2);
      e = '0; e.kind = EV_CONV; e.data = act_t'(1 + $urandom % 100);
      e.ch_id = CH_W'($urandom % 8);
      e.x_jump = 2'($urandom % (cfg.stride == 1 ? 3 : 2)); e.y_jump = 2'($urandom % (cfg.stride == 1 ? 3 : 2));
      // largest tap that keeps every visited tap inside the 3x3 filter
      e.start_weight = SW_W'(int'(e.x_jump) * int'(cfg.stride) + 3 * int'(e.y_jump) * int'(cfg.stride));
      e.start_neuron = NADDR_W'(($urandom % 18) * 20 + $urandom % 18);
      exp_conv(e);
      send(e);
      while (expq.size() != 0) @(posedge clk);
    end

    // 3. FC events
    cfg = '0; cfg.mode = MODE_FC; cfg.fc_n = NADDR_W'(40); cfg.w_base = WADDR_W'(7); cfg.n_eod = 4'd2;
    for (int i = 0; i < 100; i++) begin
      e = '0; e.kind = EV_FC; e.data = act_t'(1 + $urandom % 100);
      e.start_neuron = NADDR_W'($urandom % 500);
      for (int q = 0; q < 2; q++) begin
        exp_t x;
        x.eod = 0; x.addr = 7 + int'(e.start_neuron) * 2 + q;
        expq.push_back(x);
      end
      send(e);
    end
    while (expq.size() != 0) @(posedge clk);

    // 4. end of data from two senders
    begin
      exp_t x;
      int n_before;
      x.eod = 1;
      n_before = n_items;
      e = '0; e.kind = EV_EOD;
      send(e);
      repeat (5) @(posedge clk);
      check(n_items == n_before, "first end-of-data is absorbed");
      expq.push_back(x);
      send(e);
      repeat (5) @(posedge clk);
      check(n_items == n_before + 1 && expq.size() == 0, "second end-of-data gives one item");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
