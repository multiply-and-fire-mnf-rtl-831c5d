// tb_mnf_router_if: self-checking test of the PE's router interface
// (node 2 of the default 12-node network, forward FIFO of 4).
//
// Random flits arrive from the network, some addressed to this node and some
// not, while the core side accepts with random ready and the activation
// module offers random output events. With forwarding enabled (cfg.fwd =
// node 5) every event for this node must reach the core in order and also
// leave again with destination cfg.fwd; activation events must leave in
// order with destination cfg.dst. Flits not addressed here are never given
// to the core. An offered output flit must stay unchanged until taken
// (checked by an assertion in the design). Forwarding follows the paper's
// event forwarding; the flit format and handshake are this design's own.
module tb_mnf_router_if;
  import mnf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_t   cfg = '0;
  logic   net_in_valid = 0, net_in_ready, net_out_valid, net_out_ready = 0;
  flit_t  net_in = '0, net_out;
  logic   core_valid, core_ready = 0, act_valid = 0, act_ready, st_forwarded;
  event_t core_ev, act_ev = '0;

  mnf_router_if #(.MY_ID(2)) dut (.*);

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

  event_t core_q [$], fwd_q [$], act_q [$];
  int n_core = 0, n_fwd = 0, n_act = 0, n_held = 0;

  always @(posedge clk) if (rst_n) begin
    if (net_in_valid && net_in_ready && net_in.dst[2]) begin
      core_q.push_back(net_in.ev);
      fwd_q.push_back(net_in.ev);
    end
    if (act_valid && act_ready) act_q.push_back(act_ev);
    if (core_valid && core_ready) begin
      n_core++;
      check(core_q.size() > 0 && core_ev == core_q[0], "core event order");
    end
    if (net_out_valid && net_out_ready) begin
      if (net_out.dst == cfg.fwd) begin
        n_fwd++;
        check(st_forwarded, "forward flagged");
        check(fwd_q.size() > 0 && net_out.ev == fwd_q[0], "forwarded event order");
        if (fwd_q.size() > 0) void'(fwd_q.pop_front());
      end else begin
        n_act++;
        check(net_out.dst == cfg.dst, "activation flit destination");
        check(act_q.size() > 0 && net_out.ev == act_q[0], "activation event order");
        if (act_q.size() > 0) void'(act_q.pop_front());
      end
    end
    n_held += int'(net_out_valid && !net_out_ready);
  end
  // the core queue is popped after the comparison above
  always @(posedge clk) if (rst_n && core_valid && core_ready) begin
    #1 void'(core_q.pop_front());
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    cfg.fwd = NODES'(1) << 5;
    cfg.dst = NODES'(1) << 11;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      if (!net_in_valid || net_in_ready) begin
        net_in_valid = ($urandom % 2) == 0;
        net_in.dst   = NODES'($urandom);
        net_in.ev    = event_t'({$urandom, $urandom});
        net_in.ev.kind = EV_CONV;
      end
      if (!act_valid || act_ready) begin
        act_valid = ($urandom % 3) == 0;
        act_ev    = event_t'({$urandom, $urandom});
        act_ev.kind = EV_FC;
      end
      core_ready    = ($urandom % 4) != 0;
      net_out_ready = ($urandom % 4) != 0;
    end
    @(negedge clk);
    net_in_valid = 0; act_valid = 0; core_ready = 1; net_out_ready = 1;
    repeat (20) @(posedge clk);
    check(fwd_q.size() == 0 && act_q.size() == 0, "all output flits delivered");
    check(n_core > 0 && n_fwd == n_core, "every core event forwarded once");
    check(n_act > 0, "activation events sent");
    check(n_held > 0, "network back-pressure seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
