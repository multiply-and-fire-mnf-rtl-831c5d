// tb_mnf_storage_pe: self-checking test of the storage node at its default
// size (two banks of 262144 events, node 11).
//
// The host writes 50 events and starts a replay to nodes 0 and 1. While the
// replay runs (the network takes flits with random ready), 30 events and two
// end-of-data events for node 11 arrive from the network, mixed with flits
// for other nodes. Checks: the replay sends the 50 events in order and then
// one end-of-data event, all with the requested destination; the receive
// bank counts 30 events and 2 end-of-data events and reads them back in
// order; a second replay sends those 30 events. The node's role follows the
// paper; the bank organisation and host port are this design's own.
module tb_mnf_storage_pe;
  import mnf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic   net_in_valid = 0, net_in_ready, net_out_valid, net_out_ready = 0;
  flit_t  net_in = '0, net_out;
  logic   host_wr_valid = 0, host_replay = 0, replay_busy;
  event_t host_wr_ev = '0, host_rd_ev;
  logic [NODES-1:0] host_replay_dst = '0;
  logic [17:0] host_rd_idx = '0;
  logic [18:0] rx_count;
  logic [7:0]  rx_eod;

  mnf_storage_pe dut (.*);

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

  event_t sent [$], rx [$], out [$];
  int n_eod_out = 0;
  logic [NODES-1:0] want_dst;
  always @(posedge clk) if (rst_n && net_out_valid && net_out_ready) begin
    check(net_out.dst == want_dst, "replay destination");
    if (net_out.ev.kind == EV_EOD) n_eod_out++;
    else begin
      check(n_eod_out == 0, "end-of-data comes last");
      out.push_back(net_out.ev);
    end
  end

  function automatic event_t rnd_ev();
    event_t e;
    e = event_t'({$urandom, $urandom});
    e.kind = EV_FC;
    return e;
  endfunction

  task automatic replay(input logic [NODES-1:0] d);
    @(negedge clk);
    host_replay = 1; host_replay_dst = d; want_dst = d;
    @(negedge clk);
    host_replay = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 50; i++) begin
      @(negedge clk);
      host_wr_valid = 1; host_wr_ev = rnd_ev(); sent.push_back(host_wr_ev);
    end
    @(negedge clk); host_wr_valid = 0;
    check(rx_count == 19'd50, "host writes counted");
    replay(NODES'(3));
    check(replay_busy, "replay started");
    fork
      while (replay_busy) begin
        @(negedge clk); net_out_ready = ($urandom % 3) != 0;
      end
      begin
        int n;
        n = 0;
        while (n < 32) begin
          @(negedge clk);
          net_in_valid = ($urandom % 2) == 0;
          net_in.ev = rnd_ev();
          net_in.dst = ($urandom % 4 == 0) ? NODES'(1) : NODES'(1) << 11;
          if (n >= 30) net_in.ev.kind = EV_EOD;
          @(posedge clk);
          if (net_in_valid && net_in_ready && net_in.dst[11]) begin
            if (n < 30) rx.push_back(net_in.ev);
            n++;
          end
        end
        @(negedge clk); net_in_valid = 0;
      end
    join
    repeat (3) @(posedge clk);
    check(n_eod_out == 1, "one end-of-data after the replay");
    check(out.size() == 50, "all 50 events replayed");
    for (int i = 0; i < out.size() && i < 50; i++) check(out[i] == sent[i], "replay order");
    check(rx_count == 19'd30 && rx_eod == 8'd2, "receive bank counts");
    for (int i = 0; i < 30; i++) begin
      @(negedge clk); host_rd_idx = 18'(i); #1;
      check(host_rd_ev == rx[i], "host read-back");
    end
    out.delete(); n_eod_out = 0;
    replay(NODES'(4));
    @(negedge clk); net_out_ready = 1;
    while (replay_busy) @(posedge clk);
    repeat (2) @(posedge clk);
    check(out.size() == 30 && n_eod_out == 1, "second replay length");
    for (int i = 0; i < out.size() && i < 30; i++) check(out[i] == rx[i], "second replay order");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
