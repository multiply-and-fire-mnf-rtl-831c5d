// tb_mnf_top: end-to-end test of the whole accelerator at its default size.
//
// Runs the small example network used to illustrate layer mapping: a 28x28
// single-channel input, a 3x3 convolution (padding 1) with two filters, 2x2
// max-pooling, flattening to 392 values and a 392x10 fully-connected layer.
//  Layer 1: the storage PE multicasts the input events to PE0 and PE1. PE0
//           computes output channel 0, PE1 channel 1; both pool, apply ReLU
//           and send FC events to the storage PE.
//  Layer 2: PE0 and PE1 are reconfigured for the FC layer (weights for both
//           layers sit in their weight SRAMs), each holding 5 of the 10
//           outputs. The storage PE replays layer 1's results to PE0 only and
//           PE0 forwards every event to PE1 (event forwarding).
// A reference model in this testbench computes every expected value
// (convolution, quantization, pooling, ReLU, FC) from the same random
// inputs and weights; the storage PE's contents are compared after each
// layer. The mechanisms of the design are counted and each must occur.
module tb_mnf_top;
  import mnf_pkg::*;

  localparam int N = NUM_PE;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_t              cfg [N];
  logic [N:0]        o_valid, o_ready, i_valid, i_ready;
  flit_t             o_flit [N+1];
  flit_t             i_flit [N+1];
  logic              wl_valid = 0;
  logic [3:0]        wl_pe = 0;
  logic [WADDR_W-1:0] wl_addr = 0;
  logic [WWORD_W-1:0] wl_data = 0;
  logic              host_wr_valid = 0, host_replay = 0;
  event_t            host_wr_ev = '0;
  logic [NODES-1:0]  host_replay_dst = '0;
  logic [17:0]       host_rd_idx = 0;
  event_t            host_rd_ev;
  logic [18:0]       rx_count;
  logic [7:0]        rx_eod;
  logic              replay_busy;
  logic [N-1:0]      pe_busy;
  logic [4:0]        pe_n_mac [N];

  mnf_top dut (
    .clk, .rst_n, .cfg,
    .net_out_valid(o_valid), .net_out_ready(o_ready), .net_out(o_flit),
    .net_in_valid(i_valid), .net_in_ready(i_ready), .net_in(i_flit),
    .wl_valid, .wl_pe, .wl_addr, .wl_data,
    .host_wr_valid, .host_wr_ev, .host_replay, .host_replay_dst,
    .host_rd_idx, .host_rd_ev, .rx_count, .rx_eod, .replay_busy,
    .pe_busy, .pe_n_mac
  );

  mnf_noc_model #(.N(N+1)) u_noc (
    .clk, .rst_n,
    .out_valid(o_valid), .out_ready(o_ready), .out_flit(o_flit),
    .in_valid(i_valid), .in_ready(i_ready), .in_flit(i_flit)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---- workload ---------------------------------------------------------------
  localparam int IW = 28, K = 3, PW = 14, NFC = 10, NIN = 2 * PW * PW;
  localparam int QS1 = 4, QS2 = 6;
  int img [IW][IW];
  int filt [2][K*K];
  int wfc [NIN][NFC];
  int l1_ref [NIN];      // pooled, quantized, ReLU'd (0 = not fired)
  int l2_ref [NFC];

  function automatic int quant(input longint s, input int qmul, input int qsh);
    longint v;
    v = s * qmul;
    if (qsh > 0) v = (v + (64'sd1 <<< (qsh - 1))) >>> qsh;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return int'(v);
  endfunction

  task automatic build_reference();
    int conv [2][IW][IW];
    for (int f = 0; f < 2; f++)
      for (int r = 0; r < IW; r++)
        for (int c = 0; c < IW; c++) begin
          int s;
          s = 0;
          for (int ty = 0; ty < K; ty++)
            for (int tx = 0; tx < K; tx++) begin
              int ir, ic;
              ir = r + ty - 1; ic = c + tx - 1;
              if (ir >= 0 && ir < IW && ic >= 0 && ic < IW)
                s += img[ir][ic] * filt[f][ty*K+tx];
            end
          conv[f][r][c] = quant(s, 1, QS1);
        end
    for (int f = 0; f < 2; f++)
      for (int r = 0; r < PW; r++)
        for (int c = 0; c < PW; c++) begin
          int m;
          m = -128;
          for (int d = 0; d < 4; d++)
            if (conv[f][2*r + d/2][2*c + d%2] > m) m = conv[f][2*r + d/2][2*c + d%2];
          l1_ref[f*PW*PW + r*PW + c] = (m > 0) ? m : 0;
        end
    for (int j = 0; j < NFC; j++) begin
      longint s;
      int q;
      s = 0;
      for (int i = 0; i < NIN; i++) s += l1_ref[i] * wfc[i][j];
      q = quant(s, 1, QS2);
      l2_ref[j] = (q > 0) ? q : 0;
    end
  endtask

  // ---- configuration ------------------------------------------------------------
  function automatic cfg_t conv_cfg(input int ch);
    cfg_t c;
    c = '0;
    c.mode = MODE_CONV; c.k = 4'(K); c.stride = 3'd1;
    c.ofm_w = 8'(IW); c.ofm_h = 8'(IW); c.n_og = 1; c.w_base = '0;
    c.n_eod = 4'd1; c.n_out_ch = 1; c.ch_base = CH_W'(ch);
    c.qmul = 16'sd1; c.qshift = 6'(QS1); c.threshold = 8'sd0; c.pool = 1'b1;
    c.nxt_mode = MODE_FC; c.nxt_fc_base = '0;
    c.dst = NODES'(1) << N;
    c.fwd = '0;
    return c;
  endfunction

  // FC layer split over two PEs: PE p holds outputs 5p .. 5p+4
  function automatic cfg_t fc_cfg(input int p);
    cfg_t c;
    c = '0;
    c.mode = MODE_FC; c.w_base = WADDR_W'(16); c.fc_n = NADDR_W'(NFC / 2);
    c.n_eod = 4'd1; c.qmul = 16'sd1; c.qshift = 6'(QS2); c.threshold = 8'sd0;
    c.nxt_mode = MODE_FC; c.nxt_fc_base = NADDR_W'(p * NFC / 2);
    c.dst = NODES'(1) << N;
    c.fwd = (p == 0) ? NODES'(2) : '0;
    return c;
  endfunction

  // event for input pixel (r, c): 3x3 filter, stride 1, padding 1, 28x28 output
  function automatic event_t in_event(input int r, input int c, input int v);
    event_t e;
    int oxl, oxh, oyl, oyh;
    oxl = (c - 1 > 0) ? c - 1 : 0;  oxh = (c + 1 < IW - 1) ? c + 1 : IW - 1;
    oyl = (r - 1 > 0) ? r - 1 : 0;  oyh = (r + 1 < IW - 1) ? r + 1 : IW - 1;
    e = '0;
    e.kind = EV_CONV; e.data = act_t'(v); e.ch_id = '0;
    e.start_neuron = NADDR_W'(oyl * IW + oxl);
    e.start_weight = SW_W'((r + 1 - oyl) * K + (c + 1 - oxl));
    e.x_jump = 2'(oxh - oxl); e.y_jump = 2'(oyh - oyl);
    return e;
  endfunction

  // ---- mechanism counters ---------------------------------------------------------
  int n_fwd, n_bypass, n_pool, n_fire, n_drop, n_drain, n_wstall, n_mac;
  always @(posedge clk) if (rst_n) begin
    n_fwd    += int'(dut.g_pe[0].u_pe.st_forwarded) + int'(dut.g_pe[1].u_pe.st_forwarded);
    n_bypass += int'(dut.g_pe[0].u_pe.st_n_bypass) + int'(dut.g_pe[1].u_pe.st_n_bypass);
    n_pool   += int'(dut.g_pe[0].u_pe.st_pooled);
    n_fire   += int'(dut.g_pe[0].u_pe.st_fired) + int'(dut.g_pe[1].u_pe.st_fired);
    n_drop   += int'(dut.g_pe[0].u_pe.st_dropped) + int'(dut.g_pe[1].u_pe.st_dropped);
    n_drain  += int'(dut.g_pe[0].u_pe.u_core.drain_start) + int'(dut.g_pe[1].u_pe.u_core.drain_start);
    n_wstall += int'(dut.g_pe[0].u_pe.st_stall_weight);
    n_mac    += int'(pe_n_mac[0]) + int'(pe_n_mac[1]);
  end

  int cycles = 0;
  always @(posedge clk) cycles++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wait_eods(input int n);
    int t;
    t = 0;
    while (rx_eod < 8'(n) && t < 200000) begin @(posedge clk); t++; end
    check(rx_eod == 8'(n), "end-of-data events reached the storage PE");
    repeat (5) @(posedge clk);
  endtask

  initial begin
    int n_in, t0, t_l1, t_l2, nz;
    logic [WWORD_W-1:0] word;

    for (int r = 0; r < IW; r++)
      for (int c = 0; c < IW; c++)
        img[r][c] = ($urandom_range(0, 99) < 45) ? int'($urandom_range(1, 40)) : 0;
    for (int f = 0; f < 2; f++)
      for (int t = 0; t < K*K; t++) filt[f][t] = int'($urandom_range(0, 40)) - 20;
    for (int i = 0; i < NIN; i++)
      for (int j = 0; j < NFC; j++) wfc[i][j] = int'($urandom_range(0, 20)) - 10;
    build_reference();

    for (int i = 0; i < N; i++) cfg[i] = '0;
    cfg[0] = conv_cfg(0);
    cfg[1] = conv_cfg(1);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // weights: conv filter f in PE f, word 0, lane 3*tap; FC in PE0 from word 16
    for (int f = 0; f < 2; f++) begin
      word = '0;
      for (int t = 0; t < K*K; t++) word[(t*MULTS)*8 +: 8] = 8'(filt[f][t]);
      wl_valid <= 1; wl_pe <= 4'(f); wl_addr <= '0; wl_data <= word;
      @(posedge clk);
    end
    for (int p = 0; p < 2; p++)
      for (int i = 0; i < NIN; i++) begin
        word = '0;
        for (int j = 0; j < NFC / 2; j++) word[j*8 +: 8] = 8'(wfc[i][p * NFC / 2 + j]);
        wl_valid <= 1; wl_pe <= 4'(p); wl_addr <= WADDR_W'(16 + i); wl_data <= word;
        @(posedge clk);
      end
    wl_valid <= 0;

    // network input into the storage PE
    n_in = 0;
    for (int r = 0; r < IW; r++)
      for (int c = 0; c < IW; c++)
        if (img[r][c] != 0) begin
          host_wr_valid <= 1; host_wr_ev <= in_event(r, c, img[r][c]);
          n_in++;
          @(posedge clk);
        end
    host_wr_valid <= 0;
    @(posedge clk);
    check(rx_count == 19'(n_in), "input events stored");

    // ---- layer 1 ----
    t0 = cycles;
    @(negedge clk);
    host_replay = 1; host_replay_dst = NODES'(3);   // multicast to PE0 and PE1
    @(negedge clk);
    host_replay = 0;
    wait_eods(2);
    t_l1 = cycles - t0;
    nz = 0;
    for (int i = 0; i < NIN; i++) if (l1_ref[i] != 0) nz++;
    check(int'(rx_count) == nz, $sformatf("layer 1 fired %0d events, expected %0d", rx_count, nz));
    for (int e = 0; e < int'(rx_count); e++) begin
      host_rd_idx = 18'(e);
      #1;
      check(host_rd_ev.kind == EV_FC && int'(host_rd_ev.start_neuron) < NIN &&
            int'(host_rd_ev.data) == l1_ref[host_rd_ev.start_neuron],
            $sformatf("layer 1 event %0d: neuron %0d value %0d", e,
                      host_rd_ev.start_neuron, host_rd_ev.data));
    end
    // each input event is processed in one cycle by each PE: the layer must
    // take little more than the number of events plus the readout
    check(t_l1 < n_in + 4 * 2 * PW * PW + 200, $sformatf("layer 1 cycles %0d", t_l1));

    // ---- layer 2 (PE0 and PE1 reused) ----
    @(negedge clk);
    cfg[0] = fc_cfg(0);
    cfg[1] = fc_cfg(1);
    t0 = cycles;
    @(negedge clk);
    host_replay = 1; host_replay_dst = NODES'(1);   // PE0 only; PE0 forwards to PE1
    @(negedge clk);
    host_replay = 0;
    wait_eods(2);
    t_l2 = cycles - t0;
    nz = 0;
    for (int j = 0; j < NFC; j++) if (l2_ref[j] != 0) nz++;
    check(int'(rx_count) == nz, $sformatf("layer 2 fired %0d events, expected %0d", rx_count, nz));
    for (int e = 0; e < int'(rx_count); e++) begin
      host_rd_idx = 18'(e);
      #1;
      check(host_rd_ev.kind == EV_FC && int'(host_rd_ev.start_neuron) < NFC &&
            int'(host_rd_ev.data) == l2_ref[host_rd_ev.start_neuron],
            $sformatf("layer 2 event %0d: neuron %0d value %0d", e,
                      host_rd_ev.start_neuron, host_rd_ev.data));
    end

    $display("input events %0d, layer-1 cycles %0d, layer-2 cycles %0d, MACs %0d",
             n_in, t_l1, t_l2, n_mac);
    $display("mechanisms: forwarded %0d bypass %0d pooled %0d fired %0d dropped %0d drains %0d weight-stalls %0d",
             n_fwd, n_bypass, n_pool, n_fire, n_drop, n_drain, n_wstall);
    check(n_fwd > 0,    "event forwarding happened");
    check(n_bypass > 0, "read-after-write bypass happened");
    check(n_pool > 0,   "max-pooling happened");
    check(n_fire > 0,   "events fired");
    check(n_drop > 0,   "values below threshold dropped");
    check(n_drain == 4, "end-of-data drain happened in both PEs in both layers");
    check(n_wstall > 0, "dispatcher waited for weights");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
