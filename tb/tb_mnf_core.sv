// tb_mnf_core: self-checking test of one PE core (load module, dispatcher,
// MAC cluster and activation module) at its default size.
//
// Workload: a 7x8 input map with 2 channels, 3x3 filters with padding 1 and
// 4 output channels (two groups of 3 output channels, the last one half
// used), so the core reads two weight words per input event. The weight
// SRAM is modelled here with a random return delay. Random non-zero inputs
// (about half of the pixels) are sent as conv events, then end-of-data.
// The fired events of the core must equal, in order, those of a reference
// model in this testbench: conv, rescale (x1, >>3, rounding, saturation),
// ReLU threshold 0, then the event each surviving value makes for a
// following 3x3, padding-1 conv layer of the same size (channel, start
// weight, start neuron, jumps), then one end-of-data event. A second run
// with 2x2 max-pooling and a following FC layer checks pooling and the
// flattened neuron index (global channel ch_base + c first, then row, column). The multiply-and-fire flow follows the paper;
// the next-layer event formula, banking and quantizer are this design's.
module tb_mnf_core;
  import mnf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_t cfg = '0;
  logic ev_valid = 0, ev_ready, rd_valid, rd_ready, w_valid, w_ready, out_valid, out_ready = 0;
  event_t ev = '0, out_ev;
  logic [WADDR_W-1:0] rd_addr;
  logic [WWORD_W-1:0] w_data;
  logic [4:0] st_n_mac;
  logic [3:0] st_n_bypass;
  logic st_stall_weight, st_stall_drain, st_fired, st_dropped, st_pooled, st_busy;

  mnf_core dut (.*);

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

  localparam int H = 7, W = 8, CI = 2, CO = 4, K = 3;
  int img [CI][H][W];
  int filt [CO][CI][K*K];
  logic [WWORD_W-1:0] wmem [4];

  // weight memory model: in-order replies after 1..3 cycles
  logic [WWORD_W-1:0] wq [$];
  int wdelay = 0;
  assign rd_ready = wq.size() < 2;
  assign w_valid  = wq.size() > 0 && wdelay == 0;
  assign w_data   = w_valid ? wq[0] : '0;
  always @(posedge clk) begin
    if (w_valid && w_ready) begin void'(wq.pop_front()); wdelay <= int'($urandom % 3); end
    else if (wdelay > 0) wdelay <= wdelay - 1;
    if (rd_valid && rd_ready) wq.push_back(wmem[rd_addr]);
  end

  function automatic int quant(input int s);
    longint v;
    v = (longint'(s) + 4) >>> 3;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return int'(v);
  endfunction

  function automatic event_t conv_event(input int ch, input int r, input int c, input int v,
                                        input int hh, input int ww);
    event_t e;
    int oxl, oxh, oyl, oyh;
    oxl = (c - 1 > 0) ? c - 1 : 0;  oxh = (c + 1 < ww - 1) ? c + 1 : ww - 1;
    oyl = (r - 1 > 0) ? r - 1 : 0;  oyh = (r + 1 < hh - 1) ? r + 1 : hh - 1;
    e = '0;
    e.kind = EV_CONV; e.data = act_t'(v); e.ch_id = CH_W'(ch);
    e.start_neuron = NADDR_W'(oyl * ww + oxl);
    e.start_weight = SW_W'((r + 1 - oyl) * K + (c + 1 - oxl));
    e.x_jump = 2'(oxh - oxl); e.y_jump = 2'(oyh - oyl);
    return e;
  endfunction

  event_t expq [$];
  int n_got, n_byp, n_pool, n_stall;
  always @(posedge clk) if (rst_n) begin
    n_byp   += int'(st_n_bypass);
    n_pool  += int'(st_pooled);
    n_stall += int'(st_stall_weight);
    if (out_valid && out_ready) begin
      n_got++;
      if (expq.size() == 0) check(0, "unexpected output event");
      else begin
        check(out_ev == expq[0], $sformatf("output event %0d: got %p want %p", n_got, out_ev, expq[0]));
        void'(expq.pop_front());
      end
    end
  end
  always @(negedge clk) out_ready <= ($urandom % 4) != 0;

  task automatic run_layer(input bit pool);
    int conv [CO][H][W];
    event_t e;
    for (int o = 0; o < CO; o++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          int s;
          s = 0;
          for (int i = 0; i < CI; i++)
            for (int ty = 0; ty < K; ty++)
              for (int tx = 0; tx < K; tx++) begin
                int ir, ic;
                ir = r + ty - 1; ic = c + tx - 1;
                if (ir >= 0 && ir < H && ic >= 0 && ic < W)
                  s += img[i][ir][ic] * filt[o][i][ty*K+tx];
              end
          conv[o][r][c] = quant(s);
        end
    // expected events
    for (int o = 0; o < CO; o++)
      if (!pool) begin
        for (int r = 0; r < H; r++)
          for (int c = 0; c < W; c++)
            if (conv[o][r][c] > 0) expq.push_back(conv_event(10 + o, r, c, conv[o][r][c], H, W));
      end else begin
        for (int r = 0; r < H / 2; r++)
          for (int c = 0; c < W / 2; c++) begin
            int m;
            m = -128;
            for (int d = 0; d < 4; d++)
              if (conv[o][2*r + d/2][2*c + d%2] > m) m = conv[o][2*r + d/2][2*c + d%2];
            if (m > 0) begin
              e = '0; e.kind = EV_FC; e.data = act_t'(m);
              e.start_neuron = NADDR_W'(100 + (10 + o) * (H/2) * (W/2) + r * (W/2) + c);
              expq.push_back(e);
            end
          end
      end
    e = '0; e.kind = EV_EOD;
    expq.push_back(e);
    // drive the input events back to back
    @(negedge clk);
    for (int i = 0; i < CI; i++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++)
          if (img[i][r][c] != 0) begin
            ev_valid = 1; ev = conv_event(i, r, c, img[i][r][c], H, W);
            @(posedge clk);
            while (!ev_ready) @(posedge clk);
            @(negedge clk);
          end
    ev_valid = 1; ev = '0; ev.kind = EV_EOD;
    @(posedge clk);
    while (!ev_ready) @(posedge clk);
    @(negedge clk);
    ev_valid = 0;
    for (int t = 0; t < 5000 && expq.size() != 0; t++) @(posedge clk);
    check(expq.size() == 0, "all expected events fired");
    repeat (10) @(posedge clk);
  endtask

  initial begin
    for (int i = 0; i < CI; i++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++)
          begin
            int u;
            u = int'($urandom % 120);
            img[i][r][c] = (u < 60) ? u + 1 : 0;
          end
    for (int o = 0; o < CO; o++)
      for (int i = 0; i < CI; i++)
        for (int t = 0; t < K*K; t++) filt[o][i][t] = int'($urandom % 31) - 15;
    // word (i, og): byte tap*3 + k = filt[3og+k][i][tap]
    for (int i = 0; i < CI; i++)
      for (int og = 0; og < 2; og++) begin
        wmem[i*2 + og] = '0;
        for (int t = 0; t < K*K; t++)
          for (int k = 0; k < 3; k++)
            if (3*og + k < CO) wmem[i*2 + og][(t*3 + k)*8 +: 8] = 8'(filt[3*og + k][i][t]);
      end

    cfg.mode = MODE_CONV; cfg.k = 4'(K); cfg.stride = 3'd1;
    cfg.ofm_w = 8'(W); cfg.ofm_h = 8'(H); cfg.n_og = 8'd2; cfg.w_base = '0; cfg.n_eod = 4'd1;
    cfg.n_out_ch = CH_W'(CO); cfg.ch_base = CH_W'(10);
    cfg.qmul = 16'sd1; cfg.qshift = 6'd3; cfg.threshold = 8'sd0; cfg.pool = 1'b0;
    cfg.nxt_mode = MODE_CONV; cfg.nxt_k = 4'(K); cfg.nxt_stride = 3'd1; cfg.nxt_pad = 1;
    cfg.nxt_ofm_w = 8'(W); cfg.nxt_ofm_h = 8'(H);
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_layer(0);
    cfg.pool = 1'b1; cfg.nxt_mode = MODE_FC; cfg.nxt_fc_base = NADDR_W'(100);
    run_layer(1);
    check(n_got > 20, "events fired");
    // two weight words per event keep same-address updates two cycles apart,
    // so the bypass is not needed here (it is exercised by tb_mnf_mac_module)
    check(n_pool > 0, "pooling used");
    check(n_stall > 0, "weight-read stalls seen");
    $display("core: %0d events out, bypass %0d, pooled %0d, weight stalls %0d",
             n_got, n_byp, n_pool, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
