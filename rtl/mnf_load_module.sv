// mnf_load_module: decodes input events and generates the memory traffic.
//
// For every input event taken from the router interface FIFO the load module
//  * computes the weight-SRAM word that holds the needed weights and sends a
//    read request to the weight memory interface, and
//  * builds the list of output neurons the event updates, packed as a vector,
//    and sends it with the input value to the dispatcher.
// Both go out in the same cycle, so the dispatcher can pair them in order.
//
// Conv event (Algorithm 1 of the paper, unrolled): entry e = 3*y + x, for
// x <= x_jump and y <= y_jump, pairs filter tap
//   start_weight - stride*x - nc_filter*stride*y
// with output neuron start_neuron + nc_output*y + x (kept as row/column so
// the dispatcher can bank it). One weight word holds the 9 taps of one input
// channel for 3 output channels, at w_base + ch_id*n_og + og; an event
// therefore needs n_og cycles, one per group of 3 output channels.
// FC event (Algorithm 2): input neuron i needs the ceil(num_neurons/27) words
// starting at w_base + i*ceil(num_neurons/27); word q covers output neurons
// 27q .. 27q+26.
// End-of-data: the module counts end-of-data events and, when cfg.n_eod have
// arrived (one per sending PE), forwards a single end-of-data item; no
// address is computed and no read is issued for it.
//
// Throughput: one weight word per cycle when both outputs are ready.
module mnf_load_module
  import mnf_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_t               cfg,
  // input events
  input  logic               ev_valid,
  output logic               ev_ready,
  input  event_t             ev,
  // weight read requests
  output logic               rd_valid,
  input  logic               rd_ready,
  output logic [WADDR_W-1:0] rd_addr,
  // work items to the dispatcher
  output logic               it_valid,
  input  logic               it_ready,
  output ld_item_t           it
);
  logic [GRP_W-1:0] grp;       // group / word index within the current event
  logic [3:0]       eod_cnt;
  logic [GRP_W-1:0] ngrp;
  logic             is_conv, is_fc, is_eod, last_grp, issue, eod_last;

  assign is_conv  = ev_valid && ev.kind == EV_CONV;
  assign is_fc    = ev_valid && ev.kind == EV_FC;
  assign is_eod   = ev_valid && ev.kind == EV_EOD;
  assign ngrp     = is_fc ? fc_words(cfg) : cfg.n_og;
  assign last_grp = (grp + 1'b1 >= ngrp);
  assign eod_last = (eod_cnt + 1'b1 >= cfg.n_eod);

  // ---- Algorithm 1, unrolled ------------------------------------------------
  logic [POS_W-1:0] r0, c0;
  always_comb begin
    logic [NADDR_W-1:0] q;
    q  = (cfg.ofm_w == 0) ? '0 : ev.start_neuron / NADDR_W'(cfg.ofm_w);
    r0 = POS_W'(q);
    c0 = POS_W'(ev.start_neuron - q * NADDR_W'(cfg.ofm_w));
  end

  always_comb begin
    it        = '0;
    it.eod    = is_eod;
    it.mode   = is_fc ? MODE_FC : MODE_CONV;
    it.data   = ev.data;
    it.grp    = grp;
    for (int y = 0; y < KWIN; y++) begin
      for (int x = 0; x < KWIN; x++) begin
        int e;
        e = y * KWIN + x;
        it.ent_v[e] = is_conv && (x <= int'(ev.x_jump)) && (y <= int'(ev.y_jump));
        it.tap[e]   = SW_W'(int'(ev.start_weight) - int'(cfg.stride) * x
                            - int'(cfg.k) * int'(cfg.stride) * y);
        it.row[e]   = r0 + POS_W'(y);
        it.col[e]   = c0 + POS_W'(x);
      end
    end
  end

  always_comb begin
    if (is_fc) rd_addr = WADDR_W'(cfg.w_base + ev.start_neuron * fc_words(cfg) + grp);
    else       rd_addr = WADDR_W'(cfg.w_base + ev.ch_id * cfg.n_og + grp);
  end

  // ---- handshakes --------------------------------------------------------------
  assign issue    = (is_conv || is_fc) && rd_ready && it_ready && ngrp != 0;
  assign rd_valid = (is_conv || is_fc) && it_ready && ngrp != 0;
  assign it_valid = ((is_conv || is_fc) && rd_ready && ngrp != 0) || (is_eod && eod_last);
  assign ev_ready = (issue && last_grp) ||
                    (is_eod && (!eod_last || it_ready)) ||
                    (ev_valid && ev.kind == EV_NONE) ||
                    ((is_conv || is_fc) && ngrp == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      grp     <= '0;
      eod_cnt <= '0;
    end else begin
      if (issue) grp <= last_grp ? '0 : grp + 1'b1;
      if (is_eod && ev_ready) eod_cnt <= eod_last ? '0 : eod_cnt + 1'b1;
    end
  end

  a_pair: assert property (@(posedge clk) disable iff (!rst_n)
    (rd_valid && rd_ready) |-> (it_valid && it_ready));
endmodule
