// mnf_activation: the fire phase of a PE (ReLU, max-pool, event generation).
//
// Idle during the multiply phase. On drain_start (end of data reached and
// the MAC cluster empty) it walks over every output value the PE holds:
//  * conv layer: channels 0..n_out_ch-1, then rows and columns of the output
//    map; with cfg.pool set it reads the four neurons of each 2x2 window in
//    one cycle (they sit in four different MAC modules) and keeps the largest;
//  * FC layer: output neurons 0..num_neurons-1.
// Each read returns the quantized 8-bit value and clears the partial sum.
// A value larger than cfg.threshold is fired: the module builds the input
// event of the next layer and hands it to the router interface; other values
// are dropped. After the last value it sends one end-of-data event and pulses
// drain_done.
//
// Next-layer event fields (this design's formula) for a value at (iy, ix) of
// the next layer's input map, filter K, stride s, padding P, output width W:
//   ox_lo = max(0, ceil((ix+P-K+1)/s)), ox_hi = min(W-1, floor((ix+P)/s))
//   start_neuron = oy_lo*W + ox_lo,   x_jump = ox_hi - ox_lo,
//   start_weight = K*(iy+P-oy_lo*s) + (ix+P-ox_lo*s),  ch_id = ch_base + c.
// If the next layer is FC the event carries the flattened (channel-major)
// neuron index nxt_fc_base + (ch_base + c)*H*W + iy*W + ix instead, with H, W
// the size of this PE's (pooled) output map.
//
// Timing: two cycles per value (read, then compare and fire); a fired event
// waits in the compare cycle until the router interface accepts it.
module mnf_activation
  import mnf_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_t               cfg,
  input  logic               drain_start,
  output logic               drain_done,
  // readout of the MAC cluster
  output logic [NUM_MAC-1:0] rd_en,
  output logic [AADDR_W-1:0] rd_local [NUM_MAC],
  output logic [1:0]         rd_lane,
  input  act_t               q_in [NUM_MAC],
  // fired events
  output logic               ev_valid,
  input  logic               ev_ready,
  output event_t             ev,
  // status, for performance counting
  output logic               st_fired,
  output logic               st_dropped,
  output logic               st_pooled
);
  typedef enum logic [2:0] {A_IDLE, A_READ, A_EVAL, A_EOD} state_e;
  state_e state;

  // position counters
  logic [CH_W-1:0]  c;        // conv: channel within the PE
  logic [GRP_W-1:0] og;       // c / 3
  logic [1:0]       k;        // c % 3
  logic [POS_W-1:0] pr, pc;   // output (pooled) row / column
  logic [NADDR_W-1:0] j;      // FC: output neuron
  logic [GRP_W-1:0] fq;       // FC: j / 27
  logic [3:0]       fm;       // FC: (j % 27) / 3
  logic [NUM_MAC-1:0] rmask;  // modules read in the previous cycle

  logic [POS_W-1:0] ph, pw;
  assign ph = cfg.pool ? (cfg.ofm_h >> 1) : cfg.ofm_h;
  assign pw = cfg.pool ? (cfg.ofm_w >> 1) : cfg.ofm_w;

  // ---- read addresses ---------------------------------------------------------
  always_comb begin
    logic [POS_W-1:0] r, cc;
    logic [3:0]       m;
    r = '0; cc = '0; m = '0;
    rd_en   = '0;
    rd_lane = k;
    for (int m = 0; m < NUM_MAC; m++) rd_local[m] = '0;
    if (state == A_READ) begin
      if (cfg.mode == MODE_FC) begin
        rd_en[fm]    = 1'b1;
        rd_local[fm] = AADDR_W'(fq);
      end else begin
        for (int dy = 0; dy < 2; dy++) begin
          for (int dx = 0; dx < 2; dx++) begin
            if (cfg.pool || (dy == 0 && dx == 0)) begin
              r  = cfg.pool ? POS_W'(2 * pr + POS_W'(dy)) : pr;
              cc = cfg.pool ? POS_W'(2 * pc + POS_W'(dx)) : pc;
              m  = conv_module(r, cc);
              rd_en[m]    = 1'b1;
              rd_local[m] = conv_local(cfg, og, r, cc);
            end
          end
        end
      end
    end
  end

  // ---- compare (ReLU / max-pool) -------------------------------------------------
  act_t best;
  always_comb begin
    best = -8'sd128;
    for (int m = 0; m < NUM_MAC; m++)
      if (rmask[m] && q_in[m] > best) best = q_in[m];
  end

  // ---- next-layer event ------------------------------------------------------------
  logic   fires, has_out;
  event_t nev;
  always_comb begin
    int K, S, P, W, H, numx, numy, lox, hix, loy, hiy, tx, ty;
    K = int'(cfg.nxt_k);
    S = (cfg.nxt_stride == 0) ? 1 : int'(cfg.nxt_stride);
    P = int'(cfg.nxt_pad);
    W = int'(cfg.nxt_ofm_w);
    H = int'(cfg.nxt_ofm_h);
    numx = int'(pc) + P - K + 1;
    numy = int'(pr) + P - K + 1;
    lox  = (numx <= 0) ? 0 : (numx + S - 1) / S;
    loy  = (numy <= 0) ? 0 : (numy + S - 1) / S;
    hix  = (int'(pc) + P) / S;
    hiy  = (int'(pr) + P) / S;
    if (hix > W - 1) hix = W - 1;
    if (hiy > H - 1) hiy = H - 1;
    tx   = int'(pc) + P - lox * S;
    ty   = int'(pr) + P - loy * S;

    nev  = '0;
    nev.data = best;
    has_out  = 1'b1;
    if (cfg.mode == MODE_FC) begin
      nev.kind         = EV_FC;
      nev.start_neuron = NADDR_W'(int'(cfg.nxt_fc_base) + int'(j));
    end else if (cfg.nxt_mode == MODE_FC) begin
      nev.kind         = EV_FC;
      nev.start_neuron = NADDR_W'(int'(cfg.nxt_fc_base)
                                  + (int'(cfg.ch_base) + int'(c)) * int'(ph) * int'(pw)
                                  + int'(pr) * int'(pw) + int'(pc));
    end else begin
      nev.kind         = EV_CONV;
      nev.ch_id        = CH_W'(int'(cfg.ch_base) + int'(c));
      nev.start_weight = SW_W'(ty * K + tx);
      nev.start_neuron = NADDR_W'(loy * W + lox);
      nev.x_jump       = 2'(hix - lox);
      nev.y_jump       = 2'(hiy - loy);
      has_out          = (lox <= hix) && (loy <= hiy);
    end
    fires = (best > cfg.threshold) && has_out;
  end

  // ---- position walk -----------------------------------------------------------------
  logic last;
  always_comb begin
    if (cfg.mode == MODE_FC) last = (32'(j) + 1 >= 32'(cfg.fc_n));
    else last = (32'(c) + 1 >= 32'(cfg.n_out_ch)) && (pr + 1'b1 >= ph) && (pc + 1'b1 >= pw);
  end

  logic advance;
  assign advance  = (state == A_EVAL) && (!fires || ev_ready);
  assign ev_valid = ((state == A_EVAL) && fires) || (state == A_EOD);
  assign ev       = (state == A_EOD) ? event_t'{kind: EV_EOD, default: '0} : nev;

  assign st_fired   = (state == A_EVAL) && fires && ev_ready;
  assign st_dropped = (state == A_EVAL) && !fires;
  assign st_pooled  = (state == A_EVAL) && cfg.pool && (cfg.mode == MODE_CONV);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= A_IDLE;
      c <= '0; og <= '0; k <= '0; pr <= '0; pc <= '0;
      j <= '0; fq <= '0; fm <= '0;
      rmask <= '0;
      drain_done <= 1'b0;
    end else begin
      drain_done <= 1'b0;
      case (state)
        A_IDLE: if (drain_start) begin
          c <= '0; og <= '0; k <= '0; pr <= '0; pc <= '0;
          j <= '0; fq <= '0; fm <= '0;
          state <= ((cfg.mode == MODE_FC) ? (cfg.fc_n == 0) : (cfg.n_out_ch == 0 || ph == 0 || pw == 0))
                   ? A_EOD : A_READ;
        end
        A_READ: begin
          rmask <= rd_en;
          state <= A_EVAL;
        end
        A_EVAL: if (advance) begin
          state <= last ? A_EOD : A_READ;
          if (cfg.mode == MODE_FC) begin
            j <= j + 1'b1;
            if (k == 2'd2) begin
              k <= '0;
              if (fm == 4'(NUM_MAC - 1)) begin
                fm <= '0;
                fq <= fq + 1'b1;
              end else fm <= fm + 1'b1;
            end else k <= k + 1'b1;
          end else if (pc + 1'b1 < pw) begin
            pc <= pc + 1'b1;
          end else begin
            pc <= '0;
            if (pr + 1'b1 < ph) pr <= pr + 1'b1;
            else begin
              pr <= '0;
              c  <= c + 1'b1;
              if (k == 2'd2) begin
                k  <= '0;
                og <= og + 1'b1;
              end else k <= k + 1'b1;
            end
          end
        end
        A_EOD: if (ev_ready) begin
          state      <= A_IDLE;
          drain_done <= 1'b1;
        end
        default: state <= A_IDLE;
      endcase
    end
  end
endmodule
