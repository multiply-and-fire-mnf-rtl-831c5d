// mnf_dispatcher: pairs weights with neuron addresses and routes them to the
// MAC modules.
//
// Each work item from the load module (input value + vector of output-neuron
// positions) is joined with the next weight word from the weight memory
// interface; both arrive in request order. The dispatcher then sends one
// group {input, 3 weights, neuron address} to every MAC module that has work.
//
// Routing, this design's own banking: a conv output neuron at (row, col)
// lives in MAC module 3*(row mod 3) + (col mod 3), and lane k of that module
// holds output channel 3*og + k of the group og being processed. The at most
// 3x3 neurons one event updates thus always land in different modules, and
// all of them are dispatched in one cycle. An FC word q is spread statically:
// lane L = 3m + k of the word goes to module m, lane k, neuron 27q + L.
//
// End of data: the dispatcher waits until the MAC pipelines are empty, pulses
// drain_start to the activation module and holds further items until
// drain_done, so multiply and readout never overlap.
module mnf_dispatcher
  import mnf_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_t               cfg,
  // work items from the load module
  input  logic               it_valid,
  output logic               it_ready,
  input  ld_item_t           it,
  // weight words from the memory interface
  input  logic               w_valid,
  output logic               w_ready,
  input  logic [WWORD_W-1:0] w_data,
  // to the MAC cluster
  output mac_item_t          mac_in [NUM_MAC],
  input  logic               mac_busy,
  input  logic               mac_ready,
  // activation module handshake
  output logic               drain_start,
  input  logic               drain_done,
  // status, for performance counting
  output logic               stall_weight,   // item waits for its weights
  output logic               stall_drain     // items held during end of data
);
  typedef enum logic [1:0] {S_RUN, S_WAIT_IDLE, S_DRAIN} state_e;
  state_e state;

  logic fire;
  logic run;
  assign run      = (state == S_RUN) && mac_ready;
  assign fire     = run && it_valid && !it.eod && w_valid;
  assign it_ready = run && (it.eod || w_valid);
  assign w_ready  = fire;

  assign stall_weight = run && it_valid && !it.eod && !w_valid;
  assign stall_drain  = !run && it_valid;

  function automatic logic [DATA_W-1:0] lane_w(input logic [WWORD_W-1:0] word, input int l);
    return word[l*DATA_W +: DATA_W];
  endfunction

  always_comb begin
    logic [3:0] dm;
    dm = '0;
    for (int m = 0; m < NUM_MAC; m++) mac_in[m] = '0;
    if (fire) begin
      if (it.mode == MODE_CONV) begin
        for (int e = 0; e < NUM_MAC; e++) begin
          if (it.ent_v[e]) begin
            dm = conv_module(it.row[e], it.col[e]);
            mac_in[dm].valid      = 1'b1;
            mac_in[dm].data       = it.data;
            mac_in[dm].local_addr = conv_local(cfg, it.grp, it.row[e], it.col[e]);
            for (int k = 0; k < MULTS; k++) begin
              mac_in[dm].w[k]  = lane_w(w_data, int'(it.tap[e]) * MULTS + k);
              mac_in[dm].lv[k] = (int'(it.grp) * MULTS + k) < int'(cfg.n_out_ch);
            end
          end
        end
      end else begin
        for (int m = 0; m < NUM_MAC; m++) begin
          mac_in[m].data       = it.data;
          mac_in[m].local_addr = AADDR_W'(it.grp);
          for (int k = 0; k < MULTS; k++) begin
            mac_in[m].w[k]  = lane_w(w_data, m * MULTS + k);
            mac_in[m].lv[k] = (int'(it.grp) * LANES + m * MULTS + k) < int'(cfg.fc_n);
          end
          mac_in[m].valid = |mac_in[m].lv;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_RUN;
      drain_start <= 1'b0;
    end else begin
      drain_start <= 1'b0;
      case (state)
        S_RUN:       if (run && it_valid && it.eod) state <= S_WAIT_IDLE;
        S_WAIT_IDLE: if (!mac_busy) begin
                       state       <= S_DRAIN;
                       drain_start <= 1'b1;
                     end
        S_DRAIN:     if (drain_done) state <= S_RUN;
        default:     state <= S_RUN;
      endcase
    end
  end
endmodule
