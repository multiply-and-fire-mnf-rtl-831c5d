// mnf_storage_pe: the storage node of the network.
//
// Layers run one after another on the same compute PEs, so the events a layer
// fires must be kept until the next layer starts. The storage PE has little
// logic and a large event memory: it stores every event sent to it, counts
// the end-of-data events (one per sending PE), and on host command replays
// the stored events, followed by one end-of-data event, to the PEs of the
// next layer. The paper describes this node's role; its size, the two-bank
// (ping-pong) organisation and the host port are this design's own.
//
// Banks: events arrive into the receive bank; host_replay swaps the banks and
// sends the old receive bank while the new one fills with the next layer's
// results. The host can also write events (the network input) into the
// receive bank and read any stored event back (host_rd_idx -> host_rd_ev,
// combinational), which is how results leave the chip.
module mnf_storage_pe
  import mnf_pkg::*;
#(
  parameter int MY_ID = NUM_PE,
  parameter int DEPTH = 262144
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // network
  input  logic                   net_in_valid,
  output logic                   net_in_ready,
  input  flit_t                  net_in,
  output logic                   net_out_valid,
  input  logic                   net_out_ready,
  output flit_t                  net_out,
  // host
  input  logic                   host_wr_valid,
  input  event_t                 host_wr_ev,
  input  logic                   host_replay,
  input  logic [NODES-1:0]       host_replay_dst,
  input  logic [$clog2(DEPTH)-1:0] host_rd_idx,
  output event_t                 host_rd_ev,
  output logic [$clog2(DEPTH+1)-1:0] rx_count,
  output logic [7:0]             rx_eod,
  output logic                   replay_busy
);
  localparam int IW = $clog2(DEPTH);

  event_t mem [2*DEPTH];

  logic                rx_bank, tx_bank;
  logic [IW:0]         wcnt, tx_n, tx_idx;
  logic [NODES-1:0]    tx_dst;

  logic take_net, take_host, store;
  event_t wr_ev;

  assign net_in_ready = !host_wr_valid;
  assign take_net     = net_in_valid && net_in_ready && net_in.dst[MY_ID];
  assign take_host    = host_wr_valid;
  assign wr_ev        = take_host ? host_wr_ev : net_in.ev;
  assign store        = (take_host || (take_net && net_in.ev.kind != EV_EOD)) &&
                        (wcnt < (IW+1)'(DEPTH));

  always_ff @(posedge clk) begin
    if (store) mem[{rx_bank, wcnt[IW-1:0]}] <= wr_ev;
  end

  assign host_rd_ev = mem[{rx_bank, host_rd_idx}];
  assign rx_count   = wcnt;

  // replay
  assign net_out_valid = replay_busy;
  assign net_out.dst   = tx_dst;
  assign net_out.ev    = (tx_idx == tx_n) ? event_t'{kind: EV_EOD, default: '0}
                                          : mem[{tx_bank, tx_idx[IW-1:0]}];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_bank     <= 1'b0;
      tx_bank     <= 1'b1;
      wcnt        <= '0;
      rx_eod      <= '0;
      tx_n        <= '0;
      tx_idx      <= '0;
      tx_dst      <= '0;
      replay_busy <= 1'b0;
    end else begin
      if (host_replay && !replay_busy) begin
        tx_bank     <= rx_bank;
        rx_bank     <= !rx_bank;
        tx_n        <= wcnt;
        tx_idx      <= '0;
        tx_dst      <= host_replay_dst;
        replay_busy <= 1'b1;
        wcnt        <= '0;
        rx_eod      <= '0;
      end else begin
        if (store) wcnt <= wcnt + 1'b1;
        if (take_net && net_in.ev.kind == EV_EOD) rx_eod <= rx_eod + 1'b1;
        if (replay_busy && net_out_ready) begin
          if (tx_idx == tx_n) replay_busy <= 1'b0;
          else                tx_idx      <= tx_idx + 1'b1;
        end
      end
    end
  end

  a_no_replay_overlap: assert property (@(posedge clk) disable iff (!rst_n)
    host_replay |-> !replay_busy);
endmodule
