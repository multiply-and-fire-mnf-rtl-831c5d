// mnf_router_if: router interface, the gateway between a PE and the network.
//
// It does three things:
//  * delivers every flit addressed to this PE (its bit set in the destination
//    mask) to the core's input-event FIFO;
//  * event forwarding: if cfg.fwd is non-zero, re-sends each received event to
//    the PEs in cfg.fwd, so several PEs can work on the same input for
//    different output channels;
//  * sends the events the activation module fires to cfg.dst.
// A flit is accepted only when both the core FIFO and (if forwarding) the
// forward FIFO have room, so nothing is lost. On the network side forwarded
// events go out before the PE's own results, and a flit offered to the network
// is held unchanged until the network takes it. Flits use a destination bit
// mask so one flit can be multicast; flit format and priorities are this
// design's own.
module mnf_router_if
  import mnf_pkg::*;
#(
  parameter int MY_ID     = 0,
  parameter int FWD_DEPTH = 4
) (
  input  logic   clk,
  input  logic   rst_n,
  input  cfg_t   cfg,
  // from the network
  input  logic   net_in_valid,
  output logic   net_in_ready,
  input  flit_t  net_in,
  // to the network
  output logic   net_out_valid,
  input  logic   net_out_ready,
  output flit_t  net_out,
  // to the core (input events)
  output logic   core_valid,
  input  logic   core_ready,
  output event_t core_ev,
  // from the activation module (fired events)
  input  logic   act_valid,
  output logic   act_ready,
  input  event_t act_ev,
  // status
  output logic   st_forwarded
);
  logic   for_me, want_fwd;
  logic   fwd_in_ready, fwd_valid, fwd_pop;
  event_t fwd_ev;

  assign for_me   = net_in.dst[MY_ID];
  assign want_fwd = for_me && (cfg.fwd != '0);

  assign net_in_ready = !for_me || (core_ready && (!want_fwd || fwd_in_ready));
  assign core_valid   = net_in_valid && for_me && (!want_fwd || fwd_in_ready);
  assign core_ev      = net_in.ev;

  mnf_fifo #(.T(event_t), .DEPTH(FWD_DEPTH)) u_fwd (
    .clk, .rst_n,
    .in_valid (net_in_valid && want_fwd && core_ready),
    .in_ready (fwd_in_ready),
    .in_data  (net_in.ev),
    .out_valid(fwd_valid),
    .out_ready(fwd_pop),
    .out_data (fwd_ev),
    .count    ()
  );

  // A flit offered to the network stays unchanged until it is taken.
  logic hold, hold_fwd, use_fwd;
  assign use_fwd       = hold ? hold_fwd : fwd_valid;
  assign net_out_valid = fwd_valid || act_valid;
  assign net_out.dst   = use_fwd ? cfg.fwd : cfg.dst;
  assign net_out.ev    = use_fwd ? fwd_ev  : act_ev;
  assign fwd_pop       = use_fwd && net_out_ready;
  assign act_ready     = !use_fwd && net_out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold     <= 1'b0;
      hold_fwd <= 1'b0;
    end else begin
      hold     <= net_out_valid && !net_out_ready;
      hold_fwd <= use_fwd;
    end
  end

  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (net_out_valid && !net_out_ready) |=> (net_out_valid && $stable(net_out)));
  assign st_forwarded  = fwd_pop;
endmodule
