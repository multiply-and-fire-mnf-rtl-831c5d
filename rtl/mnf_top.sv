// mnf_top: the Multiply-and-Fire accelerator - 11 compute PEs and one
// storage PE.
//
// Nodes 0..NUM_PE-1 are compute PEs, node NUM_PE is the storage PE. The
// nodes talk only through event flits (destination bit mask + event). The
// mesh network-on-chip that carries them is an existing router design that
// is not part of this RTL: each node's send and receive link is a port of
// this module (net_out_* leaves node i, net_in_* enters node i), to be
// connected to a mesh with multicast support. Any fabric that delivers each
// flit to every node named in its mask, in order per sender, works.
//
// The host loads weights into a PE's weight SRAM through wl_* (wl_pe selects
// the PE), sets each PE's layer configuration cfg[i], writes the network
// input events into the storage PE and starts each layer with host_replay;
// results are read back from the storage PE.
module mnf_top
  import mnf_pkg::*;
#(
  parameter int N_PE      = NUM_PE,
  parameter int W_DEPTH   = WDEPTH,
  parameter int ACC_DEPTH = ADEPTH,
  parameter int S_DEPTH   = 262144
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  cfg_t                   cfg [N_PE],
  // network links of all nodes (index N_PE is the storage PE)
  output logic [N_PE:0]          net_out_valid,
  input  logic [N_PE:0]          net_out_ready,
  output flit_t                  net_out [N_PE+1],
  input  logic [N_PE:0]          net_in_valid,
  output logic [N_PE:0]          net_in_ready,
  input  flit_t                  net_in [N_PE+1],
  // host weight load
  input  logic                   wl_valid,
  input  logic [3:0]             wl_pe,
  input  logic [WADDR_W-1:0]     wl_addr,
  input  logic [WWORD_W-1:0]     wl_data,
  // host access to the storage PE
  input  logic                   host_wr_valid,
  input  event_t                 host_wr_ev,
  input  logic                   host_replay,
  input  logic [NODES-1:0]       host_replay_dst,
  input  logic [$clog2(S_DEPTH)-1:0] host_rd_idx,
  output event_t                 host_rd_ev,
  output logic [$clog2(S_DEPTH+1)-1:0] rx_count,
  output logic [7:0]             rx_eod,
  output logic                   replay_busy,
  // status
  output logic [N_PE-1:0]        pe_busy,
  output logic [4:0]             pe_n_mac [N_PE]
);
  for (genvar i = 0; i < N_PE; i++) begin : g_pe
    mnf_pe #(.MY_ID(i), .W_DEPTH(W_DEPTH), .ACC_DEPTH(ACC_DEPTH)) u_pe (
      .clk, .rst_n,
      .cfg          (cfg[i]),
      .net_in_valid (net_in_valid[i]),
      .net_in_ready (net_in_ready[i]),
      .net_in       (net_in[i]),
      .net_out_valid(net_out_valid[i]),
      .net_out_ready(net_out_ready[i]),
      .net_out      (net_out[i]),
      .wl_valid     (wl_valid && wl_pe == 4'(i)),
      .wl_addr, .wl_data,
      .st_n_mac     (pe_n_mac[i]),
      .st_busy      (pe_busy[i])
    );
  end

  mnf_storage_pe #(.MY_ID(N_PE), .DEPTH(S_DEPTH)) u_store (
    .clk, .rst_n,
    .net_in_valid (net_in_valid[N_PE]),
    .net_in_ready (net_in_ready[N_PE]),
    .net_in       (net_in[N_PE]),
    .net_out_valid(net_out_valid[N_PE]),
    .net_out_ready(net_out_ready[N_PE]),
    .net_out      (net_out[N_PE]),
    .host_wr_valid, .host_wr_ev, .host_replay, .host_replay_dst,
    .host_rd_idx, .host_rd_ev, .rx_count, .rx_eod, .replay_busy
  );
endmodule
