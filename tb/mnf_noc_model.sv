// mnf_noc_model: behavioural stand-in for the mesh network-on-chip.
//
// Used by testbenches only. Each cycle it serves one sender, chosen in
// round-robin order, and offers that sender's flit to every node named in
// the destination mask; the sender's flit is taken (out_ready) in the cycle
// the last of those nodes accepts it (multicast). Nodes that accepted early
// are not offered the flit again. No routing latency is modelled; one flit
// per cycle passes through the whole network.
module mnf_noc_model
  import mnf_pkg::*;
#(
  parameter int N = NODES
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] out_valid,
  output logic [N-1:0] out_ready,
  input  flit_t        out_flit [N],
  output logic [N-1:0] in_valid,
  input  logic [N-1:0] in_ready,
  output flit_t        in_flit [N]
);
  int           hold;      // sender part-way through a multicast, or -1
  logic [N-1:0] rem;       // nodes still to receive its flit
  int           rr;
  int           pick;
  logic [N-1:0] mask;
  logic         done;

  always_comb begin
    pick      = -1;
    mask      = '0;
    out_ready = '0;
    if (hold >= 0) begin
      pick = hold;
      mask = rem;
    end else begin
      for (int d = 0; d < N; d++) begin
        int i;
        i = (rr + d) % N;
        if (pick < 0 && out_valid[i]) pick = i;
      end
      if (pick >= 0) mask = out_flit[pick].dst[N-1:0];
    end
    done = (mask & ~in_ready) == '0;
    if (pick >= 0) out_ready[pick] = done;
    for (int i = 0; i < N; i++) begin
      in_valid[i] = (pick >= 0) && mask[i];
      in_flit[i]  = (pick >= 0) ? out_flit[pick] : '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold <= -1;
      rem  <= '0;
      rr   <= 0;
    end else if (pick >= 0) begin
      if (done) begin
        hold <= -1;
        rr   <= (pick + 1) % N;
      end else begin
        hold <= pick;
        rem  <= mask & ~in_ready;
      end
    end
  end
endmodule
