// mnf_mac_cluster: the MAC cluster of a PE - NUM_MAC MAC modules in parallel.
//
// With the default 9 modules of 3 multipliers the cluster performs up to 27
// multiply-accumulates per cycle. The dispatcher has already routed each
// item to the module that owns its output neuron, so the modules are
// independent. For readout the activation module may read several modules in
// the same cycle (four for a 2x2 max-pool window), all on the same lane.
//
// Outputs: `ready` once every module has cleared its partial sums after
// reset; `busy` while any module still has an update in flight; `n_mac`
// counts the multiplications completed this cycle and `n_bypass` the modules
// that used the read-after-write bypass (both for performance counting).
module mnf_mac_cluster
  import mnf_pkg::*;
#(
  parameter int NMOD  = NUM_MAC,
  parameter int DEPTH = ADEPTH
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  mac_item_t                in [NMOD],
  output logic                     busy,
  output logic                     ready,
  input  logic [NMOD-1:0]          rd_en,
  input  logic [AADDR_W-1:0]       rd_local [NMOD],
  input  logic [1:0]               rd_lane,
  input  logic signed [15:0]       qmul,
  input  logic [5:0]               qshift,
  output act_t                     q_out [NMOD],
  output logic [$clog2(NMOD*MULTS+1)-1:0] n_mac,
  output logic [$clog2(NMOD+1)-1:0]       n_bypass
);
  logic [NMOD-1:0]       busy_m, byp_m, ready_m;
  logic [MULTS-1:0]      fire_m [NMOD];

  for (genvar m = 0; m < NMOD; m++) begin : g_mac
    mnf_mac_module #(.DEPTH(DEPTH)) u_mac (
      .clk, .rst_n,
      .in        (in[m]),
      .busy      (busy_m[m]),
      .ready     (ready_m[m]),
      .rd_en     (rd_en[m]),
      .rd_local  (rd_local[m]),
      .rd_lane,
      .qmul, .qshift,
      .q_out     (q_out[m]),
      .mac_fire  (fire_m[m]),
      .bypass_hit(byp_m[m])
    );
  end

  assign busy  = |busy_m;
  assign ready = &ready_m;

  always_comb begin
    n_mac    = '0;
    n_bypass = '0;
    for (int m = 0; m < NMOD; m++) begin
      n_bypass = n_bypass + byp_m[m];
      for (int k = 0; k < MULTS; k++) n_mac = n_mac + fire_m[m][k];
    end
  end
endmodule
