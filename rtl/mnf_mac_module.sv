// mnf_mac_module: one MAC module of the MAC cluster.
//
// Each MAC module owns part of the output neurons and the partial sums for
// them. It holds an extractor (splitting the dispatched item into input,
// weights and neuron address), three multipliers, three adders, a memory
// interface and one two-port partial-sum bank per multiplier. In the multiply
// phase every accepted item does, per active lane: multiply input by weight,
// read the previous sum at the neuron address, add, and write the new sum
// back to the same address - the five steps the paper lists. At end of data
// the activation module reads the sums through the readout port; each read
// returns the sum quantized to 8 bits and clears the stored sum to zero.
//
// Pipeline (this design's own): item in cycle t -> bank read and product
// register at edge t -> add and write back at edge t+1. An item whose bank
// read coincided with the previous item's write to the same address takes
// that written value instead (one-deep bypass), so back-to-back updates of
// one neuron are exact. The module accepts one item per cycle and never
// stalls; `busy` is high while an update is still in the pipeline.
//
// After reset the module spends DEPTH cycles writing zero to every partial
// sum (`ready` is low meanwhile); a real SRAM powers up with arbitrary data.
//
// Quantization follows the fixed-point multiplier-and-shift idea of integer
// inference: q = sat8(round((sum * qmul) / 2^qshift)). The readout returns q
// one cycle after rd_en. Readout and multiply phases must not overlap.
module mnf_mac_module
  import mnf_pkg::*;
#(
  parameter int DEPTH = ADEPTH
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // from the dispatcher
  input  mac_item_t             in,
  output logic                  busy,
  output logic                  ready,
  // readout (activation module)
  input  logic                  rd_en,
  input  logic [AADDR_W-1:0]    rd_local,
  input  logic [1:0]            rd_lane,
  input  logic signed [15:0]    qmul,
  input  logic [5:0]            qshift,
  output act_t                  q_out,
  // activity, for performance counters
  output logic [MULTS-1:0]      mac_fire,
  output logic                  bypass_hit
);
  // ---- extractor + multipliers (stage 0) ----------------------------------
  logic                     s1_valid;
  logic [MULTS-1:0]         s1_lv;
  logic [AADDR_W-1:0]       s1_local;
  psum_t                    s1_prod [MULTS];

  logic [MULTS-1:0]         bank_re, bank_we;
  logic [AADDR_W-1:0]       bank_raddr;
  logic [AADDR_W-1:0]       bank_waddr [MULTS];
  psum_t                    bank_wdata [MULTS];
  logic [PSUM_W-1:0]        bank_rdata [MULTS];

  // last write per lane, for the bypass
  logic [MULTS-1:0]         lw_valid;
  logic [AADDR_W-1:0]       lw_addr [MULTS];
  psum_t                    lw_data [MULTS];

  logic [1:0]               rd_lane_q;

  // after reset every partial sum is cleared, one address per cycle
  logic                 init;
  logic [AADDR_W-1:0]   init_addr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init      <= 1'b1;
      init_addr <= '0;
    end else if (init) begin
      init_addr <= init_addr + 1'b1;
      if (init_addr == AADDR_W'(DEPTH - 1)) init <= 1'b0;
    end
  end
  assign ready = !init;

  assign bank_raddr = rd_en ? rd_local : in.local_addr;

  always_comb begin
    for (int k = 0; k < MULTS; k++) begin
      bank_re[k] = (in.valid && in.lv[k]) || (rd_en && rd_lane == 2'(k));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_lv    <= '0;
      s1_local <= '0;
      for (int k = 0; k < MULTS; k++) s1_prod[k] <= '0;
    end else begin
      s1_valid <= in.valid;
      s1_lv    <= in.valid ? in.lv : '0;
      s1_local <= in.local_addr;
      for (int k = 0; k < MULTS; k++)
        s1_prod[k] <= PSUM_W'($signed(in.data) * $signed(in.w[k]));
    end
  end

  // ---- adders + write back (stage 1) --------------------------------------
  logic [MULTS-1:0] hit;
  always_comb begin
    for (int k = 0; k < MULTS; k++) begin
      psum_t prev;
      hit[k]  = lw_valid[k] && (lw_addr[k] == s1_local);
      prev    = hit[k] ? lw_data[k] : psum_t'(bank_rdata[k]);
      bank_we[k]    = (s1_valid && s1_lv[k]) || (rd_en && rd_lane == 2'(k)) || init;
      bank_waddr[k] = (s1_valid && s1_lv[k]) ? s1_local : (init ? init_addr : rd_local);
      bank_wdata[k] = (s1_valid && s1_lv[k]) ? prev + s1_prod[k] : '0;
    end
  end

  assign mac_fire   = s1_valid ? s1_lv : '0;
  assign bypass_hit = s1_valid && |(s1_lv & hit);
  assign busy       = s1_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lw_valid <= '0;
      for (int k = 0; k < MULTS; k++) begin
        lw_addr[k] <= '0;
        lw_data[k] <= '0;
      end
    end else begin
      for (int k = 0; k < MULTS; k++) begin
        lw_valid[k] <= bank_we[k];
        lw_addr[k]  <= bank_waddr[k];
        lw_data[k]  <= bank_wdata[k];
      end
    end
  end

  for (genvar k = 0; k < MULTS; k++) begin : g_bank
    mnf_acc_sram #(.DEPTH(DEPTH)) u_bank (
      .clk,
      .re(bank_re[k]), .raddr(bank_raddr), .rdata(bank_rdata[k]),
      .we(bank_we[k]), .waddr(bank_waddr[k]), .wdata(bank_wdata[k])
    );
  end

  // ---- readout with quantization -----------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin

      rd_lane_q <= '0;
    end else begin

      rd_lane_q <= rd_lane;
    end
  end

  logic signed [PSUM_W+16-1:0] scaled, rounded;
  always_comb begin
    psum_t s;
    s       = psum_t'(bank_rdata[rd_lane_q < 2'(MULTS) ? rd_lane_q : 2'd0]);
    scaled  = s * qmul;
    rounded = (qshift == 0) ? scaled
                            : ((scaled + ((PSUM_W+16)'(1) <<< (qshift - 1))) >>> qshift);
    if (rounded > 127)       q_out = 8'sd127;
    else if (rounded < -128) q_out = -8'sd128;
    else                     q_out = act_t'(rounded);
  end

  a_no_early_use: assert property (@(posedge clk) disable iff (!rst_n)
    init |-> !(in.valid || rd_en));
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
    rd_en |-> !(in.valid || s1_valid));
endmodule
