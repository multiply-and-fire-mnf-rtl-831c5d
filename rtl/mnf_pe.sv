// mnf_pe: one processing element of the accelerator.
//
// Router interface + core + weight memory interface + weight SRAM. The
// partial-sum SRAMs live inside the MAC modules of the core. Everything a
// layer needs stays in the PE: weights are loaded once by the host through
// the wl_* port, partial sums never leave it, and only fired events cross the
// network. MY_ID is the PE's bit in the network's destination masks.
//
// Configuration (cfg) is a static record the host sets before a layer starts.
module mnf_pe
  import mnf_pkg::*;
#(
  parameter int MY_ID     = 0,
  parameter int W_DEPTH   = WDEPTH,
  parameter int ACC_DEPTH = ADEPTH
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_t               cfg,
  // network
  input  logic               net_in_valid,
  output logic               net_in_ready,
  input  flit_t              net_in,
  output logic               net_out_valid,
  input  logic               net_out_ready,
  output flit_t              net_out,
  // host weight load
  input  logic               wl_valid,
  input  logic [WADDR_W-1:0] wl_addr,
  input  logic [WWORD_W-1:0] wl_data,
  // status
  output logic [4:0]         st_n_mac,
  output logic               st_busy
);
  logic   c_valid, c_ready, a_valid, a_ready;
  event_t c_ev, a_ev;
  logic   st_forwarded;

  mnf_router_if #(.MY_ID(MY_ID)) u_rif (
    .clk, .rst_n, .cfg,
    .net_in_valid, .net_in_ready, .net_in,
    .net_out_valid, .net_out_ready, .net_out,
    .core_valid(c_valid), .core_ready(c_ready), .core_ev(c_ev),
    .act_valid(a_valid), .act_ready(a_ready), .act_ev(a_ev),
    .st_forwarded
  );

  logic               rd_valid, rd_ready, w_valid, w_ready;
  logic [WADDR_W-1:0] rd_addr;
  logic [WWORD_W-1:0] w_data;
  logic [3:0]         st_n_bypass;
  logic               st_stall_weight, st_stall_drain, st_fired, st_dropped, st_pooled;

  mnf_core #(.ACC_DEPTH(ACC_DEPTH)) u_core (
    .clk, .rst_n, .cfg,
    .ev_valid(c_valid), .ev_ready(c_ready), .ev(c_ev),
    .rd_valid, .rd_ready, .rd_addr,
    .w_valid, .w_ready, .w_data,
    .out_valid(a_valid), .out_ready(a_ready), .out_ev(a_ev),
    .st_n_mac, .st_n_bypass, .st_stall_weight, .st_stall_drain,
    .st_fired, .st_dropped, .st_pooled, .st_busy
  );

  logic               sram_ce, sram_we;
  logic [WADDR_W-1:0] sram_addr;
  logic [WWORD_W-1:0] sram_wdata, sram_rdata;

  mnf_weight_mem_if u_wmif (
    .clk, .rst_n,
    .wl_valid, .wl_addr, .wl_data,
    .rd_valid, .rd_ready, .rd_addr,
    .w_valid, .w_ready, .w_data,
    .sram_ce, .sram_we, .sram_addr, .sram_wdata, .sram_rdata
  );

  mnf_weight_sram #(.DEPTH(W_DEPTH)) u_wsram (
    .clk, .ce(sram_ce), .we(sram_we),
    .addr(sram_addr[$clog2(W_DEPTH)-1:0]), .wdata(sram_wdata), .rdata(sram_rdata)
  );
endmodule
