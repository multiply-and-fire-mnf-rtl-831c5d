// mnf_core: the core of a processing element.
//
// Load module -> dispatcher -> MAC cluster -> activation module, joined by
// circular FIFOs in a decoupled access/execute arrangement: input events wait
// in the event FIFO, the load module's work items wait in the item FIFO while
// their weights are being read, and fired events wait in the output FIFO for
// the router interface. The weight memory interface and the weight SRAM sit
// outside the core (in the PE); the core's rd_* port requests weight words
// and its w_* port receives them in order.
//
// Status outputs report, per cycle, the multiplications done, the bypasses
// taken, the stall reasons and the fired and dropped values, for counters.
module mnf_core
  import mnf_pkg::*;
#(
  parameter int EV_DEPTH  = 4,
  parameter int IT_DEPTH  = 4,
  parameter int OUT_DEPTH = 4,
  parameter int ACC_DEPTH = ADEPTH
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_t               cfg,
  // input events from the router interface
  input  logic               ev_valid,
  output logic               ev_ready,
  input  event_t             ev,
  // weight read requests / weight words
  output logic               rd_valid,
  input  logic               rd_ready,
  output logic [WADDR_W-1:0] rd_addr,
  input  logic               w_valid,
  output logic               w_ready,
  input  logic [WWORD_W-1:0] w_data,
  // fired events to the router interface
  output logic               out_valid,
  input  logic               out_ready,
  output event_t             out_ev,
  // status
  output logic [4:0]         st_n_mac,
  output logic [3:0]         st_n_bypass,
  output logic               st_stall_weight,
  output logic               st_stall_drain,
  output logic               st_fired,
  output logic               st_dropped,
  output logic               st_pooled,
  output logic               st_busy
);
  // input event FIFO
  logic   e_valid, e_ready;
  event_t e_ev;
  mnf_fifo #(.T(event_t), .DEPTH(EV_DEPTH)) u_ev_fifo (
    .clk, .rst_n,
    .in_valid(ev_valid), .in_ready(ev_ready), .in_data(ev),
    .out_valid(e_valid), .out_ready(e_ready), .out_data(e_ev), .count()
  );

  // load module
  logic     li_valid, li_ready;
  ld_item_t li;
  mnf_load_module u_load (
    .clk, .rst_n, .cfg,
    .ev_valid(e_valid), .ev_ready(e_ready), .ev(e_ev),
    .rd_valid, .rd_ready, .rd_addr,
    .it_valid(li_valid), .it_ready(li_ready), .it(li)
  );

  // item FIFO
  logic     di_valid, di_ready;
  ld_item_t di;
  mnf_fifo #(.T(ld_item_t), .DEPTH(IT_DEPTH)) u_it_fifo (
    .clk, .rst_n,
    .in_valid(li_valid), .in_ready(li_ready), .in_data(li),
    .out_valid(di_valid), .out_ready(di_ready), .out_data(di), .count()
  );

  // dispatcher + MAC cluster
  mac_item_t          mac_in [NUM_MAC];
  logic               mac_busy, mac_ready, drain_start, drain_done;
  logic [NUM_MAC-1:0] rd_en;
  logic [AADDR_W-1:0] rd_local [NUM_MAC];
  logic [1:0]         rd_lane;
  act_t               q_out [NUM_MAC];

  mnf_dispatcher u_disp (
    .clk, .rst_n, .cfg,
    .it_valid(di_valid), .it_ready(di_ready), .it(di),
    .w_valid, .w_ready, .w_data,
    .mac_in, .mac_busy, .mac_ready,
    .drain_start, .drain_done,
    .stall_weight(st_stall_weight), .stall_drain(st_stall_drain)
  );

  mnf_mac_cluster #(.NMOD(NUM_MAC), .DEPTH(ACC_DEPTH)) u_macs (
    .clk, .rst_n,
    .in(mac_in), .busy(mac_busy), .ready(mac_ready),
    .rd_en, .rd_local, .rd_lane,
    .qmul(cfg.qmul), .qshift(cfg.qshift),
    .q_out,
    .n_mac(st_n_mac), .n_bypass(st_n_bypass)
  );

  // activation module + output FIFO
  logic   a_valid, a_ready;
  event_t a_ev;
  mnf_activation u_act (
    .clk, .rst_n, .cfg,
    .drain_start, .drain_done,
    .rd_en, .rd_local, .rd_lane, .q_in(q_out),
    .ev_valid(a_valid), .ev_ready(a_ready), .ev(a_ev),
    .st_fired, .st_dropped, .st_pooled
  );

  logic [$clog2(OUT_DEPTH+1)-1:0] ocount;
  mnf_fifo #(.T(event_t), .DEPTH(OUT_DEPTH)) u_out_fifo (
    .clk, .rst_n,
    .in_valid(a_valid), .in_ready(a_ready), .in_data(a_ev),
    .out_valid, .out_ready, .out_data(out_ev), .count(ocount)
  );

  assign st_busy = e_valid || di_valid || mac_busy || (ocount != '0) || w_valid;
endmodule
