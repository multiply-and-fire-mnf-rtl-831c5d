// mnf_weight_mem_if: memory interface between the core and the weight SRAM.
//
// The load module sends weight-word read requests here (valid/ready); the
// interface drives the single-port weight SRAM and puts each returned
// 216-bit word into a small return FIFO that the dispatcher pops. Requests
// are accepted only when the FIFO is sure to have room for the word when it
// comes back (a credit check counting the word still in flight), so the SRAM
// never has to be stalled. A host write port loads the weights; a host write
// takes the single SRAM port and holds off reads in that cycle. The paper
// gives the interface its role; the credit scheme and the host port are this
// design's own.
//
// Timing: request accepted at edge t -> SRAM read at edge t -> word in the
// FIFO at edge t+1 -> visible to the dispatcher in cycle t+2.
module mnf_weight_mem_if
  import mnf_pkg::*;
#(
  parameter int RET_DEPTH = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  // host weight load
  input  logic                wl_valid,
  input  logic [WADDR_W-1:0]  wl_addr,
  input  logic [WWORD_W-1:0]  wl_data,
  // read requests from the load module
  input  logic                rd_valid,
  output logic                rd_ready,
  input  logic [WADDR_W-1:0]  rd_addr,
  // weight words to the dispatcher
  output logic                w_valid,
  input  logic                w_ready,
  output logic [WWORD_W-1:0]  w_data,
  // weight SRAM port
  output logic                sram_ce,
  output logic                sram_we,
  output logic [WADDR_W-1:0]  sram_addr,
  output logic [WWORD_W-1:0]  sram_wdata,
  input  logic [WWORD_W-1:0]  sram_rdata
);
  typedef logic [WWORD_W-1:0] word_t;

  logic inflight;
  logic [$clog2(RET_DEPTH+1)-1:0] fcount;
  logic fifo_in_ready;

  // room for one more word even counting the one in flight
  assign rd_ready = !wl_valid &&
                    (32'(fcount) + 32'(inflight) < RET_DEPTH);

  assign sram_ce    = wl_valid || (rd_valid && rd_ready);
  assign sram_we    = wl_valid;
  assign sram_addr  = wl_valid ? wl_addr : rd_addr;
  assign sram_wdata = wl_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= 1'b0;
    else        inflight <= rd_valid && rd_ready;
  end

  mnf_fifo #(.T(word_t), .DEPTH(RET_DEPTH)) u_ret (
    .clk, .rst_n,
    .in_valid (inflight), .in_ready (fifo_in_ready), .in_data (sram_rdata),
    .out_valid(w_valid),  .out_ready(w_ready),       .out_data(w_data),
    .count    (fcount)
  );

  a_credit: assert property (@(posedge clk) disable iff (!rst_n)
    inflight |-> fifo_in_ready);
endmodule
