// mnf_fifo: circular FIFO used between the modules of a PE.
//
// The PE core follows a decoupled access/execute organisation: the load
// module, weight memory interface, dispatcher, activation module and router
// interface never talk directly but through small circular FIFOs, so one of
// them can keep working while another is stalled. The paper names these
// FIFOs; depth and handshake are this design's choice.
//
// Interface: push side valid/ready (in_valid, in_ready, in_data); pop side
// valid/ready (out_valid, out_ready, out_data). A push and a pop may occur in
// the same cycle. out_data is the head entry, read combinationally from the
// storage array; there is no bypass from input to output, so an entry is
// visible one cycle after it is written. `count` gives the fill level.
module mnf_fifo #(
  parameter type T     = logic [7:0],
  parameter int  DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T               mem [DEPTH];
  logic [PW-1:0]  wp, rp;
  logic [$clog2(DEPTH+1)-1:0] cnt;

  logic do_push, do_pop;
  assign in_ready  = (cnt != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (cnt != '0);
  assign do_push   = in_valid && in_ready;
  assign do_pop    = out_valid && out_ready;
  assign out_data  = mem[rp];
  assign count     = cnt;

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (do_push) wp <= inc(wp);
      if (do_pop)  rp <= inc(rp);
      case ({do_push, do_pop})
        2'b10:   cnt <= cnt + 1'b1;
        2'b01:   cnt <= cnt - 1'b1;
        default: cnt <= cnt;
      endcase
    end
  end

  // A push is never accepted while full, a pop never while empty.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    do_push |-> (cnt < DEPTH[$clog2(DEPTH+1)-1:0] || do_pop));
endmodule
