// mnf_weight_sram: single-port weight memory of one PE.
//
// Stands in for the low-leakage single-port SRAM macro the specification
// gives each PE (691.2 KB). One word holds the 27 8-bit weights that the 27
// multipliers of the PE use in one cycle (216 bits). Written as an array so it
// simulates and synthesizes as a memory; the macro's clock gating is
// represented by the chip enable `ce`: nothing happens when it is low.
//
// Timing: a read (ce=1, we=0) returns the word on rdata one cycle later; a
// write (ce=1, we=1) stores wdata at the clock edge. rdata holds its value
// until the next read.
module mnf_weight_sram #(
  parameter int DEPTH = mnf_pkg::WDEPTH,
  parameter int WIDTH = mnf_pkg::WWORD_W
) (
  input  logic                     clk,
  input  logic                     ce,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [WIDTH-1:0]         wdata,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (ce) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
