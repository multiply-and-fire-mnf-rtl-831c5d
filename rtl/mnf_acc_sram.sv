// mnf_acc_sram: two-port partial-sum memory (one bank of the accumulate SRAM).
//
// The accumulate SRAM of a PE holds 32-bit partial sums and supports a read
// and a write in the same cycle. This design splits the 67.5 KB of a PE into
// 27 banks of 625 words, one behind each multiplier, so that the three lanes
// of a MAC module can each do a read-modify-write every cycle.
//
// Timing: re at edge t returns mem[raddr] on rdata after that edge; a write
// at the same edge to the same address is not seen (old data is returned).
// rdata holds until the next read. The chip enables (re, we) stand for the
// clock gating of the macro.
module mnf_acc_sram #(
  parameter int DEPTH = mnf_pkg::ADEPTH,
  parameter int WIDTH = mnf_pkg::PSUM_W
) (
  input  logic                     clk,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we) mem[waddr] <= wdata;
  end
endmodule
