// row_buffer: activation buffer holding ROWS rows of LANES Q8.8 values.
//
// One whole row is written or read per cycle (one write port, one read port).
// The read is synchronous: `rdata` shows row `raddr` one cycle after the
// address is given. Reading and writing the same row in one cycle returns the
// old contents. The accelerator keeps its activations in on-chip memory in a
// contiguous layout; a row-wide word is this design's choice so that the
// vector engines can be loaded in one cycle.
module row_buffer
  import loc_pkg::*;
#(
  parameter int unsigned ROWS  = 128,
  parameter int unsigned LANES = 46
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(ROWS)-1:0]  waddr,
  input  q_t                       wdata [LANES],
  input  logic [$clog2(ROWS)-1:0]  raddr,
  output q_t                       rdata [LANES]
);
  q_t mem [ROWS][LANES];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
