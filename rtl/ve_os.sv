// ve_os: output-stationary vector engine (VE_O).
//
// LANES processing elements, each a multiplier feeding an accumulator register
// (x * w + acc -> acc). One input value `x` is broadcast to every PE each
// cycle with `en` high, together with a per-PE weight w[k]; PE k keeps its
// partial sum locally until the caller reads `acc` and clears it with `clr`.
// `clr` and `en` in the same cycle start a new sum with the current product.
// Accumulation takes one cycle: `acc` holds the sum of everything presented
// up to the previous clock edge.
//
// The PE (multiplier, adder, accumulator register) and the broadcast of one
// input over parallel PEs follow the accelerator's router and FCNN engines;
// the clear/enable handshake is this design's choice.
module ve_os
  import loc_pkg::*;
#(
  parameter int unsigned LANES = 32
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  logic en,
  input  q_t   x,
  input  q_t   w [LANES],
  output acc_t acc [LANES]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(LANES); k++) acc[k] <= '0;
    end else begin
      for (int k = 0; k < int'(LANES); k++) begin
        if (en)       acc[k] <= (clr ? acc_t'(0) : acc[k]) + acc_t'(x) * acc_t'(w[k]);
        else if (clr) acc[k] <= '0;
      end
    end
  end
endmodule
