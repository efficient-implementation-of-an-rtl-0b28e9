// ve_is: input-stationary vector engine (VE_I).
//
// LANES multipliers each hold one element of an input row (the stationary
// operand, captured when `load` is high). Every cycle with `en` high a weight
// vector w[0..LANES-1] (one column of a weight matrix, stored transposed in
// the weight memory) is multiplied lane by lane with the held row and summed
// by an adder tree, giving one dot product per cycle. The result is
// registered: `dot` and `dot_valid` appear one cycle after `en`.
//
// The lane structure (held row element, multiplier per lane, adder tree) is the
// accelerator's; the single output register and the balanced tree written as
// a recursive halving sum are this design's choices. Lanes above `n_act` are
// not used by the caller and must be driven with zero weights or zero inputs.
module ve_is
  import loc_pkg::*;
#(
  parameter int unsigned LANES = 46
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  load,                // capture x_in as the stationary row
  input  q_t    x_in [LANES],
  input  logic  en,                  // a weight vector is present
  input  q_t    w_in [LANES],
  output acc_t  dot,                 // Q16.16 dot product
  output logic  dot_valid
);
  q_t x_hold [LANES];
  localparam int unsigned P2 = 1 << $clog2(LANES);

  // products padded to a power of two, summed by a binary adder tree
  acc_t tree [2*P2-1];
  always_comb begin
    for (int i = 0; i < int'(P2); i++)
      tree[P2-1+i] = (i < int'(LANES)) ? acc_t'(x_hold[i]) * acc_t'(w_in[i]) : '0;
    for (int i = int'(P2) - 2; i >= 0; i--)
      tree[i] = tree[2*i+1] + tree[2*i+2];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(LANES); i++) x_hold[i] <= '0;
      dot       <= '0;
      dot_valid <= 1'b0;
    end else begin
      if (load) x_hold <= x_in;
      dot_valid <= en;
      if (en) dot <= tree[0];
    end
  end
endmodule
