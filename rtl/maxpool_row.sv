// maxpool_row: max-pooling of one token row before the FCNN.
//
// The row of D_MODEL features is padded with zeros to POOL_W * POOL_K
// features (46 + 2 = 48) and split into POOL_W groups of POOL_K neighbours;
// each output is the largest value of its group. Purely combinational.
// Pooling by 4 along the feature axis with zero padding, giving 12 values per
// token and 1536 per snapshot, is the model's.
module maxpool_row
  import loc_pkg::*;
(
  input  q_t x [D_MODEL],
  output q_t y [POOL_W]
);
  q_t padded [POOL_W*POOL_K];
  always_comb begin
    for (int k = 0; k < int'(POOL_W*POOL_K); k++) padded[k] = '0;
    for (int k = 0; k < int'(D_MODEL); k++) padded[k] = x[k];
    for (int g = 0; g < int'(POOL_W); g++) begin
      y[g] = padded[g*POOL_K];
      for (int k = 1; k < int'(POOL_K); k++)
        if (padded[g*POOL_K+k] > y[g]) y[g] = padded[g*POOL_K+k];
    end
  end
endmodule
