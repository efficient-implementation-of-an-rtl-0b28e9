// tb_maxpool_row: random rows (including all-negative groups, where the zero
// padding of the last group wins) are pooled and compared with a direct
// computation of the 12 group maxima over the zero-padded 48 features.
`timescale 1ns/1ps
module tb_maxpool_row;
  import loc_pkg::*;
  import tb_ref_pkg::*;
  q_t x [D_MODEL];
  q_t y [POOL_W];
  maxpool_row dut (.*);
  int checks = 0, failures = 0;
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int r = 0; r < 300; r++) begin
      int xv [D_MODEL];
      for (int k = 0; k < D_MODEL; k++) begin
        xv[k] = (r % 3 == 0) ? rnd(-32768, -1) : rnd(-32768, 32767);
        x[k] = q_t'(xv[k]);
      end
      #1;
      for (int g = 0; g < POOL_W; g++) begin
        automatic int m = -40000;
        for (int k = g*4; k < g*4 + 4; k++) m = (k < D_MODEL) ? ((xv[k] > m) ? xv[k] : m) : ((0 > m) ? 0 : m);
        checks++;
        if (int'(y[g]) != m) begin failures++; $display("row %0d group %0d: %0d exp %0d", r, g, y[g], m); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
