// tb_fcnn_unit: runs max-pooling and the FCNN at full size (128 x 46 input,
// 1536 pooled values, 32 hidden, 2 outputs) on random encoder outputs and
// weights, including negative hidden sums so the leaky ReLU's negative
// branch is used, and compares (x, y) with the bit-exact reference
// (tb_ref_pkg::ref_fcnn). The run must take between 1536 and 2200 cycles.
`timescale 1ns/1ps
module tb_fcnn_unit;
  import loc_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, done;
  logic [6:0] x_raddr;
  q_t x_rdata [D_MODEL];
  logic [10:0] f_addr;
  q_t f_data [D_HID];
  q_t pos [D_OUT];
  fcnn_unit dut (.*);
  int checks = 0, failures = 0;
  mat_t X;
  fcw_t W;
  always @(posedge clk) begin
    for (int k = 0; k < D_MODEL; k++) x_rdata[k] <= q_t'(X[x_raddr][k]);
    for (int k = 0; k < D_HID; k++) f_data[k] <= q_t'(W[f_addr][k]);
  end
  initial begin
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    start = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 6; run++) begin
      int cyc;
      int p [D_OUT];
      for (int t = 0; t < FC_WORDS; t++)
        for (int k = 0; k < D_HID; k++)
          W[t][k] = (t < FOFF_B1) ? rnd(-8, 8) : (t == FOFF_B1) ? rnd(-400, 400) : rnd(-300, 300);
      for (int i = 0; i < N_TOK; i++) for (int k = 0; k < D_MODEL; k++) X[i][k] = rnd(-300, 300);
      ref_fcnn(X, W, p);
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks += 3;
      if (int'(pos[0]) != p[0] || int'(pos[1]) != p[1]) begin failures++; $display("run %0d pos (%0d,%0d) exp (%0d,%0d)", run, pos[0], pos[1], p[0], p[1]); end
      if (cyc < FC_IN || cyc > 2200) begin failures++; $display("cycles %0d", cyc); end
      @(negedge clk);
      if (int'(pos[0]) != p[0]) failures++;
      $display("run %0d: pos (%0d,%0d), %0d cycles", run, pos[0], pos[1], cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
