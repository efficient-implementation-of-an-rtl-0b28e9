// tb_ffn_unit: runs the FFN unit at full size (128 rows, 46 -> 64 -> 46) on a
// random X1 buffer and weights and compares every row written back with the
// bit-exact reference X1 + W2 ReLU(W1 X1 + b1) + b2 (tb_ref_pkg::ref_ffn).
// Also checks the run time: 128 * (64 + 46) cycles ideal, at most 10 % more (9 pipeline cycles per row).
`timescale 1ns/1ps
module tb_ffn_unit;
  import loc_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, done, x_we;
  logic [6:0] x1_raddr, x_waddr;
  q_t x1_rdata [D_MODEL], x_wdata [D_MODEL];
  logic [8:0] w_addr;
  q_t w_data [MAX_LANES];
  ffn_unit dut (.*);
  int checks = 0, failures = 0;
  mat_t X1, Y, got;
  encw_t W;
  always @(posedge clk) begin
    for (int k = 0; k < D_MODEL; k++) x1_rdata[k] <= q_t'(X1[x1_raddr][k]);
    for (int k = 0; k < MAX_LANES; k++) w_data[k] <= q_t'(W[w_addr][k]);
    if (x_we) for (int k = 0; k < D_MODEL; k++) got[x_waddr][k] = int'(x_wdata[k]);
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
    for (int run = 0; run < 2; run++) begin
      int cyc;
      rand_enc(W, 107);
      for (int i = 0; i < N_TOK; i++) for (int k = 0; k < D_MODEL; k++) X1[i][k] = rnd(-400, 400);
      ref_ffn(X1, W, Y);
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      @(negedge clk);
      for (int i = 0; i < N_TOK; i++) begin
        checks++;
        for (int k = 0; k < D_MODEL; k++)
          if (got[i][k] != Y[i][k]) begin failures++; $display("run %0d row %0d col %0d: %0d exp %0d", run, i, k, got[i][k], Y[i][k]); break; end
      end
      $display("run %0d: %0d cycles", run, cyc);
      checks++;
      if (cyc < N_TOK * (D_FF + D_MODEL) || real'(cyc) > 1.10 * N_TOK * (D_FF + D_MODEL)) begin failures++; $display("cycle count out of range"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
