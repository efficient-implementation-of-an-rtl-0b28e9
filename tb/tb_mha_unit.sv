// tb_mha_unit: runs the attention unit at full size (128 x 46, two heads) on
// random inputs with a random row mask, once with row skipping enabled and
// once disabled, and compares every X1 = X + MHA(X) row written with the
// bit-exact reference (tb_ref_pkg::ref_mha). X and the weight memory are
// modelled here with one-cycle read latency. Also checks the number of
// attended rows and the run time: it must lie between the ideal row count
// N_active * (138 + 2*2*128) + 128 * 46 cycles and 6 % above it.
`timescale 1ns/1ps
module tb_mha_unit;
  import loc_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, mask_en, done, x1_we;
  logic [N_TOK-1:0] row_mask;
  logic [6:0] x_raddr, x1_waddr;
  q_t x_rdata [D_MODEL], x1_wdata [D_MODEL];
  logic [8:0] w_addr;
  q_t w_data [MAX_LANES];
  logic [7:0] n_attn_rows;
  mha_unit dut (.*);

  int checks = 0, failures = 0;
  mat_t X, X1, got;
  encw_t W;
  mask_t mask;
  always @(posedge clk) begin
    for (int k = 0; k < D_MODEL; k++) x_rdata[k] <= q_t'(X[x_raddr][k]);
    for (int k = 0; k < MAX_LANES; k++) w_data[k] <= q_t'(W[w_addr][k]);
    if (x1_we) for (int k = 0; k < D_MODEL; k++) got[x1_waddr][k] = int'(x1_wdata[k]);
  end
  initial begin
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    start = 0; mask_en = 0; row_mask = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      int n_attn, cyc, ideal;
      rand_enc(W, 107 + 40 * run);
      for (int i = 0; i < N_TOK; i++) begin
        mask[i] = ($urandom % 3) == 0;
        row_mask[i] = mask[i];
        for (int k = 0; k < D_MODEL; k++) X[i][k] = rnd(0, 255);
      end
      mask_en = (run == 0);
      ref_mha(X, W, mask_en, mask, X1, n_attn);
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
          if (got[i][k] != X1[i][k]) begin failures++; $display("run %0d row %0d col %0d: %0d exp %0d", run, i, k, got[i][k], X1[i][k]); break; end
      end
      ideal = n_attn * (3 * D_MODEL + 4 * N_TOK) + N_TOK * D_MODEL;
      $display("run %0d: %0d rows attended, %0d cycles (ideal %0d)", run, n_attn, cyc, ideal);
      checks += 2;
      if (int'(n_attn_rows) != n_attn) begin failures++; $display("attended %0d exp %0d", n_attn_rows, n_attn); end
      if (cyc < ideal || real'(cyc) > 1.06 * real'(ideal)) begin failures++; $display("cycle count out of range"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
