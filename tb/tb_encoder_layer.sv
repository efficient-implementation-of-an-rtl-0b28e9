// tb_encoder_layer: runs one full-size encoder layer (attention, internal X1
// buffer, FFN) over a shared X buffer model and weight memory model with two
// read ports, both with one-cycle read latency, and compares the X buffer
// after the run with the bit-exact reference FFN(X + MHA(X)) from
// tb_ref_pkg. Run 0 enables row skipping with a random mask, run 1 is dense.
// Checks the attended-row count and that the run takes the attention time
// plus the FFN time (between the ideal counts and 8 % above).
`timescale 1ns/1ps
module tb_encoder_layer;
  import loc_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, mask_en, done, x_we;
  logic [N_TOK-1:0] row_mask;
  logic [6:0] x_raddr, x_waddr;
  q_t x_rdata [D_MODEL], x_wdata [D_MODEL];
  logic [8:0] wa_addr, wb_addr;
  q_t wa_data [MAX_LANES], wb_data [MAX_LANES];
  logic [7:0] n_attn_rows;
  encoder_layer dut (.*);
  int checks = 0, failures = 0;
  mat_t X, X1, Y;
  encw_t W;
  mask_t mask;
  always @(posedge clk) begin
    for (int k = 0; k < D_MODEL; k++) x_rdata[k] <= q_t'(X[x_raddr][k]);
    for (int k = 0; k < MAX_LANES; k++) begin
      wa_data[k] <= q_t'(W[wa_addr][k]);
      wb_data[k] <= q_t'(W[wb_addr][k]);
    end
    if (x_we) for (int k = 0; k < D_MODEL; k++) X[x_waddr][k] = int'(x_wdata[k]);
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
      rand_enc(W, 107 + 30 * run);
      for (int i = 0; i < N_TOK; i++) begin
        mask[i] = ($urandom % 2) == 0;
        row_mask[i] = mask[i];
        for (int k = 0; k < D_MODEL; k++) X[i][k] = rnd(0, 255);
      end
      mask_en = (run == 0);
      ref_mha(X, W, mask_en, mask, X1, n_attn);
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
          if (X[i][k] != Y[i][k]) begin failures++; $display("run %0d row %0d col %0d: %0d exp %0d", run, i, k, X[i][k], Y[i][k]); break; end
      end
      ideal = n_attn * (3 * D_MODEL + 4 * N_TOK) + N_TOK * D_MODEL + N_TOK * (D_FF + D_MODEL);
      $display("run %0d: %0d rows attended, %0d cycles (ideal %0d)", run, n_attn, cyc, ideal);
      checks += 2;
      if (int'(n_attn_rows) != n_attn) begin failures++; $display("attended %0d exp %0d", n_attn_rows, n_attn); end
      if (cyc < ideal || real'(cyc) > 1.08 * real'(ideal)) begin failures++; $display("cycle count out of range"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
