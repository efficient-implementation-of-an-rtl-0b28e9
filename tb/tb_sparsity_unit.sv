// tb_sparsity_unit: streams snapshots of 128 rows with a random mix of dense
// rows and rows with a chosen number of sub-threshold elements, for each of
// the three scenario threshold pairs (0.039/41, 0.014/1, 0.006/28 in Q8.8),
// and checks the row mask (Z_i > T_r), the skipped-row count, and that
// `done` rises right after the 128th row. Rows with exactly T_r zeros test
// the strict comparison.
`timescale 1ns/1ps
module tb_sparsity_unit;
  import loc_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, row_valid, done;
  q_t te;
  logic [5:0] tr;
  q_t row [D_MODEL];
  logic [127:0] row_mask;
  logic [7:0] n_skipped;
  sparsity_unit #(.ROWS(128), .LANES(D_MODEL)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    bit exp_mask [128];
    int exp_n;
    start = 0; row_valid = 0; te = '0; tr = '0;
    for (int k = 0; k < D_MODEL; k++) row[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int snap = 0; snap < 9; snap++) begin
      automatic int sc = snap % 3;
      te = TE_DEF[sc]; tr = TR_DEF[sc];
      start = 1;
      @(negedge clk);
      start = 0;
      exp_n = 0;
      for (int i = 0; i < 128; i++) begin
        int nz;
        automatic int z = 0;
        case ($urandom % 4)
          0: nz = 0;
          1: nz = int'(tr);                      // exactly T_r zeros: kept
          2: nz = int'(tr) + 1;                  // one more: skipped
          default: nz = rnd(0, D_MODEL);
        endcase
        if (nz > D_MODEL) nz = D_MODEL;
        for (int k = 0; k < D_MODEL; k++) begin
          automatic int v = (k < nz) ? rnd(0, int'(te) - 1) : rnd(int'(te), 255);
          if (v < int'(te)) z++;
          row[k] = q_t'(v);
        end
        exp_mask[i] = (z > int'(tr));
        if (exp_mask[i]) exp_n++;
        row_valid = 1;
        if ($urandom % 3 == 0) begin @(negedge clk); row_valid = 0; end
        @(negedge clk);
        row_valid = 0;
        checks++;
        if (done != (i == 127)) begin failures++; $display("done at row %0d", i); end
      end
      for (int i = 0; i < 128; i++) begin
        checks++;
        if (row_mask[i] != exp_mask[i]) begin failures++; $display("snap %0d row %0d mask %0d exp %0d", snap, i, row_mask[i], exp_mask[i]); end
      end
      checks++;
      if (int'(n_skipped) != exp_n) begin failures++; $display("skipped %0d exp %0d", n_skipped, exp_n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
