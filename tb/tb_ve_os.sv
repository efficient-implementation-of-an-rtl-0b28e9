// tb_ve_os: checks the output-stationary vector engine at 32 PEs.
// Random inputs are broadcast with random per-PE weights for sums of random
// length; `clr` with `en` starts a new sum. After each sum the PE
// accumulators must hold the exact dot products computed here, one cycle
// after the last input.
`timescale 1ns/1ps
module tb_ve_os;
  import loc_pkg::*;
  import tb_ref_pkg::*;
  localparam int L = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr, en;
  q_t x, w [L];
  acc_t acc [L];
  ve_os #(.LANES(L)) dut (.*);
  int checks = 0, failures = 0;
  longint ref_acc [L];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clr = 0; en = 0; x = '0;
    for (int k = 0; k < L; k++) w[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 30; r++) begin
      automatic int n = rnd(1, 200);
      for (int k = 0; k < L; k++) ref_acc[k] = 0;
      for (int t = 0; t < n; t++) begin
        automatic int xv = rnd(-32768, 32767);
        en = 1; clr = (t == 0); x = q_t'(xv);
        for (int k = 0; k < L; k++) begin
          automatic int wv = rnd(-32768, 32767);
          w[k] = q_t'(wv);
          ref_acc[k] += longint'(xv) * wv;
        end
        @(negedge clk);
        // idle cycles in between must not change the sums
        if (($urandom % 5) == 0) begin en = 0; clr = 0; @(negedge clk); end
      end
      en = 0; clr = 0;
      @(negedge clk);
      for (int k = 0; k < L; k++) begin
        checks++;
        if (acc[k] != acc_t'(ref_acc[k])) begin failures++; $display("sum %0d PE %0d: %0d exp %0d", r, k, acc[k], ref_acc[k]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
