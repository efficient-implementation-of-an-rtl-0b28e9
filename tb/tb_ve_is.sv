// tb_ve_is: checks the input-stationary vector engine at 46 lanes.
// A random row is loaded, then random weight vectors are streamed one per
// cycle; each dot product must appear exactly one cycle after its weights,
// equal to the sum of lane products computed here. The row is reloaded
// several times to check that it stays stationary between loads.
`timescale 1ns/1ps
module tb_ve_is;
  import loc_pkg::*;
  import tb_ref_pkg::*;
  localparam int L = 46;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load, en, dot_valid;
  q_t x_in [L], w_in [L];
  acc_t dot;
  ve_is #(.LANES(L)) dut (.*);
  int checks = 0, failures = 0;
  longint exp_q [$];
  int xr [L];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // compare on every cycle: dot_valid must follow en by exactly one cycle
  logic en_d;
  always @(posedge clk) begin
    en_d <= en;
    if (rst_n) begin
      if (dot_valid !== en_d) begin failures++; $display("dot_valid timing"); end
    end
  end

  initial begin
    load = 0; en = 0;
    for (int k = 0; k < L; k++) begin x_in[k] = '0; w_in[k] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 20; r++) begin
      @(negedge clk);
      load = 1; en = 0;
      for (int k = 0; k < L; k++) begin xr[k] = rnd(-32768, 32767); x_in[k] = q_t'(xr[k]); end
      @(negedge clk);
      load = 0;
      for (int k = 0; k < L; k++) x_in[k] = q_t'(rnd(-100, 100));   // must be ignored
      for (int j = 0; j < 50; j++) begin
        automatic longint s = 0;
        en = ($urandom % 4) != 0;
        for (int k = 0; k < L; k++) begin
          automatic int wv = rnd(-32768, 32767);
          w_in[k] = q_t'(wv);
          s += longint'(xr[k]) * wv;
        end
        @(negedge clk);
        if (en) begin
          checks++;
          if (!dot_valid || dot != acc_t'(s)) begin
            failures++;
            $display("row %0d col %0d: dot %0d exp %0d", r, j, dot, s);
          end
        end
      end
      en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
