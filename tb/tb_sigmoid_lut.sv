// tb_sigmoid_lut: checks every one of the 1025 table entries and the
// clamping beyond +-16. For each Q8.8 input the expected output is the
// sigmoid of the nearest 1/32 grid point, computed here with $exp and
// rounded to 1/256.
`timescale 1ns/1ps
module tb_sigmoid_lut;
  import loc_pkg::*;
  import tb_ref_pkg::*;
  q_t s;
  logic [8:0] a;
  sigmoid_lut dut (.*);
  int checks = 0, failures = 0;
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    // every grid point, plus neighbours either side
    for (int k = -4096 - 64; k <= 4096 + 64; k += 1) begin
      if ((k % 8) != 0 && ($urandom % 4) != 0) continue;
      s = q_t'(k);
      #1;
      checks++;
      if (int'(a) != sigm(k)) begin failures++; $display("s=%0d a=%0d exp %0d", k, a, sigm(k)); end
    end
    for (int k = 0; k < 200; k++) begin
      automatic int v = rnd(-32768, 32767);
      s = q_t'(v);
      #1;
      checks++;
      if (int'(a) != sigm(v)) begin failures++; $display("s=%0d a=%0d exp %0d", v, a, sigm(v)); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
