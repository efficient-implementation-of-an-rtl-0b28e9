// tb_row_buffer: random writes and reads of whole rows; each read must return,
// one cycle after its address, the last row written there (the old row when
// the same row is written in the same cycle).
`timescale 1ns/1ps
module tb_row_buffer;
  import loc_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we;
  logic [6:0] waddr, raddr;
  q_t wdata [D_MODEL], rdata [D_MODEL];
  row_buffer #(.ROWS(128), .LANES(D_MODEL)) dut (.*);
  int checks = 0, failures = 0;
  int model [128][D_MODEL];
  bit written [128];
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int exp_row [D_MODEL];
    bit exp_ok;
    we = 0; waddr = 0; raddr = 0;
    for (int k = 0; k < D_MODEL; k++) wdata[k] = '0;
    exp_ok = 0;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      // check the read issued in the previous cycle
      if (exp_ok) begin
        checks++;
        for (int k = 0; k < D_MODEL; k++)
          if (int'(rdata[k]) != exp_row[k]) begin failures++; $display("cycle %0d lane %0d: %0d exp %0d", c, k, rdata[k], exp_row[k]); break; end
      end
      raddr = 7'($urandom);
      exp_ok = written[raddr];
      exp_row = model[raddr];
      we = ($urandom % 2) == 1;
      waddr = ($urandom % 4 == 0) ? raddr : 7'($urandom);
      for (int k = 0; k < D_MODEL; k++) wdata[k] = q_t'(rnd(-32768, 32767));
      @(posedge clk);
      #1;
      if (we) begin
        written[waddr] = 1;
        for (int k = 0; k < D_MODEL; k++) model[waddr][k] = int'(wdata[k]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
