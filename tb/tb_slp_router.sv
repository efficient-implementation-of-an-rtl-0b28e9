// tb_slp_router: runs the router on random 128-value feature vectors with
// random weights and biases held in a memory model with one-cycle read
// latency. The logits y = W x + b (accumulated in Q16.16, then shifted and
// saturated) and the argmax label are computed here and compared; input
// gaps test that accumulation follows x_valid. The label must appear three
// cycles after the last feature.
`timescale 1ns/1ps
module tb_slp_router;
  import loc_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, x_valid, label_valid;
  q_t x;
  logic [7:0] w_addr;
  q_t w_data [N_SCEN];
  scen_e label;
  q_t logits [N_SCEN];
  slp_router #(.N_IN(128)) dut (.*);
  int checks = 0, failures = 0;
  int W [129][3];
  always @(posedge clk) for (int c = 0; c < 3; c++) w_data[c] <= q_t'(W[w_addr][c]);
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int hist [3] = '{0, 0, 0};
    start = 0; x_valid = 0; x = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 30; r++) begin
      int xv [128];
      int y [3];
      int best, lat;
      for (int t = 0; t < 129; t++) for (int c = 0; c < 3; c++) W[t][c] = rnd(-300, 300);
      for (int t = 0; t < 128; t++) xv[t] = rnd(0, 400);
      for (int c = 0; c < 3; c++) begin
        automatic longint acc = 0;
        for (int t = 0; t < 128; t++) acc += longint'(xv[t]) * W[t][c];
        y[c] = sat((acc >>> 8) + W[128][c]);
      end
      best = 0;
      for (int c = 1; c < 3; c++) if (y[c] > y[best]) best = c;
      hist[best]++;
      start = 1;
      @(negedge clk);
      start = 0;
      for (int t = 0; t < 128; t++) begin
        x_valid = 1; x = q_t'(xv[t]);
        @(negedge clk);
        x_valid = 0;
        if (t < 127 && $urandom % 4 == 0) @(negedge clk);
      end
      lat = 0;
      while (!label_valid && lat < 20) begin @(negedge clk); lat++; end
      checks += 5;
      if (lat != 2) begin failures++; $display("label latency %0d", lat + 1); end
      if (int'(label) != best) begin failures++; $display("run %0d label %0d exp %0d", r, label, best); end
      for (int c = 0; c < 3; c++)
        if (int'(logits[c]) != y[c]) begin failures++; $display("run %0d logit %0d: %0d exp %0d", r, c, logits[c], y[c]); end
      @(negedge clk);
    end
    checks++;
    if (hist[0] == 0 || hist[1] == 0 || hist[2] == 0) begin failures++; $display("not all classes seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
