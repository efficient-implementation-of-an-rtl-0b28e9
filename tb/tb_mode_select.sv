// tb_mode_select: feeds long random label sequences (runs of one scenario
// with stray labels mixed in) and compares the selected mode after every
// label with a majority vote over the last five labels computed here (ties
// to the lower class, only labels seen so far counted). Also counts how
// often a stray label was suppressed and how often the mode switched, and
// checks the one-cycle mode_valid timing.
`timescale 1ns/1ps
module tb_mode_select;
  import loc_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic label_valid, mode_valid;
  scen_e label, mode;
  mode_select #(.WINDOW(5)) dut (.*);
  int checks = 0, failures = 0;
  int win [$];
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int cur = 0, suppressed = 0, switches = 0, prev = 0;
    label_valid = 0; label = SCEN_S1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      int l, cnt [3], best;
      if ($urandom % 12 == 0) cur = rnd(0, 2);
      l = ($urandom % 5 == 0) ? rnd(0, 2) : cur;
      win.push_front(l);
      if (win.size() > 5) void'(win.pop_back());
      cnt = '{0, 0, 0};
      foreach (win[i]) cnt[win[i]]++;
      best = 0;
      for (int c = 1; c < 3; c++) if (cnt[c] > cnt[best]) best = c;
      label = scen_e'(l);
      label_valid = 1;
      @(negedge clk);
      label_valid = 0;
      checks++;
      if (mode_valid) begin failures++; $display("mode_valid too early"); end
      @(negedge clk);
      checks += 2;
      if (!mode_valid) begin failures++; $display("mode_valid missing"); end
      if (int'(mode) != best) begin failures++; $display("label %0d: mode %0d exp %0d", n, mode, best); end
      if (best != l) suppressed++;
      if (best != prev) switches++;
      prev = best;
      repeat (rnd(0, 3)) @(negedge clk);
    end
    $display("suppressed %0d switches %0d", suppressed, switches);
    checks++;
    if (suppressed == 0 || switches == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
