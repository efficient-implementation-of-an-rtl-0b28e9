// tb_control_unit: drives the sequencer through snapshots of every scenario
// with behavioural stand-ins for the router, sparsity unit, encoder and FCNN
// (each answers its start pulse with a done pulse after a random delay; the
// sparsity stand-in answers after the last row read).
// Checks per snapshot: 128 input rows accepted in order, the scenario taken
// from the mode decision, 128 sparsity reads in order, one encoder run per
// layer of the scenario (1 for S1, 2 for S2/S3) with the right weight
// segment and the row mask enabled only for layer 0, the X-port owner
// (`phase`) in each step, one FCNN run, one out_valid, and the reported
// latency equal to the cycles counted here.
`timescale 1ns/1ps
module tb_control_unit;
  import loc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, slp_start, mode_valid, sp_start, sp_rd, sp_done;
  logic enc_start, mask_en, enc_done, fc_start, fc_done, out_valid;
  logic [6:0] load_row, sp_raddr;
  scen_e mode, scen;
  logic [2:0] seg;
  logic [1:0] phase;
  logic [31:0] lat_cycles;
  control_unit dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // stand-ins: done pulses some cycles after the start pulses
  int n_enc, n_fc, n_sp, n_out, exp_layer;
  initial begin
    sp_done = 0; enc_done = 0; fc_done = 0;
    forever begin
      @(posedge clk);
      #1;
      if (sp_start) fork begin @(negedge sp_rd); repeat (2 + $urandom % 5) @(posedge clk); #1 sp_done = 1; @(posedge clk); #1 sp_done = 0; end join_none
      if (enc_start) fork begin repeat (10 + $urandom % 50) @(posedge clk); #1 enc_done = 1; @(posedge clk); #1 enc_done = 0; end join_none
      if (fc_start) fork begin repeat (10 + $urandom % 50) @(posedge clk); #1 fc_done = 1; @(posedge clk); #1 fc_done = 0; end join_none
    end
  end
  // monitor of per-snapshot behaviour
  scen_e want;
  int rd_next;
  always @(posedge clk) if (rst_n) begin
    if (sp_start) n_sp++;
    if (sp_rd) begin
      chk(sp_raddr == 7'(rd_next), "sparsity read order");
      chk(phase == 2'd0, "phase during sparsity");
      rd_next++;
    end
    if (enc_start) begin
      chk(scen == want, "scenario from mode decision");
      chk(seg == segment(want, 1'(n_enc)), $sformatf("segment %0d for layer %0d", seg, n_enc));
      chk(mask_en == (n_enc == 0), "mask enabled only for layer 0");
      chk(phase == 2'd1, "phase during encoder");
      n_enc++;
    end
    if (fc_start) begin
      chk(phase == 2'd2, "phase during FCNN");
      chk(seg == segment(want, 1'(n_layers(want) - 1)), "segment held for FCNN");
      n_fc++;
    end
    if (out_valid) n_out++;
  end

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    in_valid = 0; mode_valid = 0; mode = SCEN_S1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int snap = 0; snap < 9; snap++) begin
      int cyc, row;
      want = scen_e'(snap % 3);
      if (snap >= 6) want = scen_e'($urandom % 3);
      n_enc = 0; n_fc = 0; n_sp = 0; n_out = 0; rd_next = 0;
      // stream the rows, with gaps
      row = 0; cyc = 0;
      while (row < N_TOK) begin
        in_valid = ($urandom % 4) != 0;
        @(posedge clk);
        if (row > 0 || (in_valid && in_ready)) cyc++;
        if (in_valid && in_ready) begin
          chk(load_row == 7'(row), "load row order");
          row++;
        end
        @(negedge clk);
      end
      in_valid = 0;
      chk(!in_ready, "input closed after 128 rows");
      // mode decision after a few cycles
      repeat (4) begin @(negedge clk); cyc++; end
      mode = want; mode_valid = 1;
      @(negedge clk); cyc++;
      mode_valid = 0;
      while (!out_valid) begin @(negedge clk); cyc++; end
      chk(lat_cycles == 32'(cyc), $sformatf("latency %0d counted %0d", lat_cycles, cyc));
      @(negedge clk);
      chk(n_sp == 1 && rd_next == N_TOK, "one sparsity pass of 128 rows");
      chk(n_enc == int'(n_layers(want)), $sformatf("%0d encoder runs for scenario %0d", n_enc, want));
      chk(n_fc == 1 && n_out == 1, "one FCNN run and one result");
      chk(in_ready, "ready for the next snapshot");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
