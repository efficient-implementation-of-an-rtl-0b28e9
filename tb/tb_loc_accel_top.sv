// tb_loc_accel_top: end-to-end test of the localization accelerator at its
// full size (128 x 46 input, two-layer models, 1536-input FCNN).
//
// The testbench writes random model parameters for all five encoder segments,
// the three FCNN heads and the router into the accelerator, then streams nine
// snapshots through it. The router weights pick out the delay-bin-0 feature
// of every third beam for each class, so the testbench decides each
// snapshot's label by where it puts large values in that column. The label
// sequence S1 S1 S1 S2 S1 S2 S3 S3 S3 exercises: a transient label that the
// five-deep majority window suppresses, a model switch S1 -> S2 and S2 -> S3,
// the one-layer and the two-layer (folded) models, and row skipping (one
// snapshot has 83 of 128 rows, 65 %, below the S1 thresholds).
//
// For every snapshot an independent bit-exact model of the arithmetic (same
// Q8.8 rounding rules, sigmoid computed with $exp) predicts the router label,
// the selected scenario, the skipped-row count and the (x, y) output, and
// these are compared with the accelerator. Latency is checked too: a dense
// one-layer inference must take 1.06 ms at 100 MHz and a two-layer one
// 2.11 ms, within 5 %, and the 65 %-sparse one-layer snapshot must be between
// 1.8x and 2.3x faster than the dense one (2.08x reported for this case).
// Every mechanism (skip, transient suppression, switch, two-layer folding)
// is counted and must occur at least once.
`timescale 1ns/1ps
module tb_loc_accel_top;
  import loc_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        cfg_we;
  mem_sel_e    cfg_sel;
  logic [15:0] cfg_addr;
  q_t          cfg_data [MAX_LANES];
  q_t          te_cfg [N_SCEN];
  logic [5:0]  tr_cfg [N_SCEN];
  logic        in_valid, in_ready;
  q_t          in_row [D_MODEL];
  logic        out_valid;
  q_t          out_pos [D_OUT];
  scen_e       out_label, out_scen;
  logic [7:0]  out_skipped, out_attn_rows;
  logic [31:0] out_cycles;

  loc_accel_top dut (.*);

  int checks = 0, failures = 0;

  // ---------------- model parameters (as stored) ----------------
  int enc_w [N_SEG][ENC_WORDS][MAX_LANES];
  int fc_w  [N_SCEN][FC_WORDS][D_HID];
  int slp_w [SLP_WORDS][N_SCEN];
  int X [N_TOK][D_MODEL];      // working copy, overwritten by the reference model
  int X_in [N_TOK][D_MODEL];   // the snapshot as streamed into the accelerator

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom % 32'(hi - lo + 1));
  endfunction

  function automatic int sat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic int rq(longint acc);   // Q16.16 -> Q8.8
    return sat(acc >>> 8);
  endfunction

  function automatic int sigm(int s);
    int idx;
    real x;
    idx = (s + 4100) >>> 3;
    if (idx < 0) idx = 0;
    if (idx > 1024) idx = 1024;
    x = real'(idx) / 32.0 - 16.0;
    return int'($floor(256.0 / (1.0 + $exp(-x)) + 0.5));
  endfunction

  // ---------------- reference model ----------------
  // loop bounds held in variables so that the model is not unrolled
  int nt, nd, nh, ndh, nff, nhid, nfc, npw;
  initial begin
    nt = N_TOK; nd = D_MODEL; nh = N_HEADS; ndh = D_HEAD; nff = D_FF;
    nhid = D_HID; nfc = FC_IN; npw = POOL_W;
  end
  int ref_label, ref_scen, ref_skipped, ref_pos [2];
  int win [$];

  task automatic ref_encoder(int seg, bit mask_en, bit mask [N_TOK]);
    int Q [N_TOK][D_MODEL], K [N_TOK][D_MODEL], V [N_TOK][D_MODEL];
    int X1 [N_TOK][D_MODEL];
    int av [D_MODEL], a [N_TOK], hh [D_FF];
    int scale, bias;
    longint acc;
    scale = enc_w[seg][OFF_SC][0];
    bias  = enc_w[seg][OFF_SC][1];
    for (int i = 0; i < nt; i++)
      for (int j = 0; j < nd; j++) begin
        if (mask_en && mask[i]) begin
          Q[i][j] = 0; K[i][j] = 0; V[i][j] = 0;
        end else begin
          longint aq = 0, ak = 0, avv = 0;
          for (int k = 0; k < nd; k++) begin
            aq  += longint'(X[i][k]) * enc_w[seg][OFF_WQ + j][k];
            ak  += longint'(X[i][k]) * enc_w[seg][OFF_WK + j][k];
            avv += longint'(X[i][k]) * enc_w[seg][OFF_WV + j][k];
          end
          Q[i][j] = rq(aq); K[i][j] = rq(ak); V[i][j] = rq(avv);
        end
      end
    for (int i = 0; i < nt; i++) begin
      for (int k = 0; k < nd; k++) av[k] = 0;
      if (!(mask_en && mask[i])) begin
        for (int h = 0; h < nh; h++) begin
          for (int j = 0; j < nt; j++) begin
            int s, t;
            acc = 0;
            for (int k = 0; k < ndh; k++)
              acc += longint'(Q[i][h*D_HEAD+k]) * K[j][h*D_HEAD+k];
            s = rq(acc);
            t = sat(((longint'(s) * scale) >>> 8) + bias);
            a[j] = sigm(t);
          end
          for (int k = 0; k < ndh; k++) begin
            acc = 0;
            for (int j = 0; j < nt; j++) acc += longint'(a[j]) * V[j][h*D_HEAD+k];
            av[h*D_HEAD+k] = rq(acc);
          end
        end
      end
      for (int j = 0; j < nd; j++) begin
        acc = 0;
        for (int k = 0; k < nd; k++) acc += longint'(av[k]) * enc_w[seg][OFF_WO + j][k];
        X1[i][j] = sat((acc >>> 8) + X[i][j]);
      end
    end
    for (int i = 0; i < nt; i++) begin
      for (int j = 0; j < nff; j++) begin
        int v;
        acc = 0;
        for (int k = 0; k < nd; k++) acc += longint'(X1[i][k]) * enc_w[seg][OFF_W1 + j][k];
        v = sat((acc >>> 8) + enc_w[seg][OFF_B1][j]);
        hh[j] = (v < 0) ? 0 : v;
      end
      for (int j = 0; j < nd; j++) begin
        acc = 0;
        for (int k = 0; k < nff; k++) acc += longint'(hh[k]) * enc_w[seg][OFF_W2 + j][k];
        X[i][j] = sat((acc >>> 8) + enc_w[seg][OFF_B2][j] + X1[i][j]);
      end
    end
  endtask

  task automatic ref_snapshot();
    longint acc;
    int y [N_SCEN];
    int cnt [N_SCEN];
    bit mask [N_TOK];
    int hid [D_HID];
    int p [FC_IN];
    // router
    for (int c = 0; c < N_SCEN; c++) begin
      acc = 0;
      for (int t = 0; t < nt; t++) acc += longint'(X[t][SLP_BIN]) * slp_w[t][c];
      y[c] = sat((acc >>> 8) + slp_w[N_TOK][c]);
    end
    ref_label = 0;
    for (int c = 1; c < N_SCEN; c++) if (y[c] > y[ref_label]) ref_label = c;
    // sliding window
    win.push_front(ref_label);
    if (win.size() > 5) void'(win.pop_back());
    for (int c = 0; c < N_SCEN; c++) cnt[c] = 0;
    foreach (win[i]) cnt[win[i]]++;
    ref_scen = 0;
    for (int c = 1; c < N_SCEN; c++) if (cnt[c] > cnt[ref_scen]) ref_scen = c;
    // row mask
    ref_skipped = 0;
    for (int i = 0; i < nt; i++) begin
      int z = 0;
      for (int k = 0; k < nd; k++) if (X[i][k] < int'(te_cfg[ref_scen])) z++;
      mask[i] = (z > int'(tr_cfg[ref_scen]));
      if (mask[i]) ref_skipped++;
    end
    // encoder layers
    for (int l = 0; l < ((ref_scen == 0) ? 1 : 2); l++)
      ref_encoder((ref_scen == 0) ? 0 : 1 + 2*(ref_scen-1) + l, l == 0, mask);
    // max-pool and FCNN
    for (int i = 0; i < nt; i++)
      for (int g = 0; g < npw; g++) begin
        int m = -32768;
        for (int k = 0; k < POOL_K; k++) begin
          int f = g*POOL_K + k;
          int v = (f < D_MODEL) ? X[i][f] : 0;
          if (v > m) m = v;
        end
        p[i*POOL_W + g] = m;
      end
    for (int k = 0; k < nhid; k++) begin
      int v;
      acc = 0;
      for (int t = 0; t < nfc; t++) acc += longint'(p[t]) * fc_w[ref_scen][FOFF_W1 + t][k];
      v = sat((acc >>> 8) + fc_w[ref_scen][FOFF_B1][k]);
      hid[k] = (v < 0) ? int'((longint'(v) * 77) >>> 8) : v;
    end
    for (int o = 0; o < D_OUT; o++) begin
      acc = 0;
      for (int k = 0; k < nhid; k++) acc += longint'(hid[k]) * fc_w[ref_scen][FOFF_W2 + k][o];
      ref_pos[o] = sat((acc >>> 8) + fc_w[ref_scen][FOFF_B2][o]);
    end
  endtask

  // ---------------- stimulus helpers ----------------
  task automatic cfg_write(mem_sel_e sel, int addr, int lanes, int vals [MAX_LANES]);
    @(negedge clk);
    cfg_we = 1'b1; cfg_sel = sel; cfg_addr = 16'(addr);
    for (int k = 0; k < MAX_LANES; k++) cfg_data[k] = (k < lanes) ? q_t'(vals[k]) : '0;
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  // snapshot: label picks which beams carry energy in delay bin 0;
  // n_sparse rows get only tiny amplitudes elsewhere
  task automatic make_snapshot(int label, int n_sparse);
    for (int i = 0; i < N_TOK; i++) begin
      bit sparse = (i % 128) >= (N_TOK - n_sparse);
      for (int k = 0; k < D_MODEL; k++)
        X[i][k] = sparse ? rnd(0, 5) : rnd(20, 255);
      X[i][SLP_BIN] = ((i % 3) == label) ? 200 : 10;
    end
  endtask

  // ---------------- test ----------------
  int dut_pos [2];
  int dense_lat [N_SCEN];
  int sparse_lat;
  int n_skip_ev = 0, n_transient = 0, n_switch = 0, n_two_layer = 0;
  int prev_scen = -1;
  int labels [9]  = '{0, 0, 1, 0, 1, 1, 2, 2, 2};
  int sparse_n [9] = '{0, 83, 0, 0, 0, 20, 0, 0, 0};

  initial begin : watchdog
    repeat (6_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    int vals [MAX_LANES];
    cfg_we = 1'b0; cfg_sel = MEM_ENC; cfg_addr = '0; in_valid = 1'b0;
    for (int k = 0; k < MAX_LANES; k++) cfg_data[k] = '0;
    for (int k = 0; k < D_MODEL; k++) in_row[k] = '0;
    for (int c = 0; c < N_SCEN; c++) begin te_cfg[c] = TE_DEF[c]; tr_cfg[c] = TR_DEF[c]; end
    for (int d = 0; d < N_SCEN; d++) dense_lat[d] = 0;
    sparse_lat = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // ---- parameters ----
    for (int s = 0; s < N_SEG; s++) begin
      for (int w = 0; w < ENC_WORDS; w++) begin
        for (int k = 0; k < MAX_LANES; k++) begin
          automatic int lanes = (w >= OFF_W2 && w < OFF_W2 + D_MODEL) || w == OFF_B1 ? D_FF : D_MODEL;
          enc_w[s][w][k] = (k < lanes) ? ((w == OFF_B1 || w == OFF_B2) ? rnd(-20, 20) : rnd(-24, 24)) : 0;
        end
        if (w == OFF_SC) begin
          for (int k = 0; k < MAX_LANES; k++) enc_w[s][w][k] = 0;
          enc_w[s][w][0] = 107 + 20 * s;          // gamma / sqrt(23) ~ 0.42..
          enc_w[s][w][1] = int'(SIG_BIAS_DEF);    // -log(128)
        end
        vals = enc_w[s][w];
        cfg_write(MEM_ENC, s * ENC_WORDS + w, MAX_LANES, vals);
      end
    end
    for (int c = 0; c < N_SCEN; c++)
      for (int w = 0; w < FC_WORDS; w++) begin
        for (int k = 0; k < MAX_LANES; k++) vals[k] = 0;
        for (int k = 0; k < D_HID; k++) begin
          if (w < FOFF_B1)        fc_w[c][w][k] = rnd(-6, 6);
          else if (w == FOFF_B1)  fc_w[c][w][k] = rnd(-300, 300);
          else                    fc_w[c][w][k] = (k < D_OUT) ? rnd(-200, 200) : 0;
          vals[k] = fc_w[c][w][k];
        end
        cfg_write(MEM_FC, c * FC_WORDS + w, D_HID, vals);
      end
    for (int t = 0; t < SLP_WORDS; t++) begin
      for (int k = 0; k < MAX_LANES; k++) vals[k] = 0;
      for (int c = 0; c < N_SCEN; c++) begin
        slp_w[t][c] = (t < N_TOK) ? (((t % 3) == c) ? 256 : 0) : 0;
        vals[c] = slp_w[t][c];
      end
      cfg_write(MEM_SLP, t, N_SCEN, vals);
    end

    // ---- snapshots ----
    for (int n = 0; n < 9; n++) begin
      make_snapshot(labels[n], sparse_n[n]);
      X_in = X;
      ref_snapshot();
      // stream rows
      for (int i = 0; i < N_TOK; i++) begin
        @(negedge clk);
        while (!in_ready) @(negedge clk);
        in_valid = 1'b1;
        for (int k = 0; k < D_MODEL; k++) in_row[k] = q_t'(X_in[i][k]);
      end
      @(negedge clk);
      in_valid = 1'b0;
      @(posedge out_valid);
      @(negedge clk);
      dut_pos[0] = int'(out_pos[0]);
      dut_pos[1] = int'(out_pos[1]);
      checks += 5;
      if (int'(out_label) != ref_label) begin failures++; $display("snap %0d: label %0d exp %0d", n, out_label, ref_label); end
      if (int'(out_scen) != ref_scen)   begin failures++; $display("snap %0d: scen %0d exp %0d", n, out_scen, ref_scen); end
      if (int'(out_skipped) != ref_skipped) begin failures++; $display("snap %0d: skipped %0d exp %0d", n, out_skipped, ref_skipped); end
      if (dut_pos[0] != ref_pos[0] || dut_pos[1] != ref_pos[1]) begin
        failures++; $display("snap %0d: pos (%0d,%0d) exp (%0d,%0d)", n, dut_pos[0], dut_pos[1], ref_pos[0], ref_pos[1]);
      end
      if (int'(out_attn_rows) != N_TOK - ref_skipped) begin
        failures++; $display("snap %0d: attended rows %0d exp %0d", n, out_attn_rows, N_TOK - ref_skipped);
      end
      $display("snap %0d: label %0d scen %0d skipped %0d pos (%0d,%0d) cycles %0d",
               n, out_label, out_scen, out_skipped, dut_pos[0], dut_pos[1], out_cycles);
      // mechanisms
      if (ref_skipped > 0) n_skip_ev++;
      if (ref_label != ref_scen) n_transient++;
      if (prev_scen >= 0 && prev_scen != ref_scen) n_switch++;
      if (ref_scen != 0) n_two_layer++;
      prev_scen = ref_scen;
      if (ref_skipped == 0 && dense_lat[ref_scen] == 0) dense_lat[ref_scen] = int'(out_cycles);
      if (ref_skipped == 83 && ref_scen == 0) sparse_lat = int'(out_cycles);
    end

    // ---- latency against the reported 1.06 ms / 2.11 ms at 100 MHz ----
    checks += 4;
    if (dense_lat[0] < 100_700 || dense_lat[0] > 111_300) begin failures++; $display("S1 latency %0d", dense_lat[0]); end
    if (dense_lat[1] < 200_450 || dense_lat[1] > 221_550) begin failures++; $display("S2 latency %0d", dense_lat[1]); end
    if (dense_lat[2] < 200_450 || dense_lat[2] > 221_550) begin failures++; $display("S3 latency %0d", dense_lat[2]); end
    if (sparse_lat == 0 || real'(dense_lat[0]) / real'(sparse_lat) < 1.8 || real'(dense_lat[0]) / real'(sparse_lat) > 2.3) begin
      failures++; $display("sparse speedup wrong: %0d vs %0d", dense_lat[0], sparse_lat);
    end
    $display("latency S1 %0d S2 %0d S3 %0d, S1 65%% sparse %0d (speedup %0.2f)",
             dense_lat[0], dense_lat[1], dense_lat[2], sparse_lat, real'(dense_lat[0]) / real'(sparse_lat));
    $display("events: skip %0d transient %0d switch %0d two_layer %0d", n_skip_ev, n_transient, n_switch, n_two_layer);
    checks += 4;
    if (n_skip_ev == 0)   failures++;
    if (n_transient == 0) failures++;
    if (n_switch == 0)    failures++;
    if (n_two_layer == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
