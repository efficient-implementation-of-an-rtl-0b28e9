// loc_accel_top: adaptive Transformer accelerator for massive-MIMO
// localization, top level.
//
// A snapshot is the 128 x 46 beam-delay amplitude matrix |G| (Q8.8), given one
// beam row per cycle on in_row while in_ready is high. The accelerator
//  1. classifies the propagation scenario with the single-layer perceptron
//     router (one delay bin per beam) while the rows are stored, and filters
//     the label over the last five snapshots (majority vote);
//  2. marks rows whose amplitudes are mostly below the scenario's element
//     threshold (zero count above te/tr) so they are skipped in the first
//     encoder layer's projections and attention;
//  3. runs the selected specialised model: one encoder layer for S1, two for
//     S2 and S3, on one folded encoder instance whose weights come from the
//     segment the control unit selects;
//  4. max-pools, runs the FCNN and outputs (x, y) in Q8.8 with out_valid.
// All parameters are written beforehand through the cfg_* port (see
// memory_bank for the layout). te_cfg/tr_cfg give the sparsity thresholds per
// scenario. Status outputs: out_label (raw router label of the snapshot),
// out_scen (model used), out_skipped (masked rows), out_attn_rows (rows
// attended in layer 0), out_cycles (cycles from first input row to result).
//
// The structure (router, control unit, memory bank, sparsity unit, folded
// encoder, FCNN) is the accelerator's; the interfaces are this design's.
//
// Lint note: the router's logits are internal observation points and are not
// brought out; only the label is used.
module loc_accel_top
  import loc_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  // parameter load
  input  logic         cfg_we,
  input  mem_sel_e     cfg_sel,
  input  logic [15:0]  cfg_addr,
  input  q_t           cfg_data [MAX_LANES],
  input  q_t           te_cfg [N_SCEN],
  input  logic [5:0]   tr_cfg [N_SCEN],
  // snapshot input
  input  logic         in_valid,
  output logic         in_ready,
  input  q_t           in_row [D_MODEL],
  // result
  output logic         out_valid,
  output q_t           out_pos [D_OUT],
  output scen_e        out_label,
  output scen_e        out_scen,
  output logic [7:0]   out_skipped,
  output logic [7:0]   out_attn_rows,
  output logic [31:0]  out_cycles
);
  // ---------------- control ----------------
  logic       slp_start, sp_start, sp_rd, sp_done, enc_start, enc_done, fc_start, fc_done;
  logic       mask_en, mode_valid, label_valid;
  logic [6:0] load_row, sp_raddr;
  logic [2:0] seg;
  logic [1:0] phase;
  scen_e      scen, mode, label;

  control_unit u_cu (
    .clk, .rst_n, .in_valid, .in_ready, .load_row,
    .slp_start, .mode_valid, .mode,
    .sp_start, .sp_rd, .sp_raddr, .sp_done,
    .enc_start, .mask_en, .enc_done, .fc_start, .fc_done,
    .scen, .seg, .phase, .out_valid, .lat_cycles(out_cycles)
  );

  // ---------------- memory bank ----------------
  logic [8:0]  wa_addr, wb_addr;
  q_t          wa_data [MAX_LANES], wb_data [MAX_LANES];
  logic [10:0] f_addr;
  q_t          f_data [D_HID];
  logic [7:0]  s_addr;
  q_t          s_data [N_SCEN];

  memory_bank u_mem (
    .clk, .cfg_we, .cfg_sel, .cfg_addr, .cfg_data,
    .seg, .scen,
    .a_addr(wa_addr), .a_data(wa_data),
    .b_addr(wb_addr), .b_data(wb_data),
    .f_addr, .f_data, .s_addr, .s_data
  );

  // ---------------- X buffer ----------------
  logic       x_we, enc_x_we;
  logic [6:0] x_waddr, x_raddr, enc_x_waddr, enc_x_raddr, fc_x_raddr;
  q_t         x_wdata [D_MODEL], enc_x_wdata [D_MODEL], x_rdata [D_MODEL];

  always_comb begin
    case (phase)
      2'd1:    x_raddr = enc_x_raddr;
      2'd2:    x_raddr = fc_x_raddr;
      default: x_raddr = sp_raddr;
    endcase
    if (phase == 2'd1) begin
      x_we = enc_x_we; x_waddr = enc_x_waddr; x_wdata = enc_x_wdata;
    end else begin
      x_we = in_valid && in_ready; x_waddr = load_row; x_wdata = in_row;
    end
  end

  row_buffer #(.ROWS(N_TOK), .LANES(D_MODEL)) u_xbuf (
    .clk, .we(x_we), .waddr(x_waddr), .wdata(x_wdata), .raddr(x_raddr), .rdata(x_rdata)
  );

  // ---------------- router ----------------
  q_t logits [N_SCEN];
  logic [7:0] slp_waddr;
  slp_router #(.N_IN(N_TOK)) u_slp (
    .clk, .rst_n, .start(slp_start),
    .x_valid(in_valid && in_ready), .x(in_row[SLP_BIN]),
    .w_addr(slp_waddr), .w_data(s_data),
    .label, .label_valid, .logits
  );
  assign s_addr = slp_waddr;

  mode_select #(.WINDOW(5)) u_mode (
    .clk, .rst_n, .label_valid, .label, .mode, .mode_valid
  );

  // ---------------- sparsity ----------------
  logic             sp_row_valid;
  logic [N_TOK-1:0] row_mask;
  logic [7:0]       n_skipped;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) sp_row_valid <= 1'b0;
    else        sp_row_valid <= sp_rd;

  sparsity_unit #(.ROWS(N_TOK), .LANES(D_MODEL)) u_sp (
    .clk, .rst_n, .start(sp_start), .te(te_cfg[scen]), .tr(tr_cfg[scen]),
    .row_valid(sp_row_valid), .row(x_rdata),
    .row_mask, .n_skipped, .done(sp_done)
  );

  // ---------------- encoder (folded) ----------------
  logic [7:0] out_attn_rows_l;
  encoder_layer u_enc (
    .clk, .rst_n, .start(enc_start), .mask_en, .row_mask,
    .x_raddr(enc_x_raddr), .x_rdata,
    .x_we(enc_x_we), .x_waddr(enc_x_waddr), .x_wdata(enc_x_wdata),
    .wa_addr, .wa_data, .wb_addr, .wb_data,
    .done(enc_done), .n_attn_rows(out_attn_rows_l)
  );

  // ---------------- FCNN ----------------
  fcnn_unit u_fc (
    .clk, .rst_n, .start(fc_start),
    .x_raddr(fc_x_raddr), .x_rdata,
    .f_addr, .f_data, .pos(out_pos), .done(fc_done)
  );

  // ---------------- status ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_label <= SCEN_S1; out_attn_rows <= '0;
    end else begin
      if (label_valid) out_label <= label;
      if (enc_done && mask_en) out_attn_rows <= out_attn_rows_l;
    end
  end
  assign out_scen    = scen;
  assign out_skipped = n_skipped;
endmodule
