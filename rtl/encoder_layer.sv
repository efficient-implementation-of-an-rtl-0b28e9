// encoder_layer: one Transformer encoder layer (attention, then FFN), reused
// for every layer of the selected model (layer folding).
//
// On `start` the attention unit reads the X buffer and writes X + MHA(X) into
// its own X1 buffer; then the FFN unit reads X1 and writes X1 + FFN(X1) back
// into the X buffer, leaving the layer output where the next layer (or the
// FCNN) expects its input. `done` pulses when the last row is written. The
// weights come from the segment the control unit has selected; `mask_en`
// enables row skipping and is set by the control unit for the first layer
// only, since only the input itself is thresholded.
//
// One hardware instance for all layers, with the control unit choosing the
// weight segment per layer, is the accelerator's folding scheme; the X1
// buffer between the two halves is this design's choice.
module encoder_layer
  import loc_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             mask_en,
  input  logic [N_TOK-1:0] row_mask,
  output logic [6:0]       x_raddr,
  input  q_t               x_rdata [D_MODEL],
  output logic             x_we,
  output logic [6:0]       x_waddr,
  output q_t               x_wdata [D_MODEL],
  output logic [8:0]       wa_addr,
  input  q_t               wa_data [MAX_LANES],
  output logic [8:0]       wb_addr,
  input  q_t               wb_data [MAX_LANES],
  output logic             done,
  output logic [7:0]       n_attn_rows
);
  logic       mha_done;
  logic       x1_we;
  logic [6:0] x1_waddr, x1_raddr;
  q_t         x1_wdata [D_MODEL];
  q_t         x1_rdata [D_MODEL];

  mha_unit u_mha (
    .clk, .rst_n, .start, .mask_en, .row_mask,
    .x_raddr, .x_rdata,
    .x1_we, .x1_waddr, .x1_wdata,
    .w_addr(wa_addr), .w_data(wa_data),
    .done(mha_done), .n_attn_rows
  );

  row_buffer #(.ROWS(N_TOK), .LANES(D_MODEL)) u_x1 (
    .clk, .we(x1_we), .waddr(x1_waddr), .wdata(x1_wdata),
    .raddr(x1_raddr), .rdata(x1_rdata)
  );

  ffn_unit u_ffn (
    .clk, .rst_n, .start(mha_done),
    .x1_raddr, .x1_rdata,
    .x_we, .x_waddr, .x_wdata,
    .w_addr(wb_addr), .w_data(wb_data),
    .done
  );
endmodule
