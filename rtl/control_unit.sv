// control_unit: finite-state machine that sequences one localization.
//
// Order of work for one snapshot:
//   LOAD    accept the 128 input rows (in_valid/in_ready), write them to the
//           X buffer and feed the router its delay-bin feature per row;
//   ROUTE   wait for the router's label and the sliding-window decision,
//           then fix the scenario for this snapshot;
//   SPARSE  read the 128 rows back through the sparsity unit with the
//           scenario's thresholds, building the row mask;
//   ENC     run the encoder layer once per layer of the scenario's model
//           (S1: one layer, S2/S3: two), selecting weight segment S1, S21,
//           S22, S31 or S32 and enabling the row mask for layer 0 only;
//   FCNN    pool and run the FCNN of the scenario;
//   OUT     present the position for one cycle with `out_valid`.
// `phase` tells the top which unit owns the X buffer ports. `lat_cycles`
// counts the cycles from the first accepted input row to `out_valid`.
//
// A central FSM choosing segments from the router output and the layer
// counter is the accelerator's; the exact state order (route, then sparsity)
// follows the accelerator's description, the handshakes are this design's.
module control_unit
  import loc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // input stream
  input  logic        in_valid,
  output logic        in_ready,
  output logic [6:0]  load_row,
  // router / mode selection
  output logic        slp_start,
  input  logic        mode_valid,
  input  scen_e       mode,
  // sparsity
  output logic        sp_start,
  output logic        sp_rd,        // X read issued for the sparsity unit
  output logic [6:0]  sp_raddr,
  input  logic        sp_done,
  // encoder / FCNN
  output logic        enc_start,
  output logic        mask_en,
  input  logic        enc_done,
  output logic        fc_start,
  input  logic        fc_done,
  // selection
  output scen_e       scen,
  output logic [2:0]  seg,
  output logic [1:0]  phase,        // 0 load/sparse, 1 encoder, 2 FCNN
  output logic        out_valid,
  output logic [31:0] lat_cycles
);
  typedef enum logic [3:0] {
    S_LOAD, S_ROUTE, S_SPARSE, S_SPWAIT, S_ENC, S_ENCW, S_FC, S_FCW, S_OUT
  } state_e;
  state_e      state;
  logic [7:0]  cnt;
  logic        layer;
  logic        counting;

  assign in_ready = (state == S_LOAD);
  assign load_row = cnt[6:0];
  assign sp_raddr = cnt[6:0];
  assign sp_rd    = (state == S_SPARSE);
  assign mask_en  = (layer == 1'b0);
  assign seg      = segment(scen, layer);
  always_comb begin
    case (state)
      S_ENC, S_ENCW: phase = 2'd1;
      S_FC, S_FCW:   phase = 2'd2;
      default:       phase = 2'd0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD; cnt <= '0; layer <= 1'b0; scen <= SCEN_S1;
      slp_start <= 1'b0; sp_start <= 1'b0; enc_start <= 1'b0; fc_start <= 1'b0;
      out_valid <= 1'b0; lat_cycles <= '0; counting <= 1'b0;
    end else begin
      slp_start <= 1'b0; sp_start <= 1'b0; enc_start <= 1'b0; fc_start <= 1'b0;
      out_valid <= 1'b0;
      if (counting) lat_cycles <= lat_cycles + 1'b1;
      case (state)
        S_LOAD: if (in_valid) begin
          if (cnt == 8'd0) begin
            counting   <= 1'b1;
            lat_cycles <= 32'd1;
          end
          cnt <= cnt + 1'b1;
          if (cnt == 8'(N_TOK - 1)) begin
            cnt   <= '0;
            state <= S_ROUTE;
          end
        end
        S_ROUTE: if (mode_valid) begin
          scen     <= mode;
          layer    <= 1'b0;
          sp_start <= 1'b1;
          slp_start <= 1'b1;       // router free for the next snapshot
          state    <= S_SPARSE;
        end
        S_SPARSE: begin
          cnt <= cnt + 1'b1;
          if (cnt == 8'(N_TOK - 1)) begin
            cnt   <= '0;
            state <= S_SPWAIT;
          end
        end
        S_SPWAIT: if (sp_done) state <= S_ENC;
        S_ENC: begin
          enc_start <= 1'b1;
          state     <= S_ENCW;
        end
        S_ENCW: if (enc_done) begin
          if (2'(layer) + 2'd1 < n_layers(scen)) begin
            layer <= 1'b1;
            state <= S_ENC;
          end else state <= S_FC;
        end
        S_FC: begin
          fc_start <= 1'b1;
          state    <= S_FCW;
        end
        S_FCW: if (fc_done) state <= S_OUT;
        S_OUT: begin
          out_valid <= 1'b1;
          counting  <= 1'b0;
          state     <= S_LOAD;
        end
        default: state <= S_LOAD;
      endcase
    end
  end
endmodule
