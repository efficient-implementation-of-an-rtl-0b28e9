// ffn_unit: position-wise feed-forward network with residual add.
//
// For each token row i of the X1 buffer (the attention output plus residual):
//   h = ReLU(X1_i W1 + b1)        46 -> 64, on a 46-lane VE_I
//   X_i = X1_i + h W2 + b2        64 -> 46, on a 64-lane VE_I
// Both layers are input-stationary: the row (X1_i, then h) is held in the
// engine and the transposed weight columns stream past it, one dot product
// per cycle. The hidden row h never leaves the unit (row-buffer reuse). The
// biases are read from the layer's segment when the unit starts. The result
// overwrites row i of the X buffer, which is safe because the attention unit
// has finished reading X for this layer.
//
// Timing: about 64 + 46 cycles per row plus pipeline fill (two cycles per
// stream, synchronous weight reads), so about 14.6k cycles per layer.
//
// The two input-stationary layers with ReLU, the 64-wide hidden layer and
// the residual add are the model's and the accelerator's; the rounding (see
// loc_pkg) and omission of layer normalisation are this design's choices.
//
// Lint note: the engines' dot_valid outputs are left unread (the FSM knows
// the one-cycle latency), and the top bit of p2_i only marks the end count.
module ffn_unit
  import loc_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  output logic [6:0]   x1_raddr,
  input  q_t           x1_rdata [D_MODEL],
  output logic         x_we,
  output logic [6:0]   x_waddr,
  output q_t           x_wdata [D_MODEL],
  output logic [8:0]   w_addr,
  input  q_t           w_data [MAX_LANES],
  output logic         done
);
  typedef enum logic [3:0] {
    S_IDLE, S_B1, S_B2, S_B3, S_ROW, S_LD1, S_STR1, S_LD2, S_STR2
  } state_e;
  state_e state;

  logic [6:0] row;
  logic [6:0] iss, iss_n;
  logic       p1_v, p2_v;
  logic [6:0] p1_i, p2_i;
  q_t b1 [D_FF];
  q_t b2 [D_MODEL];
  q_t xi [D_MODEL];
  q_t h  [D_FF];
  q_t y  [D_MODEL];

  logic ve1_load, ve1_en, ve2_load, ve2_en;
  q_t   ve1_w [D_MODEL];
  q_t   ve2_w [D_FF];
  acc_t ve1_dot, ve2_dot;
  logic ve1_dv, ve2_dv;
  ve_is #(.LANES(D_MODEL)) u_ve1 (.clk, .rst_n, .load(ve1_load), .x_in(x1_rdata),
    .en(ve1_en), .w_in(ve1_w), .dot(ve1_dot), .dot_valid(ve1_dv));
  ve_is #(.LANES(D_FF)) u_ve2 (.clk, .rst_n, .load(ve2_load), .x_in(h),
    .en(ve2_en), .w_in(ve2_w), .dot(ve2_dot), .dot_valid(ve2_dv));

  logic issuing, stream_end;
  assign issuing    = (iss != iss_n);
  assign stream_end = !issuing && !p1_v && !p2_v;

  always_comb begin
    for (int k = 0; k < int'(D_MODEL); k++) ve1_w[k] = w_data[k];
    for (int k = 0; k < int'(D_FF); k++)    ve2_w[k] = w_data[k];
    ve1_load = (state == S_LD1);
    ve2_load = (state == S_LD2);
    ve1_en   = p1_v && (state == S_STR1);
    ve2_en   = p1_v && (state == S_STR2);
    x1_raddr = row;
    case (state)
      S_B1:    w_addr = 9'(OFF_B1);
      S_B2:    w_addr = 9'(OFF_B2);
      S_STR1:  w_addr = 9'(OFF_W1) + 9'(iss);
      S_STR2:  w_addr = 9'(OFF_W2) + 9'(iss);
      default: w_addr = 9'(OFF_B1);
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; row <= '0; iss <= '0; iss_n <= '0;
      p1_v <= 1'b0; p2_v <= 1'b0; p1_i <= '0; p2_i <= '0;
      done <= 1'b0; x_we <= 1'b0; x_waddr <= '0;
      for (int k = 0; k < int'(D_FF); k++)    begin b1[k] <= '0; h[k] <= '0; end
      for (int k = 0; k < int'(D_MODEL); k++) begin b2[k] <= '0; xi[k] <= '0; y[k] <= '0; x_wdata[k] <= '0; end
    end else begin
      done <= 1'b0;
      x_we <= 1'b0;
      p1_v <= 1'b0;
      if (issuing && (state == S_STR1 || state == S_STR2)) begin
        p1_v <= 1'b1; p1_i <= iss; iss <= iss + 1'b1;
      end
      p2_v <= p1_v;
      p2_i <= p1_i;
      case (state)
        S_IDLE: if (start) begin state <= S_B1; row <= '0; end
        S_B1: state <= S_B2;
        S_B2: begin
          for (int k = 0; k < int'(D_FF); k++) b1[k] <= w_data[k];
          state <= S_B3;
        end
        S_B3: begin
          for (int k = 0; k < int'(D_MODEL); k++) b2[k] <= w_data[k];
          state <= S_ROW;
        end
        S_ROW: state <= S_LD1;            // X1_i read in flight
        S_LD1: begin                       // X1_i valid: into VE_I, keep for residual
          xi    <= x1_rdata;
          iss   <= '0; iss_n <= 7'(D_FF);
          state <= S_STR1;
        end
        S_STR1: begin
          if (p2_v) begin
            q_t v;
            v = sat16((ve1_dot >>> FRAC) + acc_t'(b1[p2_i[5:0]]));
            h[p2_i[5:0]] <= (v < 0) ? q_t'(0) : v;
          end
          if (stream_end) state <= S_LD2;
        end
        S_LD2: begin
          iss <= '0; iss_n <= 7'(D_MODEL);
          state <= S_STR2;
        end
        S_STR2: begin
          if (p2_v)
            y[p2_i[5:0]] <= sat16((ve2_dot >>> FRAC) + acc_t'(b2[p2_i[5:0]]) + acc_t'(xi[p2_i[5:0]]));
          if (stream_end) begin
            x_we    <= 1'b1;
            x_waddr <= row;
            x_wdata <= y;
            row     <= row + 1'b1;
            if (row == 7'(N_TOK - 1)) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else state <= S_ROW;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
