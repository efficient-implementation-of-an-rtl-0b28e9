// fcnn_unit: max-pooling and the two-layer fully connected head that turns
// the encoder output into a position estimate (x, y).
//
// For each token row i the X buffer is read once and max-pooled into 12
// values (maxpool_row). These are streamed, one per cycle, as the broadcast
// input of a 32-PE output-stationary engine; PE k accumulates
// sum_t p_t * W1[t][k] over all 1536 pooled values t = 12 i + g, with
// W1 row t read from the FCNN memory in the same order. Then
//   hid_k = LeakyReLU(acc_k + b1_k)   (negative slope 77/256 ~ 0.3)
// and the same engine computes the two outputs with W2 (32 x 2) and b2,
// streaming hid_0..hid_31. `pos` holds (x, y) in Q8.8 when `done` pulses.
//
// Timing: about 15 cycles per token row (read, pool, 12 MACs, drain) and
// about 36 cycles for the output layer, so about 2k cycles per snapshot.
//
// Max-pooling, the output-stationary mapping, the leaky ReLU with slope 0.3
// and d_out = 2 are the accelerator's. The hidden width of 32 is inferred
// from the 32-PE vector engine of the accelerator (the model's d_h is not
// stated); the slope rounding and memory layout are this design's choices.
//
// Lint note: the top bit of the pipeline index p1_i is never read; the
// counter is one bit wider than needed so its end value fits.
module fcnn_unit
  import loc_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  output logic [6:0]   x_raddr,
  input  q_t           x_rdata [D_MODEL],
  output logic [10:0]  f_addr,
  input  q_t           f_data [D_HID],
  output q_t           pos [D_OUT],
  output logic         done
);
  typedef enum logic [3:0] {
    S_IDLE, S_B1, S_B1W, S_ROW, S_POOL, S_STR1, S_ACT, S_STR2, S_B2, S_B2W
  } state_e;
  state_e state;

  logic [6:0]  row;
  logic [5:0]  iss, iss_n;
  logic        p1_v;
  logic [5:0]  p1_i;
  logic        first;            // next MAC starts a new sum
  q_t          b1 [D_HID];
  q_t          hid [D_HID];
  q_t          pool [POOL_W];
  q_t          pool_c [POOL_W];
  acc_t        acc [D_HID];
  logic        os_en, os_clr;
  q_t          os_x;

  maxpool_row u_pool (.x(x_rdata), .y(pool_c));
  ve_os #(.LANES(D_HID)) u_ve (.clk, .rst_n, .clr(os_clr), .en(os_en), .x(os_x), .w(f_data), .acc(acc));

  logic issuing, stream_end;
  assign issuing    = (iss != iss_n);
  assign stream_end = !issuing && !p1_v;

  always_comb begin
    x_raddr = row;
    os_en   = p1_v && (state == S_STR1 || state == S_STR2);
    os_clr  = os_en && first;
    os_x    = (state == S_STR2) ? hid[p1_i[4:0]] : pool[p1_i[3:0]];
    case (state)
      S_B1:    f_addr = 11'(FOFF_B1);
      S_STR1:  f_addr = 11'(row) * 11'(POOL_W) + 11'(iss);
      S_STR2:  f_addr = 11'(FOFF_W2) + 11'(iss);
      S_B2:    f_addr = 11'(FOFF_B2);
      default: f_addr = 11'(FOFF_B1);
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; row <= '0; iss <= '0; iss_n <= '0; p1_v <= 1'b0; p1_i <= '0;
      first <= 1'b1; done <= 1'b0;
      for (int k = 0; k < int'(D_HID); k++) begin b1[k] <= '0; hid[k] <= '0; end
      for (int g = 0; g < int'(POOL_W); g++) pool[g] <= '0;
      for (int k = 0; k < int'(D_OUT); k++) pos[k] <= '0;
    end else begin
      done <= 1'b0;
      p1_v <= 1'b0;
      if (issuing && (state == S_STR1 || state == S_STR2)) begin
        p1_v <= 1'b1; p1_i <= iss; iss <= iss + 1'b1;
      end
      if (os_en) first <= 1'b0;
      case (state)
        S_IDLE: if (start) begin state <= S_B1; row <= '0; first <= 1'b1; end
        S_B1:  state <= S_B1W;
        S_B1W: begin b1 <= f_data; state <= S_ROW; end
        S_ROW: state <= S_POOL;          // X row read in flight
        S_POOL: begin
          pool  <= pool_c;
          iss   <= '0; iss_n <= 6'(POOL_W);
          state <= S_STR1;
        end
        S_STR1: if (stream_end) begin
          row <= row + 1'b1;
          if (row == 7'(N_TOK - 1)) state <= S_ACT;
          else state <= S_ROW;
        end
        S_ACT: begin
          for (int k = 0; k < int'(D_HID); k++)
            hid[k] <= leaky_relu(sat16((acc[k] >>> FRAC) + acc_t'(b1[k])));
          first <= 1'b1;
          iss <= '0; iss_n <= 6'(D_HID);
          state <= S_STR2;
        end
        S_STR2: if (stream_end) state <= S_B2;
        S_B2:  state <= S_B2W;
        S_B2W: begin
          for (int k = 0; k < int'(D_OUT); k++)
            pos[k] <= sat16((acc[k] >>> FRAC) + acc_t'(f_data[k]));
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
