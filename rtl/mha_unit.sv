// mha_unit: two-head sigmoid self-attention with output projection and
// residual add, for one encoder layer, with input row skipping.
//
// Work is done in two passes over the 128 token rows of X.
//  1. Projection pass (input-stationary). For each row i that is not skipped,
//     X_i is loaded once into a 46-lane VE_I and the 138 transposed weight
//     columns of Wq, Wk and Wv are streamed past it, one dot product per
//     cycle, giving Q_i, K_i and V_i, which are written to three row buffers.
//  2. Attention pass, row by row. For each head h (features 23h..23h+22):
//     a. Scores (streaming, no accumulation): Q_i,h is held in a 23-lane VE_I
//        and K_j,h is streamed for j = 0..127. Each dot product is scaled and
//        biased, s = (q.k) * scale + bias, and passed through the sigmoid LUT;
//        the 128 weights A_ij are kept in a row buffer.
//     b. Weighted sum (output-stationary): A_ij and V_j,h are streamed for
//        j = 0..127 into a 23-PE VE_O, each PE accumulating one output
//        feature.
//     The two head outputs are concatenated (46 values), held in the VE_I and
//     projected by the 46 columns of Wo; X_i is added (residual) and the row
//     is written to the X1 buffer.
// Skipping: when `mask_en` is set, a row with its bit set in `row_mask` is
// not projected and not attended: its Q, K, V are never written, any read of
// its K or V returns zero (the memory access is suppressed), and its
// attention output is zero, so its X1 row is X_i plus Wo applied to zero.
// The Wo projection and residual are still run for every row.
//
// Score scaling: `scale` (gamma / sqrt(d_k), Q8.8) and `bias` (-log 128 for
// the biased sigmoid, Q8.8) are read from the layer's weight segment at
// start. Memory reads are synchronous; every stream therefore has a two-cycle
// pipeline (read, multiply/sum) before results are written. One row takes
// about 2 * (128 + 128) + 46 cycles plus a few cycles of pipeline fill per
// stream; a skipped row only the 46 + fill of the Wo stream.
//
// Follows the accelerator: the head split, the sigmoid-with-bias activation
// through a LUT, the input-stationary projections with row reuse across Q, K,
// V, the streaming score computation, output-stationary A*V, the residual
// add and the row mask on projections and attention. This design's choices:
// row-level sequencing, the buffer organisation, the fixed-point rounding
// (see loc_pkg) and that layer normalisation is not applied.
//
// Lint note: the engines' dot_valid outputs are left unread (the FSM knows
// the one-cycle latency), and the top bits of the column counter c are only
// used to detect the end of a row.
module mha_unit
  import loc_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               mask_en,
  input  logic [N_TOK-1:0]   row_mask,
  // X buffer read port (synchronous)
  output logic [6:0]         x_raddr,
  input  q_t                 x_rdata [D_MODEL],
  // X1 buffer write port
  output logic               x1_we,
  output logic [6:0]         x1_waddr,
  output q_t                 x1_wdata [D_MODEL],
  // encoder weight read port (synchronous, segment-relative)
  output logic [8:0]         w_addr,
  input  q_t                 w_data [MAX_LANES],
  output logic               done,
  output logic [7:0]         n_attn_rows     // rows attended in this run
);
  typedef enum logic [3:0] {
    S_IDLE, S_SC0, S_SC1, S_PROW, S_PLD, S_PSTR, S_AROW, S_QLD, S_QLD2,
    S_SCORE, S_AV, S_WOLD, S_WOX, S_WOSTR
  } state_e;
  state_e state;

  localparam int unsigned N_QKV = 3 * D_MODEL;  // 138 columns

  logic [6:0]  row;
  logic        head;
  logic [7:0]  iss;        // next index to issue
  logic [7:0]  iss_n;      // number of indices in this stream
  logic        p1_v, p2_v;
  logic [7:0]  p1_i, p2_i;
  q_t          scale, bias;
  logic        row_skip;

  // ---------------- buffers ----------------
  q_t   q_row [D_MODEL], k_row [D_MODEL], v_row [D_MODEL];
  logic qkv_we;
  logic [6:0] q_raddr, kv_raddr;
  q_t   q_rd [D_MODEL], k_rd [D_MODEL], v_rd [D_MODEL];
  row_buffer #(.ROWS(N_TOK), .LANES(D_MODEL)) u_q (.clk, .we(qkv_we), .waddr(row), .wdata(q_row), .raddr(q_raddr),  .rdata(q_rd));
  row_buffer #(.ROWS(N_TOK), .LANES(D_MODEL)) u_k (.clk, .we(qkv_we), .waddr(row), .wdata(k_row), .raddr(kv_raddr), .rdata(k_rd));
  row_buffer #(.ROWS(N_TOK), .LANES(D_MODEL)) u_v (.clk, .we(qkv_we), .waddr(row), .wdata(v_row), .raddr(kv_raddr), .rdata(v_rd));

  logic [8:0] a_buf [N_TOK];   // attention weights of the current row/head
  logic [8:0] a_rd;
  q_t         av_row [D_MODEL];
  q_t         xi     [D_MODEL];
  q_t         o_row  [D_MODEL];

  // ---------------- engines ----------------
  logic ve46_load, ve46_en;
  q_t   ve46_x [D_MODEL], ve46_w [D_MODEL];
  acc_t ve46_dot;
  logic ve46_dv;
  ve_is #(.LANES(D_MODEL)) u_ve46 (.clk, .rst_n, .load(ve46_load), .x_in(ve46_x),
    .en(ve46_en), .w_in(ve46_w), .dot(ve46_dot), .dot_valid(ve46_dv));

  logic ve23_load, ve23_en;
  q_t   ve23_x [D_HEAD], ve23_w [D_HEAD];
  acc_t ve23_dot;
  logic ve23_dv;
  ve_is #(.LANES(D_HEAD)) u_ve23 (.clk, .rst_n, .load(ve23_load), .x_in(ve23_x),
    .en(ve23_en), .w_in(ve23_w), .dot(ve23_dot), .dot_valid(ve23_dv));

  logic os_clr, os_en;
  q_t   os_x, os_w [D_HEAD];
  acc_t os_acc [D_HEAD];
  ve_os #(.LANES(D_HEAD)) u_av (.clk, .rst_n, .clr(os_clr), .en(os_en), .x(os_x), .w(os_w), .acc(os_acc));

  q_t         score_s, score_t;
  logic [8:0] sig_a;
  sigmoid_lut u_sig (.s(score_t), .a(sig_a));

  logic issuing;
  logic stream_end;
  assign issuing    = (iss != iss_n);
  assign stream_end = !issuing && !p1_v && !p2_v;

  // masked K/V rows read as zero
  logic kv_gate;
  assign kv_gate = mask_en && row_mask[p1_i[6:0]];

  always_comb begin
    for (int k = 0; k < int'(D_MODEL); k++) begin
      ve46_x[k] = (state == S_PLD) ? x_rdata[k] : av_row[k];
      ve46_w[k] = w_data[k];
    end
    for (int k = 0; k < int'(D_HEAD); k++) begin
      ve23_x[k] = head ? q_rd[D_HEAD+k] : q_rd[k];
      ve23_w[k] = kv_gate ? q_t'(0) : (head ? k_rd[D_HEAD+k] : k_rd[k]);
      os_w[k]   = kv_gate ? q_t'(0) : (head ? v_rd[D_HEAD+k] : v_rd[k]);
    end
    os_x      = q_t'({7'd0, a_rd});
    ve46_load = (state == S_PLD) || (state == S_WOLD);
    ve46_en   = p1_v && (state == S_PSTR || state == S_WOSTR);
    ve23_load = (state == S_QLD2);
    ve23_en   = p1_v && (state == S_SCORE);
    os_en     = p1_v && (state == S_AV);
    os_clr    = os_en && (p1_i == 8'd0);
    // score post-processing: requantise, scale, bias
    score_s   = requant(ve23_dot);
    score_t   = sat16(((acc_t'(score_s) * acc_t'(scale)) >>> FRAC) + acc_t'(bias));
    // addresses
    x_raddr   = row;
    q_raddr   = row;
    kv_raddr  = iss[6:0];
    case (state)
      S_SC0:   w_addr = 9'(OFF_SC);
      S_PSTR:  w_addr = 9'(OFF_WQ) + 9'(iss);
      S_WOSTR: w_addr = 9'(OFF_WO) + 9'(iss);
      default: w_addr = 9'(OFF_WQ);
    endcase
    row_skip  = mask_en && row_mask[row];
    qkv_we    = (state == S_PSTR) && stream_end;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; row <= '0; head <= 1'b0; iss <= '0; iss_n <= '0;
      p1_v <= 1'b0; p2_v <= 1'b0; p1_i <= '0; p2_i <= '0;
      scale <= '0; bias <= '0; done <= 1'b0;
      x1_we <= 1'b0; x1_waddr <= '0; a_rd <= '0; n_attn_rows <= '0;
      for (int k = 0; k < int'(D_MODEL); k++) begin
        q_row[k] <= '0; k_row[k] <= '0; v_row[k] <= '0; av_row[k] <= '0;
        xi[k] <= '0; o_row[k] <= '0; x1_wdata[k] <= '0;
      end
      for (int j = 0; j < int'(N_TOK); j++) a_buf[j] <= '0;
    end else begin
      done   <= 1'b0;
      x1_we  <= 1'b0;
      // generic two-stage stream pipeline
      p1_v <= 1'b0;
      if (issuing && (state == S_PSTR || state == S_SCORE || state == S_AV || state == S_WOSTR)) begin
        p1_v <= 1'b1;
        p1_i <= iss;
        iss  <= iss + 1'b1;
      end
      p2_v <= p1_v && (state == S_PSTR || state == S_SCORE || state == S_WOSTR);
      p2_i <= p1_i;
      a_rd <= a_buf[iss[6:0]];

      case (state)
        S_IDLE: if (start) begin
          state <= S_SC0; row <= '0; n_attn_rows <= '0;
        end
        S_SC0: state <= S_SC1;
        S_SC1: begin
          scale <= w_data[0];
          bias  <= w_data[1];
          state <= S_PROW;
        end
        // ---------- projection pass ----------
        S_PROW: begin
          if (row_skip) begin
            row <= row + 1'b1;
            if (row == 7'(N_TOK - 1)) state <= S_AROW;
          end else state <= S_PLD;
        end
        S_PLD: begin   // x_rdata valid, loaded into VE_I this cycle
          iss <= '0; iss_n <= 8'(N_QKV);
          state <= S_PSTR;
        end
        S_PSTR: begin
          if (p2_v) begin
            logic [7:0] c;
            if (p2_i < 8'(D_MODEL)) q_row[p2_i[5:0]] <= requant(ve46_dot);
            else if (p2_i < 8'(2*D_MODEL)) begin
              c = p2_i - 8'(D_MODEL);
              k_row[c[5:0]] <= requant(ve46_dot);
            end else begin
              c = p2_i - 8'(2*D_MODEL);
              v_row[c[5:0]] <= requant(ve46_dot);
            end
          end
          if (stream_end) state <= S_PROW;   // rows written by qkv_we
        end
        // ---------- attention pass ----------
        S_AROW: begin
          head <= 1'b0;
          if (row_skip) begin
            for (int k = 0; k < int'(D_MODEL); k++) av_row[k] <= '0;
            state <= S_WOLD;
          end else begin
            n_attn_rows <= n_attn_rows + 1'b1;
            state <= S_QLD;
          end
        end
        S_QLD: state <= S_QLD2;          // Q row read in flight
        S_QLD2: begin                     // Q row valid, loaded into VE_I
          iss <= '0; iss_n <= 8'(N_TOK);
          state <= S_SCORE;
        end
        S_SCORE: begin
          if (p2_v) a_buf[p2_i[6:0]] <= sig_a;
          if (stream_end) begin
            iss <= '0; iss_n <= 8'(N_TOK);
            state <= S_AV;
          end
        end
        S_AV: begin
          if (stream_end) begin
            for (int k = 0; k < int'(D_HEAD); k++)
              av_row[(head ? D_HEAD : 0) + k] <= requant(os_acc[k]);
            if (head) state <= S_WOLD;
            else begin
              head  <= 1'b1;
              state <= S_QLD2;            // Q row still on q_rd
            end
          end
        end
        S_WOLD: state <= S_WOX;           // av_row loaded into VE_I, X_i read issued
        S_WOX: begin
          xi <= x_rdata;
          iss <= '0; iss_n <= 8'(D_MODEL);
          state <= S_WOSTR;
        end
        S_WOSTR: begin
          if (p2_v) o_row[p2_i[5:0]] <= sat16((ve46_dot >>> FRAC) + acc_t'(xi[p2_i[5:0]]));
          if (stream_end) begin
            x1_we    <= 1'b1;
            x1_waddr <= row;
            x1_wdata <= o_row;
            row      <= row + 1'b1;
            if (row == 7'(N_TOK - 1)) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else state <= S_AROW;
          end
        end
        default: state <= S_IDLE;
      endcase

      // end of the projection pass: after the last row is written
      if (state == S_PSTR && stream_end) begin
        row <= row + 1'b1;
        if (row == 7'(N_TOK - 1)) state <= S_AROW;
      end
    end
  end
endmodule
