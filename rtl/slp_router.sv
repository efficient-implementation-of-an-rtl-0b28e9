// slp_router: single-layer perceptron that classifies the propagation scenario.
//
// The router sees one feature per beam: the amplitude at a fixed delay bin of
// each of the 128 input rows, presented one per cycle on `x` with `x_valid`
// (x1 first). Three PEs of an output-stationary engine (one per scenario
// class) multiply x_t by their weight W[c][t] and accumulate, so the logits
// y = W x + b build up over 128 cycles. Weights are read from the router's
// weight memory: the router drives `w_addr` = t in the cycle x_t arrives and
// uses `w_data` one cycle later, so x is delayed by one register to line up.
// After the last feature the bias word (address 128) is read and added, and
// the index of the largest logit (ties to the lower index) is given on
// `label` with a one-cycle `label_valid` pulse, three cycles after the last x.
//
// The three-PE output-stationary mapping and the argmax decision are the
// accelerator's; the memory timing and the tie rule are this design's.
module slp_router
  import loc_pkg::*;
#(
  parameter int unsigned N_IN = 128
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,      // clears the accumulators
  input  logic                          x_valid,
  input  q_t                            x,
  output logic [$clog2(N_IN+1)-1:0]     w_addr,
  input  q_t                            w_data [N_SCEN],
  output scen_e                         label,
  output logic                          label_valid,
  output q_t                            logits [N_SCEN]
);
  localparam int unsigned AW = $clog2(N_IN+1);
  logic [AW-1:0] cnt;
  logic          x_d_valid;
  q_t            x_d;
  logic          clr_pending;
  logic [1:0]    fin;            // bias fetch pipeline
  acc_t          acc [N_SCEN];

  ve_os #(.LANES(N_SCEN)) u_pe (
    .clk, .rst_n, .clr(clr_pending && x_d_valid), .en(x_d_valid),
    .x(x_d), .w(w_data), .acc(acc)
  );

  assign w_addr = (fin != 2'd0) ? AW'(N_IN) : cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; x_d_valid <= 1'b0; x_d <= '0; clr_pending <= 1'b1;
      fin <= 2'd0; label <= SCEN_S1; label_valid <= 1'b0;
      for (int c = 0; c < int'(N_SCEN); c++) logits[c] <= '0;
    end else begin
      label_valid <= 1'b0;
      x_d_valid   <= x_valid;
      x_d         <= x;
      if (start) begin
        cnt <= '0; clr_pending <= 1'b1; fin <= 2'd0;
      end else begin
        if (x_d_valid) clr_pending <= 1'b0;
        if (x_valid) begin
          cnt <= cnt + 1'b1;
          if (cnt == AW'(N_IN - 1)) fin <= 2'd1;
        end
        // fin 1: bias address on w_addr, last product accumulating
        // fin 2: bias on w_data, accumulators final -> decide
        if (fin == 2'd1) fin <= 2'd2;
        if (fin == 2'd2) begin
          logic [1:0] best;
          q_t y [N_SCEN];
          for (int c = 0; c < int'(N_SCEN); c++)
            y[c] = sat16((acc[c] >>> FRAC) + acc_t'(w_data[c]));
          best = 2'd0;
          for (int c = 1; c < int'(N_SCEN); c++)
            if (y[c] > y[best]) best = 2'(c);
          logits      <= y;
          label       <= scen_e'(best);
          label_valid <= 1'b1;
          fin         <= 2'd0;
        end
      end
    end
  end
endmodule
