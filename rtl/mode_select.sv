// mode_select: sliding-window majority vote over the router's labels.
//
// The last WINDOW scenario labels from the router are kept in a shift
// register. On each `label_valid` the new label enters the window, and on the
// next cycle `mode` is set to the class that occurs most often among the
// labels held so far, with `mode_valid` pulsed. A single stray label
// therefore does not switch the model; after a real change of scenario the
// selection follows once the new label holds the majority.
//
// The window and the majority vote are the accelerator's, as is the window
// length of five. Counting only labels received since reset (instead of
// pre-filling the window) and breaking ties towards the lower class index are
// this design's choices.
module mode_select
  import loc_pkg::*;
#(
  parameter int unsigned WINDOW = 5
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  label_valid,
  input  scen_e label,
  output scen_e mode,
  output logic  mode_valid
);
  scen_e      win  [WINDOW];
  logic       held [WINDOW];
  logic       upd;
  logic [$clog2(WINDOW+1)-1:0] cnt [N_SCEN];
  scen_e      best;

  always_comb begin
    for (int c = 0; c < int'(N_SCEN); c++) cnt[c] = '0;
    for (int i = 0; i < int'(WINDOW); i++)
      for (int c = 0; c < int'(N_SCEN); c++)
        if (held[i] && win[i] == scen_e'(c)) cnt[c] += 1'b1;
    best = SCEN_S1;
    for (int c = 1; c < int'(N_SCEN); c++)
      if (cnt[c] > cnt[best]) best = scen_e'(c);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(WINDOW); i++) begin
        win[i]  <= SCEN_S1;
        held[i] <= 1'b0;
      end
      upd <= 1'b0; mode <= SCEN_S1; mode_valid <= 1'b0;
    end else begin
      upd        <= label_valid;
      mode_valid <= upd;
      if (label_valid) begin
        win[0]  <= label;
        held[0] <= 1'b1;
        for (int i = 1; i < int'(WINDOW); i++) begin
          win[i]  <= win[i-1];
          held[i] <= held[i-1];
        end
      end
      if (upd) mode <= best;
    end
  end
endmodule
