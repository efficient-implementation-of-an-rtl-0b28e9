// sparsity_unit: row-skip mask generation from the beam-delay input.
//
// Each input row (one beam, LANES delay-bin amplitudes) arrives in one cycle
// with `row_valid`. Every element below the element threshold `te` (Q8.8)
// counts as zero; if the number of zeros in the row is greater than the row
// threshold `tr`, the row's bit in `row_mask` is set and the row will be
// skipped by the attention stages. Rows are numbered in arrival order from 0
// after `start`, which clears the mask and the counters. `done` rises (and
// stays high until the next `start`) one cycle after the ROWS-th row;
// `n_skipped` counts masked rows.
//
// The two-stage rule (element threshold, then Z_i > T_r on the zero count) is
// the accelerator's. Counting all lanes of a row in one cycle and the signed
// compare are this design's choices; the thresholds are programmable per
// scenario by the caller. Thresholding is used only to decide the mask: the
// stored input keeps its values.
module sparsity_unit
  import loc_pkg::*;
#(
  parameter int unsigned ROWS  = 128,
  parameter int unsigned LANES = 46
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  q_t                         te,
  input  logic [$clog2(LANES+1)-1:0] tr,
  input  logic                       row_valid,
  input  q_t                         row [LANES],
  output logic [ROWS-1:0]            row_mask,
  output logic [$clog2(ROWS+1)-1:0]  n_skipped,
  output logic                       done
);
  localparam int unsigned CW = $clog2(LANES+1);
  logic [CW-1:0]              zeros;
  logic [$clog2(ROWS+1)-1:0]  cnt;

  always_comb begin
    zeros = '0;
    for (int k = 0; k < int'(LANES); k++)
      zeros += CW'(row[k] < te);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_mask  <= '0;
      n_skipped <= '0;
      cnt       <= '0;
      done      <= 1'b0;
    end else if (start) begin
      row_mask  <= '0;
      n_skipped <= '0;
      cnt       <= '0;
      done      <= 1'b0;
    end else if (row_valid && !done) begin
      row_mask[cnt[$clog2(ROWS)-1:0]] <= (zeros > tr);
      n_skipped <= n_skipped + ($bits(n_skipped))'(zeros > tr);
      cnt       <= cnt + 1'b1;
      if (cnt == ($clog2(ROWS+1))'(ROWS - 1)) done <= 1'b1;
    end
  end
endmodule
