// argmax_unit: label decision at the output layer.
//
// The classifier's label is C(x) = argmax_i softmax(z)_i. Softmax is strictly
// increasing in each score, so the argmax of the softmax equals the argmax of
// the raw output scores z; this unit therefore compares the M scores
// directly and does not form the exponentials. Ties go to the lower index.
// `start` (the output layer's done pulse) samples `scores`; one cycle later
// `label` holds the winning index and `valid` pulses for one cycle. `label`
// is held until the next decision.
// The argmax rule is the paper's; skipping the exponentials is this design's
// choice, as only the label leaves the classifier.
module argmax_unit #(
  parameter int unsigned M      = fnn_pkg::N_OUT,
  parameter int unsigned DATA_W = fnn_pkg::DATA_W,
  localparam int unsigned LW    = (M > 1) ? $clog2(M) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic signed [DATA_W-1:0] scores [M],
  output logic [LW-1:0]            label,
  output logic                     valid
);

  logic [LW-1:0]            best_idx;
  logic signed [DATA_W-1:0] best_val;

  always_comb begin
    best_idx = '0;
    best_val = scores[0];
    for (int unsigned k = 1; k < M; k++) begin
      if (scores[k] > best_val) begin
        best_val = scores[k];
        best_idx = LW'(k);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      label <= '0;
      valid <= 1'b0;
    end else begin
      valid <= start;
      if (start) label <= best_idx;
    end
  end

endmodule
