// relu_unit: output stage of one neuron.
//
// The accumulator holds the dot product with 2*FRAC_BITS fractional bits.
// This stage brings it back to a DATA_W word with FRAC_BITS fractional bits
// (arithmetic shift right, i.e. rounding toward minus infinity), saturates it
// to the signed DATA_W range, and, when RELU is 1, applies the rectified
// linear unit max(0, v) as a plain conditional: negative values become 0.
// RELU is 1 for the hidden layers and 0 for the output layer, whose raw
// scores go to the label decision. Purely combinational.
// Flags: `sat` is high when the value had to be clamped, `clipped` when the
// ReLU replaced a negative value with 0.
// The conditional ReLU follows the paper; the shift, truncation and
// saturation are this design's choices for the unspecified 16-bit format.
module relu_unit #(
  parameter int unsigned DATA_W    = fnn_pkg::DATA_W,
  parameter int unsigned FRAC_BITS = fnn_pkg::FRAC_BITS,
  parameter int unsigned ACC_W     = fnn_pkg::acc_width(fnn_pkg::N_IN),
  parameter bit          RELU      = 1'b1
) (
  input  logic signed [ACC_W-1:0]  acc,
  output logic signed [DATA_W-1:0] y,
  output logic                     sat,
  output logic                     clipped
);

  localparam logic signed [ACC_W-1:0] MAXV = ACC_W'((64'sd1 <<< (DATA_W - 1)) - 1);
  localparam logic signed [ACC_W-1:0] MINV = -(ACC_W'(64'sd1 <<< (DATA_W - 1)));

  logic signed [ACC_W-1:0]  scaled;
  logic signed [DATA_W-1:0] clamped;

  always_comb begin
    scaled  = acc >>> FRAC_BITS;
    sat     = 1'b0;
    if (scaled > MAXV) begin
      clamped = MAXV[DATA_W-1:0];
      sat     = 1'b1;
    end else if (scaled < MINV) begin
      clamped = MINV[DATA_W-1:0];
      sat     = 1'b1;
    end else begin
      clamped = scaled[DATA_W-1:0];
    end
    if (RELU && clamped < 0) begin
      y       = '0;
      clipped = 1'b1;
    end else begin
      y       = clamped;
      clipped = 1'b0;
    end
  end

endmodule
