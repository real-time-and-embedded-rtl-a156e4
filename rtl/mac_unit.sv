// mac_unit: multiply-add-accumulate of one neuron.
//
// Each neuron of a layer owns one of these: a multiplier, an adder and an
// accumulator register whose output feeds back into the adder, exactly the
// multiply / add / reg chain of the layer block diagram. Over N cycles it
// forms the dot product sum_i x_i * W_ij plus the neuron's bias.
//   clear : acc <= bias, aligned to the product scale (bias << FRAC_BITS)
//   en    : acc <= acc + x * w   (full-precision signed product)
// `clear` wins over `en`. Both act at the rising clock edge; `acc` is the
// register output. ACC_W must be wide enough for N products; the default
// leaves room for the 1800 synapses of the first layer, so the sum never
// wraps. Adding the bias at the start (rather than at the end) is this
// design's choice: the paper's neuron computes sigma(theta x + b) without
// saying where b is added.
module mac_unit #(
  parameter int unsigned DATA_W    = fnn_pkg::DATA_W,
  parameter int unsigned FRAC_BITS = fnn_pkg::FRAC_BITS,
  parameter int unsigned ACC_W     = fnn_pkg::acc_width(fnn_pkg::N_IN)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     en,
  input  logic signed [DATA_W-1:0] bias,
  input  logic signed [DATA_W-1:0] x,
  input  logic signed [DATA_W-1:0] w,
  output logic signed [ACC_W-1:0]  acc
);

  logic signed [2*DATA_W-1:0] prod;
  logic signed [ACC_W-1:0]    bias_ext;

  assign prod     = x * w;
  assign bias_ext = ACC_W'(bias) <<< FRAC_BITS;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     acc <= '0;
    else if (clear) acc <= bias_ext;
    else if (en)    acc <= acc + ACC_W'(prod);
  end

endmodule
