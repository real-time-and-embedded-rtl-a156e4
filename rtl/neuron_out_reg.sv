// neuron_out_reg: neuron output register of one layer.
//
// Holds the M activations of a layer after its dot products finish. `load`
// captures all M values of `din` at the clock edge. The whole vector is
// available on `q`; in addition `rd_addr` selects one word on `rd_data`
// (combinational), which is how the next layer reads it as its input x_i.
// The register is named in the layer block diagram; the addressed read port
// is this design's way of feeding the next layer.
module neuron_out_reg #(
  parameter int unsigned M      = fnn_pkg::N_H1,
  parameter int unsigned DATA_W = fnn_pkg::DATA_W,
  localparam int unsigned AW    = (M > 1) ? $clog2(M) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     load,
  input  logic signed [DATA_W-1:0] din [M],
  output logic signed [DATA_W-1:0] q   [M],
  input  logic [AW-1:0]            rd_addr,
  output logic signed [DATA_W-1:0] rd_data
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    q <= '{default: '0};
    else if (load) q <= din;
  end

  assign rd_data = (int'(rd_addr) < M) ? q[rd_addr] : '0;

endmodule
