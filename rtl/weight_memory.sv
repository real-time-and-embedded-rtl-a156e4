// weight_memory: weights W_ij and biases b_j of one layer.
//
// The memory is organised as M columns, one per neuron, each N words deep
// (N synapses), as drawn in the layer block diagram. The synapse index i
// reads word i of every column at once, so all M neurons receive their weight
// for input x_i in the same cycle. The read is asynchronous (a LUT-RAM style
// read), so `rd_row` follows `rd_addr` within the same cycle.
// The weights come from offline training. The paper builds them into the
// FPGA bit file; here they are written through a load port instead: with
// `wr_en` high, `wr_row` (one weight per neuron) is written at row `wr_addr`;
// with `bias_wr` high, `wr_row` is written into the M bias registers.
// The load port, and keeping the biases beside the weights, are this
// design's choices.
module weight_memory #(
  parameter int unsigned N      = fnn_pkg::N_IN,
  parameter int unsigned M      = fnn_pkg::N_H1,
  parameter int unsigned DATA_W = fnn_pkg::DATA_W,
  localparam int unsigned AW    = (N > 1) ? $clog2(N) : 1
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic                     bias_wr,
  input  logic [AW-1:0]            wr_addr,
  input  logic signed [DATA_W-1:0] wr_row [M],
  input  logic [AW-1:0]            rd_addr,
  output logic signed [DATA_W-1:0] rd_row [M],
  output logic signed [DATA_W-1:0] bias   [M]
);

  logic signed [DATA_W-1:0] mem [N][M];

  always_ff @(posedge clk) begin
    if (wr_en)   mem[wr_addr] <= wr_row;
    if (bias_wr) bias         <= wr_row;
  end

  assign rd_row = mem[rd_addr];

  a_wr_in_range: assert property (@(posedge clk) wr_en |-> int'(wr_addr) < N);

endmodule
