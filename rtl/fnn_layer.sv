// fnn_layer: one fully connected layer of M neurons over N inputs.
//
// This is the layer engine of the published block diagram. An address
// generator steps the synapse index i from 0 to N-1, one step per clock. In
// each step the input x_i (read from the previous stage through `x_addr` /
// `x_data`) is broadcast to all M neurons, each neuron's weight W_ij comes
// out of its column of the weight memory, and all M multiply-accumulate
// units update in parallel. After the last synapse every accumulator passes
// through its output stage (scaling, saturation and, if RELU, the ReLU) and
// is written into the neuron output register, which the next layer reads
// through `y_rd_addr` / `y_rd_data`.
// Timing: `start` is taken in IDLE; `done` pulses N + 2 cycles later when the
// write-back is not stalled. The write-back waits while `out_ready` is low,
// i.e. while the next layer is still reading the previous outputs.
// `x_data` must be valid in the same cycle as `x_addr` (asynchronous read).
// The weight load port (`wl_*`) may only be used while the layer is idle.
// `sat_any` / `clip_any` pulse with the write-back if any neuron saturated or
// was set to 0 by the ReLU.
// Parallel neurons, one synapse per cycle and the ReLU by a conditional
// follow the paper; the handshakes, bias handling and fixed-point scaling
// are this design's choices.
module fnn_layer #(
  parameter int unsigned N         = fnn_pkg::N_IN,
  parameter int unsigned M         = fnn_pkg::N_H1,
  parameter bit          RELU      = 1'b1,
  parameter int unsigned DATA_W    = fnn_pkg::DATA_W,
  parameter int unsigned FRAC_BITS = fnn_pkg::FRAC_BITS,
  localparam int unsigned AW       = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned YAW      = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned ACC_W    = fnn_pkg::acc_width(N)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // control
  input  logic                     start,
  input  logic                     out_ready,
  output logic                     busy,
  output logic                     out_load,
  output logic                     done,
  // input side: x_i
  output logic [AW-1:0]            x_addr,
  input  logic signed [DATA_W-1:0] x_data,
  // output side
  output logic signed [DATA_W-1:0] y [M],
  input  logic [YAW-1:0]           y_rd_addr,
  output logic signed [DATA_W-1:0] y_rd_data,
  // weight / bias load
  input  logic                     wl_we,
  input  logic                     wl_bias_we,
  input  logic [AW-1:0]            wl_addr,
  input  logic signed [DATA_W-1:0] wl_row [M],
  // status
  output logic                     sat_any,
  output logic                     clip_any
);

  logic clear, mac_en, addr_last;
  logic signed [DATA_W-1:0] w_row  [M];
  logic signed [DATA_W-1:0] bias   [M];
  logic signed [ACC_W-1:0]  acc    [M];
  logic signed [DATA_W-1:0] act    [M];
  logic [M-1:0]             sat_v, clip_v;

  address_gen #(.N(N)) u_addr (
    .clk, .rst_n, .clr(clear), .en(mac_en), .addr(x_addr), .last(addr_last)
  );

  control_unit u_ctrl (
    .clk, .rst_n, .start, .addr_last, .out_ready,
    .clear, .mac_en, .out_load, .done, .busy
  );

  weight_memory #(.N(N), .M(M), .DATA_W(DATA_W)) u_wmem (
    .clk, .wr_en(wl_we), .bias_wr(wl_bias_we), .wr_addr(wl_addr), .wr_row(wl_row),
    .rd_addr(x_addr), .rd_row(w_row), .bias
  );

  for (genvar j = 0; j < M; j++) begin : g_neuron
    mac_unit #(.DATA_W(DATA_W), .FRAC_BITS(FRAC_BITS), .ACC_W(ACC_W)) u_mac (
      .clk, .rst_n, .clear, .en(mac_en), .bias(bias[j]), .x(x_data), .w(w_row[j]),
      .acc(acc[j])
    );
    relu_unit #(.DATA_W(DATA_W), .FRAC_BITS(FRAC_BITS), .ACC_W(ACC_W), .RELU(RELU)) u_relu (
      .acc(acc[j]), .y(act[j]), .sat(sat_v[j]), .clipped(clip_v[j])
    );
  end

  neuron_out_reg #(.M(M), .DATA_W(DATA_W)) u_out (
    .clk, .rst_n, .load(out_load), .din(act), .q(y),
    .rd_addr(y_rd_addr), .rd_data(y_rd_data)
  );

  assign sat_any  = out_load && (|sat_v);
  assign clip_any = out_load && (|clip_v);

  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                         (wl_we || wl_bias_we) |-> !busy);

endmodule
