// rf_classifier_top: real-time FNN modulation classifier for I/Q samples.
//
// Received baseband samples stream in one complex sample per beat. Every
// IQ_SAMPLES samples (900) form one data sample: 1800 real inputs of a
// fully connected network with hidden layers of N_H1 (100) and N_H2 (20) ReLU
// neurons and an output layer of N_OUT (7) neurons, one per label: noise,
// BPSK, QPSK, CPM, GFSK, QAM16, GMSK. The network is three copies of the
// same layer engine (fnn_layer), each computing all its neurons in parallel
// at one synapse per clock, chained through their neuron output registers:
//
//   s_* -> input_buffer -> layer 1 (1800x100, ReLU) -> layer 2 (100x20, ReLU)
//       -> layer 3 (20x7) -> argmax_unit  -> label
//                             -> softmax_unit -> probs
//
// Timing: when the 900th sample of a frame is accepted and layer 1 is idle,
// layer 1 starts in the next cycle and label_valid follows
// (1800+2) + (100+2) + (20+2) + 1 = 1927 cycles after that start, i.e. 1928
// cycles after the last beat. The input buffer has two banks: the next frame
// streams into one while layer 1 reads the other, so a steady stream of up
// to 900/1803 samples per cycle is never refused; `s_ready` is low only when
// both banks hold frames that layer 1 has not yet finished. A layer stalls
// its write-back while the next layer is still reading its previous outputs;
// layer 3 likewise waits while the softmax is still busy with the previous
// scores (never at the default sizes).
// The softmax probabilities (Q0.16) follow 114 cycles after the label.
// Weights and biases are written through the wl_* port before use: wl_layer
// selects layer 1..3, wl_we writes row wl_addr (weight of synapse wl_addr
// for every neuron; wl_row has one word per neuron of the widest layer and
// only the first M entries are used for a layer of M neurons), wl_bias_we writes the layer's biases from wl_row. Loading
// is allowed only while the network is idle.
// Layer sizes, the 16-bit words, parallel neurons, ReLU hidden layers and the
// softmax output follow the paper; the stream and load interfaces, the
// double-buffered input, the fixed-point format and the layer-to-layer
// handshake are this design's own.
module rf_classifier_top #(
  parameter int unsigned IQ_SAMPLES = fnn_pkg::IQ_SAMPLES,
  parameter int unsigned N_H1       = fnn_pkg::N_H1,
  parameter int unsigned N_H2       = fnn_pkg::N_H2,
  parameter int unsigned N_OUT      = fnn_pkg::N_OUT,
  localparam int unsigned N_IN      = 2 * IQ_SAMPLES,
  localparam int unsigned AW1       = $clog2(N_IN),
  // load port: rows up to the longest layer, one word per neuron of the widest
  localparam int unsigned WL_N      = (N_IN > N_H1) ? ((N_IN > N_H2) ? N_IN : N_H2)
                                                    : ((N_H1 > N_H2) ? N_H1 : N_H2),
  localparam int unsigned WL_M      = (N_H1 > N_H2) ? ((N_H1 > N_OUT) ? N_H1 : N_OUT)
                                                    : ((N_H2 > N_OUT) ? N_H2 : N_OUT),
  localparam int unsigned WL_AW     = $clog2(WL_N),
  localparam int unsigned LW        = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // I/Q sample stream from the RF front end
  input  logic          s_valid,
  output logic          s_ready,
  input  fnn_pkg::iq_t  s_data,
  // weight and bias load
  input  logic [1:0]    wl_layer,
  input  logic          wl_we,
  input  logic          wl_bias_we,
  input  logic [WL_AW-1:0] wl_addr,
  input  fnn_pkg::data_t wl_row [WL_M],
  // result
  output logic          label_valid,
  output logic [LW-1:0] label,
  output fnn_pkg::data_t scores [N_OUT],
  output logic [15:0]   probs  [N_OUT],
  output logic          probs_valid,
  output logic          busy,
  // status: pulses when a layer writes back outputs that saturated or were
  // set to 0 by a ReLU (for monitoring the fixed-point range)
  output logic          sat_event,
  output logic          relu_event
);

  localparam int unsigned DATA_W = fnn_pkg::DATA_W;
  typedef fnn_pkg::data_t data_t;

  localparam int unsigned AW2 = (N_H1 > 1) ? $clog2(N_H1) : 1;
  localparam int unsigned AW3 = (N_H2 > 1) ? $clog2(N_H2) : 1;
  localparam int unsigned AW4 = (N_OUT > 1) ? $clog2(N_OUT) : 1;

  // input buffer
  logic           buf_full;
  logic [AW1-1:0] x1_addr;
  data_t          x1_data;

  // layer handshakes
  logic l1_busy, l1_load, l1_done;
  logic l2_busy, l2_done;
  logic l3_busy, l3_done;
  logic sm_busy;
  logic l1_sat, l1_clip, l2_sat, l2_clip, l3_sat, l3_clip;

  logic [AW2-1:0] x2_addr;
  data_t          x2_data;
  logic [AW3-1:0] x3_addr;
  data_t          x3_data;

  data_t wl_row1 [N_H1];
  data_t wl_row2 [N_H2];
  data_t wl_row3 [N_OUT];
  data_t y3_rd_unused;

  for (genvar k = 0; k < N_H1; k++) begin : g_row1
    assign wl_row1[k] = wl_row[k];
  end
  for (genvar k = 0; k < N_H2; k++) begin : g_row2
    assign wl_row2[k] = wl_row[k];
  end
  for (genvar k = 0; k < N_OUT; k++) begin : g_row3
    assign wl_row3[k] = wl_row[k];
  end

  input_buffer #(.IQ_SAMPLES(IQ_SAMPLES), .DATA_W(DATA_W)) u_inbuf (
    .clk, .rst_n,
    .s_valid, .s_ready, .s_i(s_data.i), .s_q(s_data.q),
    .full(buf_full), .release_buf(l1_load),
    .rd_addr(x1_addr), .rd_data(x1_data)
  );

  fnn_layer #(.N(N_IN), .M(N_H1), .RELU(1'b1)) u_l1 (
    .clk, .rst_n,
    .start(buf_full), .out_ready(!l2_busy),
    .busy(l1_busy), .out_load(l1_load), .done(l1_done),
    .x_addr(x1_addr), .x_data(x1_data),
    .y(), .y_rd_addr(x2_addr), .y_rd_data(x2_data),
    .wl_we(wl_we && wl_layer == 2'd1), .wl_bias_we(wl_bias_we && wl_layer == 2'd1),
    .wl_addr(wl_addr[AW1-1:0]), .wl_row(wl_row1),
    .sat_any(l1_sat), .clip_any(l1_clip)
  );

  fnn_layer #(.N(N_H1), .M(N_H2), .RELU(1'b1)) u_l2 (
    .clk, .rst_n,
    .start(l1_done), .out_ready(!l3_busy),
    .busy(l2_busy), .out_load(), .done(l2_done),
    .x_addr(x2_addr), .x_data(x2_data),
    .y(), .y_rd_addr(x3_addr), .y_rd_data(x3_data),
    .wl_we(wl_we && wl_layer == 2'd2), .wl_bias_we(wl_bias_we && wl_layer == 2'd2),
    .wl_addr(wl_addr[AW2-1:0]), .wl_row(wl_row2),
    .sat_any(l2_sat), .clip_any(l2_clip)
  );

  fnn_layer #(.N(N_H2), .M(N_OUT), .RELU(1'b0)) u_l3 (
    .clk, .rst_n,
    .start(l2_done), .out_ready(!sm_busy),
    .busy(l3_busy), .out_load(), .done(l3_done),
    .x_addr(x3_addr), .x_data(x3_data),
    .y(scores), .y_rd_addr(AW4'(0)), .y_rd_data(y3_rd_unused),
    .wl_we(wl_we && wl_layer == 2'd3), .wl_bias_we(wl_bias_we && wl_layer == 2'd3),
    .wl_addr(wl_addr[AW3-1:0]), .wl_row(wl_row3),
    .sat_any(l3_sat), .clip_any(l3_clip)
  );

  argmax_unit #(.M(N_OUT), .DATA_W(DATA_W)) u_argmax (
    .clk, .rst_n, .start(l3_done), .scores, .label, .valid(label_valid)
  );

  softmax_unit #(.M(N_OUT), .DATA_W(DATA_W), .P_W(16)) u_softmax (
    .clk, .rst_n, .start(l3_done), .scores, .prob(probs), .valid(probs_valid), .busy(sm_busy)
  );

  assign sat_event  = l1_sat || l2_sat || l3_sat;
  assign relu_event = l1_clip || l2_clip || l3_clip;

  assign busy = buf_full || l1_busy || l2_busy || l3_busy || l1_done || l2_done || l3_done || sm_busy;

endmodule
