// fnn_pkg: types and constants shared by the RF signal classifier.
//
// The classifier is a fully connected feedforward network (FNN) with four
// layers of 1800, 100, 20 and 7 neurons. The 1800 inputs are the I and Q
// words of 900 received I/Q samples; the 7 outputs score noise and six
// modulation types. All values are 16-bit signed fixed point. The layer
// sizes, the 16-bit word and the label order follow the published design;
// the position of the binary point (FRAC_BITS) is this design's own choice.
package fnn_pkg;

  // Word width of inputs, weights, biases and activations.
  parameter int unsigned DATA_W    = 16;
  // Fractional bits of the fixed-point format (Q7.8).
  parameter int unsigned FRAC_BITS = 8;

  // Network shape.
  parameter int unsigned IQ_SAMPLES = 900;             // I/Q samples per data sample
  parameter int unsigned N_IN       = 2 * IQ_SAMPLES;  // 1800 input neurons
  parameter int unsigned N_H1       = 100;             // first hidden layer
  parameter int unsigned N_H2       = 20;              // second hidden layer
  parameter int unsigned N_OUT      = 7;               // output layer

  typedef logic signed [DATA_W-1:0] data_t;

  // One complex baseband sample as delivered by the RF front end.
  typedef struct packed {
    data_t i;
    data_t q;
  } iq_t;

  // Output labels, in the order of the output neurons.
  typedef enum logic [2:0] {
    LBL_NOISE = 3'd0,
    LBL_BPSK  = 3'd1,
    LBL_QPSK  = 3'd2,
    LBL_CPM   = 3'd3,
    LBL_GFSK  = 3'd4,
    LBL_QAM16 = 3'd5,
    LBL_GMSK  = 3'd6
  } label_e;

  // Accumulator width that holds N products of two DATA_W words plus a bias
  // without overflow.
  function automatic int unsigned acc_width(int unsigned n);
    return 2 * DATA_W + $clog2(n + 1) + 1;
  endfunction

endpackage
