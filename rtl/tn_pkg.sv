// tn_pkg: constants and types shared by the threshold-neuron datapath.
//
// All activations, thresholds and biases are signed two's complement numbers
// of TN_DATA_W bits. Eight bits matches the 8-bit symmetric quantization under
// which the network was evaluated; signedness is this design's choice.
// A neuron's polarity is one bit: positive neurons add their thresholded
// terms, negative neurons subtract them (excitation and inhibition).
package tn_pkg;

  localparam int unsigned TN_DATA_W = 8;

  typedef enum logic {
    POL_POS = 1'b0,  // excitation neuron: Y = +sum T + b
    POL_NEG = 1'b1   // inhibition neuron: Y = -sum T + b
  } polarity_e;

endpackage
