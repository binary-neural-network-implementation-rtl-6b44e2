// bnn_pkg: constants, types and ROM-content functions shared by the BNN
// inference engine.
//
// The network is the fully connected 784-128-64-10 binary network of the
// design: 784 binarized pixels feed a 128-neuron and a 64-neuron hidden
// layer with folded batch-norm thresholds, and a 10-neuron output layer whose
// raw XNOR-popcount sums are compared by an argmax. Weights, activations and
// pixels are single bits: 1 stands for +1 and 0 for -1, so an XNOR of two bits
// is 1 exactly when their product is +1. Thresholds are 11-bit signed
// integers, as in the design's export flow.
//
// The trained parameters and the test images of the original work are not
// reproduced here. The ROMs are filled instead from a fixed 32-bit integer
// hash (weight_chunk, threshold_val, pixel_chunk below), so that every ROM can be
// elaborated without data files and every test can recompute the contents.
// Replacing those three functions (or the ROM initialisers) with trained data
// changes the network without touching the datapath.
package bnn_pkg;

  // Layer sizes. The architecture is fixed, as in the original design.
  localparam int unsigned N_IN  = 784;
  localparam int unsigned N_H1  = 128;
  localparam int unsigned N_H2  = 64;
  localparam int unsigned N_OUT = 10;

  localparam int unsigned TH_W  = 11;  // folded threshold, signed
  localparam int unsigned SUM_W = 11;  // z = 2*popcount - N, signed, |z| <= 784
  localparam int unsigned CNT_W = 10;  // popcount 0..784
  localparam int unsigned BIT_W = 10;  // input bit index 0..783

  // Controller stages: the five sequential stages of the inference.
  typedef enum logic [2:0] {
    S_L1       = 3'd0,   // first hidden layer
    S_L2       = 3'd1,   // second hidden layer
    S_OUT      = 3'd2,   // output layer (no threshold)
    S_CLASSIFY = 3'd3,   // argmax over the output sums
    S_DONE     = 3'd4    // result held until reset
  } state_e;

  // Sub-steps of processing one group of PAR neurons.
  typedef enum logic [1:0] {
    PH_LOAD = 2'd0,      // read ROM rows, clear popcounts
    PH_ACC  = 2'd1,      // one input bit per cycle
    PH_THR  = 2'd2       // compare with thresholds, store activations
  } phase_e;

  // 32-bit integer mixer (xor-shift-multiply avalanche hash).
  function automatic logic [31:0] mix32(input logic [31:0] v);
    logic [31:0] x;
    x = v;
    x = x ^ (x >> 16);
    x = x * 32'h7feb352d;
    x = x ^ (x >> 15);
    x = x * 32'h846ca68b;
    x = x ^ (x >> 16);
    return x;
  endfunction

  // ROM contents are produced 16 bits at a time: chunk c of a row holds
  // elements 16*c ... 16*c+15, element 16*c+b in bit b. All row widths of the
  // network (784, 128, 64) are multiples of 16.
  localparam int unsigned CHUNK = 16;

  // Weights of inputs 16*c .. 16*c+15 of neuron `neuron` in layer `layer`.
  function automatic logic [CHUNK-1:0] weight_chunk(input int unsigned layer,
                                                    input int unsigned neuron,
                                                    input int unsigned c);
    logic [31:0] h;
    h = mix32(32'(layer) * 32'h0100_0000 + 32'(neuron) * 32'h0000_1000 + 32'(c));
    return h[CHUNK-1:0] ^ h[31:32-CHUNK];
  endfunction

  // Folded threshold of neuron `neuron` of hidden layer `layer`, in -16..16.
  function automatic logic signed [TH_W-1:0] threshold_val(input int unsigned layer,
                                                           input int unsigned neuron);
    logic [31:0] h;
    h = mix32(32'h5a00_0000 + 32'(layer) * 32'h0001_0000 + 32'(neuron));
    return TH_W'(int'(h % 33) - 16);
  endfunction

  // Pixels 16*c .. 16*c+15 (row-major, 28x28) of test image `image`; the AND
  // of two hash halves gives about 25% ones, near the ink density of a
  // binarized handwritten digit.
  function automatic logic [CHUNK-1:0] pixel_chunk(input int unsigned image,
                                                   input int unsigned c);
    logic [31:0] h;
    h = mix32(32'hc300_0000 + 32'(image) * 32'h0000_1000 + 32'(c));
    return h[CHUNK-1:0] & h[31:32-CHUNK];
  endfunction

  function automatic int unsigned ceil_div(input int unsigned a, input int unsigned b);
    return (a + b - 1) / b;
  endfunction

endpackage
