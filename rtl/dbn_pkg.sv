// dbn_pkg - constants and command types shared by the memristive DBN.
//
// The layer sizes are those of the network trained on MNIST: 784 visible
// (binarized 28x28 image), 500 and 500 hidden units, a 2000-unit top layer
// and 10 one-hot label units that join the visible side of the top RBM.
// A CD threshold of 64 gives the best accuracy for the ideal device.
// The command encodings below are this design's own choice.
package dbn_pkg;

  localparam int unsigned N_VIS   = 784;   // input image pixels
  localparam int unsigned N_H1    = 500;   // hidden layer 1
  localparam int unsigned N_H2    = 500;   // hidden layer 2
  localparam int unsigned N_H3    = 2000;  // hidden layer 3 (top)
  localparam int unsigned N_LAB   = 10;    // label neurons
  localparam int unsigned CD_TH   = 64;    // CD accumulation threshold
  localparam int unsigned N_IMAGES = 60000; // MNIST training images
  localparam int unsigned N_EPOCHS = 30;    // epochs per RBM

  // Step executed by one mixed-signal RBM layer.
  typedef enum logic [1:0] {
    LC_FWD   = 2'd0,  // v -> h (one forward VMM and sampling)
    LC_BWD   = 2'd1,  // h -> v' (one backward VMM and sampling)
    LC_TRAIN = 2'd2,  // v -> h -> v' -> h', accumulate CD, update weights
    LC_INIT  = 2'd3   // initialize weights, clear CD counters
  } layer_cmd_e;

  // Operation requested from the whole DBN.
  typedef enum logic [1:0] {
    OP_INIT  = 2'd0,  // initialize all layers
    OP_TRAIN = 2'd1,  // greedy training from a given layer up to the top
    OP_INFER = 2'd2   // recognize one image
  } dbn_op_e;

  // Ternary contrastive-divergence element v*h - v'*h'.
  function automatic logic signed [1:0] cd_elem(input logic v, input logic h,
                                                input logic vr, input logic hr);
    return $signed({1'b0, v & h}) - $signed({1'b0, vr & hr});
  endfunction

endpackage
