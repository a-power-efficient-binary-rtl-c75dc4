// bwsnn_pkg: shared constants of the binary-weight spiking neural network (BW-SNN)
// accelerator.
//
// The five layer shapes are those of the 5-layer convolutional network the design
// was built for (3x3 kernels, stride 1, no zero padding). The membrane-potential
// width V_W is this design's own choice: 12 bits is what the chip's 12.75 KB of
// neuron memory gives per neuron (13056 bytes / 8280 neurons = 12.6 bits).
// psum_width() is the signed width that holds any sum of C*I*J products in {-1,0,+1}.
package bwsnn_pkg;

  // Membrane potential, threshold and bias width (two's complement).
  localparam int unsigned V_W = 12;

  // Number of layers of the network.
  localparam int unsigned NUM_LAYERS = 5;

  // Layer shapes: input channels C, input height/width H=W, kernel I=J, kernels K.
  localparam int unsigned L_C [NUM_LAYERS] = '{3, 16, 16, 16, 16};
  localparam int unsigned L_H [NUM_LAYERS] = '{16, 14, 12, 10, 8};
  localparam int unsigned L_I [NUM_LAYERS] = '{3, 3, 3, 3, 3};
  localparam int unsigned L_K [NUM_LAYERS] = '{16, 16, 16, 16, 6};

  // Widths of the configuration ports of the top level.
  localparam int unsigned CFG_LAYER_W = 3;   // layer select, 0..4
  localparam int unsigned WT_ADDR_W   = 8;   // (i*J+j)*K+k < 144
  localparam int unsigned WT_DATA_W   = 16;  // one bit per input channel, C <= 16
  localparam int unsigned CFG_K_W     = 4;   // kernel index, K <= 16

  // Signed width that holds +-n.
  function automatic int unsigned psum_width(input int unsigned n);
    return $clog2(n + 1) + 1;
  endfunction

  // Width of an index of n items (at least 1 bit).
  function automatic int unsigned idx_width(input int unsigned n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

endpackage
