// bwsnn_top: the 5-layer convolutional binary-weight spiking neural network.
//
// Five layer modules are chained; each consumes the spike stream of the one before
// it and produces its own, so the whole network is a single pipeline that takes one
// 3-channel input spike vector per cycle (a 16 x 16 raster per time step) and
// emits the 6-channel 6 x 6 spike map of the last layer. Layer shapes (input
// channels C, input size H = W, kernel 3 x 3, kernels K, output size X = Y):
//     Conv 1:  3, 16, 16 -> 14      Conv 2: 16, 14, 16 -> 12
//     Conv 3: 16, 12, 16 -> 10      Conv 4: 16, 10, 16 -> 8
//     Conv 5: 16,  8,  6 -> 6
// A time step takes 256 cycles of input; the last output of a time step leaves
// 5 x 3 = 15 cycles after the last input vector of that step. All weights live in
// the PE flip-flops and all neuron state in the per-layer local buffers, so no
// external memory is used during inference.
//
// Ports: start begins an inference (the first time step after it starts from zero
// potentials). in_valid/in_spike is the input stream from an external spike
// encoder; out_valid/out_spike/out_last the Conv 5 stream for an external spike
// decoder (out_last marks the last position of a time step). tap4_* is the Conv 4
// output stream, brought out because the network drawing shows a second output
// tapped after Conv 4 for MNIST without saying what is done with it. sat_flag
// reports that some neuron's potential saturated. Weights are written with wt_*
// (wt_layer 0..4, wt_addr = (i*3+j)*K+k, wt_data bit c = weight of channel c,
// 1 = +1, 0 = -1); thresholds and biases with cfg_* (cfg_is_bias 1 = bias). The
// configuration ports are this design's own; the paper does not describe them.
module bwsnn_top
  import bwsnn_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic                          in_valid,
  input  logic [L_C[0]-1:0]             in_spike,
  output logic                          out_valid,
  output logic [L_K[NUM_LAYERS-1]-1:0]  out_spike,
  output logic                          out_last,
  output logic                          tap4_valid,
  output logic [L_K[NUM_LAYERS-2]-1:0]  tap4_spike,
  output logic                          sat_flag,
  input  logic                          wt_we,
  input  logic [CFG_LAYER_W-1:0]        wt_layer,
  input  logic [WT_ADDR_W-1:0]          wt_addr,
  input  logic [WT_DATA_W-1:0]          wt_data,
  input  logic                          cfg_we,
  input  logic [CFG_LAYER_W-1:0]        cfg_layer,
  input  logic                          cfg_is_bias,
  input  logic [CFG_K_W-1:0]            cfg_k,
  input  logic signed [V_W-1:0]         cfg_data
);

  // Stream between layers: stage l is the input of layer l; 16 bits wide, the
  // widest layer, narrower streams use the low bits.
  logic        s_valid [NUM_LAYERS+1];
  logic [15:0] s_spike [NUM_LAYERS+1];
  logic        s_last  [NUM_LAYERS+1];
  logic        s_sat   [NUM_LAYERS+1];

  assign s_valid[0] = in_valid;
  assign s_spike[0] = 16'(in_spike);
  assign s_last[0]  = 1'b0;
  assign s_sat[0]   = 1'b0;

  for (genvar l = 0; l < NUM_LAYERS; l++) begin : g_layer
    localparam int unsigned C    = L_C[l];
    localparam int unsigned H    = L_H[l];
    localparam int unsigned I    = L_I[l];
    localparam int unsigned K    = L_K[l];
    localparam int unsigned WA_W = idx_width(I * I * K);
    localparam int unsigned K_W  = idx_width(K);

    logic [K-1:0] spike;
    logic [C-1:0] bypass;   // no skip connection in this network

    layer_module #(.C(C), .H(H), .W(H), .I(I), .J(I), .K(K), .VW(V_W)) u_layer (
      .clk, .rst_n, .start,
      .in_valid    (s_valid[l]),
      .in_spike    (s_spike[l][C-1:0]),
      .out_valid   (s_valid[l+1]),
      .out_spike   (spike),
      .out_last    (s_last[l+1]),
      .out_sat     (s_sat[l+1]),
      .bypass_spike(bypass),
      .wt_we       (wt_we && wt_layer == CFG_LAYER_W'(l)),
      .wt_addr     (wt_addr[WA_W-1:0]),
      .wt_data     (wt_data[C-1:0]),
      .cfg_we      (cfg_we && cfg_layer == CFG_LAYER_W'(l)),
      .cfg_is_bias (cfg_is_bias),
      .cfg_k       (cfg_k[K_W-1:0]),
      .cfg_data    (cfg_data)
    );
    assign s_spike[l+1] = 16'(spike);
  end

  assign out_valid  = s_valid[NUM_LAYERS];
  assign out_spike  = s_spike[NUM_LAYERS][L_K[NUM_LAYERS-1]-1:0];
  assign out_last   = s_last[NUM_LAYERS];
  assign tap4_valid = s_valid[NUM_LAYERS-1];
  assign tap4_spike = s_spike[NUM_LAYERS-1][L_K[NUM_LAYERS-2]-1:0];

  always_comb begin
    sat_flag = 1'b0;
    for (int l = 1; l <= NUM_LAYERS; l++) sat_flag |= s_sat[l];
  end

endmodule
