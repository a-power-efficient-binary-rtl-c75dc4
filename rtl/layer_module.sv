// layer_module: one convolutional layer of the BW-SNN, as a streaming pipeline.
//
// The layer receives the spike map of the previous layer as a stream of C-bit
// vectors in raster order (H rows of W vectors per time step) and produces its own
// spike map as a stream of K-bit vectors in the same raster order (X = H-I+1 rows
// of Y = W-J+1 vectors per time step), so its output can feed the next layer
// directly. Inside:
//   buffer_chain    delays the input so that the I x J neighbourhood of the
//                   current output position is present at the taps;
//   pe_array        multiplies the neighbourhood with the binary weights and sums,
//                   giving K weight sums;
//   flow_controller tracks the raster position and marks valid windows;
//   local_buffer    holds the K x X x Y membrane potentials and the per-kernel
//                   thresholds and biases;
//   neuron_block    K integrate-and-fire neurons updating one position per cycle.
//
// Layer variants: a fully-connected layer is I = J = 1; DEPTHWISE (C == K) maps
// kernel k onto channel k only (depthwise convolution, or average pooling with all
// weights +1). The 5-layer network uses plain convolutions.
//
// Pipeline (one vector per cycle, no stalls):
//   edge 0  the chain shifts in the vector that completes a window; the flow
//           controller registers win_valid and the output address;
//   cycle 1 the PE array sums combinationally; the sums are registered and the
//           potential word of that address is read;
//   cycle 2 the neurons update; the new potentials are written back and the spike
//           vector is registered;
//   cycle 3 out_valid / out_spike.
// An output therefore appears 3 cycles after the input vector that completed its
// window. A given address is read again only a full time step later, so the
// read-modify-write needs no forwarding. in_valid may have gaps; there is no
// back-pressure. The block structure follows the paper; the pipeline split, the
// configuration ports and the first-time-step handling are this design's choices.
module layer_module
  import bwsnn_pkg::*;
#(
  parameter int unsigned C  = 16,
  parameter int unsigned H  = 14,
  parameter int unsigned W  = 14,
  parameter int unsigned I  = 3,
  parameter int unsigned J  = 3,
  parameter int unsigned K  = 16,
  parameter int unsigned VW = V_W,
  parameter bit          DEPTHWISE = 1'b0,
  localparam int unsigned X      = H - I + 1,
  localparam int unsigned Y      = W - J + 1,
  localparam int unsigned PSUM_W = psum_width(C * I * J),
  localparam int unsigned A_W    = idx_width(X * Y),
  localparam int unsigned WA_W   = idx_width(I * J * K),
  localparam int unsigned K_W    = idx_width(K)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  // spike stream in
  input  logic                 in_valid,
  input  logic [C-1:0]         in_spike,
  // spike stream out
  output logic                 out_valid,
  output logic [K-1:0]         out_spike,
  output logic                 out_last,
  output logic                 out_sat,
  // oldest vector of the buffer chain (skip-connection path)
  output logic [C-1:0]         bypass_spike,
  // weight load
  input  logic                 wt_we,
  input  logic [WA_W-1:0]      wt_addr,
  input  logic [C-1:0]         wt_data,
  // threshold / bias load
  input  logic                 cfg_we,
  input  logic                 cfg_is_bias,
  input  logic [K_W-1:0]       cfg_k,
  input  logic signed [VW-1:0] cfg_data
);

  logic [C-1:0]             window [I][J];
  logic signed [PSUM_W-1:0] wsum   [K];

  logic           win_valid, win_first, win_last;
  logic [A_W-1:0] win_addr;

  // stage 1 registers
  logic                     s1_valid, s1_first, s1_last;
  logic [A_W-1:0]           s1_addr;
  logic signed [PSUM_W-1:0] s1_wsum [K];

  logic signed [VW-1:0] rd_vmem [K], new_vmem [K], threshold [K], bias [K];
  logic [K-1:0]         spike, saturated;

  buffer_chain #(.C(C), .W(W), .I(I), .J(J)) u_chain (
    .clk, .rst_n, .in_valid, .in_spike, .window, .bypass_spike
  );

  flow_controller #(.H(H), .W(W), .I(I), .J(J)) u_flow (
    .clk, .rst_n, .start, .in_valid, .win_valid, .win_addr, .win_first, .win_last
  );

  pe_array #(.C(C), .K(K), .I(I), .J(J), .PSUM_W(PSUM_W), .DEPTHWISE(DEPTHWISE)) u_pes (
    .clk, .wt_we, .wt_addr, .wt_data, .window, .wsum
  );

  local_buffer #(.K(K), .DEPTH(X * Y), .VW(VW)) u_lbuf (
    .clk, .rst_n,
    .rd_en  (win_valid),
    .rd_addr(win_addr),
    .rd_vmem(rd_vmem),
    .wr_en  (s1_valid),
    .wr_addr(s1_addr),
    .wr_vmem(new_vmem),
    .cfg_we, .cfg_is_bias, .cfg_k, .cfg_data,
    .threshold, .bias
  );

  neuron_block #(.K(K), .PSUM_W(PSUM_W), .VW(VW)) u_neurons (
    .clear    (s1_first),
    .wsum     (s1_wsum),
    .vmem_in  (rd_vmem),
    .threshold(threshold),
    .bias     (bias),
    .vmem_out (new_vmem),
    .spike    (spike),
    .saturated(saturated)
  );

  always_ff @(posedge clk) begin
    if (!rst_n || start) begin
      s1_valid  <= 1'b0;
      s1_first  <= 1'b0;
      s1_last   <= 1'b0;
      s1_addr   <= '0;
      out_valid <= 1'b0;
      out_spike <= '0;
      out_last  <= 1'b0;
      out_sat   <= 1'b0;
      for (int k = 0; k < K; k++) s1_wsum[k] <= '0;
    end else begin
      s1_valid  <= win_valid;
      s1_first  <= win_first;
      s1_last   <= win_last;
      s1_addr   <= win_addr;
      s1_wsum   <= wsum;
      out_valid <= s1_valid;
      out_spike <= s1_valid ? spike : '0;
      out_last  <= s1_valid && s1_last;
      out_sat   <= s1_valid && (|saturated);
    end
  end

endmodule
