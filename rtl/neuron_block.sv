// neuron_block: K parallel integrate-and-fire (IF) neurons of one output position.
//
// For each kernel k the neuron integrates the weight sum of the PE array and the
// kernel's bias into its membrane potential and fires when the threshold is
// reached:
//     v    = sat(V + wsum + bias)          (V taken as 0 when clear is high)
//     fire = (v >= threshold)
//     V'   = fire ? sat(v - threshold) : v
// sat() clamps to the signed V_W-bit range. The paper specifies an IF neuron with
// potentials, thresholds and biases held in the local buffer; the exact update
// (bias added every time step, reset by subtracting the threshold, saturation, no
// leak) is this design's choice.
//
// Interface: purely combinational. clear is the layer's first-time-step flag.
module neuron_block
  import bwsnn_pkg::*;
#(
  parameter int unsigned K      = 16,
  parameter int unsigned PSUM_W = 9,
  parameter int unsigned VW     = V_W
) (
  input  logic                     clear,
  input  logic signed [PSUM_W-1:0] wsum      [K],
  input  logic signed [VW-1:0]     vmem_in   [K],
  input  logic signed [VW-1:0]     threshold [K],
  input  logic signed [VW-1:0]     bias      [K],
  output logic signed [VW-1:0]     vmem_out  [K],
  output logic [K-1:0]             spike,
  output logic [K-1:0]             saturated
);

  localparam int unsigned EW = VW + 2;   // wide enough for three VW-bit terms
  localparam logic signed [EW-1:0] VMAX = EW'((1 <<< (VW - 1)) - 1);
  localparam logic signed [EW-1:0] VMIN = -EW'(1 <<< (VW - 1));

  function automatic logic signed [VW-1:0] sat(input logic signed [EW-1:0] a);
    if (a > VMAX) return VMAX[VW-1:0];
    if (a < VMIN) return VMIN[VW-1:0];
    return a[VW-1:0];
  endfunction

  always_comb begin
    for (int k = 0; k < K; k++) begin
      logic signed [EW-1:0] acc, rem;
      logic signed [VW-1:0] v;
      acc = (clear ? EW'(0) : EW'(vmem_in[k])) + EW'(wsum[k]) + EW'(bias[k]);
      v   = sat(acc);
      saturated[k] = (acc > VMAX) || (acc < VMIN);
      spike[k] = (v >= threshold[k]);
      rem = EW'(v) - EW'(threshold[k]);
      vmem_out[k] = spike[k] ? sat(rem) : v;
    end
  end

endmodule
